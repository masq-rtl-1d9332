// tb_masq_mpmpu - runs an MP-MPU (4 BMPEs to keep the run short) over random
// tokens: random stage, timestep on both sides of the two downgrade points
// (9 and 18) and 1..3 K blocks. Activation elements are generated in the
// precision the stage/timestep table prescribes; expected BF16 outputs are
// computed in real arithmetic. Checks every output, the number of cycles each
// block occupies (4/2/1 for MXINT8/4/2) and that each precision was used.
module tb_masq_mpmpu;
  import masq_pkg::*;
  import masq_tb_pkg::*;
  localparam int NB = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] timestep, dg1, dg2;
  logic blk_valid, blk_ready, first_k, last_k, out_valid;
  stage_t stage;
  logic [31:0][7:0] act_x;
  logic [7:0] act_e;
  logic [NB-1:0][31:0][7:0] wgt;
  logic [NB-1:0][7:0] wgt_e;
  prec_e cur_typ;
  logic [NB-1:0][15:0] out;
  int checks = 0, failures = 0;
  int used [3];

  masq_mpmpu #(.NB(NB)) dut (.*);

  logic [NB-1:0][15:0] exp_q[$];

  always @(negedge clk) if (out_valid) begin
    logic [NB-1:0][15:0] e;
    e = exp_q.pop_front();
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (out[b] !== e[b]) begin
        failures++;
        if (failures < 10) $display("FAIL pe%0d got %h exp %h", b, out[b], e[b]);
      end
    end
  end

  function automatic prec_e ref_prec(int s, int ts);
    if (s == 3) return MXINT8;
    if (s == 2) return (ts < 9) ? MXINT8 : MXINT4;
    if (s == 1) return (ts < 18) ? MXINT4 : MXINT2;
    return MXINT2;
  endfunction

  initial begin
    blk_valid = 0; first_k = 0; last_k = 0; stage = 0; act_x = '0; act_e = 0; wgt = '0; wgt_e = '0;
    timestep = 0; dg1 = 8'd9; dg2 = 8'd18;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int kb, s, ts; prec_e p; real facc [NB]; logic [NB-1:0][15:0] e;
      kb = 1 + $urandom % 3; s = $urandom % 4; ts = $urandom % 30;
      p = ref_prec(s, ts);
      used[int'(p)]++;
      for (int b = 0; b < NB; b++) facc[b] = 0.0;
      timestep = 8'(ts); stage = 2'(s);
      for (int k = 0; k < kb; k++) begin
        int eb, cyc;
        eb = elem_bits(p);
        for (int i = 0; i < 32; i++) act_x[i] = 8'(int'($urandom % (1 << eb)) - (1 << (eb - 1)));
        act_e = 8'(115 + $urandom % 20);
        for (int b = 0; b < NB; b++) begin
          int dot;
          wgt_e[b] = 8'(115 + $urandom % 20);
          dot = 0;
          for (int i = 0; i < 32; i++) begin
            wgt[b][i] = 8'($urandom);
            dot += int'($signed(act_x[i])) * int'($signed(wgt[b][i]));
          end
          facc[b] = f32_to_real(real_to_f32(facc[b] + bf16_to_real(real_to_bf16(
                      real'(dot) * pow2(int'(act_e) + int'(wgt_e[b]) - 254)))));
        end
        first_k = (k == 0); last_k = (k == kb - 1); blk_valid = 1;
        cyc = 0;
        begin
          logic r;
          do begin
            #1;
            r = blk_ready;
            cyc++;
            @(negedge clk);
          end while (!r && cyc < 10);
        end
        checks++;
        if (cyc != num_slices(p)) begin
          failures++;
          $display("FAIL block took %0d cycles, expected %0d (stage %0d ts %0d)", cyc, num_slices(p), s, ts);
        end
      end
      blk_valid = 0;
      for (int b = 0; b < NB; b++) e[b] = fp32_to_bf16(real_to_f32(facc[b]));
      exp_q.push_back(e);
    end
    repeat (5) @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (used[i] == 0) begin failures++; $display("FAIL precision %0d never used", i); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
