// tb_mtl_q2out: self-checking test of the Q2OUT crossbar.
// Random Que outputs are applied; the verdict must be the value of the Que
// whose isVerdict is set (OR over several, false for none), one cycle later
// for IC_REGS = 1 and in the same cycle for IC_REGS = 0.
module tb_mtl_q2out;
  localparam int N_PE   = 4;
  localparam int N_Q    = 8;
  localparam int PEID_W = mtl_pkg::idx_width(N_PE);
  `include "mtl_types.svh"
  `MTL_Q_OUT_T

  logic clk = 0, rst_n = 0;
  q_out_t [N_Q-1:0] q_out;
  logic v_reg, v_comb, exp_now, exp_prev;
  int checks = 0, failures = 0, n_true = 0;

  mtl_q2out #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(1'b1)) dut_reg (.clk, .rst_n, .q_out, .verdict(v_reg));
  mtl_q2out #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(1'b0)) dut_comb (.clk, .rst_n, .q_out, .verdict(v_comb));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q_out = '0;
    exp_now = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int vq;
      @(negedge clk);
      exp_prev = exp_now;
      // mostly one verdict Que, as a program sets it; sometimes none
      for (int q = 0; q < N_Q; q++) begin
        q_out[q] = q_out_t'($urandom);
        q_out[q].is_verdict = 1'b0;
      end
      vq = $urandom_range(N_Q);
      if (vq < N_Q) q_out[vq].is_verdict = 1'b1;
      exp_now = (vq < N_Q) && q_out[vq].value;
      if (exp_now) n_true++;
      #1;
      checks++;
      if (v_comb != exp_now) failures++;
      checks++;
      if (n > 0 && v_reg != exp_prev) failures++;
    end
    checks++;
    if (n_true == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
