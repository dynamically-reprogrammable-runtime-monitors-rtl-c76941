// tb_mtl_q2pe: self-checking test of the Q2PE crossbar.
// Random Que outputs are applied. The expected value of each PE operand is
// the OR of the values of the Ques whose isPEInput is set and whose destPE /
// inp_no name that operand, taken from the previous cycle for the registered
// instance (IC_REGS = 1) and from the current one for IC_REGS = 0.
module tb_mtl_q2pe;
  localparam int N_PE   = 4;
  localparam int N_Q    = 8;
  localparam int PEID_W = mtl_pkg::idx_width(N_PE);
  `include "mtl_types.svh"
  `MTL_Q_OUT_T

  logic clk = 0, rst_n = 0;
  q_out_t [N_Q-1:0] q_out;
  logic [N_PE-1:0][1:0] op_reg, op_comb, expect_now, expect_prev;
  int checks = 0, failures = 0;

  mtl_q2pe #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(1'b1)) dut_reg (.clk, .rst_n, .q_out, .pe_q_op(op_reg));
  mtl_q2pe #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(1'b0)) dut_comb (.clk, .rst_n, .q_out, .pe_q_op(op_comb));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N_PE-1:0][1:0] route(q_out_t [N_Q-1:0] qo);
    logic [N_PE-1:0][1:0] r = '0;
    for (int q = 0; q < N_Q; q++)
      if (qo[q].is_pe_input && qo[q].value) r[qo[q].dest_pe][qo[q].inp_no] = 1'b1;
    return r;
  endfunction

  initial begin
    q_out = '0;
    expect_now = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      expect_prev = expect_now;
      for (int q = 0; q < N_Q; q++) q_out[q] = q_out_t'($urandom);
      expect_now = route(q_out);
      #1;
      checks++;
      if (op_comb != expect_now) begin
        failures++;
        if (failures < 10) $display("comb: got %b expected %b", op_comb, expect_now);
      end
      checks++;
      if (n > 0 && op_reg != expect_prev) begin
        failures++;
        if (failures < 10) $display("reg: got %b expected %b", op_reg, expect_prev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
