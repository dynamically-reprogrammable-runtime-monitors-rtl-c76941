// tb_mtl_ap2pe: self-checking test of the AP2PE crossbar.
// Two instances are driven with the same random events and selects: the
// registered one (IC_REGS = 1) must present, in each cycle, the AP chosen by
// each select from the previous cycle's event; the combinational one
// (IC_REGS = 0) from the current event.
module tb_mtl_ap2pe;
  localparam int N_AP   = 16;
  localparam int N_PE   = 16;
  localparam int APID_W = mtl_pkg::idx_width(N_AP);

  logic clk = 0, rst_n = 0;
  logic [N_AP-1:0] ap, ap_prev;
  logic [N_PE-1:0][1:0][APID_W-1:0] sel;
  logic [N_PE-1:0][1:0] op_reg, op_comb;
  int checks = 0, failures = 0;

  mtl_ap2pe #(.N_AP(N_AP), .N_PE(N_PE), .IC_REGS(1'b1)) dut_reg (
    .clk, .rst_n, .ap, .sel, .pe_ap_op(op_reg));
  mtl_ap2pe #(.N_AP(N_AP), .N_PE(N_PE), .IC_REGS(1'b0)) dut_comb (
    .clk, .rst_n, .ap, .sel, .pe_ap_op(op_comb));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ap = '0; sel = '0; ap_prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ap_prev = ap;
      ap  = N_AP'($urandom);
      sel = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      #1;
      for (int p = 0; p < N_PE; p++)
        for (int i = 0; i < 2; i++) begin
          checks++;
          if (op_reg[p][i] != ap[sel[p][i]] || op_comb[p][i] != ap[sel[p][i]]) begin
            failures++;
            if (failures < 10) $display("PE %0d operand %0d: got %b/%b", p, i, op_reg[p][i], op_comb[p][i]);
          end
        end
      // before the edge the registered copy still shows the previous event
      @(negedge clk);
      ap = ~ap;
      #1;
      for (int p = 0; p < N_PE; p++) begin
        checks++;
        if (op_comb[p][0] != ap[sel[p][0]] || op_reg[p][0] != ~ap[sel[p][0]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
