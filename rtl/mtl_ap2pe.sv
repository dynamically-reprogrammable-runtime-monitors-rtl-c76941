// mtl_ap2pe: AP2PE crossbar, from the N_AP atomic propositions of the
// current event to the 2*N_PE operand inputs of the Processing Elements.
//
// Every PE operand has a programmed AP index (sel) and receives that AP's
// value; any AP may feed any number of operands (single-hop crossbar).
// With IC_REGS = 1 the AP inputs pass through one register stage at the
// crossbar input, as in the pipelined monitor; with IC_REGS = 0 the crossbar
// is purely combinational.
//
// The crossbar and its select width (ceil(log2 N_AP) bits per operand) follow
// the published monitor; the position of the register stage is this design's
// reading of "flip-flops at the inputs of the interconnect".
//
// Timing: with IC_REGS = 1 the event presented in cycle t reaches the PEs in
// cycle t+1.
module mtl_ap2pe #(
  parameter int N_AP    = 16,
  parameter int N_PE    = 16,
  parameter bit IC_REGS = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_AP-1:0] ap,
  input  logic [N_PE-1:0][1:0][mtl_pkg::idx_width(N_AP)-1:0] sel,
  output logic [N_PE-1:0][1:0] pe_ap_op
);
  logic [N_AP-1:0] ap_in;

  if (IC_REGS) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ap_in <= '0;
      else        ap_in <= ap;
    end
  end else begin : g_comb
    assign ap_in = ap;
  end

  always_comb begin
    for (int p = 0; p < N_PE; p++)
      for (int i = 0; i < 2; i++)
        pe_ap_op[p][i] = (int'(sel[p][i]) < N_AP) ? ap_in[sel[p][i]] : 1'b0;
  end

endmodule
