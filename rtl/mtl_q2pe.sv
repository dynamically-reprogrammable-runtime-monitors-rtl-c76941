// mtl_q2pe: Q2PE crossbar, from the Ques to the operand inputs of the
// Processing Elements.
//
// A Que whose isPEInput is set drives operand inp_no of PE destPE with the
// value it deleted. The route is set by the Que's own instruction (readerPE,
// inp_no), so each Que feeds one PE operand; an operand that no Que drives
// reads false. If a faulty program routes two Ques to one operand their
// values are ORed. With IC_REGS = 1 the Que outputs pass through one register
// stage at the crossbar input.
//
// The crossbar and its routing fields follow the published monitor; the OR of
// colliding routes and the place of the register stage are this design's
// choices.
//
// Timing: with IC_REGS = 1 a value deleted in cycle t (visible on the Que
// output in cycle t) reaches the PE in cycle t+1.
`include "mtl_types.svh"

module mtl_q2pe #(
  parameter int N_PE    = 16,
  parameter int N_Q     = 16,
  parameter bit IC_REGS = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_Q-1:0][4+mtl_pkg::idx_width(N_PE)-1:0] q_out,
  output logic [N_PE-1:0][1:0] pe_q_op
);
  localparam int PEID_W = mtl_pkg::idx_width(N_PE);
  `MTL_Q_OUT_T

  logic [N_Q-1:0][4+PEID_W-1:0] q_in;

  if (IC_REGS) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q_in <= '0;
      else        q_in <= q_out;
    end
  end else begin : g_comb
    assign q_in = q_out;
  end

  always_comb begin
    pe_q_op = '0;
    for (int q = 0; q < N_Q; q++) begin
      q_out_t o;
      o = q_out_t'(q_in[q]);
      for (int p = 0; p < N_PE; p++)
        if (o.is_pe_input && int'(o.dest_pe) == p)
          pe_q_op[p][o.inp_no] = pe_q_op[p][o.inp_no] | o.value;
    end
  end

endmodule
