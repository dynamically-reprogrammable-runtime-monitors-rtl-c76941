// mtl_q2out: Q2OUT crossbar (N_Q x 1), from the Ques to the verdict pin.
//
// The Que programmed with isVerdict holds the verdicts of the whole formula;
// its deleted value becomes 'verdict'. With no such Que the verdict is false;
// if a faulty program marks several, their values are ORed. With IC_REGS = 1
// the Que outputs pass through one register stage at the crossbar input.
//
// Selecting the verdict Que follows the published monitor; the behaviour for
// zero or several verdict Ques and the register stage are this design's
// choices.
//
// Timing: with IC_REGS = 1 the verdict appears one cycle after it leaves the
// Que.
`include "mtl_types.svh"

module mtl_q2out #(
  parameter int N_PE    = 16,
  parameter int N_Q     = 16,
  parameter bit IC_REGS = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_Q-1:0][4+mtl_pkg::idx_width(N_PE)-1:0] q_out,
  output logic verdict
);
  localparam int PEID_W = mtl_pkg::idx_width(N_PE);
  `MTL_Q_OUT_T

  logic [N_Q-1:0] is_v, val, is_v_in, val_in;

  always_comb begin
    for (int q = 0; q < N_Q; q++) begin
      q_out_t o;
      o       = q_out_t'(q_out[q]);
      is_v[q] = o.is_verdict;
      val[q]  = o.value;
    end
  end

  if (IC_REGS) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        is_v_in <= '0;
        val_in  <= '0;
      end else begin
        is_v_in <= is_v;
        val_in  <= val;
      end
    end
  end else begin : g_comb
    assign is_v_in = is_v;
    assign val_in  = val;
  end

  assign verdict = |(is_v_in & val_in);

endmodule
