// mtl_pe: Processing Element, the hardware form of one Abstract Machine.
//
// Each operand is taken either from the AP2PE crossbar (an atomic
// proposition) or from the Q2PE crossbar (the value just deleted from another
// Que), as chosen by op0Src / op1Src (0: AP, 1: Q). The Logic Unit applies
// wire, not, or, and or implies. Its result res picks which programmed
// interval goes out as the modify range: I_T when res is true, I_F when it is
// false. res itself tells the Que whether Maybe cells in that range become
// true or false. The range, res, the destination queue r_qid and isActive go
// to the PE2Q crossbar, which uses isActive to ignore an unused PE.
//
// The datapath (two operand muxes, Logic Unit, interval mux selected by the
// result) and the instruction fields follow the published PE. The AM's
// Mod_T / Mod_F flags have no bits of their own in the instruction; in this
// design "Mod = false" is programmed as an empty interval (lo > hi), which the
// Que treats as "modify nothing".
//
// Timing: purely combinational. One operation per clock cycle is done by the
// Que that receives the range.
`include "mtl_types.svh"

module mtl_pe #(
  parameter int N_Q  = 16,
  parameter int Q_SZ = 256
) (
  input  logic [6+mtl_pkg::idx_width(N_Q)+4*mtl_pkg::idx_width(Q_SZ)-1:0] cfg,
  input  logic [1:0] ap_op,   // operand 0 / 1 from AP2PE
  input  logic [1:0] q_op,    // operand 0 / 1 from Q2PE
  output logic [2+mtl_pkg::idx_width(N_Q)+2*mtl_pkg::idx_width(Q_SZ)-1:0] out
);
  localparam int IDX_W = mtl_pkg::idx_width(Q_SZ);
  localparam int QID_W = mtl_pkg::idx_width(N_Q);
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_PE_OUT_T

  pe_cfg_t c;
  pe_out_t o;
  logic    op0, op1, res;

  assign c = pe_cfg_t'(cfg);

  always_comb begin
    op0 = c.op0_src ? q_op[0] : ap_op[0];
    op1 = c.op1_src ? q_op[1] : ap_op[1];
    res = mtl_pkg::logic_unit(c.opcode, op0, op1);
    o.is_active = c.is_active;
    o.dest_q    = c.r_qid;
    o.range     = res ? c.i_t : c.i_f;
    o.res       = res;
  end

  assign out = o;

endmodule
