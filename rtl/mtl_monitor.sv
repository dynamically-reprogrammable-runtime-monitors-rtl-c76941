// mtl_monitor: programmable runtime monitor for bounded-time, discrete-time
// MTL formulae.
//
// The monitor evaluates, in every clock cycle, one event (the values of N_AP
// atomic propositions) and emits one verdict: whether the programmed formula
// held at an earlier event, a fixed number of cycles (the verdict latency)
// before. It is built from N_PE identical Processing Elements (mtl_pe) and
// N_Q Ques (mtl_que), joined by four single-hop crossbars:
//   AP2PE (N_AP x 2*N_PE)  events to PE operands           (mtl_ap2pe)
//   PE2Q  (N_PE x N_Q)     modify ranges, coalesced per Que (mtl_pe2q)
//   Q2PE  (N_Q x 2*N_PE)   deleted values to PE operands    (mtl_q2pe)
//   Q2OUT (N_Q x 1)        the verdict Que to the pin       (mtl_q2out)
// Each operator of the formula is an Evaluator Machine: one Que plus one PE
// (three for Until); the formula's syntax tree is laid out by routing Que
// outputs to the PEs of the parent operator.
//
// Programming: while write_en is high, the program image is shifted in one
// byte per cycle on program_byte (mtl_prog_loader). All Ques are held empty
// meanwhile, so monitoring of the new formula starts from a clean state in
// the first cycle with write_en low. The image layout is in mtl_types.svh.
//
// Timing: throughput is one event and one verdict per cycle. With IC_REGS = 1
// (registers at the inputs of AP2PE, Q2PE and Q2OUT) a PE sees event t in
// cycle t+1, and a Que's value reaches its reader Head+2 cycles after the
// PE's operands; so the verdict for event t appears in cycle
// t + 1 + sum over the root path of (Head + 2). The Heads must be balanced
// with that step (Head + 2 per level) instead of Head + 1. With IC_REGS = 0
// the step is Head + 1, AP values are used in the cycle they arrive, and the
// Heads of the published balancing algorithm apply unchanged.
//
// The structure, the crossbars, the instruction formats and the default
// sizes (16 PEs, 16 Ques, 16 APs, 256-cell Ques) follow the published
// monitor. The program image layout, the queue clearing during programming
// and the exact place of the pipeline registers are this design's choices.
`include "mtl_types.svh"

module mtl_monitor #(
  parameter int N_PE    = 16,
  parameter int N_Q     = 16,
  parameter int N_AP    = 16,
  parameter int Q_SZ    = 256,
  parameter bit IC_REGS = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            write_en,
  input  logic [7:0]      program_byte,
  input  logic [N_AP-1:0] ap,
  output logic            verdict
);
  import mtl_pkg::*;
  localparam int IDX_W  = idx_width(Q_SZ);
  localparam int QID_W  = idx_width(N_Q);
  localparam int PEID_W = idx_width(N_PE);
  localparam int APID_W = idx_width(N_AP);
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_Q_CFG_T
  `MTL_PE_OUT_T
  `MTL_Q_OUT_T
  `MTL_MON_CFG_T

  localparam int CFG_BITS = $bits(mon_cfg_t);

  mon_cfg_t                      cfg;
  logic [N_PE-1:0][1:0]          pe_ap_op, pe_q_op;
  pe_out_t [N_PE-1:0]            pe_out;
  interval_t [N_Q-1:0]           q_mod_t, q_mod_f;
  q_out_t [N_Q-1:0]              q_out;
  cell_e                         head_cell [N_Q];

  mtl_prog_loader #(.CFG_BITS(CFG_BITS)) u_loader (
    .clk, .rst_n, .write_en, .program_byte, .cfg
  );

  mtl_ap2pe #(.N_AP(N_AP), .N_PE(N_PE), .IC_REGS(IC_REGS)) u_ap2pe (
    .clk, .rst_n, .ap, .sel(cfg.ap_sel), .pe_ap_op
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    mtl_pe #(.N_Q(N_Q), .Q_SZ(Q_SZ)) u_pe (
      .cfg(cfg.pe[p]), .ap_op(pe_ap_op[p]), .q_op(pe_q_op[p]), .out(pe_out[p])
    );
  end

  mtl_pe2q #(.N_PE(N_PE), .N_Q(N_Q), .Q_SZ(Q_SZ)) u_pe2q (
    .pe_out, .q_mod_t, .q_mod_f
  );

  for (genvar q = 0; q < N_Q; q++) begin : g_que
    mtl_que #(.N_PE(N_PE), .Q_SZ(Q_SZ)) u_que (
      .clk, .rst_n, .clear(write_en), .cfg(cfg.q[q]),
      .mod_t(q_mod_t[q]), .mod_f(q_mod_f[q]), .out(q_out[q]),
      .head_cell(head_cell[q])
    );
  end

  mtl_q2pe #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(IC_REGS)) u_q2pe (
    .clk, .rst_n, .q_out, .pe_q_op
  );

  mtl_q2out #(.N_PE(N_PE), .N_Q(N_Q), .IC_REGS(IC_REGS)) u_q2out (
    .clk, .rst_n, .q_out, .verdict
  );

  // A deleted value that is still Maybe means a Head was programmed smaller
  // than its operator's time bound requires.
  always_ff @(posedge clk) begin
    if (rst_n && !write_en)
      for (int q = 0; q < N_Q; q++)
        a_head_settled: assert (!cfg.q[q].is_active || head_cell[q] != CELL_MAYBE)
          else $error("mtl_monitor: Que %0d deleted a Maybe cell", q);
  end

endmodule
