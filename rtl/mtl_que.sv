// mtl_que: one Que, the result buffer of an Evaluator Machine.
//
// The buffer holds Q_SZ cells of mtl_pkg::cell_e (true, false, Maybe or
// empty). Cell k holds the partial verdict for the time step k cycles ago.
// On every clock edge the Que performs, in this order:
//   add    : every cell moves one place up and cell 0 becomes Maybe;
//   modify : a Maybe cell whose index lies in the coalesced true-interval
//            mod_t becomes true, one in the false-interval mod_f becomes false;
//   del    : cell Head keeps the deleted value; cells above Head are emptied.
// The deleted value (cell Head) is read from the register in the following
// cycle and leaves the Que as 'value', for the Q2PE crossbar (isPEInput =
// isActive & ~isVerdict, routed to operand inp_no of PE readerPE) or for the
// Q2OUT crossbar (isVerdict = isActive & isVerdict). An interval with lo > hi
// modifies nothing. An empty cell reads as false.
//
// The add / modify / del sequence, the instruction fields and the output
// signals follow the published Que. Design choices: the empty code, reset
// and 'clear' (used while the monitor is reprogrammed) empty every cell, an
// inactive Que stays empty, and true wins where both intervals cover a Maybe
// cell (a correct program never does this; an assertion flags it).
//
// Timing: one add/modify/del per cycle. A result written at index 0 on edge c
// is at index Head after edge c+Head and on 'value' during cycle c+Head+1.
`include "mtl_types.svh"

module mtl_que #(
  parameter int N_PE = 16,
  parameter int Q_SZ = 256
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic [3+mtl_pkg::idx_width(N_PE)+mtl_pkg::idx_width(Q_SZ)-1:0] cfg,
  input  logic [2*mtl_pkg::idx_width(Q_SZ)-1:0] mod_t,
  input  logic [2*mtl_pkg::idx_width(Q_SZ)-1:0] mod_f,
  output logic [4+mtl_pkg::idx_width(N_PE)-1:0] out,
  output mtl_pkg::cell_e head_cell   // state of cell Head, for observation
);
  import mtl_pkg::*;
  localparam int IDX_W  = idx_width(Q_SZ);
  localparam int PEID_W = idx_width(N_PE);
  `MTL_INTERVAL_T
  `MTL_Q_CFG_T
  `MTL_Q_OUT_T

  q_cfg_t    c;
  interval_t ivl_t, ivl_f;
  q_out_t    o;
  cell_e     cells [Q_SZ];

  assign c   = q_cfg_t'(cfg);
  assign ivl_t = interval_t'(mod_t);
  assign ivl_f = interval_t'(mod_f);

  cell_e nxt [Q_SZ];

  always_comb begin
    for (int k = 0; k < Q_SZ; k++) begin
      nxt[k] = (k == 0) ? CELL_MAYBE : cells[k-1];                  // add
      if (k > int'(c.head)) nxt[k] = CELL_EMPTY;                    // del
      else if (nxt[k] == CELL_MAYBE) begin                          // modify
        if (k >= int'(ivl_t.lo) && k <= int'(ivl_t.hi))      nxt[k] = CELL_TRUE;
        else if (k >= int'(ivl_f.lo) && k <= int'(ivl_f.hi)) nxt[k] = CELL_FALSE;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < Q_SZ; k++) cells[k] <= CELL_EMPTY;
    end else if (clear || !c.is_active) begin
      for (int k = 0; k < Q_SZ; k++) cells[k] <= CELL_EMPTY;
    end else begin
      for (int k = 0; k < Q_SZ; k++) cells[k] <= nxt[k];
    end
  end

  assign head_cell = cells[c.head];

  always_comb begin
    o.dest_pe     = c.reader_pe;
    o.inp_no      = c.inp_no;
    o.is_pe_input = c.is_active & ~c.is_verdict;
    o.value       = (head_cell == CELL_TRUE);
    o.is_verdict  = c.is_active & c.is_verdict;
  end
  assign out = o;

  // Proposition: the PEs of one EM never modify the same cell in the same
  // step, so the two coalesced intervals must not overlap.
  always_ff @(posedge clk) begin
    if (rst_n && !clear && c.is_active)
      a_no_overlap: assert (!(ivl_t.lo <= ivl_t.hi && ivl_f.lo <= ivl_f.hi &&
                              ivl_t.lo <= ivl_f.hi && ivl_f.lo <= ivl_t.hi))
        else $error("mtl_que: true and false intervals overlap");
  end

endmodule
