// mtl_pe2q: PE2Q crossbar, from the Processing Elements to the Ques.
//
// Each active PE sends its modify range to the Que named by its destQ field,
// as a true-interval when its result is true and as a false-interval when it
// is false. Several PEs may write the same Que (the Until evaluator uses two
// or three); the crossbar coalesces their intervals of each polarity into one
// contiguous interval, the smallest one that covers them all (lowest lo,
// highest hi). A correct program only sends intervals whose union is
// contiguous, so coalescing never widens a modify. Inactive PEs and empty
// ranges (lo > hi) are ignored. A Que that receives nothing gets the empty
// interval, lo = all ones and hi = 0.
//
// Routing, the use of isActive and coalescing follow the published crossbar;
// the min/max circuit is this design's implementation of it.
//
// Timing: combinational.
`include "mtl_types.svh"

module mtl_pe2q #(
  parameter int N_PE = 16,
  parameter int N_Q  = 16,
  parameter int Q_SZ = 256
) (
  input  logic [N_PE-1:0][2+mtl_pkg::idx_width(N_Q)+2*mtl_pkg::idx_width(Q_SZ)-1:0] pe_out,
  output logic [N_Q-1:0][2*mtl_pkg::idx_width(Q_SZ)-1:0] q_mod_t,
  output logic [N_Q-1:0][2*mtl_pkg::idx_width(Q_SZ)-1:0] q_mod_f
);
  localparam int IDX_W = mtl_pkg::idx_width(Q_SZ);
  localparam int QID_W = mtl_pkg::idx_width(N_Q);
  `MTL_INTERVAL_T
  `MTL_PE_OUT_T

  always_comb begin
    for (int q = 0; q < N_Q; q++) begin
      interval_t t, f;
      t = '{lo: '1, hi: '0};
      f = '{lo: '1, hi: '0};
      for (int p = 0; p < N_PE; p++) begin
        pe_out_t o;
        o = pe_out_t'(pe_out[p]);
        if (o.is_active && int'(o.dest_q) == q && o.range.lo <= o.range.hi) begin
          if (o.res) begin
            if (o.range.lo < t.lo) t.lo = o.range.lo;
            if (o.range.hi > t.hi) t.hi = o.range.hi;
          end else begin
            if (o.range.lo < f.lo) f.lo = o.range.lo;
            if (o.range.hi > f.hi) f.hi = o.range.hi;
          end
        end
      end
      q_mod_t[q] = t;
      q_mod_f[q] = f;
    end
  end

endmodule
