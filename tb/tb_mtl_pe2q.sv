// tb_mtl_pe2q: self-checking test of the PE2Q crossbar and its coalescing.
// Random PE outputs are applied. The reference marks, for every Que and
// polarity, the set of cells covered by the ranges of active PEs that target
// it; the expected coalesced interval runs from the lowest to the highest
// covered cell, and is empty (lo > hi) when no cell is covered.
module tb_mtl_pe2q;
  localparam int N_PE  = 8;
  localparam int N_Q   = 4;
  localparam int Q_SZ  = 16;
  localparam int IDX_W = mtl_pkg::idx_width(Q_SZ);
  localparam int QID_W = mtl_pkg::idx_width(N_Q);
  `include "mtl_types.svh"
  `MTL_INTERVAL_T
  `MTL_PE_OUT_T

  pe_out_t   [N_PE-1:0] pe_out;
  interval_t [N_Q-1:0]  q_mod_t, q_mod_f;
  int checks = 0, failures = 0, n_coalesced = 0;

  mtl_pe2q #(.N_PE(N_PE), .N_Q(N_Q), .Q_SZ(Q_SZ)) dut (.pe_out, .q_mod_t, .q_mod_f);

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ivl_ok(interval_t got, logic [Q_SZ-1:0] covered);
    int lo = -1, hi = -1;
    for (int k = 0; k < Q_SZ; k++)
      if (covered[k]) begin
        if (lo < 0) lo = k;
        hi = k;
      end
    if (lo < 0) return got.lo > got.hi;
    return int'(got.lo) == lo && int'(got.hi) == hi;
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [Q_SZ-1:0] cov_t [N_Q], cov_f [N_Q];
      int              cnt [N_Q];
      for (int q = 0; q < N_Q; q++) begin cov_t[q] = '0; cov_f[q] = '0; cnt[q] = 0; end
      for (int p = 0; p < N_PE; p++) begin
        pe_out[p] = pe_out_t'($urandom);
        if ($urandom_range(3) != 0 && pe_out[p].range.lo > pe_out[p].range.hi)
          pe_out[p].range = '{lo: pe_out[p].range.hi, hi: pe_out[p].range.lo};
        if (pe_out[p].is_active)
          for (int k = 0; k < Q_SZ; k++)
            if (k >= pe_out[p].range.lo && k <= pe_out[p].range.hi) begin
              if (pe_out[p].res) cov_t[pe_out[p].dest_q][k] = 1'b1;
              else               cov_f[pe_out[p].dest_q][k] = 1'b1;
            end
        if (pe_out[p].is_active && pe_out[p].range.lo <= pe_out[p].range.hi)
          cnt[pe_out[p].dest_q]++;
      end
      #1;
      for (int q = 0; q < N_Q; q++) begin
        if (cnt[q] > 1) n_coalesced++;
        checks++;
        if (!ivl_ok(q_mod_t[q], cov_t[q]) || !ivl_ok(q_mod_f[q], cov_f[q])) begin
          failures++;
          if (failures < 10)
            $display("Que %0d: T=[%0d,%0d] F=[%0d,%0d]", q, q_mod_t[q].lo, q_mod_t[q].hi,
                     q_mod_f[q].lo, q_mod_f[q].hi);
        end
      end
      #1;
    end
    checks++;
    if (n_coalesced == 0) begin failures++; $display("coalescing never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
