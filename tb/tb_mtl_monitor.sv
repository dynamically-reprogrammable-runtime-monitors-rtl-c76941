// tb_mtl_monitor: end-to-end test of the programmable MTL monitor at its
// default size (16 PEs, 16 Ques, 16 atomic propositions, 256-cell Ques,
// interconnect registers on).
//
// A sequence of formulas is compiled (mtl_tb_lib.svh), each program is
// shifted in through program_byte / write_en while the monitor is running,
// and a random event trace is then applied, one event per cycle. Every
// verdict is compared with the reference evaluator, at exactly the latency
// the compiler predicts, so the test checks both the values and the
// one-verdict-per-cycle timing. The first two formulas are the two properties
// of the published reprogramming waveform, AP0 -> X AP1 (latency 8) and
// AP0 or <>[1,3] AP1; the third is the running example
// <>[0,1] !s1 or <>[1,4] s2. The others cover Until (both forms), Box,
// nested and unbalanced trees and time bounds near the 256-cell Que size.
//
// Mechanisms counted, each of which must occur: reprogramming, every opcode,
// Mod = false (empty interval) chosen by a PE, coalescing of two or more PE
// ranges into one Que, Head balancing, Que-to-PE routing to operand 1,
// unused (inactive) PEs and Ques, true and false verdicts.
module tb_mtl_monitor;
  localparam int  N_PE    = 16;
  localparam int  N_Q     = 16;
  localparam int  N_AP    = 16;
  localparam int  Q_SZ    = 256;
  localparam bit  IC_REGS = 1'b1;
  localparam int  IDX_W   = mtl_pkg::idx_width(Q_SZ);
  localparam int  QID_W   = mtl_pkg::idx_width(N_Q);
  localparam int  PEID_W  = mtl_pkg::idx_width(N_PE);
  localparam int  APID_W  = mtl_pkg::idx_width(N_AP);
  `include "mtl_types.svh"
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_Q_CFG_T
  `MTL_PE_OUT_T
  `MTL_MON_CFG_T
  `include "mtl_tb_lib.svh"

  logic            clk = 0, rst_n = 0, write_en = 0;
  logic [7:0]      program_byte = 0;
  logic [N_AP-1:0] ap = 0;
  logic            verdict;

  mtl_monitor dut (.clk, .rst_n, .write_en, .program_byte, .ap, .verdict);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_reprogram = 0, m_opcode [5], m_mod_false = 0, m_coalesce = 0, m_balance = 0;
  int m_op1_q = 0, m_inactive = 0, m_v_true = 0, m_v_false = 0;
  bit monitoring = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Count, while monitoring, PEs whose result selects an empty interval
  // (Mod = false) and Ques that receive ranges from two or more PEs at once.
  always @(negedge clk) if (monitoring) begin
    int per_q [N_Q];
    for (int q = 0; q < N_Q; q++) per_q[q] = 0;
    for (int p = 0; p < N_PE; p++) begin
      pe_out_t o;
      o = pe_out_t'(dut.pe_out[p]);
      if (o.is_active && o.range.lo > o.range.hi) m_mod_false++;
      if (o.is_active && o.range.lo <= o.range.hi) per_q[o.dest_q]++;
    end
    for (int q = 0; q < N_Q; q++) if (per_q[q] > 1) m_coalesce++;
  end

  task automatic send_program();
    logic [8*PROG_BYTES-1:0] image;
    image = (8*PROG_BYTES)'(img);
    for (int b = PROG_BYTES - 1; b >= 0; b--) begin
      @(negedge clk);
      write_en     = 1;
      program_byte = image[b*8 +: 8];
      ap           = N_AP'($urandom);      // the monitored system keeps running
    end
    m_reprogram++;
  endtask

  // per-AP probability of being true, in 1/1000
  int prob [N_AP];

  task automatic run_formula(string name, int root, int n_events, int exp_latency = -1);
    int lat, errs, h;
    lat = compile_formula(root);
    h   = horizon(root);
    for (int p = 0; p < N_PE; p++) begin
      if (img.pe[p].is_active) m_opcode[img.pe[p].opcode]++;
      else m_inactive++;
      if (img.pe[p].is_active && img.pe[p].op1_src) m_op1_q++;
    end
    m_balance += c_balanced;
    for (int i = 0; i < TRACE_LEN; i++)
      for (int a = 0; a < N_AP; a++) trace[i][a] = ($urandom_range(999) < prob[a]);
    if (n_events + lat + 2 > TRACE_LEN || n_events + h >= TRACE_LEN) $fatal(1, "trace too short");
    if (exp_latency >= 0) begin
      checks++;
      if (lat != exp_latency) begin
        failures++;
        $display("%s: latency %0d, expected %0d", name, lat, exp_latency);
      end
    end
    send_program();
    errs = 0;
    monitoring = 1;
    for (int k = 0; k < n_events + lat; k++) begin
      @(negedge clk);
      write_en = 0;
      if (k >= lat) begin
        bit exp_v;
        exp_v = eval(root, k - lat);
        checks++;
        if (exp_v) m_v_true++; else m_v_false++;
        if (verdict !== exp_v) begin
          failures++; errs++;
          if (errs < 5) $display("%s: event %0d verdict %b expected %b", name, k - lat, verdict, exp_v);
        end
      end
      ap = trace[k];
    end
    monitoring = 0;
    $display("%s: %0d PEs, %0d Ques, latency %0d, %0d verdicts, %0d wrong", name, c_npe, c_nq, lat,
             n_events, errs);
  endtask

  initial begin
    int f, s0, s1, s2;
    for (int a = 0; a < N_AP; a++) prob[a] = 500;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // the two properties of the published reprogramming waveform
    f = mk_op(K_IMP, mk_op(K_WIRE, mk_ap(0)), mk_op(K_NEXT, mk_ap(1)));
    run_formula("AP0 -> X AP1", f, 300, 8);
    f = mk_op(K_OR, mk_op(K_WIRE, mk_ap(0)), mk_op(K_DIA, mk_ap(1), -1, 1, 3));
    run_formula("AP0 | <>[1,3] AP1", f, 300, 10);
    // running example of the published monitor
    prob[1] = 800; prob[2] = 150;
    f = mk_op(K_OR, mk_op(K_DIA, mk_op(K_NOT, mk_ap(1)), -1, 0, 1), mk_op(K_DIA, mk_ap(2), -1, 1, 4));
    run_formula("<>[0,1] !s1 | <>[1,4] s2", f, 300);
    // Until, both forms
    prob[3] = 850; prob[4] = 200;
    f = mk_op(K_UNTIL, mk_ap(3), mk_ap(4), 2, 5);
    run_formula("s3 U[2,5] s4", f, 400);
    prob[5] = 800; prob[6] = 250;
    f = mk_op(K_UNTIL, mk_ap(5), mk_ap(6), 0, 3);
    run_formula("s5 U[0,3] s6", f, 400);
    // Box over an implication with a nested Diamond, and a negated Next
    prob[7] = 300; prob[8] = 400;
    s0 = mk_op(K_BOX, mk_op(K_IMP, mk_op(K_WIRE, mk_ap(7)), mk_op(K_DIA, mk_ap(8), -1, 0, 3)), -1, 2, 6);
    s1 = mk_op(K_NOT, mk_op(K_NEXT, mk_ap(9)));
    f  = mk_op(K_AND, s0, s1);
    run_formula("[]_[2,6](s7 -> <>[0,3] s8) & !X s9", f, 400);
    // unbalanced tree of Boolean operators
    s0 = mk_op(K_NOT, mk_op(K_AND, mk_ap(0), mk_ap(1)));
    s1 = mk_op(K_NEXT, mk_op(K_NEXT, mk_ap(2)));
    s2 = mk_op(K_OR, s0, s1);
    f  = mk_op(K_NOT, mk_op(K_IMP, s2, mk_op(K_WIRE, mk_ap(3))));
    run_formula("!((!(s0 & s1) | X X s2) -> s3)", f, 300);
    // long time bounds, close to the 256-cell Que
    prob[10] = 990; prob[11] = 4; prob[12] = 997; prob[13] = 5;
    s0 = mk_op(K_UNTIL, mk_ap(10), mk_ap(11), 1, 200);
    s1 = mk_op(K_BOX, mk_ap(12), -1, 0, 250);
    s2 = mk_op(K_DIA, mk_ap(13), -1, 100, 254);
    f  = mk_op(K_OR, mk_op(K_AND, s0, s1), s2);
    run_formula("(s10 U[1,200] s11 & []_[0,250] s12) | <>[100,254] s13", f, 900);

    checks++;
    if (m_reprogram < 2) begin failures++; $display("monitor never reprogrammed"); end
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (m_opcode[o] == 0) begin failures++; $display("opcode %0d never used", o); end
    end
    $display("mechanisms: reprogram=%0d mod_false=%0d coalesce=%0d balance=%0d op1_from_q=%0d inactive_pe=%0d true=%0d false=%0d",
             m_reprogram, m_mod_false, m_coalesce, m_balance, m_op1_q, m_inactive, m_v_true, m_v_false);
    checks++; if (m_mod_false == 0) begin failures++; $display("Mod=false never selected"); end
    checks++; if (m_coalesce == 0)  begin failures++; $display("coalescing never happened"); end
    checks++; if (m_balance == 0)   begin failures++; $display("Head balancing never needed"); end
    checks++; if (m_op1_q == 0)     begin failures++; $display("operand 1 never from a Que"); end
    checks++; if (m_inactive == 0)  begin failures++; $display("no inactive PE"); end
    checks++; if (m_v_true == 0 || m_v_false == 0) begin failures++; $display("verdicts not both seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
