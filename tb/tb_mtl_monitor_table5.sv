// tb_mtl_monitor_table5: the monitor programmed field by field for the
// running example  <>[0,1] !s1  or  <>[1,4] s2  on a monitor with 8 PEs,
// 8 Ques, 4 atomic propositions and 8-cell Ques, without interconnect
// registers (IC_REGS = 0), the timing model of the published step-by-step
// example.
//
// PE0 = not s1 -> Q0 (Head 1), PE1 = wire s2 with I_T [1,4], I_F [4,4] -> Q1
// (Head 5), PE2 = wire Q0 with I_T [0,1], I_F [1,1] -> Q2 (Head 3, balanced
// up from 2), PE3 = Q2 or Q1 -> Q3 (Head 1, verdict). The verdict for event t
// must appear in cycle t + 8. The same formula is then compiled by the
// testbench compiler, whose Heads must agree with the hand programming, and
// finally run with the unbalanced Head 2 on Q2, which must give wrong
// verdicts.
module tb_mtl_monitor_table5;
  localparam int  N_PE    = 8;
  localparam int  N_Q     = 8;
  localparam int  N_AP    = 4;
  localparam int  Q_SZ    = 8;
  localparam bit  IC_REGS = 1'b0;
  localparam int  IDX_W   = mtl_pkg::idx_width(Q_SZ);
  localparam int  QID_W   = mtl_pkg::idx_width(N_Q);
  localparam int  PEID_W  = mtl_pkg::idx_width(N_PE);
  localparam int  APID_W  = mtl_pkg::idx_width(N_AP);
  `include "mtl_types.svh"
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_Q_CFG_T
  `MTL_MON_CFG_T
  `include "mtl_tb_lib.svh"

  logic            clk = 0, rst_n = 0, write_en = 0;
  logic [7:0]      program_byte = 0;
  logic [N_AP-1:0] ap = 0;
  logic            verdict;

  mtl_monitor #(.N_PE(N_PE), .N_Q(N_Q), .N_AP(N_AP), .Q_SZ(Q_SZ), .IC_REGS(IC_REGS)) dut (
    .clk, .rst_n, .write_en, .program_byte, .ap, .verdict);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(mon_cfg_t c);
    logic [8*PROG_BYTES-1:0] image;
    image = (8*PROG_BYTES)'(c);
    for (int b = PROG_BYTES - 1; b >= 0; b--) begin
      @(negedge clk);
      write_en = 1;
      program_byte = image[b*8 +: 8];
    end
  endtask

  // runs n events and returns the number of wrong verdicts at latency lat
  task automatic run(int root, int lat, int n, output int errs);
    errs = 0;
    for (int k = 0; k < n + lat; k++) begin
      @(negedge clk);
      write_en = 0;
      if (k >= lat && verdict !== eval(root, k - lat)) errs++;
      ap = trace[k];
    end
  endtask

  function automatic mon_cfg_t table5(int head_q2);
    mon_cfg_t c = '0;
    c.pe[0] = '{1'b1, 1'b0, 1'b0, mtl_pkg::OP_NOT,  QID_W'(0), ivl(0, 0), ivl(0, 0)};
    c.pe[1] = '{1'b1, 1'b0, 1'b0, mtl_pkg::OP_WIRE, QID_W'(1), ivl(1, 4), ivl(4, 4)};
    c.pe[2] = '{1'b1, 1'b1, 1'b0, mtl_pkg::OP_WIRE, QID_W'(2), ivl(0, 1), ivl(1, 1)};
    c.pe[3] = '{1'b1, 1'b1, 1'b1, mtl_pkg::OP_OR,   QID_W'(3), ivl(0, 0), ivl(0, 0)};
    c.q[0]  = '{1'b1, 1'b0, PEID_W'(2), 1'b0, IDX_W'(1)};
    c.q[1]  = '{1'b1, 1'b0, PEID_W'(3), 1'b1, IDX_W'(5)};
    c.q[2]  = '{1'b1, 1'b0, PEID_W'(3), 1'b0, IDX_W'(head_q2)};
    c.q[3]  = '{1'b1, 1'b1, PEID_W'(0), 1'b0, IDX_W'(1)};
    c.ap_sel[0][0] = APID_W'(1);   // s1
    c.ap_sel[1][0] = APID_W'(2);   // s2
    return c;
  endfunction

  initial begin
    int f, n_not, n_d01, n_d14, lat, errs;
    n_not = mk_op(K_NOT, mk_ap(1));
    n_d01 = mk_op(K_DIA, n_not, -1, 0, 1);
    n_d14 = mk_op(K_DIA, mk_ap(2), -1, 1, 4);
    f     = mk_op(K_OR, n_d01, n_d14);
    for (int i = 0; i < TRACE_LEN; i++) begin
      trace[i][0] = 1'($urandom);
      trace[i][1] = ($urandom_range(99) < 75);
      trace[i][2] = ($urandom_range(99) < 15);
      trace[i][3] = 1'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. the published programming, balanced Heads
    send(table5(3));
    run(f, 8, 500, errs);
    checks++;
    if (errs != 0) begin failures++; $display("Table 5 program: %0d wrong verdicts", errs); end

    // 2. the testbench compiler must find the same Heads and latency
    lat = compile_formula(f);
    checks++;
    if (lat != 8 || img.q[em_q[n_not]].head != 1 || img.q[em_q[n_d01]].head != 3 ||
        img.q[em_q[n_d14]].head != 5 || img.q[em_q[f]].head != 1) begin
      failures++;
      $display("compiler: latency %0d, Heads %0d %0d %0d %0d", lat, img.q[em_q[n_not]].head,
               img.q[em_q[n_d01]].head, img.q[em_q[n_d14]].head, img.q[em_q[f]].head);
    end
    send(img);
    run(f, lat, 500, errs);
    checks++;
    if (errs != 0) begin failures++; $display("compiled program: %0d wrong verdicts", errs); end

    // 3. Head of Q2 left at l() = 2: operands of the root are one step apart
    send(table5(2));
    run(f, 8, 500, errs);
    checks++;
    if (errs == 0) begin failures++; $display("unbalanced Heads gave no wrong verdict"); end
    $display("unbalanced program: %0d of 500 verdicts wrong, as expected", errs);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
