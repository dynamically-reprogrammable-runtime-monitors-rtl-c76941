// tb_mtl_monitor_fig4: the reprogramming scenario of the published waveform,
// on a monitor of the size used there (4 PEs, 4 Ques, 8 atomic propositions,
// 16-cell Ques, interconnect registers on).
//
// The monitor is programmed for AP0 -> X AP1, monitors it, is reprogrammed
// for AP0 or <>[1,3] AP1 while events keep arriving, and monitors that. In
// each phase AP0 stays false for 21 events, then AP0 is true with AP1 false
// in the following event. For the first property the verdict for that event
// is false and must appear exactly 8 cycles later (the waveform shows the
// same 8); for the second it is true and must appear 10 cycles later. All other verdicts are checked
// against the reference evaluator, and the number of program bytes is
// checked against the bit counts of the instruction formats:
// 4 x 24 (PEs) + 4 x 9 (Ques) + 4 x 2 x 3 (AP2PE) = 156 bits = 20 bytes.
module tb_mtl_monitor_fig4;
  localparam int  N_PE    = 4;
  localparam int  N_Q     = 4;
  localparam int  N_AP    = 8;
  localparam int  Q_SZ    = 16;
  localparam bit  IC_REGS = 1'b1;
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

  mtl_monitor #(.N_PE(N_PE), .N_Q(N_Q), .N_AP(N_AP), .Q_SZ(Q_SZ)) dut (
    .clk, .rst_n, .write_en, .program_byte, .ap, .verdict);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_prog = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_program();
    logic [8*PROG_BYTES-1:0] image;
    image = (8*PROG_BYTES)'(img);
    for (int b = PROG_BYTES - 1; b >= 0; b--) begin
      @(negedge clk);
      write_en = 1;
      program_byte = image[b*8 +: 8];
      ap = N_AP'($urandom);
    end
    n_prog++;
  endtask

  task automatic phase(string name, int root, int exp_lat, bit exp_mark);
    int lat, errs, mark;
    lat = compile_formula(root);
    checks++;
    if (lat != exp_lat) begin failures++; $display("%s: latency %0d, expected %0d", name, lat, exp_lat); end
    // the waveform's stimulus: AP0 false for 21 events, then AP0 = 1, AP1 = 0
    mark = 21;
    for (int i = 0; i < TRACE_LEN; i++) trace[i] = N_AP'($urandom);
    for (int i = 0; i < mark; i++) trace[i][0] = 1'b0;
    trace[mark][0] = 1'b1;
    trace[mark + 1][1] = 1'b0;
    trace[mark + 2][1] = 1'b0;
    trace[mark + 3][1] = 1'b0;
    send_program();
    errs = 0;
    for (int k = 0; k < 50 + lat; k++) begin
      @(negedge clk);
      write_en = 0;
      if (k >= lat) begin
        checks++;
        if (verdict !== eval(root, k - lat)) begin failures++; errs++; end
      end
      if (k == mark + exp_lat) begin
        checks++;
        if (verdict !== exp_mark) begin failures++; $display("%s: verdict for the marked event is %b", name, verdict); end
      end
      ap = trace[k];
    end
    $display("%s: latency %0d, %0d wrong verdicts", name, lat, errs);
  endtask

  initial begin
    int f1, f2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (PROG_BYTES != 20) begin failures++; $display("program is %0d bytes", PROG_BYTES); end
    f1 = mk_op(K_IMP, mk_op(K_WIRE, mk_ap(0)), mk_op(K_NEXT, mk_ap(1)));
    f2 = mk_op(K_OR,  mk_op(K_WIRE, mk_ap(0)), mk_op(K_DIA, mk_ap(1), -1, 1, 3));
    phase("AP0 -> X AP1", f1, 8, 1'b0);
    phase("AP0 | <>[1,3] AP1", f2, 10, 1'b1);
    checks++;
    if (n_prog != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
