// tb_mtl_que: self-checking test of the Que.
// A reference queue, kept as a SystemVerilog queue of cell values, performs
// the abstract operations add (push Maybe at index 0), modify (Maybe cells
// inside an interval become true / false) and del (remove the element at
// Head, which becomes the deleted value). Random non-overlapping intervals are
// applied for several Head values; after every clock edge the Que's cell Head
// must equal the deleted element and its outputs must follow the instruction
// fields. Clearing and deactivation must empty the buffer.
`include "mtl_types.svh"

module tb_mtl_que;
  import mtl_pkg::*;
  localparam int N_PE   = 4;
  localparam int Q_SZ   = 16;
  localparam int IDX_W  = idx_width(Q_SZ);
  localparam int PEID_W = idx_width(N_PE);
  `MTL_INTERVAL_T
  `MTL_Q_CFG_T
  `MTL_Q_OUT_T

  logic      clk = 0, rst_n = 0, clear = 0;
  q_cfg_t    cfg;
  interval_t mod_t, mod_f;
  q_out_t    out;
  cell_e     head_cell;
  int checks = 0, failures = 0;
  int n_true = 0, n_false = 0, n_modified = 0;

  mtl_que #(.N_PE(N_PE), .Q_SZ(Q_SZ)) dut (
    .clk, .rst_n, .clear, .cfg, .mod_t, .mod_f, .out, .head_cell
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 0 empty, 1 Maybe, 2 false, 3 true
  int model [$];
  int deleted;

  function automatic interval_t rnd_ivl(int lo_min, int hi_max);
    interval_t v;
    int a, b;
    if (hi_max < lo_min || $urandom_range(3) == 0) return '{lo: IDX_W'(1), hi: IDX_W'(0)};
    a = $urandom_range(hi_max, lo_min);
    b = $urandom_range(hi_max, a);
    v.lo = IDX_W'(a);
    v.hi = IDX_W'(b);
    return v;
  endfunction

  task automatic model_step(input interval_t t, input interval_t f, input int head);
    model.push_front(1);
    for (int k = 0; k < model.size(); k++)
      if (model[k] == 1) begin
        if (k >= t.lo && k <= t.hi)      model[k] = 3;
        else if (k >= f.lo && k <= f.hi) model[k] = 2;
      end
    if (model.size() > head) begin
      deleted = model[head];
      model.delete(head);
    end else deleted = 0;
  endtask

  task automatic check_outputs();
    checks++;
    if (int'(head_cell) != deleted || out.value != (deleted == 3) ||
        out.dest_pe != cfg.reader_pe || out.inp_no != cfg.inp_no ||
        out.is_pe_input != (cfg.is_active && !cfg.is_verdict) ||
        out.is_verdict != (cfg.is_active && cfg.is_verdict)) begin
      failures++;
      if (failures < 10)
        $display("t=%0t mismatch: head_cell=%0d expected=%0d value=%b", $time, head_cell,
                 deleted, out.value);
    end
  endtask

  initial begin
    cfg   = '0;
    mod_t = '{lo: '1, hi: '0};
    mod_f = '{lo: '1, hi: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int head;
      head = (run < 2) ? run + 1 : $urandom_range(Q_SZ - 1, 1);
      @(negedge clk);
      clear = 1;
      cfg.is_active  = 1;
      cfg.is_verdict = 1'($urandom);
      cfg.reader_pe  = PEID_W'($urandom);
      cfg.inp_no     = 1'($urandom);
      cfg.head       = IDX_W'(head);
      @(negedge clk);
      clear = 0;
      model.delete();
      for (int n = 0; n < 300; n++) begin
        int s;
        // disjoint true / false intervals, each possibly empty, within [0, head-1]
        s = $urandom_range(head, 0);
        if ($urandom_range(1) == 1) begin
          mod_t = rnd_ivl(0, s - 1);
          mod_f = rnd_ivl(s, head - 1);
        end else begin
          mod_f = rnd_ivl(0, s - 1);
          mod_t = rnd_ivl(s, head - 1);
        end
        model_step(mod_t, mod_f, head);
        @(negedge clk);
        check_outputs();
        if (deleted == 3) n_true++;
        if (deleted == 2) n_false++;
      end
    end
    // deactivation and clear empty the buffer
    @(negedge clk);
    cfg.is_active = 0;
    @(negedge clk);
    checks++;
    if (head_cell != CELL_EMPTY || out.is_pe_input || out.is_verdict) begin
      failures++;
      $display("inactive Que not empty");
    end
    checks++;
    if (n_true == 0 || n_false == 0) begin
      failures++;
      $display("deleted values never true (%0d) or never false (%0d)", n_true, n_false);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
