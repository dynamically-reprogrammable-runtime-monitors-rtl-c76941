// tb_mtl_em_examples: replays two evaluator traces cell by cell on real PEs,
// the PE2Q crossbar and one Que.
//   1. not a0              : one PE (not, I_T = I_F = [0,0]), Head 1.
//   2. a0 U_[1,2] a1       : three PEs on one Que, Head 3:
//                            wire a0  I_T empty  I_F [0,0]
//                            wire a1  I_T [1,2]  I_F [2,2]
//                            or a0 a1 I_T empty  I_F [1,1]
// The operands come straight from the testbench on the PEs' AP inputs. After
// each clock edge the Que cells 0..Head-1 must equal the expected contents
// after add / modify / del, and cell Head must hold the value deleted in that
// step (the verdict), or be empty when nothing has reached it yet. The result
// of each PE is checked too. The expected rows are written out by hand from
// the evaluator rules, so they are independent of the RTL.
module tb_mtl_em_examples;
  localparam int N_PE   = 4;
  localparam int N_Q    = 2;
  localparam int Q_SZ   = 8;
  localparam int IDX_W  = mtl_pkg::idx_width(Q_SZ);
  localparam int QID_W  = mtl_pkg::idx_width(N_Q);
  localparam int PEID_W = mtl_pkg::idx_width(N_PE);
  `include "mtl_types.svh"
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_Q_CFG_T
  `MTL_PE_OUT_T
  `MTL_Q_OUT_T

  logic clk = 0, rst_n = 0, clear = 1;
  pe_cfg_t   [N_PE-1:0] pe_cfg;
  logic      [N_PE-1:0][1:0] ap_op;
  pe_out_t   [N_PE-1:0] pe_out;
  interval_t [N_Q-1:0]  q_mod_t, q_mod_f;
  q_cfg_t    q_cfg;
  q_out_t    q_out;
  mtl_pkg::cell_e head_cell;
  int checks = 0, failures = 0;

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    mtl_pe #(.N_Q(N_Q), .Q_SZ(Q_SZ)) u_pe (
      .cfg(pe_cfg[p]), .ap_op(ap_op[p]), .q_op(2'b00), .out(pe_out[p]));
  end
  mtl_pe2q #(.N_PE(N_PE), .N_Q(N_Q), .Q_SZ(Q_SZ)) u_pe2q (.pe_out, .q_mod_t, .q_mod_f);
  mtl_que #(.N_PE(N_PE), .Q_SZ(Q_SZ)) u_que (
    .clk, .rst_n, .clear, .cfg(q_cfg), .mod_t(q_mod_t[0]), .mod_f(q_mod_f[0]),
    .out(q_out), .head_cell);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic interval_t ivl(int lo, int hi);
    return '{lo: IDX_W'(lo), hi: IDX_W'(hi)};
  endfunction

  function automatic pe_cfg_t pe(mtl_pkg::opcode_e op, interval_t it, interval_t iF);
    return '{is_active: 1'b1, op0_src: 1'b0, op1_src: 1'b0, opcode: op,
             r_qid: '0, i_t: it, i_f: iF};
  endfunction

  function automatic byte cell_char(mtl_pkg::cell_e c);
    case (c)
      mtl_pkg::CELL_TRUE:  return "T";
      mtl_pkg::CELL_FALSE: return "F";
      mtl_pkg::CELL_MAYBE: return "M";
      default:             return ".";
    endcase
  endfunction

  // Loads a configuration with the Que cleared, then releases it.
  task automatic program_em(pe_cfg_t [N_PE-1:0] cfg, int head);
    @(negedge clk);
    clear  = 1'b1;
    pe_cfg = cfg;
    q_cfg  = '{is_active: 1'b1, is_verdict: 1'b1, reader_pe: '0, inp_no: 1'b0,
               head: IDX_W'(head)};
    @(negedge clk);
    clear = 1'b0;
  endtask

  // One step: operands a0, a1 for the current event; 'res' lists the expected
  // PE results (PE 0 first); 'cells' the expected cells 0..Head after the step.
  task automatic step(string name, int t, bit a0, bit a1, string res, string cells);
    string got_res = "", got_cells = "";
    // PE 1 reads a1 as operand 0 (the wire of a1); the others read a0, a1.
    for (int p = 0; p < N_PE; p++) ap_op[p] = (p == 1) ? {a0, a1} : {a1, a0};
    #1;
    for (int p = 0; p < res.len(); p++) got_res = {got_res, pe_out[p].res ? "T" : "F"};
    @(posedge clk);
    #1;
    for (int k = 0; k < cells.len(); k++) got_cells = {got_cells, cell_char(u_que.cells[k])};
    checks += 2;
    if (got_res != res) begin
      failures++;
      $display("%s t=%0d: PE results %s, expected %s", name, t, got_res, res);
    end
    if (got_cells != cells) begin
      failures++;
      $display("%s t=%0d: Que cells %s, expected %s", name, t, got_cells, cells);
    end
    // The Que output presents cell Head: the verdict deleted in this step.
    if (cells[cells.len()-1] != ".") begin
      checks++;
      if (q_out.value != (cells[cells.len()-1] == "T") || !q_out.is_verdict) begin
        failures++;
        $display("%s t=%0d: Que output value %0d, expected %s", name, t, q_out.value,
                 cells.substr(cells.len()-1, cells.len()-1));
      end
    end
    @(negedge clk);
  endtask

  initial begin
    pe_cfg_t [N_PE-1:0] cfg;
    pe_cfg = '0; q_cfg = '0; ap_op = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // not a0, Head 1.
    cfg    = '0;
    cfg[0] = pe(mtl_pkg::OP_NOT, ivl(0, 0), ivl(0, 0));
    program_em(cfg, 1);
    step("not", 0, 1'b1, 1'b0, "F", "F.");
    step("not", 1, 1'b0, 1'b0, "T", "TF");   // verdict for t=0: false
    step("not", 2, 1'b0, 1'b0, "T", "TT");   // verdict for t=1: true

    // a0 U_[1,2] a1, Head 3. Mod = false is the empty interval [1,0].
    cfg    = '0;
    cfg[0] = pe(mtl_pkg::OP_WIRE, ivl(1, 0), ivl(0, 0));
    cfg[1] = pe(mtl_pkg::OP_WIRE, ivl(1, 2), ivl(2, 2));
    cfg[2] = pe(mtl_pkg::OP_OR,   ivl(1, 0), ivl(1, 1));
    program_em(cfg, 3);
    step("until", 0, 1'b0, 1'b0, "FFF", "F...");
    step("until", 1, 1'b1, 1'b0, "TFT", "MF..");
    step("until", 2, 1'b1, 1'b0, "TFT", "MMF.");
    step("until", 3, 1'b0, 1'b1, "FTT", "FTTF");   // verdict for t=0: false
    step("until", 4, 1'b1, 1'b1, "TTT", "MFTT");   // verdict for t=1: true

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
