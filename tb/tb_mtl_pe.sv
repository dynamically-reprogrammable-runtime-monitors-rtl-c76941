// tb_mtl_pe: self-checking test of the Processing Element.
// Applies random instructions and operands and compares every output field
// with a reference written from the instruction-format description: operand
// selection by op0Src/op1Src, the truth table of each opcode, and the choice
// of I_T or I_F by the result. Unused opcodes are expected to act as wire.
`include "mtl_types.svh"

module tb_mtl_pe;
  localparam int N_Q   = 16;
  localparam int Q_SZ  = 256;
  localparam int IDX_W = mtl_pkg::idx_width(Q_SZ);
  localparam int QID_W = mtl_pkg::idx_width(N_Q);
  `MTL_INTERVAL_T
  `MTL_PE_CFG_T
  `MTL_PE_OUT_T

  pe_cfg_t    cfg;
  logic [1:0] ap_op, q_op;
  pe_out_t    out;
  int checks = 0, failures = 0;

  mtl_pe #(.N_Q(N_Q), .Q_SZ(Q_SZ)) dut (.cfg(cfg), .ap_op(ap_op), .q_op(q_op), .out(out));

  function automatic logic ref_res(input logic [2:0] opc, input logic a, input logic b);
    // truth tables, indexed {a,b}
    case (opc)
      3'b001:  return (a == 1'b0);
      3'b010:  return !(a == 1'b0 && b == 1'b0);
      3'b011:  return (a == 1'b1 && b == 1'b1);
      3'b100:  return !(a == 1'b1 && b == 1'b0);
      default: return a;
    endcase
  endfunction

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen_op [8];

  initial begin
    for (int n = 0; n < 4000; n++) begin
      logic a, b, r;
      cfg   = pe_cfg_t'({$urandom, $urandom});
      ap_op = 2'($urandom);
      q_op  = 2'($urandom);
      #1;
      a = cfg.op0_src ? q_op[0] : ap_op[0];
      b = cfg.op1_src ? q_op[1] : ap_op[1];
      r = ref_res(cfg.opcode, a, b);
      seen_op[cfg.opcode]++;
      checks++;
      if (out.res !== r || out.is_active !== cfg.is_active || out.dest_q !== cfg.r_qid ||
          out.range !== (r ? cfg.i_t : cfg.i_f)) begin
        failures++;
        if (failures < 10)
          $display("mismatch: opcode=%0d a=%b b=%b res=%b exp=%b range=%h", cfg.opcode, a, b,
                   out.res, r, out.range);
      end
      #1;
    end
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (seen_op[o] == 0) begin
        failures++;
        $display("opcode %0d never exercised", o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
