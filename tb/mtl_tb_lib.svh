// Testbench library for the programmable MTL monitor, included inside a
// testbench module. The module must declare the localparams N_PE, N_Q, N_AP,
// Q_SZ, IC_REGS, IDX_W, QID_W, PEID_W, APID_W and the types of
// mtl_types.svh (interval_t, pe_cfg_t, q_cfg_t, mon_cfg_t).
//
// It holds:
//  * a formula store: syntax-tree nodes built with mk_ap / mk_op;
//  * a reference evaluator, eval(), written straight from the discrete-time
//    bounded MTL semantics over a stored event trace;
//  * a compiler, compile_formula(), that maps a formula onto PEs and Ques
//    following the evaluator table (one Que per operator, one PE or three /
//    two for Until), balances the Heads so that both operands of a binary
//    operator arrive in the same cycle, and returns the program image and the
//    verdict latency. Each tree level costs Head + 1 + IC_REGS cycles; atomic
//    propositions arrive IC_REGS cycles after the event.
//  * pack / send helpers for the byte-wide program port.

typedef enum int {K_AP, K_WIRE, K_NOT, K_OR, K_AND, K_IMP, K_NEXT, K_BOX, K_DIA, K_UNTIL} kind_e;

localparam int MAXN = 64;
kind_e nk [MAXN];
int    na [MAXN], nb [MAXN], nt1 [MAXN], nt2 [MAXN], nap [MAXN];
int    n_nodes = 0;

localparam int TRACE_LEN = 2048;
logic [N_AP-1:0] trace [TRACE_LEN];

function automatic int mk_ap(int i);
  nk[n_nodes] = K_AP; nap[n_nodes] = i; na[n_nodes] = -1; nb[n_nodes] = -1;
  return n_nodes++;
endfunction

function automatic int mk_op(kind_e k, int a, int b = -1, int t1 = 0, int t2 = 0);
  nk[n_nodes] = k; na[n_nodes] = a; nb[n_nodes] = b; nt1[n_nodes] = t1; nt2[n_nodes] = t2;
  return n_nodes++;
endfunction

function automatic bit eval(int n, int i);
  bit r;
  case (nk[n])
    K_AP:   return trace[i][nap[n]];
    K_WIRE: return eval(na[n], i);
    K_NOT:  return !eval(na[n], i);
    K_OR:   return eval(na[n], i) || eval(nb[n], i);
    K_AND:  return eval(na[n], i) && eval(nb[n], i);
    K_IMP:  return !eval(na[n], i) || eval(nb[n], i);
    K_NEXT: return eval(na[n], i + 1);
    K_BOX: begin
      r = 1;
      for (int j = i + nt1[n]; j <= i + nt2[n]; j++) if (!eval(na[n], j)) r = 0;
      return r;
    end
    K_DIA: begin
      r = 0;
      for (int j = i + nt1[n]; j <= i + nt2[n]; j++) if (eval(na[n], j)) r = 1;
      return r;
    end
    K_UNTIL: begin
      r = 0;
      for (int j = i + nt1[n]; j <= i + nt2[n] && !r; j++) begin
        bit hold = eval(nb[n], j);
        for (int k = i; k < j && hold; k++) if (!eval(na[n], k)) hold = 0;
        if (hold) r = 1;
      end
      return r;
    end
    default: return 0;
  endcase
endfunction

// horizon of a formula (how far into the future its verdict looks)
function automatic int horizon(int n);
  case (nk[n])
    K_AP:                  return 0;
    K_WIRE, K_NOT:         return horizon(na[n]);
    K_OR, K_AND, K_IMP:    return (horizon(na[n]) > horizon(nb[n])) ? horizon(na[n]) : horizon(nb[n]);
    K_NEXT:                return 1 + horizon(na[n]);
    K_BOX, K_DIA:          return nt2[n] + horizon(na[n]);
    default:               return nt2[n] + ((horizon(na[n]) > horizon(nb[n])) ? horizon(na[n]) : horizon(nb[n]));
  endcase
endfunction

// ---------------------------------------------------------------- compiler
mon_cfg_t img;
int       em_q [MAXN];
int       c_npe, c_nq, c_balanced;

function automatic interval_t ivl(int lo, int hi);
  interval_t v;
  if (lo > hi) begin v.lo = IDX_W'(1); v.hi = IDX_W'(0); end   // empty: "Mod = false"
  else begin v.lo = IDX_W'(lo); v.hi = IDX_W'(hi); end
  return v;
endfunction

// connect operand k of PE p to node c (an AP or an already built operator)
function automatic void connect(int p, int k, int c);
  if (nk[c] == K_AP) begin
    if (k == 0) img.pe[p].op0_src = 1'b0; else img.pe[p].op1_src = 1'b0;
    img.ap_sel[p][k] = APID_W'(nap[c]);
  end else begin
    if (k == 0) img.pe[p].op0_src = 1'b1; else img.pe[p].op1_src = 1'b1;
    img.q[em_q[c]].reader_pe = PEID_W'(p);
    img.q[em_q[c]].inp_no    = k[0];
  end
endfunction

function automatic int new_pe(mtl_pkg::opcode_e op, int qid, interval_t it, interval_t ifl);
  int p = c_npe++;
  if (p >= N_PE) $fatal(1, "formula needs more than %0d PEs", N_PE);
  img.pe[p].is_active = 1'b1;
  img.pe[p].opcode    = op;
  img.pe[p].r_qid     = QID_W'(qid);
  img.pe[p].i_t       = it;
  img.pe[p].i_f       = ifl;
  return p;
endfunction

// Builds the evaluator of operator node n; returns the cycle, counted from
// the event, in which its verdict reaches a reader.
function automatic int build(int n);
  int qid, head, in_av, p, p2, p3, la, lb;
  int a = na[n], b = nb[n];
  if (nk[n] inside {K_OR, K_AND, K_IMP}) begin
    if (nk[a] == K_AP && nk[b] == K_AP) in_av = int'(IC_REGS);
    else begin
      la = (nk[a] == K_AP) ? -1 : build(a);
      lb = (nk[b] == K_AP) ? -1 : build(b);
      if (la < 0 || lb < 0) $fatal(1, "binary operator with one AP operand: wrap it in K_WIRE");
      if (la < lb) begin img.q[em_q[a]].head += IDX_W'(lb - la); c_balanced++; end
      if (lb < la) begin img.q[em_q[b]].head += IDX_W'(la - lb); c_balanced++; end
      in_av = (la > lb) ? la : lb;
    end
  end else if (nk[n] == K_UNTIL) begin
    if (nk[a] != K_AP || nk[b] != K_AP) $fatal(1, "Until operands must be atomic propositions");
    in_av = int'(IC_REGS);
  end else begin
    in_av = (nk[a] == K_AP) ? int'(IC_REGS) : build(a);
  end
  qid = c_nq++;
  if (qid >= N_Q) $fatal(1, "formula needs more than %0d Ques", N_Q);
  case (nk[n])
    K_WIRE:  begin head = 1; p = new_pe(mtl_pkg::OP_WIRE, qid, ivl(0, 0), ivl(0, 0)); connect(p, 0, a); end
    K_NOT:   begin head = 1; p = new_pe(mtl_pkg::OP_NOT,  qid, ivl(0, 0), ivl(0, 0)); connect(p, 0, a); end
    K_OR:    begin head = 1; p = new_pe(mtl_pkg::OP_OR,   qid, ivl(0, 0), ivl(0, 0)); connect(p, 0, a); connect(p, 1, b); end
    K_AND:   begin head = 1; p = new_pe(mtl_pkg::OP_AND,  qid, ivl(0, 0), ivl(0, 0)); connect(p, 0, a); connect(p, 1, b); end
    K_IMP:   begin head = 1; p = new_pe(mtl_pkg::OP_IMPLIES, qid, ivl(0, 0), ivl(0, 0)); connect(p, 0, a); connect(p, 1, b); end
    K_NEXT:  begin head = 2; p = new_pe(mtl_pkg::OP_WIRE, qid, ivl(1, 1), ivl(1, 1)); connect(p, 0, a); end
    K_BOX:   begin
      head = nt2[n] + 1;
      p = new_pe(mtl_pkg::OP_WIRE, qid, ivl(nt2[n], nt2[n]), ivl(nt1[n], nt2[n])); connect(p, 0, a);
    end
    K_DIA:   begin
      head = nt2[n] + 1;
      p = new_pe(mtl_pkg::OP_WIRE, qid, ivl(nt1[n], nt2[n]), ivl(nt2[n], nt2[n])); connect(p, 0, a);
    end
    default: begin  // K_UNTIL
      head = nt2[n] + 1;
      if (nt1[n] > 0) begin
        p  = new_pe(mtl_pkg::OP_WIRE, qid, ivl(1, 0), ivl(0, nt1[n] - 1));                connect(p, 0, a);
        p2 = new_pe(mtl_pkg::OP_WIRE, qid, ivl(nt1[n], nt2[n]), ivl(nt2[n], nt2[n]));     connect(p2, 0, b);
        p3 = new_pe(mtl_pkg::OP_OR,   qid, ivl(1, 0), ivl(nt1[n], nt2[n] - 1));           connect(p3, 0, a); connect(p3, 1, b);
      end else begin
        p  = new_pe(mtl_pkg::OP_OR,   qid, ivl(1, 0), ivl(0, nt2[n] - 1));                connect(p, 0, a); connect(p, 1, b);
        p2 = new_pe(mtl_pkg::OP_WIRE, qid, ivl(0, nt2[n]), ivl(nt2[n], nt2[n]));          connect(p2, 0, b);
      end
    end
  endcase
  if (head >= Q_SZ) $fatal(1, "time bound too large for Q_SZ=%0d", Q_SZ);
  em_q[n] = qid;
  img.q[qid].is_active = 1'b1;
  img.q[qid].head      = IDX_W'(head);
  return in_av + head + 1 + IC_REGS;
endfunction

// Compiles formula 'root'; fills img and returns the verdict latency.
function automatic int compile_formula(int root);
  int lat;
  img = '0;
  c_npe = 0; c_nq = 0; c_balanced = 0;
  lat = build(root);
  img.q[em_q[root]].is_verdict = 1'b1;
  for (int q = 0; q < N_Q; q++)
    if (img.q[q].head >= IDX_W'(Q_SZ - 1) && img.q[q].is_active)
      $display("note: Que %0d Head %0d at the buffer end", q, img.q[q].head);
  return lat;
endfunction

localparam int CFG_BITS   = $bits(mon_cfg_t);
localparam int PROG_BYTES = (CFG_BITS + 7) / 8;
