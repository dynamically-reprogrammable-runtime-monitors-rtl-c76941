// Struct types shared by the blocks of the programmable MTL monitor.
// Each macro declares one typedef and expects the including module to have
// the localparams it uses:
//   IDX_W  = ceil(log2 Q_SZ)   width of a queue cell index
//   QID_W  = ceil(log2 N_Q)    width of a queue ID
//   PEID_W = ceil(log2 N_PE)   width of a PE ID
//   APID_W = ceil(log2 N_AP)   width of an atomic proposition index
//
// interval_t : a closed interval [lo, hi] of queue cells. lo > hi is the
//              empty interval; it is how "Mod = false" is programmed.
// pe_cfg_t   : PE instruction  {isActive, op0Src, op1Src, opcode, r_qid, I_T, I_F}
//              6 + QID_W + 4*IDX_W bits.
// q_cfg_t    : Que instruction {isActive, isVerdict, readerPE, inp_no, Head}
//              3 + PEID_W + IDX_W bits.
// pe_out_t   : PE to PE2Q      {isActive, destQ, range, res (T_M / F_M)}
// q_out_t    : Que to Q2PE / Q2OUT {destPE, inp_no, isPEInput, value, isVerdict}

`define MTL_INTERVAL_T \
  typedef struct packed { \
    logic [IDX_W-1:0] lo; \
    logic [IDX_W-1:0] hi; \
  } interval_t;

`define MTL_PE_CFG_T \
  typedef struct packed { \
    logic              is_active; \
    logic              op0_src; \
    logic              op1_src; \
    mtl_pkg::opcode_e  opcode; \
    logic [QID_W-1:0]  r_qid; \
    interval_t         i_t; \
    interval_t         i_f; \
  } pe_cfg_t;

`define MTL_Q_CFG_T \
  typedef struct packed { \
    logic              is_active; \
    logic              is_verdict; \
    logic [PEID_W-1:0] reader_pe; \
    logic              inp_no; \
    logic [IDX_W-1:0]  head; \
  } q_cfg_t;

`define MTL_PE_OUT_T \
  typedef struct packed { \
    logic              is_active; \
    logic [QID_W-1:0]  dest_q; \
    interval_t         range; \
    logic              res; \
  } pe_out_t;

`define MTL_Q_OUT_T \
  typedef struct packed { \
    logic [PEID_W-1:0] dest_pe; \
    logic              inp_no; \
    logic              is_pe_input; \
    logic              value; \
    logic              is_verdict; \
  } q_out_t;

// Whole configuration image of the monitor, as held by the program loader:
// PE instructions N_PE-1..0, then Que instructions N_Q-1..0, then the AP2PE
// selects (PE N_PE-1..0, operand 1 then 0). Needs pe_cfg_t and q_cfg_t.
`define MTL_MON_CFG_T \
  typedef struct packed { \
    pe_cfg_t [N_PE-1:0]                   pe; \
    q_cfg_t  [N_Q-1:0]                    q; \
    logic    [N_PE-1:0][1:0][APID_W-1:0]  ap_sel; \
  } mon_cfg_t;
