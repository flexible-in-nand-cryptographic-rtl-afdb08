// fv_pkg: types and constants shared by the FlashVault in-NAND crypto RTL.
//
// Holds the control words of the block cipher engine (BCE), the hash ALU,
// the asymmetric cipher ALU (ACALU) and the asymmetric cipher engine (ACE),
// plus the command format the SSD controller sends to the control FSM.
// Field widths printed on the BCE schematic are kept (Control_AU 6b,
// Control_LOC 9b, Control_PU 9b, Control_SU 6b, Control_TU 1b, Select2 3b);
// the encodings inside each field, the shift-mode field and all ACE and
// command formats are this design's own choices.
package fv_pkg;

  // ---------------- Block cipher engine ----------------
  // Select2: which unit drives Out_BCE
  typedef enum logic [2:0] {
    SEL_AU = 3'd0, SEL_LOU = 3'd1, SEL_PU = 3'd2, SEL_SU = 3'd3, SEL_TU = 3'd4, SEL_PASS = 3'd5
  } bce_sel_e;

  // Arithmetic logic operation (two bits per arithmetic logic in Control_AU)
  typedef enum logic [1:0] { AU_ADD = 2'd0, AU_MUL = 2'd1, AU_MADD = 2'd2, AU_MMUL = 2'd3 } au_op_e;
  // Modulus of the remainder circuits (Control_AU[5:4])
  typedef enum logic [1:0] { MOD_2P8 = 2'd0, MOD_2P16 = 2'd1, MOD_2P16P1 = 2'd2, MOD_2P4 = 2'd3 } au_mod_e;

  // Logic cell function
  typedef enum logic [1:0] { LC_XOR = 2'd0, LC_AND = 2'd1, LC_OR = 2'd2, LC_NOTA = 2'd3 } lc_op_e;

  // Shift kinds used by the BCE shift unit and the 64-bit ALUs
  typedef enum logic [1:0] { SH_LOG = 2'd0, SH_ARI = 2'd1, SH_ROT = 2'd2 } sh_kind_e;

  typedef struct packed {
    logic       w64;    // 1: one 64-bit shift of {in1,in0}; 0: two 32-bit shifts
    sh_kind_e   kind;
    logic       left;   // 1: left, 0: right
  } su_mode_t;

  typedef struct packed {
    logic [5:0] au;     // Control_AU
    logic [8:0] loc;    // Control_LOC
    logic [8:0] pu;     // Control_PU
    logic [5:0] su;     // Control_SU (shift amount)
    su_mode_t   su_mode;
    logic       tu;     // Control_TU
    bce_sel_e   sel;    // Select2
  } bce_ctrl_t;

  // Broadcast configuration write for PU switch settings and TU tables
  typedef struct packed {
    logic        pu_we;
    logic        pu_bank;
    logic [3:0]  pu_stage;
    logic [31:0] pu_data;
    logic        tu_we;
    logic [2:0]  tu_sel;
    logic [7:0]  tu_addr;
    logic [7:0]  tu_data;
  } bce_cfg_t;

  // BCE array operation: the shared control word plus operand source
  typedef struct packed {
    bce_ctrl_t ctrl;
    logic      key_in1;  // 1: Input 1 comes from the key register lane
  } bce_op_t;

  // ---------------- Hash ALU ----------------
  typedef enum logic [1:0] { HU_ADD = 2'd0, HU_LOGIC = 2'd1, HU_PERM = 2'd2, HU_SHIFT = 2'd3 } hu_sel_e;
  typedef enum logic [1:0] { HA_ADD64 = 2'd0, HA_ADD32 = 2'd1, HA_MODADD = 2'd2 } ha_add_e;

  typedef struct packed {
    hu_sel_e    sel;     // 4:1 output mux
    ha_add_e    add;
    lc_op_e     lc_a;    // cell A: op(in0,in1)
    lc_op_e     lc_b;    // cell B: op(in0,in1)
    lc_op_e     lc_c;    // cell C: op(A,B)
    logic [5:0] amt;
    logic       w32;     // shift on two 32-bit words
    sh_kind_e   kind;
    logic       left;
  } halu_ctrl_t;

  // ---------------- Asymmetric cipher ALU ----------------
  typedef enum logic [3:0] {
    AC_ADD   = 4'd0,  // 64-bit limb add with carry in/out
    AC_SUB   = 4'd1,  // 64-bit limb subtract with borrow in/out
    AC_MULLO = 4'd2,
    AC_MULHI = 4'd3,
    AC_MADD  = 4'd4,  // (a+b) mod q
    AC_MSUB  = 4'd5,  // (a-b) mod q
    AC_MMUL  = 4'd6,  // (a*b) mod q by Barrett reduction
    AC_LOGIC = 4'd7,
    AC_PERM  = 4'd8,
    AC_SHIFT = 4'd9,
    AC_CMP   = 4'd10  // 1 if a < b (unsigned)
  } ac_op_e;

  typedef struct packed {
    ac_op_e     op;
    lc_op_e     lc;
    logic [5:0] amt;
    sh_kind_e   kind;
    logic       left;
  } acalu_ctrl_t;

  // ---------------- Asymmetric cipher engine ----------------
  typedef enum logic [1:0] { ACE_HASH = 2'd0, ACE_ALU = 2'd1, ACE_PAD = 2'd2 } ace_unit_e;

  typedef struct packed {
    ace_unit_e   unit;
    logic [1:0]  row_a;     // HASH/PAD: 512-bit source row A
    logic [1:0]  row_b;     // HASH: source row B
    logic [1:0]  row_d;     // HASH/PAD: destination row
    logic [4:0]  wa0, wb0, wd0;  // ALU: word addresses of ACALU 0
    logic [4:0]  wa1, wb1, wd1;  // ALU: word addresses of ACALU 1
    logic [6:0]  opw;       // ALU: operand width (1..64), narrower operands zero-extended
    halu_ctrl_t  hctrl;
    acalu_ctrl_t actrl;
    logic [5:0]  pad_nbytes; // PAD: valid bytes in row A
  } ace_instr_t;

  // ---------------- Control unit commands ----------------
  typedef enum logic [2:0] {
    CMD_READ    = 3'd0,  // sense page, decode, decrypt, deliver to host
    CMD_PROGRAM = 3'd1,  // host data, encrypt, program page
    CMD_KEYGEN  = 3'd2,  // derive key from PUF into Cache RF and BCE key register
    CMD_ACE_LD  = 3'd3,  // output register row -> ACE buffer row
    CMD_ACE_EX  = 3'd4,  // execute one ACE instruction
    CMD_ACE_ST  = 3'd5,  // ACE buffer row -> output register row
    CMD_KEY_ACE = 3'd6   // Cache RF key row -> ACE buffer row
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [1:0]  plane;
    logic        eng;
    logic [2:0]  row;      // output register row (ACE_LD/ACE_ST)
    logic [1:0]  ace_row;  // ACE buffer row
    logic [3:0]  n_uop;    // number of BCE micro-operations to run (1..16, 0 = 16)
    logic        presensed;  // READ: page already sensed into the page buffer
    logic        next_sense; // READ: start sensing the next page once the cache holds this one
    logic [63:0] salt;
    logic [63:0] context_w;
    ace_instr_t  instr;
  } cmd_t;


  // ---------------- engine control and status (control unit <-> engine) ----
  typedef enum logic [1:0] { RT_CRF = 2'd0, RT_BCE = 2'd1, RT_ACE = 2'd2, RT_OUT = 2'd3 } rt_port_e;

  typedef struct packed {
    logic        ldpc_take;     // let the inbound FIFO hand a codeword to the LDPC decoder
    logic        drf_we;
    logic [3:0]  drf_waddr;
    logic [1:0]  drf_wsel;      // 0: decoded row 0, 1: decoded row 1, 2: Cache RF read data
    logic [3:0]  drf_raddr;
    logic        crf_we;
    logic [3:0]  crf_waddr;
    logic [1:0]  crf_wsel;      // 0: router, 1: Data RF read data, 2: key staging register
    logic [3:0]  crf_raddr;
    logic        rt_go;
    rt_port_e    rt_src;
    rt_port_e    rt_dst;
    logic [1:0]  bce_row;       // BCE buffer row read/written through the router
    logic        bce_key;       // router write into BCE goes to the key register
    logic        bce_op_valid;
    bce_op_t     bce_op;
    logic        ace_valid;
    logic        ace_wr_out;    // write ACE row from the output register
    logic [1:0]  ace_row;
    logic        out_we_ace;    // write output register row from the ACE
    logic [2:0]  out_row;       // output register row read/written by the engine
    logic        ob_push;       // push Data RF read data into the outbound FIFO
    logic        kge_start;
    logic        hi_open;       // accept host words into the output register
    logic        hi_clear;
    logic        ho_start;
    logic [2:0]  ho_row;
    logic [3:0]  ho_nrows;
  } eng_ctrl_t;

  typedef struct packed {
    logic        ldpc_done;
    logic        ldpc_ok;
    logic        bce_op_ready;
    logic        bce_op_done;
    logic        ace_done;
    logic        kge_done;
    logic        ob_ready;      // outbound FIFO can take a 512-bit row
    logic        ob_empty;
    logic [3:0]  hi_rows;
    logic        ho_busy;
  } eng_stat_t;

  // ---------------- shared helpers ----------------
  function automatic logic [7:0] lcell8(lc_op_e op, logic [7:0] a, logic [7:0] b);
    case (op)
      LC_XOR:  return a ^ b;
      LC_AND:  return a & b;
      LC_OR:   return a | b;
      default: return ~a;
    endcase
  endfunction

  function automatic logic [63:0] lcell64(lc_op_e op, logic [63:0] a, logic [63:0] b);
    case (op)
      LC_XOR:  return a ^ b;
      LC_AND:  return a & b;
      LC_OR:   return a | b;
      default: return ~a;
    endcase
  endfunction

endpackage
