// flexv_pkg: types and constants shared by the Flex-V core and the cluster.
//
// The SIMD format code (simd_fmt CSR), the extension CSR addresses, the
// instruction opcodes of the extension and the TCDM request/response bundles
// live here. The value 8 for the a8w4 ("MIX8x4") format follows the kernel
// listing that writes simd_fmt = 8 for 8-bit activations and 4-bit weights;
// every other code, the CSR addresses and the opcodes are this design's own
// choice because no encoding is published for them.
package flexv_pkg;

  // ---------------------------------------------------------------- formats
  typedef enum logic [3:0] {
    FMT_16   = 4'd0,   // uniform 16-bit (2 lanes)
    FMT_8    = 4'd1,   // uniform 8-bit  (4 lanes)
    FMT_4    = 4'd2,   // uniform 4-bit  (8 lanes)
    FMT_2    = 4'd3,   // uniform 2-bit  (16 lanes)
    FMT_MIX8x4 = 4'd8, // A 8-bit, B 4-bit, B reused 2x
    FMT_MIX8x2 = 4'd9, // A 8-bit, B 2-bit, B reused 4x
    FMT_MIX4x2 = 4'd10 // A 4-bit, B 2-bit, B reused 2x
  } simd_fmt_e;

  // Width code of the dotp sub-unit a format ends up in.
  typedef enum logic [1:0] {UNIT_16 = 2'd0, UNIT_8 = 2'd1, UNIT_4 = 2'd2, UNIT_2 = 2'd3} unit_e;

  // Sub-unit (lane width of operand A) used by a format.
  function automatic unit_e fmt_unit(simd_fmt_e f);
    case (f)
      FMT_16:                 return UNIT_16;
      FMT_8, FMT_MIX8x4, FMT_MIX8x2: return UNIT_8;
      FMT_4, FMT_MIX4x2:      return UNIT_4;
      FMT_2:                  return UNIT_2;
      default:                return UNIT_8;
    endcase
  endfunction

  // How many times one B word is reused (number of slices): 1, 2 or 4.
  function automatic logic [2:0] fmt_ratio(simd_fmt_e f);
    case (f)
      FMT_MIX8x4, FMT_MIX4x2: return 3'd2;
      FMT_MIX8x2:             return 3'd4;
      default:                return 3'd1;
    endcase
  endfunction

  // ------------------------------------------------------------- CSR map
  localparam logic [11:0] CSR_SB_LEGACY  = 12'h800;
  localparam logic [11:0] CSR_SIMD_FMT   = 12'h801;
  localparam logic [11:0] CSR_MIX_SKIP   = 12'h802;
  localparam logic [11:0] CSR_A_STRIDE   = 12'h803;
  localparam logic [11:0] CSR_W_STRIDE   = 12'h804;
  localparam logic [11:0] CSR_A_ROLLBACK = 12'h805;
  localparam logic [11:0] CSR_W_ROLLBACK = 12'h806;
  localparam logic [11:0] CSR_A_SKIP     = 12'h807;
  localparam logic [11:0] CSR_W_SKIP     = 12'h808;
  localparam logic [11:0] CSR_A_ADDR     = 12'h809;  // "a_csr"
  localparam logic [11:0] CSR_W_ADDR     = 12'h80A;  // "w_csr"
  localparam logic [11:0] CSR_MHARTID    = 12'hF14;

  typedef struct packed {
    logic        sb_legacy;
    simd_fmt_e   simd_fmt;
    logic [15:0] mix_skip;
    logic [31:0] a_stride;
    logic [31:0] w_stride;
    logic [31:0] a_rollback;
    logic [31:0] w_rollback;
    logic [15:0] a_skip;
    logic [15:0] w_skip;
    logic [31:0] a_addr;
    logic [31:0] w_addr;
  } ext_cfg_t;

  // ------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_DOTP   = 7'b0101011; // custom-1: sdotp / mlsdotp
  localparam logic [6:0] OPC_HWLOOP = 7'b1111011; // custom-3: lp.setup

  // Signedness of a dotp: sp = A signed x B signed, usp = A unsigned x B
  // signed, up = both unsigned (XpulpV2 naming).
  typedef enum logic [1:0] {DOTP_SP = 2'd0, DOTP_USP = 2'd1, DOTP_UP = 2'd2} dotp_sign_e;

  typedef enum logic [3:0] {
    OP_ILLEGAL, OP_LUI, OP_ADDI, OP_SLLI, OP_ADD, OP_SUB, OP_LW, OP_SW,
    OP_BEQ, OP_BNE, OP_CSR, OP_SDOTP, OP_MLSDOTP, OP_LPSETUP, OP_WFI, OP_EBREAK
  } op_e;

  typedef enum logic [1:0] {CSR_RW = 2'd0, CSR_RS = 2'd1, CSR_RWI = 2'd2} csr_op_e;

  typedef struct packed {
    op_e         op;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [31:0] imm;        // sign-extended immediate / CSR zimm
    logic [11:0] csr_addr;
    csr_op_e     csr_op;
    logic        virt_simd;  // virtual SIMD instruction: format from CSR
    dotp_sign_e  sign;
    logic        legacy_b;   // .b suffix (used only when sb_legacy = 1)
    logic        a_sel;      // Mac&Load imm[0]: activation register
    logic [1:0]  w_sel;      // Mac&Load imm[2:1]: weight register
    logic        upd_a;      // Mac&Load imm[3]: load activation
    logic        upd_w;      // Mac&Load imm[4]: load weight
    logic        rd_we;      // writes a GPR
  } dec_t;

  // ------------------------------------------------------------- TCDM bus
  typedef struct packed {
    logic        req;
    logic [31:0] addr;   // byte address
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  // The grant (same cycle as req) is a separate signal, not part of this
  // struct: a master's next address may depend on rdata, and the grant
  // depends on that address, so keeping the two apart keeps the netlist free
  // of (false) combinational loops through a shared variable.
  typedef struct packed {
    logic        rvalid;  // one cycle after the grant of a read
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // Events one core reports each cycle (performance-counter style).
  typedef struct packed {
    logic mem_stall;     // request not granted (bank conflict)
    logic mpc_switch;    // MPC moved to the next B slice
    logic mlc_rollback;  // MLC applied a rollback instead of a stride
    logic macload;       // a Mac&Load issued its load
    logic hwloop_jump;   // hardware loop branched back
    logic fwd;           // operand forwarded from the returning load
  } core_evt_t;

endpackage
