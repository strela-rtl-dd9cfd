// strela_pkg: types and constants shared by the STRELA elastic CGRA.
//
// The PE configuration word (pe_cfg_t) holds every reconfigurable field the
// PE has: ALU operation, feedback select, comparator operation, Join/Merge
// mode, datapath output select, initial data and valid register values, the
// FU Fork Sender mask, the delay of the delayed valid, the six FU input
// selects, the constant, the four PE-input fork masks and the four PE-output
// selects. The list of fields follows the paper; the widths and encodings
// are this design's own. With these widths the fields take 148 bits; a 6-bit
// PE ID and 6 clock-gating bits complete five 32-bit words (160 bits).
//
// The system bus and the MMIO port use a request/grant/response scheme in
// the style of the X-HEEP system bus: a request is held until granted, and
// exactly one response (rvalid, with read data for loads) follows every grant,
// one or more cycles later.
package strela_pkg;

  localparam int unsigned DataW   = 32;  // datapath width
  localparam int unsigned IdW     = 6;   // PE identification number
  localparam int unsigned CgW     = 6;   // buffer clock-gate bits per PE
  localparam int unsigned CfgW    = 148; // reconfigurable fields per PE
  localparam int unsigned CfgWords = 5;  // 32-bit words per PE configuration
  localparam int unsigned DelayW  = 6;   // delayed-valid counter

  // Port directions of a PE
  localparam int unsigned DirN = 0;
  localparam int unsigned DirE = 1;
  localparam int unsigned DirS = 2;
  localparam int unsigned DirW = 3;

  typedef enum logic [2:0] {
    ALU_ADD = 3'd0, ALU_SUB = 3'd1, ALU_MUL = 3'd2, ALU_SLL = 3'd3,
    ALU_SRL = 3'd4, ALU_AND = 3'd5, ALU_OR  = 3'd6, ALU_XOR = 3'd7
  } alu_op_e;

  typedef enum logic {
    CMP_EQZ = 1'b0,  // op1 - op2 == 0
    CMP_GTZ = 1'b1   // op1 - op2 >  0 (signed)
  } cmp_op_e;

  typedef enum logic [1:0] {
    JM_JOIN      = 2'd0,  // two operands
    JM_JOIN_CTRL = 2'd1,  // two operands and the control input
    JM_MERGE     = 2'd2   // one of two operands
  } jm_mode_e;

  typedef enum logic [1:0] {
    OUT_ALU = 2'd0, OUT_CMP = 2'd1, OUT_MUX = 2'd2
  } out_sel_e;

  // FU data input selects
  localparam logic [2:0] FUIN_D_FU    = 3'd4;  // data: 0..3 N,E,S,W, 4 dout_FU, 5+ const
  localparam logic [2:0] FUIN_D_CONST = 3'd5;
  localparam logic [2:0] FUIN_V_FU    = 3'd4;  // valid: 0..3 N,E,S,W, 4 vout_FU
  localparam logic [2:0] FUIN_V_ONE   = 3'd5;  //        5 '1', 6 vout_B1, 7 vout_B2
  localparam logic [2:0] FUIN_V_B1    = 3'd6;
  localparam logic [2:0] FUIN_V_B2    = 3'd7;

  // FU Fork Sender mask bits
  localparam int unsigned FuDestFu1 = 0;
  localparam int unsigned FuDestFu2 = 1;
  localparam int unsigned FuDestN   = 2;  // N,E,S,W = 2..5

  // PE input Fork Sender mask bits: FU1, FU2, FUc, then the three other
  // outputs in N,E,S,W order skipping the port's own direction.
  localparam int unsigned InDestFu1 = 0;
  localparam int unsigned InDestFu2 = 1;
  localparam int unsigned InDestFuc = 2;
  localparam int unsigned InDestO0  = 3;

  typedef struct packed {
    alu_op_e                alu_op;
    logic                   fb_sel;       // ALU operand 1 <- data register
    cmp_op_e                cmp_op;
    jm_mode_e               jm_mode;
    out_sel_e               out_sel;
    logic [DataW-1:0]       init_data;
    logic [2:0]             init_valid;   // {B2, B1, FU}
    logic [5:0]             fu_mask;      // {W,S,E,N,FU2,FU1}
    logic [DelayW-1:0]      delay;        // vout_FU_d on every (delay+1)-th token
    logic [2:0]             fu1_dsel;
    logic [2:0]             fu1_vsel;
    logic [2:0]             fu2_dsel;
    logic [2:0]             fu2_vsel;
    logic [1:0]             fuc_dsel;
    logic [1:0]             fuc_vsel;
    logic [DataW-1:0]       const_val;
    logic [3:0][5:0]        in_mask;      // per PE input port
    logic [3:0][1:0]        out_dsel;     // per PE output port
    logic [3:0][2:0]        out_vsel;
  } pe_cfg_t;

  // System bus / MMIO
  typedef struct packed {
    logic              req;
    logic              we;
    logic [3:0]        be;
    logic [31:0]       addr;
    logic [31:0]       wdata;
  } obi_req_t;

  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [31:0]       rdata;
  } obi_rsp_t;

  // Control unit register map (byte offsets)
  localparam logic [7:0] REG_CTRL     = 8'h00;  // W: bit0 start kernel, bit1 load configuration
  localparam logic [7:0] REG_STATUS   = 8'h04;  // R: bit0 busy, bit1 done; W1C bit1
  localparam logic [7:0] REG_CFG_ADDR = 8'h08;
  localparam logic [7:0] REG_CFG_SIZE = 8'h0C;  // in 32-bit words
  localparam logic [7:0] REG_IMN_BASE = 8'h10;  // node i at +16*i: ADDR, SIZE, STRIDE
  localparam logic [7:0] REG_OMN_BASE = 8'h50;

endpackage
