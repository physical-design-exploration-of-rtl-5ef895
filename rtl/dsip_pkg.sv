// Shared types and constants of the wire-friendly DSIP tile.
//
// The tile is a column of very wide registers (VWRs) sitting between an
// ultra-wide scratchpad (SPM) and a row of Soft-SIMD vector functional units
// (VFUs). The default sizes below are those of the tile's main configuration
// (192-bit words, six 512x64 SPM banks, six VWRs of sixteen one-word slices,
// sixteen VFUs). Everything that describes the control interface (instruction
// fields, opcodes, transfer commands) is this design's own choice: the tile's
// control plane is an external block whose encoding is not published with the
// architecture.
package dsip_pkg;

  // ---------------- default sizes (main configuration) ----------------
  localparam int unsigned DEF_DW        = 192;  // VFU datapath / VWR word width
  localparam int unsigned DEF_NUM_BANKS = 6;    // SPM banks
  localparam int unsigned DEF_BANK_W    = 512;  // bits per bank row
  localparam int unsigned DEF_SPM_DEPTH = 64;   // rows per bank
  localparam int unsigned DEF_NUM_VWR   = 6;    // VWRs per tile
  localparam int unsigned DEF_SLICES    = 16;   // slices per VWR = VFUs per tile
  localparam int unsigned DEF_WPS       = 1;    // words per slice
  localparam int unsigned DEF_SCALAR_W  = 8;    // multiplier scalar width (own choice)

  // Fixed field widths of the control interface (own choice).
  localparam int unsigned VSEL_W  = 3;  // selects one of up to 8 VWRs
  localparam int unsigned WSEL_W  = 4;  // selects one of up to 16 words in a slice
  localparam int unsigned SHAMT_W = 6;  // arithmetic right-shift amount

  // ---------------- Soft-SIMD subword configurations ----------------
  // A word is split into 3, 4, 6, 8, 12 or 16 equal lanes. The datapath width
  // must therefore be a multiple of 48.
  typedef enum logic [2:0] {
    SW_L3  = 3'd0,
    SW_L4  = 3'd1,
    SW_L6  = 3'd2,
    SW_L8  = 3'd3,
    SW_L12 = 3'd4,
    SW_L16 = 3'd5
  } sw_mode_e;

  localparam int unsigned NUM_SW_MODES = 6;

  function automatic int unsigned lanes_of(int unsigned mode);
    case (mode)
      0: return 3;
      1: return 4;
      2: return 6;
      3: return 8;
      4: return 12;
      default: return 16;
    endcase
  endfunction

  // ---------------- ALU ----------------
  typedef enum logic [1:0] {
    ALU_ADD = 2'd0,
    ALU_SUB = 2'd1,
    ALU_SRA = 2'd2
  } alu_op_e;

  // ---------------- VFU instruction ----------------
  typedef enum logic [2:0] {
    VFU_NOP = 3'd0,
    VFU_LD  = 3'd1,  // R <= A
    VFU_ADD = 3'd2,  // R <= A + B        (per lane)
    VFU_SUB = 3'd3,  // R <= A - B        (per lane)
    VFU_SRA = 3'd4,  // R <= A >>> shamt  (per lane)
    VFU_MUL = 3'd5,  // R <= A * scalar   (per lane, CSD shift-add, multi-cycle)
    VFU_ST  = 3'd6   // VWR[dst_vwr].slice.word[dst_word] <= R
  } vfu_op_e;

  typedef enum logic {
    SRC_VWR = 1'b0,  // a word of this VFU's slice in one VWR
    SRC_REG = 1'b1   // the VFU's local register R
  } src_e;

  typedef struct packed {
    vfu_op_e                 op;
    sw_mode_e                mode;
    src_e                    a_src;
    logic [VSEL_W-1:0]       a_vwr;
    logic [WSEL_W-1:0]       a_word;
    src_e                    b_src;
    logic [VSEL_W-1:0]       b_vwr;
    logic [WSEL_W-1:0]       b_word;
    logic [VSEL_W-1:0]       dst_vwr;
    logic [WSEL_W-1:0]       dst_word;
    logic [SHAMT_W-1:0]      shamt;
    logic [DEF_SCALAR_W-1:0] scalar;  // two's complement
  } vfu_instr_t;

  // ---------------- line transfers ----------------
  typedef enum logic [1:0] {
    XF_NONE       = 2'd0,
    XF_SPM_TO_VWR = 2'd1,  // SPM row -> shuffler -> VWR (write lands one cycle later)
    XF_VWR_TO_SPM = 2'd2,  // VWR -> shuffler -> SPM row
    XF_VWR_TO_VWR = 2'd3   // VWR -> shuffler -> VWR
  } xfer_op_e;

endpackage
