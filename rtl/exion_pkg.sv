// exion_pkg: sizes, data types and command formats shared by the EXION
// accelerator RTL.
//
// The array geometry (16 DPU lanes x 16 DPU columns, dot products of 16
// elements per DPU per cycle, three weight buffers) and the 12-bit integer
// operands of the matrix multiplications come from the paper's hardware
// configuration. The 16-bit output precision, the 256-bit global word, the
// ConMerge vector memory entry layout, the instruction format and the command
// structures are this design's own choices.
package exion_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int LANES     = 16;   // DPU lanes (rows of the DPU array)
  localparam int COLS      = 16;   // DPU columns
  localparam int LANE_LEN  = 16;   // multipliers per DPU
  localparam int NWBUF     = 3;    // WMEM #0..#2 (triple buffering)
  localparam int NIBUF     = 2;    // IMEM double buffering
  localparam int DW        = 12;   // INT12 operands of MMUL
  localparam int MAG_W     = DW - 1;
  localparam int POS_W     = 4;    // leading-one position (0..MAG_W-1)
  localparam int ACC_W     = 36;   // DPU accumulator
  localparam int LD_ACC_W  = 32;   // LD_DPU accumulator
  localparam int OUT_W     = 16;   // stored output element
  localparam int ELEM_W    = 16;   // element container in GSC / OMEM / operand memory
  localparam int GW        = 256;  // global word: 16 elements x 16 bit
  localparam int VEC_W     = LANE_LEN * DW;  // 192-bit IMEM / WMEM word
  localparam int COL_IDX_W = 10;   // weight column origin index (Fig. 13)
  localparam int MASK_W    = 16;   // bitmask per column (one bit per lane)
  localparam int NCLASS    = 5;

  // ---------------------------------------------------------------- types
  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [OUT_W-1:0] out_t;
  typedef logic [VEC_W-1:0]        vec_t;    // 16 packed INT12 elements
  typedef logic [GW-1:0]           gword_t;  // 16 packed 16-bit elements

  // Conflict vector slot: which IMEM bank the lane's conflict line carries.
  typedef struct packed {
    logic       valid;
    logic [3:0] src;
  } cv_slot_t;

  // Control map of one DPU: w_sw select (0 = idle / clock gated,
  // 1..3 = WMEM #0..#2) and i_sw select (0 = original, 1 = conflict line).
  typedef struct packed {
    logic [1:0] wsel;
    logic       isel;
  } cm_t;

  typedef struct packed {
    logic                 valid;
    logic [COL_IDX_W-1:0] idx;
  } origin_t;

  // One merged block as written to CVMEM (1376 bits).
  typedef struct packed {
    cv_slot_t [LANES-1:0]            cv;
    cm_t      [LANES-1:0][COLS-1:0]  cm;      // [lane][column]
    origin_t  [NWBUF-1:0][COLS-1:0]  origin;  // [WMEM][column]
  } cvm_entry_t;

  // SortBuffer entry (Fig. 13: column origin index 10b + bitmask 16b).
  typedef struct packed {
    logic [COL_IDX_W-1:0] idx;
    logic [MASK_W-1:0]    mask;
  } sb_entry_t;

  typedef enum logic [2:0] {
    CL_HDENSE  = 3'd0,
    CL_DENSE   = 3'd1,
    CL_SPARSE  = 3'd2,
    CL_HSPARSE = 3'd3,
    CL_EXTRA   = 3'd4
  } sp_class_e;

  // Two-step leading-one detection result.
  typedef struct packed {
    logic             sign;
    logic             v1;
    logic [POS_W-1:0] p1;   // first leading one, counted from the MSB
    logic             v2;
    logic [POS_W-1:0] p2;   // second one
  } ts_lod_t;

  // ---------------------------------------------------------------- CFSE
  typedef enum logic [2:0] {
    ALU_ADD   = 3'd0,
    ALU_SUB   = 3'd1,
    ALU_MUL   = 3'd2,
    ALU_MAX   = 3'd3,
    ALU_MIN   = 3'd4,
    ALU_RELU  = 3'd5,
    ALU_CMPGT = 3'd6,
    ALU_PASS  = 3'd7
  } alu_op_e;

  // CFSE operand sources / destination
  typedef enum logic [1:0] {
    CS_OPMEM = 2'd0,
    CS_OMEM  = 2'd1,
    CS_IMM   = 2'd2
  } cfse_src_e;

  typedef enum logic [1:0] {
    CD_OPMEM = 2'd0,
    CD_IMEM  = 2'd1
  } cfse_dst_e;

  // ---------------------------------------------------------------- ISA
  typedef enum logic [3:0] {
    OP_NOP    = 4'h0,
    OP_SET    = 4'h1,  // regs[sub] <= imm
    OP_DMA    = 4'h2,  // sub[0]: 0 DRAM->GSC, 1 GSC->DRAM
    OP_NOC_LD = 4'h3,  // GSC -> DSC memory (sub[1:0] target, sub[3] spread)
    OP_NOC_ST = 4'h4,  // DSC memory -> GSC (sub[0] 0 OMEM, 1 operand memory)
    OP_MMUL   = 4'h5,  // SDUE, sub[0] merged, sub[1] bitmask to CAU
    OP_EPMM   = 4'h6,  // EPRE, sub[1] bitmask to CAU
    OP_CAUCLR = 4'h7,
    OP_CVG    = 4'h8,
    OP_CFSE   = 4'h9,
    OP_HALT   = 4'hF
  } opcode_e;

  typedef struct packed {
    opcode_e     op;     // [63:60]
    logic [3:0]  sub;    // [59:56]
    logic [7:0]  mask;   // [55:48] DSC destination mask
    logic [1:0]  bsel;   // [47:46] buffer select
    logic [3:0]  bank;   // [45:42]
    logic [9:0]  rsv;    // [41:32]
    logic [31:0] imm;    // [31:0]
  } instr_t;

  // Command register numbers written by OP_SET
  localparam int R_DRAM  = 0;   // DRAM word address (64-bit beats)
  localparam int R_GSC   = 1;   // GSC word address
  localparam int R_LEN   = 2;   // length in words / K chunks
  localparam int R_IADDR = 3;   // IMEM / local address
  localparam int R_WADDR = 4;   // WMEM address
  localparam int R_OADDR = 5;   // OMEM address
  localparam int R_CV    = 6;   // CVMEM address
  localparam int R_SCALE = 7;   // {shift[20:16], scale[15:0]}
  localparam int R_THR   = 8;   // FFN-Reuse threshold (signed 16)
  localparam int R_COLB  = 9;   // column origin index base
  localparam int R_TOPK  = 10;  // {onehot threshold[31:16], k[4:0]}
  localparam int R_CFSE  = 11;  // {dst[9:8], srcb[7:6], srca[5:4], split[3], op[2:0]}
  localparam int R_CA    = 12;  // CFSE source A address
  localparam int R_CB    = 13;  // CFSE source B address
  localparam int R_CD    = 14;  // CFSE destination address
  localparam int R_IMM   = 15;  // CFSE scalar

  // ---------------------------------------------------------------- DSC command
  typedef enum logic [2:0] {
    DC_NONE   = 3'd0,
    DC_MMUL   = 3'd1,
    DC_EPMM   = 3'd2,
    DC_CAUCLR = 3'd3,
    DC_CVG    = 3'd4,
    DC_CFSE   = 3'd5,
    DC_STORE  = 3'd6
  } dsc_op_e;

  typedef struct packed {
    dsc_op_e     op;
    logic        merged;
    logic        mask_en;
    logic        ibuf;
    logic [1:0]  wbuf;
    logic        obuf;
    logic        st_src;     // DC_STORE: 0 OMEM, 1 operand memory
    logic [9:0]  len;
    logic [9:0]  iaddr;
    logic [9:0]  waddr;
    logic [11:0] oaddr;      // OMEM address, or local address of a store
    logic [8:0]  cvaddr;
    logic [15:0] scale;
    logic [4:0]  shift;
    logic [15:0] thr;
    logic [9:0]  col_base;
    logic [4:0]  topk;
    logic [15:0] ep_thr;
    alu_op_e     alu_op;
    logic        split;
    cfse_src_e   srca;
    cfse_src_e   srcb;
    cfse_dst_e   dst;
    logic [11:0] ca;
    logic [11:0] cb;
    logic [11:0] cd;
    logic [31:0] cimm;
  } dsc_cmd_t;

  // Local memory targets of a NoC load
  typedef enum logic [1:0] {
    T_IMEM  = 2'd0,
    T_WMEM  = 2'd1,
    T_OPMEM = 2'd2
  } noc_tgt_e;

  // Activity counters of one DSC, brought out at the top for observation
  typedef struct packed {
    logic [15:0] n_dense;       // dense SDUE tiles
    logic [15:0] n_merged;      // merged (ConMerge) SDUE tiles
    logic [15:0] n_conf_line;   // merged tiles that used a conflict line
    logic [15:0] n_ep;          // EPRE tiles
    logic [15:0] n_ep_onehot;   // rows found one-hot by eager prediction
    logic [9:0]  n_cv_blocks;   // CVMEM entries of the last CVG run
    logic [15:0] n_condensed;   // all-zero columns dropped
    logic [15:0] n_merge_ok;
    logic [15:0] n_merge_fail;
    logic [15:0] n_moves;       // conflict elements moved
    logic [15:0] n_spill;       // SortBuffer class spills
    logic        sb_overflow;
    logic [15:0] n_bus_stall;   // CFSE writes held by the shared bus
  } dsc_stats_t;

  // Element helpers
  function automatic data_t elem12(input vec_t v, input int i);
    return data_t'(v[i*DW +: DW]);
  endfunction

  function automatic out_t sat16(input logic signed [63:0] x);
    if (x > 64'sd32767)       return 16'sd32767;
    else if (x < -64'sd32768) return -16'sd32768;
    else                      return out_t'(x);
  endfunction

endpackage
