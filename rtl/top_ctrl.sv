// top_ctrl: top controller of the accelerator (decoder, SDUE control and
// CFSE control).
//
// Fetches 64-bit instructions from INSTMEM, decodes them and starts one
// operation at a time on the DMA, the network-on-chip or the DSCs, waiting
// for it to finish before fetching the next. The paper names the controller
// and its decoder, SDUE and CFSE control parts but gives no instruction set;
// the one below is this design's.
//
//   SET r, imm        command register r <= imm (see exion_pkg R_*)
//   DMA dir           DRAM <-> GSC, R_DRAM, R_GSC, R_LEN
//   NOC_LD tgt,mask   GSC -> IMEM/WMEM/operand memory of the DSCs in mask
//                     (broadcast if several), buffer bsel, bank, R_IADDR,
//                     sub[3] spreads words over the 16 banks
//   NOC_ST src,mask   OMEM / operand memory -> GSC at R_GSC + d*R_LEN
//   MMUL / EPMM       SDUE / EPRE tile on the DSCs in mask (SDUE control)
//   CAUCLR, CVG       ConMerge assistant unit
//   CFSE              one SIMD instruction (CFSE control)
//   HALT              stop; 'halted' stays high until the next 'start'
//
// Timing: fetch takes two cycles (address, data); SET completes in the
// decode cycle, other instructions wait for their unit's 'done' (for DSC
// commands, the 'done' of every DSC in the mask).
module top_ctrl
  import exion_pkg::*;
#(
  parameter int N_DSC = 1,
  parameter int IAW   = 9,
  parameter int GAW   = 14
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           halted,
  output logic           running,
  // INSTMEM
  output logic           if_en,
  output logic [IAW-1:0] if_addr,
  input  instr_t         if_data,
  // DMA
  output logic           dma_start,
  output logic           dma_dir,
  output logic [31:0]    dma_dram,
  output logic [GAW-1:0] dma_gsc,
  output logic [15:0]    dma_len,
  input  logic           dma_done,
  // NoC
  output logic           ld_start,
  output logic           st_start,
  output logic [GAW-1:0] noc_gaddr,
  output logic [15:0]    noc_len,
  output logic [N_DSC-1:0] noc_mask,
  output noc_tgt_e       ld_tgt,
  output logic [1:0]     ld_buf,
  output logic [3:0]     ld_bank,
  output logic [11:0]    ld_laddr,
  output logic           ld_spread,
  input  logic           noc_done,
  // DSCs
  output logic [N_DSC-1:0] dsc_valid,
  output dsc_cmd_t       dsc_cmd,
  input  logic [N_DSC-1:0] dsc_done,
  output logic [15:0]    n_instr
);
  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_DECODE, C_WAIT, C_HALT} cstate_e;
  cstate_e state;
  logic [IAW-1:0] pc;
  logic [31:0] regs [16];
  instr_t      ir;
  logic [N_DSC-1:0] pend_dsc;
  logic        pend_unit;     // waiting for DMA or NoC

  assign if_en   = (state == C_FETCH);
  assign if_addr = pc;
  assign halted  = (state == C_HALT);
  assign running = (state != C_IDLE) && (state != C_HALT);

  // decoder: command fields from the instruction and the command registers
  logic is_dsc;
  dsc_cmd_t cmd_d;
  always_comb begin
    ir = if_data;
    cmd_d = '0;
    cmd_d.merged   = ir.sub[0];
    cmd_d.mask_en  = ir.sub[1];
    cmd_d.ibuf     = ir.bsel[0];
    cmd_d.wbuf     = ir.bank[1:0];
    cmd_d.obuf     = ir.bank[3];
    cmd_d.st_src   = ir.sub[0];
    cmd_d.len      = regs[R_LEN][9:0];
    cmd_d.iaddr    = regs[R_IADDR][9:0];
    cmd_d.waddr    = regs[R_WADDR][9:0];
    cmd_d.oaddr    = (ir.op == OP_NOC_ST) ? regs[R_IADDR][11:0] : regs[R_OADDR][11:0];
    cmd_d.cvaddr   = regs[R_CV][8:0];
    cmd_d.scale    = regs[R_SCALE][15:0];
    cmd_d.shift    = regs[R_SCALE][20:16];
    cmd_d.thr      = regs[R_THR][15:0];
    cmd_d.col_base = regs[R_COLB][9:0];
    cmd_d.topk     = regs[R_TOPK][4:0];
    cmd_d.ep_thr   = regs[R_TOPK][31:16];
    cmd_d.alu_op   = alu_op_e'(regs[R_CFSE][2:0]);
    cmd_d.split    = regs[R_CFSE][3];
    cmd_d.srca     = cfse_src_e'(regs[R_CFSE][5:4]);
    cmd_d.srcb     = cfse_src_e'(regs[R_CFSE][7:6]);
    cmd_d.dst      = cfse_dst_e'(regs[R_CFSE][9:8]);
    cmd_d.ca       = regs[R_CA][11:0];
    cmd_d.cb       = regs[R_CB][11:0];
    cmd_d.cd       = regs[R_CD][11:0];
    cmd_d.cimm     = regs[R_IMM];
    is_dsc = 1'b1;
    unique case (ir.op)
      OP_MMUL:   cmd_d.op = DC_MMUL;
      OP_EPMM:   cmd_d.op = DC_EPMM;
      OP_CAUCLR: cmd_d.op = DC_CAUCLR;
      OP_CVG:    cmd_d.op = DC_CVG;
      OP_CFSE:   cmd_d.op = DC_CFSE;
      OP_NOC_ST: cmd_d.op = DC_STORE;
      default:   begin cmd_d.op = DC_NONE; is_dsc = 1'b0; end
    endcase
  end

  logic decode;
  assign decode = (state == C_DECODE);
  always_comb begin
    dsc_cmd   = cmd_d;
    dsc_valid = (decode && is_dsc) ? N_DSC'(ir.mask) : '0;
    dma_start = decode && ir.op == OP_DMA;
    dma_dir   = ir.sub[0];
    dma_dram  = regs[R_DRAM];
    dma_gsc   = GAW'(regs[R_GSC]);
    dma_len   = regs[R_LEN][15:0];
    ld_start  = decode && ir.op == OP_NOC_LD;
    st_start  = decode && ir.op == OP_NOC_ST;
    noc_gaddr = GAW'(regs[R_GSC]);
    noc_len   = regs[R_LEN][15:0];
    noc_mask  = N_DSC'(ir.mask);
    ld_tgt    = noc_tgt_e'(ir.sub[1:0]);
    ld_buf    = ir.bsel;
    ld_bank   = ir.bank;
    ld_laddr  = regs[R_IADDR][11:0];
    ld_spread = ir.sub[3];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; pend_dsc <= '0; pend_unit <= 1'b0; n_instr <= '0;
      for (int i = 0; i < 16; i++) regs[i] <= '0;
    end else begin
      unique case (state)
        C_IDLE, C_HALT: if (start) begin pc <= '0; state <= C_FETCH; end
        C_FETCH: state <= C_DECODE;
        C_DECODE: begin
          n_instr <= n_instr + 1'b1;
          pc <= pc + 1'b1;
          unique case (ir.op)
            OP_SET:  begin regs[ir.sub] <= ir.imm; state <= C_FETCH; end
            OP_HALT: state <= C_HALT;
            OP_DMA, OP_NOC_LD: begin pend_unit <= 1'b1; pend_dsc <= '0; state <= C_WAIT; end
            OP_NOC_ST: begin pend_unit <= 1'b1; pend_dsc <= N_DSC'(ir.mask); state <= C_WAIT; end
            OP_MMUL, OP_EPMM, OP_CAUCLR, OP_CVG, OP_CFSE: begin
              pend_unit <= 1'b0; pend_dsc <= N_DSC'(ir.mask); state <= C_WAIT;
            end
            default: state <= C_FETCH;
          endcase
        end
        C_WAIT: begin
          logic [N_DSC-1:0] pd;
          logic pu;
          pd = pend_dsc & ~dsc_done;
          pu = pend_unit && !(dma_done || noc_done);
          pend_dsc  <= pd;
          pend_unit <= pu;
          if (pd == '0 && !pu) state <= C_FETCH;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
