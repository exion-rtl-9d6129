// cvg: ConMerge vector generator.
//
// Builds merged blocks from the rows of the SortBuffer and writes one CVMEM
// entry per merged block. A row is up to 16 output columns, one per DPU
// column, each with its weight column origin index and a 16-bit mask of the
// output rows (DPU lanes) that must be computed.
//
// Procedure (the paper's CVG figure):
//  1. Pop the densest row; it becomes source 0 (weights from WMEM #0).
//  2. Pop the sparsest row as the candidate. Its elements that land on empty
//     cells are placed where they are. Cells where both rows need the same
//     (lane, column) are conflicts.
//  3. Conflict solving, one step per cycle: for every column with conflicts,
//     DOF = #(cells empty and whose lane's conflict vector is still
//     unwritten) - #conflicts. If any DOF < 0 the merge fails. Otherwise take
//     the column with the smallest DOF, its first conflicting lane (source
//     row) and its first usable empty lane (destination); write the
//     destination lane's conflict vector with the source row and move, in
//     parallel, every column's conflict at the source row into an empty cell
//     of the destination lane. Moved elements use the conflict line (i_sw = 1).
//  4. When no conflicts remain the candidate is merged; after a third source
//     (WMEM #2) the block is complete, otherwise step 2 repeats with the next
//     sparse row.
// A failed merge writes the block built so far and starts the next block
// from the rejected row (the paper instead retries the same block with later
// rows; this is a simplification of this design). A written conflict vector
// slot is never reused, as in the paper's merging example.
//
// Interface: 'start' with 'base_addr' runs until the SortBuffer is empty and
// then pulses 'done'; 'n_blocks' counts the entries written. Statistics:
// merges that succeeded or failed and element moves.
module cvg
  import exion_pkg::*;
#(
  parameter int NB = COLS,     // DPU columns = SortBuffer banks
  parameter int NL = LANES,    // DPU lanes = bitmask bits
  parameter int AW = 9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [AW-1:0] base_addr,
  // SortBuffer
  input  logic         sb_empty,
  input  logic         dense_vld  [NB],
  input  sb_entry_t    dense_data [NB],
  input  logic         sparse_vld [NB],
  input  sb_entry_t    sparse_data[NB],
  output logic         pop_dense,
  output logic         pop_sparse,
  // CVMEM
  output logic         cvm_we,
  output logic [AW-1:0] cvm_addr,
  output cvm_entry_t   cvm_data,
  // status
  output logic         busy,
  output logic         done,
  output logic [AW:0]  n_blocks,
  output logic [15:0]  n_merge_ok,
  output logic [15:0]  n_merge_fail,
  output logic [15:0]  n_moves
);
  typedef enum logic [2:0] {S_IDLE, S_BASE, S_CAND, S_RESOLVE, S_WRITE, S_DONE} state_e;
  state_e state;

  // merged block under construction
  logic [NL-1:0] occ   [NB];          // [column][lane]
  cm_t           cmap  [NL][NB];
  cv_slot_t      cv    [NL];
  origin_t       orig  [NWBUF][NB];
  logic [1:0]    nsrc;
  // candidate (trial) state
  logic [NL-1:0] t_occ  [NB];
  cm_t           t_cmap [NL][NB];
  cv_slot_t      t_cv   [NL];
  logic [NL-1:0] pend   [NB];          // conflicting candidate elements still to move
  sb_entry_t     cand   [NB];
  logic          cand_vld [NB];
  logic          hold;                 // rejected candidate starts the next block
  logic [AW-1:0] wptr;

  // ---------------------------------------------------------------- DOF logic
  logic [NL-1:0] usable [NB];
  int            nconf  [NB];
  int            nfree  [NB];
  int            dof    [NB];
  logic          any_conf, infeasible;
  int            best;
  int            r_src, r_dst;

  always_comb begin
    any_conf = 1'b0; infeasible = 1'b0; best = 0;
    for (int c = 0; c < NB; c++) begin
      nconf[c] = 0; nfree[c] = 0;
      for (int r = 0; r < NL; r++) begin
        usable[c][r] = !t_occ[c][r] && !t_cv[r].valid;
        nconf[c] += int'(pend[c][r]);
        nfree[c] += int'(usable[c][r]);
      end
      dof[c] = nfree[c] - nconf[c];
    end
    for (int c = NB - 1; c >= 0; c--)
      if (nconf[c] > 0) begin
        if (!any_conf || dof[c] <= dof[best]) best = c;
        any_conf = 1'b1;
        if (dof[c] < 0) infeasible = 1'b1;
      end
    r_src = 0; r_dst = 0;
    for (int r = NL - 1; r >= 0; r--) begin
      if (pend[best][r])   r_src = r;
      if (usable[best][r]) r_dst = r;
    end
  end

  // ---------------------------------------------------------------- output entry
  always_comb begin
    for (int r = 0; r < NL; r++) begin
      cvm_data.cv[r] = cv[r];
      for (int c = 0; c < NB; c++) cvm_data.cm[r][c] = cmap[r][c];
    end
    for (int b = 0; b < NWBUF; b++)
      for (int c = 0; c < NB; c++) cvm_data.origin[b][c] = orig[b][c];
  end
  assign cvm_we   = (state == S_WRITE);
  assign cvm_addr = wptr;
  assign busy     = (state != S_IDLE);
  assign pop_dense  = (state == S_BASE) && !hold && !sb_empty;
  assign pop_sparse = (state == S_CAND) && !sb_empty;

  // start a new block from a row (entries + valid)
  task automatic init_block(input sb_entry_t row [NB], input logic vld [NB]);
    for (int c = 0; c < NB; c++) begin
      occ[c] <= vld[c] ? row[c].mask : '0;
      for (int r = 0; r < NL; r++)
        cmap[r][c] <= (vld[c] && row[c].mask[r]) ? '{wsel: 2'd1, isel: 1'b0} : '0;
      orig[0][c] <= '{valid: vld[c], idx: row[c].idx};
      for (int b = 1; b < NWBUF; b++) orig[b][c] <= '0;
    end
    for (int r = 0; r < NL; r++) cv[r] <= '0;
    nsrc <= 2'd1;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; hold <= 1'b0; wptr <= '0; nsrc <= '0;
      n_blocks <= '0; n_merge_ok <= '0; n_merge_fail <= '0; n_moves <= '0;
      for (int c = 0; c < NB; c++) begin
        occ[c] <= '0; t_occ[c] <= '0; pend[c] <= '0; cand[c] <= '0; cand_vld[c] <= 1'b0;
        for (int r = 0; r < NL; r++) begin cmap[r][c] <= '0; t_cmap[r][c] <= '0; end
        for (int b = 0; b < NWBUF; b++) orig[b][c] <= '0;
      end
      for (int r = 0; r < NL; r++) begin cv[r] <= '0; t_cv[r] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          wptr <= base_addr; n_blocks <= '0; hold <= 1'b0;
          n_merge_ok <= '0; n_merge_fail <= '0; n_moves <= '0;
          state <= S_BASE;
        end
        S_BASE: begin
          if (hold) begin
            init_block(cand, cand_vld);
            hold  <= 1'b0;
            state <= S_CAND;
          end else if (sb_empty) state <= S_DONE;
          else begin
            init_block(dense_data, dense_vld);
            state <= S_CAND;
          end
        end
        S_CAND: begin
          if (sb_empty) state <= S_WRITE;
          else begin
            for (int c = 0; c < NB; c++) begin
              logic [NL-1:0] m;
              m = sparse_vld[c] ? sparse_data[c].mask : '0;
              cand[c] <= sparse_data[c]; cand_vld[c] <= sparse_vld[c];
              t_occ[c] <= occ[c] | m;
              pend[c]  <= occ[c] & m;
              for (int r = 0; r < NL; r++)
                t_cmap[r][c] <= (m[r] && !occ[c][r]) ? '{wsel: nsrc + 2'd1, isel: 1'b0} : cmap[r][c];
            end
            for (int r = 0; r < NL; r++) t_cv[r] <= cv[r];
            state <= S_RESOLVE;
          end
        end
        S_RESOLVE: begin
          if (!any_conf) begin
            // merge succeeded
            for (int c = 0; c < NB; c++) begin
              occ[c] <= t_occ[c];
              for (int r = 0; r < NL; r++) cmap[r][c] <= t_cmap[r][c];
              orig[nsrc][c] <= '{valid: cand_vld[c], idx: cand[c].idx};
            end
            for (int r = 0; r < NL; r++) cv[r] <= t_cv[r];
            nsrc <= nsrc + 2'd1;
            n_merge_ok <= n_merge_ok + 1'b1;
            state <= (nsrc == 2'(NWBUF - 1)) ? S_WRITE : S_CAND;
          end else if (infeasible) begin
            n_merge_fail <= n_merge_fail + 1'b1;
            hold  <= 1'b1;
            state <= S_WRITE;
          end else begin
            // move all conflicts of lane r_src into lane r_dst where possible
            int moved;
            moved = 0;
            t_cv[r_dst] <= '{valid: 1'b1, src: 4'(r_src)};
            for (int c = 0; c < NB; c++)
              if (pend[c][r_src] && !t_occ[c][r_dst]) begin
                pend[c][r_src]  <= 1'b0;
                t_occ[c][r_dst] <= 1'b1;
                t_cmap[r_dst][c] <= '{wsel: nsrc + 2'd1, isel: 1'b1};
                moved++;
              end
            n_moves <= n_moves + 16'(moved);
          end
        end
        S_WRITE: begin
          wptr     <= wptr + 1'b1;
          n_blocks <= n_blocks + 1'b1;
          state    <= S_BASE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
