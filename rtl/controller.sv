// controller: runs the triangle count over the compressed graph.
//
// The count rests on TC(G) = sum over A[i][j] = 1 of
// BitCount(AND(R_i, C_j)), with A holding each undirected edge once, above
// the diagonal (i < j), so each triangle is found exactly once. The
// controller walks the non-zero elements row by row, in stored order:
//   S_ROW/S_RENT/S_BIT  take the valid slices of row i one by one and each 1
//                       in them, giving j = 64*k + bit;
//   S_COL/S_NU          fetch the valid slice list of column j and find the
//                       column's next visit, the first row i' > i with
//                       A[i'][j] = 1 (none: "never"), as the key
//                       {never, i', j} used for replacement;
//   S_MERGE             merge the two sorted slice lists; only slice indexes
//                       k valid in both R_i and C_j form a pair, all others
//                       are skipped;
//   S_LOOKUP            look C_jS_k up in the storage status; on a miss pick
//                       a slot (free way, else Priority victim) and WRITE the
//                       column slice there; refresh the slot's key;
//   S_ROWLINE           WRITE R_iS_k into the row-slice line of that mat
//                       unless it is there already;
//   S_AND/S_WAIT        raise both rows for an in-memory AND and add the bit
//                       count that comes back to the triangle total.
// The loop order and the AND/BitCount step follow the design's algorithm.
// Using the next visit of the column (not of each slice) as the replacement
// key, computed from the column's own slice list, is this design's reading
// of "the longest time between the next visit"; a resident slice keeps the
// key it was given at its last access.
//
// Interface: start (pulse) with num_v; start also clears the status table
// (st_clear) so that nothing of an earlier graph counts as resident; busy while running; done stays high
// from the end of a run until the next start; tc_count and stats are valid
// when done is high. The graph store and status table are read through
// combinational ports. Memory requests follow stt_mram_array timing: a
// READ/AND result is awaited on mrsp_valid. Throughput: one column slice
// scanned or one merge step per cycle; a computed pair takes five cycles
// plus the memory latency.
module controller #(
  parameter int unsigned VB    = 16,
  parameter int unsigned EB    = 17,
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned NMATS = 512,
  parameter int unsigned WAYS  = tc_pkg::WAYS,
  parameter int unsigned KB    = VB - tc_pkg::SLICE_LOG2,
  parameter int unsigned NSETS = NMATS * ROWS / WAYS,
  parameter int unsigned SETB  = (NSETS > 1) ? $clog2(NSETS) : 1,
  parameter int unsigned WAYB  = (WAYS > 1) ? $clog2(WAYS) : 1,
  parameter int unsigned GB    = (NMATS > 1) ? $clog2(NMATS) : 1,
  parameter int unsigned RB    = $clog2(ROWS + 1),
  parameter int unsigned TAGW  = VB + KB,
  parameter int unsigned KEYW  = 2 * VB + 1,
  parameter int unsigned W     = tc_pkg::SLICE_W,
  parameter int unsigned CW    = $clog2(W + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [VB-1:0]             num_v,
  output logic                      busy,
  output logic                      done,
  output logic [63:0]               tc_count,
  output tc_pkg::tc_stats_t         stats,
  // graph store
  output logic [VB-1:0]             rp_line,
  input  logic [EB:0]               rp_start,
  input  logic [EB:0]               rp_end,
  output logic [VB-1:0]             cp_line,
  input  logic [EB:0]               cp_start,
  input  logic [EB:0]               cp_end,
  output logic [EB-1:0]             re_addr,
  input  logic [KB-1:0]             re_k,
  input  logic [W-1:0]              re_data,
  output logic [EB-1:0]             ce_addr,
  input  logic [KB-1:0]             ce_k,
  input  logic [W-1:0]              ce_data,
  // status table
  output logic                      st_clear,
  input  logic                      st_init_busy,
  output logic [SETB-1:0]           st_rd_set,
  input  logic [WAYS-1:0]           st_rd_valid,
  input  logic [WAYS-1:0][TAGW-1:0] st_rd_tag,
  input  logic [WAYS-1:0][KEYW-1:0] st_rd_key,
  output logic                      st_wr_en,
  output logic [SETB-1:0]           st_wr_set,
  output logic [WAYB-1:0]           st_wr_way,
  output logic [TAGW-1:0]           st_wr_tag,
  output logic [KEYW-1:0]           st_wr_key,
  output logic [GB-1:0]             st_rl_mat,
  input  logic                      st_rl_valid,
  input  logic [TAGW-1:0]           st_rl_tag,
  output logic                      st_rl_wr_en,
  output logic [GB-1:0]             st_rl_wr_mat,
  output logic [TAGW-1:0]           st_rl_wr_tag,
  // computational memory
  output logic                      mreq_valid,
  output tc_pkg::mem_op_e           mreq_op,
  output logic [GB-1:0]             mreq_mat,
  output logic [RB-1:0]             mreq_row_a,
  output logic [RB-1:0]             mreq_row_b,
  output logic [W-1:0]              mreq_wdata,
  input  logic                      mrsp_valid,
  input  logic [CW-1:0]             mrsp_count
);
  import tc_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_ROW, S_RENT, S_BIT, S_COL, S_NU, S_MINIT, S_MERGE,
    S_LOOKUP, S_ROWLINE, S_AND, S_WAIT, S_DONE
  } state_e;

  state_e state;

  logic [VB-1:0]   v_i, v_j;
  logic [EB:0]     r_start, r_end, r_ptr;     // row i entry range and cursor
  logic [EB:0]     c_start, c_end, c_ptr;     // column j entry range and cursor
  logic [EB:0]     m_rp, m_cp;                // merge cursors
  logic [KB-1:0]   k_row;                     // slice index of current row entry
  logic [W-1:0]    mask;                      // ones of that entry still to visit
  logic [KEYW-1:0] next_key;
  logic [KB-1:0]   p_k;
  logic [W-1:0]    p_row, p_col;
  logic [GB-1:0]   slot_mat;
  logic [RB-1:0]   slot_row;

  localparam logic [KEYW-1:0] KEY_NEVER = {1'b1, {(KEYW-1){1'b0}}};

  // Lowest set bit of a slice word.
  function automatic logic [SLICE_LOG2-1:0] low_bit(input logic [W-1:0] v);
    low_bit = '0;
    for (int b = W - 1; b >= 0; b--) if (v[b]) low_bit = SLICE_LOG2'(b);
  endfunction

  // ---------------------------------------------------------------- reads
  always_comb begin
    rp_line = v_i;
    cp_line = v_j;
    re_addr = (state == S_MERGE) ? m_rp[EB-1:0] : r_ptr[EB-1:0];
    ce_addr = (state == S_MERGE) ? m_cp[EB-1:0] : c_ptr[EB-1:0];
  end

  // Column slices above row i in the current column entry (next-visit scan).
  logic [KB-1:0]         i_k;
  logic [SLICE_LOG2-1:0] i_b;
  logic [W-1:0]          nu_bits;
  always_comb begin
    i_k = v_i[VB-1:SLICE_LOG2];
    i_b = v_i[SLICE_LOG2-1:0];
    if (ce_k > i_k)       nu_bits = ce_data;
    else if (ce_k == i_k) nu_bits = ce_data & (({W{1'b1}} << i_b) << 1);
    else                  nu_bits = '0;
  end

  // ------------------------------------------------------ lookup / replace
  logic [TAGW-1:0] p_tag;
  logic            rr_hit, rr_evict;
  logic [WAYB-1:0] rr_hit_way, rr_victim_way, way_sel;
  logic [SETB+WAYB-1:0] slot;

  always_comb begin
    p_tag     = {v_j, p_k};
    st_rd_set = SETB'({p_k, v_j});
    way_sel   = rr_hit ? rr_hit_way : rr_victim_way;
    slot      = {st_rd_set, way_sel};
  end

  reuse_replace #(.WAYS(WAYS), .TAGW(TAGW), .KEYW(KEYW), .WAYB(WAYB)) u_rr (
    .set_valid  (st_rd_valid),
    .set_tag    (st_rd_tag),
    .set_key    (st_rd_key),
    .req_tag    (p_tag),
    .hit        (rr_hit),
    .hit_way    (rr_hit_way),
    .victim_way (rr_victim_way),
    .evict      (rr_evict)
  );

  logic [GB-1:0] slot_mat_c;
  logic [RB-1:0] slot_row_c;
  always_comb begin
    slot_mat_c = GB'(slot / ROWS);
    slot_row_c = RB'(slot % ROWS);
  end

  logic row_present;
  always_comb begin
    st_rl_mat   = slot_mat;
    row_present = st_rl_valid && (st_rl_tag == {v_i, p_k});
  end

  // --------------------------------------------------- requests / updates
  always_comb begin
    st_clear     = (state == S_IDLE) && start;
    st_wr_en     = (state == S_LOOKUP);
    st_wr_set    = st_rd_set;
    st_wr_way    = way_sel;
    st_wr_tag    = p_tag;
    st_wr_key    = next_key;
    st_rl_wr_en  = (state == S_ROWLINE) && !row_present;
    st_rl_wr_mat = slot_mat;
    st_rl_wr_tag = {v_i, p_k};

    mreq_valid = 1'b0;
    mreq_op    = MOP_NOP;
    mreq_mat   = slot_mat;
    mreq_row_a = slot_row;
    mreq_row_b = RB'(ROWS);
    mreq_wdata = p_col;
    unique case (state)
      S_LOOKUP: begin
        mreq_valid = !rr_hit;
        mreq_op    = MOP_WRITE;
        mreq_mat   = slot_mat_c;
        mreq_row_a = slot_row_c;
      end
      S_ROWLINE: begin
        mreq_valid = !row_present;
        mreq_op    = MOP_WRITE;
        mreq_row_a = RB'(ROWS);
        mreq_wdata = p_row;
      end
      S_AND: begin
        mreq_valid = 1'b1;
        mreq_op    = MOP_AND;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      tc_count <= '0;
      stats    <= '0;
      v_i      <= '0;
      v_j      <= '0;
      r_start  <= '0;
      r_end    <= '0;
      r_ptr    <= '0;
      c_start  <= '0;
      c_end    <= '0;
      c_ptr    <= '0;
      m_rp     <= '0;
      m_cp     <= '0;
      k_row    <= '0;
      mask     <= '0;
      next_key <= KEY_NEVER;
      p_k      <= '0;
      p_row    <= '0;
      p_col    <= '0;
      slot_mat <= '0;
      slot_row <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          done     <= 1'b0;
          tc_count <= '0;
          stats    <= '0;
          v_i      <= '0;
          state    <= S_INIT;
        end
        S_INIT: if (!st_init_busy) state <= S_ROW;
        S_ROW: begin
          if (v_i == num_v) state <= S_DONE;
          else begin
            r_start <= rp_start;
            r_end   <= rp_end;
            r_ptr   <= rp_start;
            state   <= S_RENT;
          end
        end
        S_RENT: begin
          if (r_ptr == r_end) begin
            v_i   <= v_i + 1'b1;
            state <= S_ROW;
          end else begin
            k_row <= re_k;
            mask  <= re_data;
            r_ptr <= r_ptr + 1'b1;
            state <= S_BIT;
          end
        end
        S_BIT: begin
          if (mask == '0) state <= S_RENT;
          else begin
            v_j       <= {k_row, low_bit(mask)};
            mask      <= mask & (mask - 1'b1);
            stats.nnz <= stats.nnz + 1;
            state     <= S_COL;
          end
        end
        S_COL: begin
          c_start  <= cp_start;
          c_end    <= cp_end;
          c_ptr    <= cp_start;
          next_key <= KEY_NEVER;
          state    <= S_NU;
        end
        S_NU: begin
          if (c_ptr == c_end) state <= S_MINIT;
          else if (nu_bits != '0) begin
            next_key <= {1'b0, ce_k, low_bit(nu_bits), v_j};
            state    <= S_MINIT;
          end else c_ptr <= c_ptr + 1'b1;
        end
        S_MINIT: begin
          m_rp  <= r_start;
          m_cp  <= c_start;
          state <= S_MERGE;
        end
        S_MERGE: begin
          if (m_rp == r_end || m_cp == c_end) state <= S_BIT;
          else if (re_k < ce_k) begin
            m_rp          <= m_rp + 1'b1;
            stats.skipped <= stats.skipped + 1;
          end else if (ce_k < re_k) begin
            m_cp          <= m_cp + 1'b1;
            stats.skipped <= stats.skipped + 1;
          end else begin
            p_k   <= re_k;
            p_row <= re_data;
            p_col <= ce_data;
            m_rp  <= m_rp + 1'b1;
            m_cp  <= m_cp + 1'b1;
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          slot_mat <= slot_mat_c;
          slot_row <= slot_row_c;
          if (rr_hit) stats.col_hit <= stats.col_hit + 1;
          else begin
            stats.col_miss <= stats.col_miss + 1;
            if (rr_evict) stats.evict <= stats.evict + 1;
          end
          state <= S_ROWLINE;
        end
        S_ROWLINE: begin
          if (row_present) stats.row_reuse <= stats.row_reuse + 1;
          else             stats.row_write <= stats.row_write + 1;
          state <= S_AND;
        end
        S_AND: state <= S_WAIT;
        S_WAIT: if (mrsp_valid) begin
          tc_count    <= tc_count + 64'(mrsp_count);
          stats.pairs <= stats.pairs + 1;
          state       <= S_MERGE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (state != S_IDLE) && (state != S_DONE);

  // The store's pointer ranges must be ordered.
  always_ff @(posedge clk) begin
    if (state == S_RENT) assert (r_start <= r_end) else $error("controller: bad row range");
    if (state == S_NU)   assert (c_start <= c_end) else $error("controller: bad column range");
  end

endmodule
