// tcim_top: triangle-counting in-memory accelerator.
//
// Data path, in the order a graph flows through it:
//   data_slicer    cuts the streamed rows and columns of the adjacency matrix
//                  into 64-bit slices and keeps the valid ones;
//   graph_store    holds them as the compressed graph (valid slice index and
//                  valid slice data, per row and per column);
//   controller     walks the non-zero elements by rows, pairs valid slices,
//                  and drives the memory; it contains reuse_replace, the
//                  data reuse and Priority replacement logic;
//   status_table   records which slices sit where in the memory;
//   stt_mram_array the computational STT-MRAM (banks, sub-arrays, mats with
//                  READ/AND sense amplifiers and bit counters) that performs
//                  AND and BitCount on each valid slice pair.
// The adjacency matrix is expected to hold each undirected edge once, above
// the diagonal (A[i][j] = 1 with i < j); tc_count is then the number of
// triangles.
//
// Use: after reset, stream every row (s_dir = DIR_ROW) and every column
// (DIR_COL) of A, as described in data_slicer; then pulse start with num_v
// (number of vertices). busy is high during the run; done rises when
// tc_count and stats are final. The status table clears itself after reset
// (one set per cycle); a start during that time waits for it.
//
// The memory also returns the sensed 64-bit word of each READ/AND
// (mrsp_data). The counting loop needs only its bit count, so that word ends
// here unused; lint reports it as an unused signal. It is kept because it is
// part of the array's interface.
module tcim_top #(
  parameter int unsigned VB        = 16,    // vertex index bits
  parameter int unsigned EB        = 17,    // graph store entry address bits per direction
  parameter int unsigned ROWS      = 4096,  // data rows per mat
  parameter int unsigned MATS      = 4,     // mats per sub-array
  parameter int unsigned SUBARRAYS = 16,    // sub-arrays per bank
  parameter int unsigned BANKS     = 8,     // banks
  parameter int unsigned KB        = VB - tc_pkg::SLICE_LOG2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // graph data stream (uncompressed slices)
  input  logic                    s_clr,
  input  logic                    s_valid,
  input  tc_pkg::line_dir_e       s_dir,
  input  logic [VB-1:0]           s_line,
  input  logic [KB-1:0]           s_k,
  input  logic [tc_pkg::SLICE_W-1:0] s_data,
  input  logic                    s_last,
  output logic                    slice_overflow,
  output logic [31:0]             slice_n_valid,
  output logic [31:0]             slice_n_total,
  // run control and result
  input  logic                    start,
  input  logic [VB-1:0]           num_v,
  output logic                    busy,
  output logic                    done,
  output logic [63:0]             tc_count,
  output tc_pkg::tc_stats_t       stats
);
  import tc_pkg::*;

  localparam int unsigned W     = SLICE_W;
  localparam int unsigned NMATS = BANKS * SUBARRAYS * MATS;
  localparam int unsigned NSETS = NMATS * ROWS / WAYS;
  localparam int unsigned SETB  = (NSETS > 1) ? $clog2(NSETS) : 1;
  localparam int unsigned WAYB  = $clog2(WAYS);
  localparam int unsigned GB    = (NMATS > 1) ? $clog2(NMATS) : 1;
  localparam int unsigned RB    = $clog2(ROWS + 1);
  localparam int unsigned TAGW  = VB + KB;
  localparam int unsigned KEYW  = 2 * VB + 1;
  localparam int unsigned CW    = $clog2(W + 1);

  // slicer -> store
  logic          pw_en, ew_en;
  line_dir_e     pw_dir, ew_dir;
  logic [VB-1:0] pw_line;
  logic [EB:0]   pw_val;
  logic [EB-1:0] ew_addr;
  logic [KB-1:0] ew_k;
  logic [W-1:0]  ew_data;

  data_slicer #(.VB(VB), .EB(EB), .KB(KB), .W(W)) u_slicer (
    .clk, .rst_n,
    .s_clr, .s_valid, .s_dir, .s_line, .s_k, .s_data, .s_last,
    .pw_en, .pw_dir, .pw_line, .pw_val,
    .ew_en, .ew_dir, .ew_addr, .ew_k, .ew_data,
    .overflow (slice_overflow),
    .n_valid  (slice_n_valid),
    .n_total  (slice_n_total)
  );

  // store <-> controller
  logic [VB-1:0] rp_line, cp_line;
  logic [EB:0]   rp_start, rp_end, cp_start, cp_end;
  logic [EB-1:0] re_addr, ce_addr;
  logic [KB-1:0] re_k, ce_k;
  logic [W-1:0]  re_data, ce_data;

  graph_store #(.VB(VB), .EB(EB), .KB(KB), .W(W)) u_store (
    .clk,
    .pw_en, .pw_dir, .pw_line, .pw_val,
    .ew_en, .ew_dir, .ew_addr, .ew_k, .ew_data,
    .rp_line, .rp_start, .rp_end,
    .cp_line, .cp_start, .cp_end,
    .re_addr, .re_k, .re_data,
    .ce_addr, .ce_k, .ce_data
  );

  // status table <-> controller
  logic                      st_init_busy, st_clear;
  logic [SETB-1:0]           st_rd_set, st_wr_set;
  logic [WAYS-1:0]           st_rd_valid;
  logic [WAYS-1:0][TAGW-1:0] st_rd_tag;
  logic [WAYS-1:0][KEYW-1:0] st_rd_key;
  logic                      st_wr_en, st_rl_valid, st_rl_wr_en;
  logic [WAYB-1:0]           st_wr_way;
  logic [TAGW-1:0]           st_wr_tag, st_rl_tag, st_rl_wr_tag;
  logic [KEYW-1:0]           st_wr_key;
  logic [GB-1:0]             st_rl_mat, st_rl_wr_mat;

  status_table #(.NSETS(NSETS), .WAYS(WAYS), .TAGW(TAGW), .KEYW(KEYW),
                 .NMATS(NMATS), .RLTW(TAGW), .SETB(SETB), .WAYB(WAYB), .GB(GB)) u_status (
    .clk, .rst_n,
    .clear     (st_clear),
    .init_busy (st_init_busy),
    .rd_set    (st_rd_set),
    .rd_valid  (st_rd_valid),
    .rd_tag    (st_rd_tag),
    .rd_key    (st_rd_key),
    .wr_en     (st_wr_en),
    .wr_set    (st_wr_set),
    .wr_way    (st_wr_way),
    .wr_tag    (st_wr_tag),
    .wr_key    (st_wr_key),
    .rl_mat    (st_rl_mat),
    .rl_valid  (st_rl_valid),
    .rl_tag    (st_rl_tag),
    .rl_wr_en  (st_rl_wr_en),
    .rl_wr_mat (st_rl_wr_mat),
    .rl_wr_tag (st_rl_wr_tag)
  );

  // controller <-> memory
  logic          mreq_valid, mrsp_valid;
  mem_op_e       mreq_op;
  logic [GB-1:0] mreq_mat;
  logic [RB-1:0] mreq_row_a, mreq_row_b;
  logic [W-1:0]  mreq_wdata, mrsp_data;
  logic [CW-1:0] mrsp_count;

  controller #(.VB(VB), .EB(EB), .ROWS(ROWS), .NMATS(NMATS), .WAYS(WAYS), .KB(KB),
               .NSETS(NSETS), .SETB(SETB), .WAYB(WAYB), .GB(GB), .RB(RB),
               .TAGW(TAGW), .KEYW(KEYW), .W(W), .CW(CW)) u_ctrl (
    .clk, .rst_n,
    .start, .num_v, .busy, .done, .tc_count, .stats,
    .rp_line, .rp_start, .rp_end,
    .cp_line, .cp_start, .cp_end,
    .re_addr, .re_k, .re_data,
    .ce_addr, .ce_k, .ce_data,
    .st_clear, .st_init_busy, .st_rd_set, .st_rd_valid, .st_rd_tag, .st_rd_key,
    .st_wr_en, .st_wr_set, .st_wr_way, .st_wr_tag, .st_wr_key,
    .st_rl_mat, .st_rl_valid, .st_rl_tag, .st_rl_wr_en, .st_rl_wr_mat, .st_rl_wr_tag,
    .mreq_valid, .mreq_op, .mreq_mat, .mreq_row_a, .mreq_row_b, .mreq_wdata,
    .mrsp_valid, .mrsp_count
  );

  stt_mram_array #(.W(W), .ROWS(ROWS), .MATS(MATS), .SUBARRAYS(SUBARRAYS), .BANKS(BANKS),
                   .NMATS(NMATS), .RB(RB), .GB(GB), .CW(CW)) u_mram (
    .clk, .rst_n,
    .req_valid (mreq_valid),
    .req_op    (mreq_op),
    .req_mat   (mreq_mat),
    .row_a     (mreq_row_a),
    .row_b     (mreq_row_b),
    .wdata     (mreq_wdata),
    .rsp_valid (mrsp_valid),
    .rsp_data  (mrsp_data),
    .rsp_count (mrsp_count)
  );

endmodule
