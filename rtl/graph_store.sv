// graph_store: the compressed graph, kept as valid slices only.
//
// Every row R_i and every column C_j of the adjacency matrix is cut into
// 64-bit slices; only valid slices (at least one 1) are kept. For each
// direction (rows, columns) the store holds a list of entries, each the slice
// index k and the 64 uncompressed data bits, ordered by line and, within a
// line, by k. A pointer table gives, for line v, the first entry of the line
// (ptr[v]); the line ends at ptr[v+1]. The slice index and pointer tables
// form the valid slice index, the data bits the valid slice data that is
// written into the computational memory. Because the slice data is stored
// as it is, no decompression is needed before it is mapped to the array.
// The pointer-table layout and the sizes are this design's choices.
//
// Write ports (one pointer and one entry per cycle, from the data slicer):
// pw_en/pw_dir/pw_line/pw_val and ew_en/ew_dir/ew_addr/ew_k/ew_data.
// Read ports (combinational, as a register-file style buffer): one row
// pointer pair, one column pointer pair, one row entry and one column entry.
module graph_store #(
  parameter int unsigned VB = 16,   // vertex index bits (up to 2^VB - 1 vertices)
  parameter int unsigned EB = 17,   // entry address bits per direction
  parameter int unsigned KB = VB - tc_pkg::SLICE_LOG2,
  parameter int unsigned W  = tc_pkg::SLICE_W
) (
  input  logic              clk,
  // pointer write
  input  logic              pw_en,
  input  tc_pkg::line_dir_e pw_dir,
  input  logic [VB-1:0]     pw_line,
  input  logic [EB:0]       pw_val,
  // entry write
  input  logic              ew_en,
  input  tc_pkg::line_dir_e ew_dir,
  input  logic [EB-1:0]     ew_addr,
  input  logic [KB-1:0]     ew_k,
  input  logic [W-1:0]      ew_data,
  // row pointer read: entries of row rp_line are [rp_start, rp_end)
  input  logic [VB-1:0]     rp_line,
  output logic [EB:0]       rp_start,
  output logic [EB:0]       rp_end,
  // column pointer read
  input  logic [VB-1:0]     cp_line,
  output logic [EB:0]       cp_start,
  output logic [EB:0]       cp_end,
  // row entry read
  input  logic [EB-1:0]     re_addr,
  output logic [KB-1:0]     re_k,
  output logic [W-1:0]      re_data,
  // column entry read
  input  logic [EB-1:0]     ce_addr,
  output logic [KB-1:0]     ce_k,
  output logic [W-1:0]      ce_data
);
  import tc_pkg::*;

  localparam int unsigned NLINES   = 1 << VB;
  localparam int unsigned NENTRIES = 1 << EB;

  logic [EB:0]   row_ptr [NLINES];
  logic [EB:0]   col_ptr [NLINES];
  logic [KB-1:0] row_k   [NENTRIES];
  logic [KB-1:0] col_k   [NENTRIES];
  logic [W-1:0]  row_d   [NENTRIES];
  logic [W-1:0]  col_d   [NENTRIES];

  always_ff @(posedge clk) begin
    if (pw_en) begin
      if (pw_dir == DIR_ROW) row_ptr[pw_line] <= pw_val;
      else                   col_ptr[pw_line] <= pw_val;
    end
    if (ew_en) begin
      if (ew_dir == DIR_ROW) begin
        row_k[ew_addr] <= ew_k;
        row_d[ew_addr] <= ew_data;
      end else begin
        col_k[ew_addr] <= ew_k;
        col_d[ew_addr] <= ew_data;
      end
    end
  end

  // Line v + 1 wraps to 0 only for v = 2^VB - 1, which is never a vertex.
  always_comb begin
    rp_start = row_ptr[rp_line];
    rp_end   = row_ptr[VB'(rp_line + 1'b1)];
    cp_start = col_ptr[cp_line];
    cp_end   = col_ptr[VB'(cp_line + 1'b1)];
    re_k     = row_k[re_addr];
    re_data  = row_d[re_addr];
    ce_k     = col_k[ce_addr];
    ce_data  = col_d[ce_addr];
  end

endmodule
