// data_slicer: turns the uncompressed adjacency matrix into valid slices.
//
// The host streams lines of the adjacency matrix (rows for the row
// direction, columns for the column direction), each as its ceil(|V|/64)
// 64-bit slices in order k = 0, 1, ..., with s_last on the final slice of a
// line. A slice is valid when at least one of its bits is 1. A valid slice is
// written to the graph store as an entry (k, data) at the next free entry
// address of its direction; an invalid slice is dropped. At the end of line
// v the entry count is written as pointer ptr[v+1]; s_clr starts a direction
// afresh (count 0, ptr[0] = 0). Lines must therefore be streamed in order
// 0, 1, 2, ... with none skipped. The validity test follows the slicing rule
// of the design; the stream format is this design's own.
//
// Timing: one slice per cycle (s_valid), no back-pressure; the writes to the
// store happen at the same edge. overflow goes high (sticky until s_clr) if
// a valid slice arrives when the store of its direction is full; that slice
// is dropped. n_valid / n_total count the valid and all slices seen.
module data_slicer #(
  parameter int unsigned VB = 16,
  parameter int unsigned EB = 17,
  parameter int unsigned KB = VB - tc_pkg::SLICE_LOG2,
  parameter int unsigned W  = tc_pkg::SLICE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // slice stream
  input  logic              s_clr,
  input  logic              s_valid,
  input  tc_pkg::line_dir_e s_dir,
  input  logic [VB-1:0]     s_line,
  input  logic [KB-1:0]     s_k,
  input  logic [W-1:0]      s_data,
  input  logic              s_last,
  // graph store writes
  output logic              pw_en,
  output tc_pkg::line_dir_e pw_dir,
  output logic [VB-1:0]     pw_line,
  output logic [EB:0]       pw_val,
  output logic              ew_en,
  output tc_pkg::line_dir_e ew_dir,
  output logic [EB-1:0]     ew_addr,
  output logic [KB-1:0]     ew_k,
  output logic [W-1:0]      ew_data,
  // status
  output logic              overflow,
  output logic [31:0]       n_valid,
  output logic [31:0]       n_total
);
  import tc_pkg::*;

  localparam logic [EB:0] CAP = (EB+1)'(1) << EB;

  logic [EB:0] cnt [2];      // entries written so far, per direction
  logic        slice_valid;
  logic        room;
  logic [EB:0] cnt_cur;

  always_comb begin
    cnt_cur     = cnt[s_dir];
    slice_valid = |s_data;
    room        = cnt_cur < CAP;
  end

  always_comb begin
    ew_en   = s_valid && !s_clr && slice_valid && room;
    ew_dir  = s_dir;
    ew_addr = cnt_cur[EB-1:0];
    ew_k    = s_k;
    ew_data = s_data;
    pw_dir  = s_dir;
    if (s_clr) begin
      pw_en   = 1'b1;
      pw_line = '0;
      pw_val  = '0;
    end else begin
      pw_en   = s_valid && s_last;
      pw_line = VB'(s_line + 1'b1);
      pw_val  = cnt_cur + (EB+1)'(ew_en);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt[0]   <= '0;
      cnt[1]   <= '0;
      overflow <= 1'b0;
      n_valid  <= '0;
      n_total  <= '0;
    end else if (s_clr) begin
      cnt[s_dir] <= '0;
      overflow   <= 1'b0;
      n_valid    <= '0;
      n_total    <= '0;
    end else if (s_valid) begin
      n_total <= n_total + 1;
      if (slice_valid) n_valid <= n_valid + 1;
      if (ew_en) cnt[s_dir] <= cnt_cur + 1'b1;
      if (slice_valid && !room) overflow <= 1'b1;
    end
  end

endmodule
