// status_table: the storage status of the computational STT-MRAM.
//
// Column slices live in the memory's data rows, which are managed like an
// 8-way set-associative cache: slot s = set * WAYS + way is data row
// s % ROWS of mat s / ROWS. For every slot the table records whether it holds
// a slice (valid), which one (tag: the column j and slice index k) and the
// key of that column's next visit, which the Priority replacement policy
// compares. For every mat it also records which row slice (row i, slice k)
// its row-slice line currently holds, so that a row slice already in place
// is not written again. The set-associative layout and the key encoding are
// this design's choices; what is recorded (which slices are loaded) follows
// the design's storage-status buffer.
//
// After reset, and again after a clear pulse (given at the start of every
// run, so that slices of an earlier graph are never reused), the table
// clears the valid bits of all sets, one set per cycle, with init_busy high;
// it must not be used until init_busy falls. The row-slice line records are
// cleared at once.
// Reads are combinational; writes take effect at the clock edge.
module status_table #(
  parameter int unsigned NSETS = 262144,
  parameter int unsigned WAYS  = tc_pkg::WAYS,
  parameter int unsigned TAGW  = 26,
  parameter int unsigned KEYW  = 33,
  parameter int unsigned NMATS = 512,
  parameter int unsigned RLTW  = 26,
  parameter int unsigned SETB  = (NSETS > 1) ? $clog2(NSETS) : 1,
  parameter int unsigned WAYB  = (WAYS > 1) ? $clog2(WAYS) : 1,
  parameter int unsigned GB    = (NMATS > 1) ? $clog2(NMATS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  output logic                      init_busy,
  // set lookup
  input  logic [SETB-1:0]           rd_set,
  output logic [WAYS-1:0]           rd_valid,
  output logic [WAYS-1:0][TAGW-1:0] rd_tag,
  output logic [WAYS-1:0][KEYW-1:0] rd_key,
  // slot update (marks the way valid)
  input  logic                      wr_en,
  input  logic [SETB-1:0]           wr_set,
  input  logic [WAYB-1:0]           wr_way,
  input  logic [TAGW-1:0]           wr_tag,
  input  logic [KEYW-1:0]           wr_key,
  // row-slice line of each mat
  input  logic [GB-1:0]             rl_mat,
  output logic                      rl_valid,
  output logic [RLTW-1:0]           rl_tag,
  input  logic                      rl_wr_en,
  input  logic [GB-1:0]             rl_wr_mat,
  input  logic [RLTW-1:0]           rl_wr_tag
);

  logic [WAYS-1:0]           vld_mem [NSETS];
  logic [WAYS-1:0][TAGW-1:0] tag_mem [NSETS];
  logic [WAYS-1:0][KEYW-1:0] key_mem [NSETS];

  logic [NMATS-1:0] rl_vld;
  logic [RLTW-1:0]  rl_tag_mem [NMATS];

  logic [SETB-1:0] clr_set;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      clr_set   <= '0;
    end else if (clear) begin
      init_busy <= 1'b1;
      clr_set   <= '0;
    end else if (init_busy) begin
      clr_set <= clr_set + 1'b1;
      if (int'(clr_set) == NSETS - 1) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      vld_mem[clr_set] <= '0;
    end else if (wr_en) begin
      vld_mem[wr_set][wr_way] <= 1'b1;
      tag_mem[wr_set][wr_way] <= wr_tag;
      key_mem[wr_set][wr_way] <= wr_key;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rl_vld <= '0;
    else if (clear) rl_vld <= '0;
    else if (rl_wr_en) rl_vld[rl_wr_mat] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rl_wr_en) rl_tag_mem[rl_wr_mat] <= rl_wr_tag;
  end

  always_comb begin
    rd_valid = vld_mem[rd_set];
    rd_tag   = tag_mem[rd_set];
    rd_key   = key_mem[rd_set];
    rl_valid = rl_vld[rl_mat];
    rl_tag   = rl_tag_mem[rl_mat];
  end

endmodule
