// stt_mram_array: the computational STT-MRAM, BANKS banks of SUBARRAYS
// sub-arrays of MATS mats of ROWS 64-bit rows (plus one row-slice line per
// mat). With the defaults (8 x 16 x 4 mats of 4096 rows of 8 bytes) it holds
// 16 MB of slice data, the capacity used for the performance results.
//
// The request addresses a mat by a flat index, req_mat = {bank, sub-array,
// mat}, and one or two rows in it. WRITE stores wdata in row_a; READ returns
// row_a; AND returns the bitwise AND of rows row_a and row_b, computed by the
// sense amplifiers with both word lines raised, together with its bit count.
// Banks decode their own field; only the addressed bank answers and the
// responses are combined with an OR. Latency: READ/AND results appear two
// cycles after the request cycle (mat local buffer, then the bank's global
// data buffer). One request per cycle, no back-pressure. The split of the
// 16 MB into banks, sub-arrays and mats is this design's choice.
module stt_mram_array #(
  parameter int unsigned W         = 64,
  parameter int unsigned ROWS      = 4096,
  parameter int unsigned MATS      = 4,
  parameter int unsigned SUBARRAYS = 16,
  parameter int unsigned BANKS     = 8,
  parameter int unsigned NMATS     = BANKS * SUBARRAYS * MATS,
  parameter int unsigned RB        = $clog2(ROWS + 1),
  parameter int unsigned GB        = (NMATS > 1) ? $clog2(NMATS) : 1,
  parameter int unsigned CW        = $clog2(W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  tc_pkg::mem_op_e req_op,
  input  logic [GB-1:0]   req_mat,
  input  logic [RB-1:0]   row_a,
  input  logic [RB-1:0]   row_b,
  input  logic [W-1:0]    wdata,
  output logic            rsp_valid,
  output logic [W-1:0]    rsp_data,
  output logic [CW-1:0]   rsp_count
);

  localparam int unsigned MB = (MATS > 1) ? $clog2(MATS) : 1;
  localparam int unsigned SB = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1;

  // Field split of the flat mat index.
  logic [MB-1:0] f_mat;
  logic [SB-1:0] f_sub;
  int unsigned   f_bank;
  always_comb begin
    f_mat  = MB'(int'(req_mat) % MATS);
    f_sub  = SB'((int'(req_mat) / MATS) % SUBARRAYS);
    f_bank = int'(req_mat) / (MATS * SUBARRAYS);
  end

  logic [BANKS-1:0] b_en, b_valid;
  logic [W-1:0]     b_data  [BANKS];
  logic [CW-1:0]    b_count [BANKS];

  always_comb begin
    for (int b = 0; b < BANKS; b++) b_en[b] = req_valid && (f_bank == b);
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    bank #(.W(W), .ROWS(ROWS), .MATS(MATS), .SUBARRAYS(SUBARRAYS),
           .RB(RB), .MB(MB), .SB(SB), .CW(CW)) u_bank (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (b_en[b]),
      .req_op    (req_op),
      .req_sub   (f_sub),
      .req_mat   (f_mat),
      .row_a     (row_a),
      .row_b     (row_b),
      .wdata     (wdata),
      .rsp_valid (b_valid[b]),
      .rsp_data  (b_data[b]),
      .rsp_count (b_count[b])
    );
  end

  always_comb begin
    rsp_valid = |b_valid;
    rsp_data  = '0;
    rsp_count = '0;
    for (int b = 0; b < BANKS; b++) begin
      rsp_data  = rsp_data  | b_data[b];
      rsp_count = rsp_count | b_count[b];
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid) assert (int'(req_mat) < NMATS) else $error("stt_mram_array: mat index out of range");
  end

endmodule
