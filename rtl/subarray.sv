// subarray: a group of MATS mats that share the column selection line.
//
// A request carries a mat index; the column selection line enables only that
// mat, while row addresses and write data are broadcast to all. Only the
// selected mat answers, and its response outputs are zero otherwise, so the
// sub-array's response is the OR of its mats' responses. Latency is that of a
// mat: the response appears in the cycle after the request. The number of
// mats per sub-array is this design's choice.
module subarray #(
  parameter int unsigned W    = 64,
  parameter int unsigned ROWS = 4096,
  parameter int unsigned MATS = 4,
  parameter int unsigned RB   = $clog2(ROWS + 1),
  parameter int unsigned MB   = (MATS > 1) ? $clog2(MATS) : 1,
  parameter int unsigned CW   = $clog2(W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  tc_pkg::mem_op_e req_op,
  input  logic [MB-1:0]   req_mat,
  input  logic [RB-1:0]   row_a,
  input  logic [RB-1:0]   row_b,
  input  logic [W-1:0]    wdata,
  output logic            rsp_valid,
  output logic [W-1:0]    rsp_data,
  output logic [CW-1:0]   rsp_count
);

  logic [MATS-1:0] csl;             // column selection line, one per mat
  logic [MATS-1:0] m_valid;
  logic [W-1:0]    m_data  [MATS];
  logic [CW-1:0]   m_count [MATS];

  always_comb begin
    for (int m = 0; m < MATS; m++) csl[m] = req_valid && (req_mat == MB'(m));
  end

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    mat #(.W(W), .ROWS(ROWS), .RB(RB), .CW(CW)) u_mat (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (csl[m]),
      .req_op    (req_op),
      .row_a     (row_a),
      .row_b     (row_b),
      .wdata     (wdata),
      .rsp_valid (m_valid[m]),
      .rsp_data  (m_data[m]),
      .rsp_count (m_count[m])
    );
  end

  always_comb begin
    rsp_valid = |m_valid;
    rsp_data  = '0;
    rsp_count = '0;
    for (int m = 0; m < MATS; m++) begin
      rsp_data  = rsp_data  | m_data[m];
      rsp_count = rsp_count | m_count[m];
    end
  end

  always_ff @(posedge clk) begin
    assert ($countones(m_valid) <= 1) else $error("subarray: two mats answered");
  end

endmodule
