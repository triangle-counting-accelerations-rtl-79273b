// bank: SUBARRAYS computational sub-arrays behind a global row decoder and a
// shared global data buffer.
//
// The global row decoder turns the sub-array field of the request's mat
// address into one enable per sub-array; row addresses and write data are
// broadcast. The bank's small control (Ctrl) simply qualifies the decoded
// enable with req_valid. The answering sub-array's READ or AND result and its
// bit count are captured in the global data buffer, a register shared by all
// sub-arrays. Latency: a READ or AND request taken at edge t is answered by
// the mat's local data buffer after t and by the global data buffer after
// edge t+1, so rsp_valid is high two cycles after the request cycle. The
// number of sub-arrays per bank is this design's choice.
module bank #(
  parameter int unsigned W         = 64,
  parameter int unsigned ROWS      = 4096,
  parameter int unsigned MATS      = 4,
  parameter int unsigned SUBARRAYS = 16,
  parameter int unsigned RB        = $clog2(ROWS + 1),
  parameter int unsigned MB        = (MATS > 1) ? $clog2(MATS) : 1,
  parameter int unsigned SB        = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  parameter int unsigned CW        = $clog2(W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  tc_pkg::mem_op_e req_op,
  input  logic [SB-1:0]   req_sub,
  input  logic [MB-1:0]   req_mat,
  input  logic [RB-1:0]   row_a,
  input  logic [RB-1:0]   row_b,
  input  logic [W-1:0]    wdata,
  output logic            rsp_valid,
  output logic [W-1:0]    rsp_data,
  output logic [CW-1:0]   rsp_count
);

  // Global row decoder.
  logic [SUBARRAYS-1:0] sub_en;
  always_comb begin
    for (int s = 0; s < SUBARRAYS; s++) sub_en[s] = req_valid && (req_sub == SB'(s));
  end

  logic [SUBARRAYS-1:0] s_valid;
  logic [W-1:0]         s_data  [SUBARRAYS];
  logic [CW-1:0]        s_count [SUBARRAYS];

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sub
    subarray #(.W(W), .ROWS(ROWS), .MATS(MATS), .RB(RB), .MB(MB), .CW(CW)) u_sub (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (sub_en[s]),
      .req_op    (req_op),
      .req_mat   (req_mat),
      .row_a     (row_a),
      .row_b     (row_b),
      .wdata     (wdata),
      .rsp_valid (s_valid[s]),
      .rsp_data  (s_data[s]),
      .rsp_count (s_count[s])
    );
  end

  logic [W-1:0]  or_data;
  logic [CW-1:0] or_count;
  always_comb begin
    or_data  = '0;
    or_count = '0;
    for (int s = 0; s < SUBARRAYS; s++) begin
      or_data  = or_data  | s_data[s];
      or_count = or_count | s_count[s];
    end
  end

  // Global data buffer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      rsp_count <= '0;
    end else begin
      rsp_valid <= |s_valid;
      rsp_data  <= or_data;
      rsp_count <= or_count;
    end
  end

endmodule
