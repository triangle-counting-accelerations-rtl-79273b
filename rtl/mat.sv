// mat: one computational STT-MRAM mat.
//
// A mat holds ROWS data rows of W bits plus one extra row, the row-slice
// line (row index ROWS), into which the row slice of the current slice pair
// is written. Its parts:
//   - column driver: writes one W-bit word into the row given by row_a;
//   - row driver with multi-row activation: raises the word line row_a for a
//     READ, and the word lines row_a and row_b together for an AND;
//   - sense amplifiers (sense_amp) with READ and AND references;
//   - local data buffer: a register that captures the sense amplifier output;
//   - bit counter (bit_counter): counts the ones in the local data buffer.
// The cell array is a plain memory array (the 1T-1MTJ cell itself is not
// modelled). Row counts and the extra row-slice line are this design's
// choices; the list of parts follows the mat of the architecture.
//
// Timing: a request (req_valid with req_op) is taken at a rising clock edge.
// A WRITE updates the array at that edge. For READ and AND the local data
// buffer is loaded at that edge and rsp_valid is high for the next cycle,
// with rsp_data (the buffer) and rsp_count (its bit count). The response
// outputs are zero when rsp_valid is low, so the mats of a sub-array can be
// combined with an OR. One request per cycle; there is no back-pressure.
module mat #(
  parameter int unsigned W    = 64,
  parameter int unsigned ROWS = 4096,
  parameter int unsigned RB   = $clog2(ROWS + 1),
  parameter int unsigned CW   = $clog2(W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  tc_pkg::mem_op_e req_op,
  input  logic [RB-1:0]   row_a,
  input  logic [RB-1:0]   row_b,
  input  logic [W-1:0]    wdata,
  output logic            rsp_valid,
  output logic [W-1:0]    rsp_data,
  output logic [CW-1:0]   rsp_count
);
  import tc_pkg::*;

  // ROWS data rows and the row-slice line.
  logic [W-1:0] cells [ROWS+1];

  // Row driver: which word lines are raised for this request.
  logic do_write, do_sense, raise_b;
  always_comb begin
    do_write = req_valid && (req_op == MOP_WRITE);
    do_sense = req_valid && (req_op == MOP_READ || req_op == MOP_AND);
    raise_b  = req_valid && (req_op == MOP_AND);
  end

  // Cells seen by the sense amplifiers on the raised word lines.
  logic [W-1:0] bl_a, bl_b, sa_out;
  always_comb begin
    bl_a = cells[row_a];
    bl_b = cells[row_b];
  end

  sense_amp #(.W(W)) u_sa (
    .mode     (req_op),
    .cell_a   (bl_a),
    .cell_b   (bl_b),
    .b_active (raise_b),
    .out      (sa_out)
  );

  // Column driver.
  always_ff @(posedge clk) begin
    if (do_write) cells[row_a] <= wdata;
  end

  // Local data buffer.
  logic [W-1:0] local_buf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_buf <= '0;
      rsp_valid <= 1'b0;
    end else begin
      rsp_valid <= do_sense;
      if (do_sense) local_buf <= sa_out;
    end
  end

  logic [CW-1:0] cnt;
  bit_counter #(.W(W), .CW(CW)) u_bc (
    .vec   (local_buf),
    .count (cnt)
  );

  always_comb begin
    rsp_data  = rsp_valid ? local_buf : '0;
    rsp_count = rsp_valid ? cnt : '0;
  end

  // Row addresses must lie inside the mat.
  always_ff @(posedge clk) begin
    if (req_valid) begin
      assert (row_a <= RB'(ROWS)) else $error("mat: row_a out of range");
      assert (req_op != MOP_AND || row_b <= RB'(ROWS)) else $error("mat: row_b out of range");
    end
  end

endmodule
