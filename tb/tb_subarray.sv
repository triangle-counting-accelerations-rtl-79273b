// tb_subarray: fills every row of every mat of a small subarray (4 mats of 8 rows plus
// the row-slice line) with random words, then checks random READ and AND
// requests against a model: data, bit count, that only the addressed mat
// answers, and that the answer arrives exactly 1 cycle(s) after the request.
module tb_subarray;
  import tc_pkg::*;
  localparam int ROWS  = 8;
  localparam int RB    = $clog2(ROWS + 1);
  localparam int NMATS = 4;
  localparam int LAT   = 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          req_valid = 0;
  mem_op_e       req_op = MOP_NOP;
  int            mat_idx = 0;
  logic [RB-1:0] row_a = '0, row_b = '0;
  logic [63:0]   wdata = '0, rsp_data;
  logic          rsp_valid;
  logic [6:0]    rsp_count;
  logic [1:0] req_mat;
  always_comb req_mat = 2'(mat_idx);

  subarray #(.W(64), .ROWS(ROWS), .MATS(4)) dut (
    .clk, .rst_n, .req_valid, .req_op,
    .req_mat,
    .row_a, .row_b, .wdata, .rsp_valid, .rsp_data, .rsp_count);

  logic [63:0] model [NMATS][ROWS+1];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NMATS; m++)
      for (int r = 0; r <= ROWS; r++) begin
        model[m][r] = {$urandom, $urandom};
        @(negedge clk);
        req_valid = 1; req_op = MOP_WRITE; mat_idx = m; row_a = RB'(r); wdata = model[m][r];
      end
    @(negedge clk);
    req_valid = 0; req_op = MOP_NOP;
    repeat (4) @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      automatic int m  = $urandom_range(0, NMATS - 1);
      automatic int ra = $urandom_range(0, ROWS - 1);
      automatic int rb = (t % 3 == 0) ? $urandom_range(0, ROWS - 1) : ROWS;
      automatic bit is_and = (t % 4 != 0);
      automatic logic [63:0] exp = is_and ? (model[m][ra] & model[m][rb]) : model[m][ra];
      automatic int lat = 0;
      @(negedge clk);
      req_valid = 1; req_op = is_and ? MOP_AND : MOP_READ; mat_idx = m;
      row_a = RB'(ra); row_b = RB'(rb);
      @(negedge clk);
      req_valid = 0; req_op = MOP_NOP;
      lat = 1;
      while (!rsp_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT || rsp_data != exp || int'(rsp_count) != $countones(exp)) begin
        failures++;
        $display("FAIL t=%0d mat=%0d lat=%0d data=%h exp=%h cnt=%0d", t, m, lat, rsp_data, exp, rsp_count);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
