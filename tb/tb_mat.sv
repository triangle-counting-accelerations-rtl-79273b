// tb_mat: writes random words into a 16-row mat and its row-slice line, then
// checks READ and AND results and their bit counts against a model, and that
// each answer arrives exactly one cycle after its request.
module tb_mat;
  import tc_pkg::*;
  localparam int ROWS = 16;
  localparam int RB   = $clog2(ROWS + 1);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          req_valid = 0;
  mem_op_e       req_op = MOP_NOP;
  logic [RB-1:0] row_a = '0, row_b = '0;
  logic [63:0]   wdata = '0, rsp_data;
  logic          rsp_valid;
  logic [6:0]    rsp_count;

  mat #(.W(64), .ROWS(ROWS)) dut (.*);

  logic [63:0] model [ROWS+1];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input mem_op_e op, input int ra, input int rb, input logic [63:0] d);
    @(negedge clk);
    req_valid = 1; req_op = op; row_a = RB'(ra); row_b = RB'(rb); wdata = d;
    @(negedge clk);
    req_valid = 0; req_op = MOP_NOP;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r <= ROWS; r++) begin
      model[r] = {$urandom, $urandom};
      issue(MOP_WRITE, r, 0, model[r]);
      checks++;
      if (rsp_valid) begin failures++; $display("FAIL write answered"); end
    end
    for (int t = 0; t < 400; t++) begin
      automatic int ra = $urandom_range(0, ROWS - 1);
      automatic int rb = ROWS;                        // row-slice line
      automatic bit is_and = t[0];
      automatic logic [63:0] exp;
      if (t % 5 == 0) rb = $urandom_range(0, ROWS - 1);
      exp = is_and ? (model[ra] & model[rb]) : model[ra];
      @(negedge clk);
      req_valid = 1; req_op = is_and ? MOP_AND : MOP_READ;
      row_a = RB'(ra); row_b = RB'(rb);
      checks++;
      if (rsp_valid) begin failures++; $display("FAIL early answer"); end
      @(negedge clk);
      req_valid = 0; req_op = MOP_NOP;
      checks++;
      if (!rsp_valid || rsp_data != exp || int'(rsp_count) != $countones(exp)) begin
        failures++;
        $display("FAIL t=%0d and=%0d data=%h exp=%h cnt=%0d", t, is_and, rsp_data, exp, rsp_count);
      end
      @(negedge clk);
      checks++;
      if (rsp_valid || rsp_data != '0) begin failures++; $display("FAIL response not cleared"); end
      if (t % 7 == 0) begin
        model[ra] = {$urandom, $urandom};
        issue(MOP_WRITE, ra, 0, model[ra]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
