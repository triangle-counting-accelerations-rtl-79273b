// tb_sense_amp: checks the READ/AND sense amplifiers. The AND truth table
// (both cells P -> 1, otherwise 0) is checked per bit line for all four
// input pairs, READ returns the first row whatever the second row holds, and
// random words are checked against a & b and a.
module tb_sense_amp;
  import tc_pkg::*;
  int checks = 0, failures = 0;

  mem_op_e     mode;
  logic [63:0] a, b, o;
  logic        b_act;

  sense_amp #(.W(64)) dut (.mode(mode), .cell_a(a), .cell_b(b), .b_active(b_act), .out(o));

  task automatic chk(input logic [63:0] exp, input string what);
    #1;
    checks++;
    if (o !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h out=%h expected %h", what, a, b, o, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Truth table: (0,0) (0,1) (1,0) -> 0, (1,1) -> 1 on every bit line.
    mode = MOP_AND; b_act = 1'b1;
    for (int p = 0; p < 4; p++) begin
      a = {64{p[1]}};
      b = {64{p[0]}};
      chk({64{p == 3}}, "and-truth");
    end
    for (int t = 0; t < 500; t++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      mode = MOP_AND; b_act = 1'b1;
      chk(a & b, "and");
      mode = MOP_READ; b_act = 1'b0;
      chk(a, "read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
