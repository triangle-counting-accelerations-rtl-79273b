// tb_bit_counter: checks the look-up-table bit counter against a loop count
// on fixed words (all zeros, all ones, single bits, the AND results of the
// four-vertex example) and on random words, at W = 64 and W = 16.
module tb_bit_counter;
  int checks = 0, failures = 0;

  logic [63:0] vec;
  logic [6:0]  count;
  logic [15:0] vec16;
  logic [4:0]  count16;

  bit_counter #(.W(64)) dut (.vec(vec), .count(count));
  bit_counter #(.W(16)) dut16 (.vec(vec16), .count(count16));

  function automatic int ref_count(input logic [63:0] v);
    int n = 0;
    for (int b = 0; b < 64; b++) n += int'(v[b]);
    return n;
  endfunction

  task automatic check64(input logic [63:0] v);
    vec = v;
    #1;
    checks++;
    if (int'(count) != ref_count(v)) begin
      failures++;
      $display("FAIL vec=%h count=%0d expected %0d", v, count, ref_count(v));
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
    check64('0);
    check64('1);
    for (int b = 0; b < 64; b++) check64(64'd1 << b);
    check64(64'b0100);                     // BitCount(0100) = 1
    check64(64'b0110);                     // BitCount(0110) = 2
    check64(64'h8000_0000_0000_0001);
    for (int t = 0; t < 2000; t++) check64({$urandom, $urandom});
    for (int t = 0; t < 300; t++) begin
      vec16 = 16'($urandom);
      #1;
      checks++;
      if (int'(count16) != ref_count(64'(vec16))) begin
        failures++;
        $display("FAIL W=16 vec=%h count=%0d", vec16, count16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
