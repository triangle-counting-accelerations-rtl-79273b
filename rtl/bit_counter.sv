// bit_counter: population count of one AND result word.
//
// The word is split into 8-bit sub-vectors; each sub-vector indexes a
// 256-entry look-up table holding its number of ones, and the table outputs
// are summed. This is the structure the design's bit counter is built on. The
// table contents are computed here (entry a holds the number of ones in a)
// rather than loaded from a file. The block is purely combinational: the
// count is valid in the same cycle as the input word. An adder chain sums the
// sub-vector counts; the synthesis tool is free to rebalance it into a tree.
//
// Parameters: W, the word width, a multiple of 8 (64, the slice length).
// Ports: vec (W bits in), count ($clog2(W+1) bits out).
module bit_counter #(
  parameter int unsigned W  = 64,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  vec,
  output logic [CW-1:0] count
);

  localparam int unsigned NSUB = W / 8;

  // 8-to-256 look-up table: lut[a] = number of ones in a.
  logic [3:0] lut [256];
  always_comb begin
    for (int a = 0; a < 256; a++) begin
      lut[a] = 4'd0;
      for (int b = 0; b < 8; b++) lut[a] = lut[a] + 4'(a[b]);
    end
  end

  logic [3:0] sub_cnt [NSUB];
  always_comb begin
    for (int s = 0; s < NSUB; s++) sub_cnt[s] = lut[vec[8*s +: 8]];
  end

  always_comb begin
    count = '0;
    for (int s = 0; s < NSUB; s++) count = count + CW'(sub_cnt[s]);
  end

  initial begin
    assert (W % 8 == 0) else $error("bit_counter: W must be a multiple of 8");
  end

endmodule
