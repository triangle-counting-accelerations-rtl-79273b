// tb_data_slicer: streams lines of four slices (about half of them zero)
// in both directions and records the writes the slicer makes to the store.
// Checks that exactly the non-zero slices become entries, in order, with
// their slice index, that ptr[v+1] equals the number of valid slices in
// lines 0..v, the slice counters, and that an over-full store raises
// overflow and drops the extra slices.
module tb_data_slicer;
  import tc_pkg::*;
  localparam int VB = 8, EB = 5, KB = VB - 6;
  localparam int CAP = 1 << EB;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          s_clr = 0, s_valid = 0, s_last = 0;
  line_dir_e     s_dir = DIR_ROW;
  logic [VB-1:0] s_line = '0;
  logic [KB-1:0] s_k = '0;
  logic [63:0]   s_data = '0;
  logic          pw_en, ew_en, overflow;
  line_dir_e     pw_dir, ew_dir;
  logic [VB-1:0] pw_line;
  logic [EB:0]   pw_val;
  logic [EB-1:0] ew_addr;
  logic [KB-1:0] ew_k;
  logic [63:0]   ew_data;
  logic [31:0]   n_valid, n_total;

  data_slicer #(.VB(VB), .EB(EB)) dut (.*);

  // Captured store contents.
  int          ptr_cap [2][256];
  logic [63:0] ent_d   [2][CAP];
  int          ent_k   [2][CAP];
  always @(posedge clk) begin
    if (pw_en) ptr_cap[pw_dir][pw_line] = int'(pw_val);
    if (ew_en) begin ent_d[ew_dir][ew_addr] = ew_data; ent_k[ew_dir][ew_addr] = int'(ew_k); end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] exp_d [2][CAP];
  int          exp_k [2][CAP];
  int          exp_ptr [2][256];

  task automatic run_dir(input line_dir_e d, input int nlines, output int nval);
    int cnt = 0, tot = 0;
    @(negedge clk);
    s_clr = 1; s_dir = d;
    @(negedge clk);
    s_clr = 0;
    exp_ptr[d][0] = 0;
    for (int v = 0; v < nlines; v++) begin
      for (int k = 0; k < 4; k++) begin
        logic [63:0] w;
        w = ($urandom_range(0, 1) == 1) ? 64'd1 << $urandom_range(0, 63) : 64'd0;
        if ($urandom_range(0, 3) == 0) w = w | {$urandom, $urandom};
        s_valid = 1; s_dir = d; s_line = VB'(v); s_k = KB'(k); s_data = w; s_last = (k == 3);
        if (w != 0) begin
          if (cnt < CAP) begin exp_d[d][cnt] = w; exp_k[d][cnt] = k; cnt++; end
        end
        tot++;
        @(negedge clk);
      end
      exp_ptr[d][v+1] = cnt;
    end
    s_valid = 0; s_last = 0;
    nval = cnt;
    @(negedge clk);
    checks++;
    if (int'(n_total) != tot) begin failures++; $display("FAIL n_total %0d vs %0d", n_total, tot); end
  endtask

  initial begin
    int nv;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 2; d++) begin
      run_dir(line_dir_e'(d), 8, nv);
      checks++;
      if (overflow || int'(n_valid) != nv) begin failures++; $display("FAIL dir %0d n_valid %0d vs %0d ovf %0d", d, n_valid, nv, overflow); end
      for (int v = 0; v <= 8; v++) begin
        checks++;
        if (ptr_cap[d][v] != exp_ptr[d][v]) begin failures++; $display("FAIL dir %0d ptr[%0d]=%0d exp %0d", d, v, ptr_cap[d][v], exp_ptr[d][v]); end
      end
      for (int e = 0; e < nv; e++) begin
        checks++;
        if (ent_d[d][e] != exp_d[d][e] || ent_k[d][e] != exp_k[d][e]) begin
          failures++; $display("FAIL dir %0d entry %0d", d, e);
        end
      end
    end
    // Overflow: far more valid slices than entries.
    run_dir(DIR_ROW, 40, nv);
    checks++;
    if (!overflow) begin failures++; $display("FAIL overflow not raised"); end
    checks++;
    if (ptr_cap[0][40] != CAP) begin failures++; $display("FAIL final ptr %0d", ptr_cap[0][40]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
