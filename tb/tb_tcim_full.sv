// tb_tcim_full: one complete triangle count on the accelerator at its
// default size (16-bit vertex indexes, 2 x 131072 store entries, 16 MB of
// computational STT-MRAM in 8 banks x 16 sub-arrays x 4 mats x 4096 rows,
// 262144 sets of 8 ways). A random 300-vertex graph with dense local
// clusters is streamed through the data slicer; after the status table has
// cleared itself the count runs, and the result and all event counters are
// compared with a brute-force count and the reference model.
module tb_tcim_full;
  import tc_pkg::*;
  import tb_graph_pkg::*;
  localparam int VB = 16, KB = VB - 6;
  localparam int NSETS = 8 * 16 * 4 * 4096 / 8, ROWS = 4096;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          s_clr = 0, s_valid = 0, s_last = 0, start = 0;
  line_dir_e     s_dir = DIR_ROW;
  logic [VB-1:0] s_line = '0, num_v = '0;
  logic [KB-1:0] s_k = '0;
  logic [63:0]   s_data = '0;
  logic          slice_overflow, busy, done;
  logic [31:0]   slice_n_valid, slice_n_total;
  logic [63:0]   tc_count;
  tc_stats_t     stats;

  tcim_top dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream_dir(input line_dir_e d);
    @(negedge clk);
    s_clr = 1; s_dir = d;
    @(negedge clk);
    s_clr = 0;
    for (int v = 0; v < nv; v++)
      for (int k = 0; k < nslices(); k++) begin
        s_valid = 1; s_dir = d; s_line = VB'(v); s_k = KB'(k); s_last = (k == nslices() - 1);
        s_data  = (d == DIR_ROW) ? row_slice(v, k) : col_slice(v, k);
        @(negedge clk);
      end
    s_valid = 0; s_last = 0;
    @(negedge clk);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    ref_t   r;
    longint bt;
    int     cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    random_graph(300, 20, 700);
    r  = ref_run(VB, NSETS, ROWS);
    bt = brute_tc();
    stream_dir(DIR_ROW);
    check(int'(slice_n_valid) == r.valid_row_slices, "row slices");
    stream_dir(DIR_COL);
    check(int'(slice_n_valid) == r.valid_col_slices, "column slices");
    check(!slice_overflow, "no overflow");
    @(negedge clk);
    start = 1; num_v = VB'(nv);
    @(negedge clk);
    start = 0;
    while (!done && cyc < 4000000) begin @(negedge clk); cyc++; end
    check(done, "done");
    check(tc_count == longint'(bt), $sformatf("tc %0d brute %0d", tc_count, bt));
    check(int'(stats.nnz) == r.nnz, "nnz");
    check(int'(stats.pairs) == r.pairs, "pairs");
    check(int'(stats.skipped) == r.skipped, "skipped");
    check(int'(stats.col_hit) == r.hit && int'(stats.col_miss) == r.miss, "hits and misses");
    check(int'(stats.evict) == 0 && r.evict == 0, "no eviction at 16 MB");
    check(int'(stats.row_write) == r.row_write && int'(stats.row_reuse) == r.row_reuse, "row-slice line");
    $display("full size: V=%0d nnz=%0d triangles=%0d pairs=%0d hit=%0d miss=%0d cycles=%0d (incl. %0d-set clear)",
             nv, stats.nnz, tc_count, stats.pairs, stats.col_hit, stats.col_miss, cyc, NSETS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
