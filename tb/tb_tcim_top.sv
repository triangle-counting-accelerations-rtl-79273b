// tb_tcim_top: end-to-end test of the accelerator at reduced size (vertex
// index 9 bits, 2048 store entries per direction, 2 banks x 2 sub-arrays x
// 2 mats x 8 rows = 64 slice slots in 8 sets).
//
// Each graph is streamed through the data slicer row by row and column by
// column, then counted. Graphs: the four-vertex, two-triangle example; a
// 5-clique (10 triangles); a random 200-vertex graph whose slices overflow
// the 64 slots so that the Priority policy must evict. For every run the
// triangle count is compared with a brute-force count and every event
// counter with the reference model of tb_graph_pkg. Each mechanism (invalid
// slice dropped, slice skipped in the merge, column hit, miss, eviction,
// row-slice write and reuse, store overflow) must occur at least once.
module tb_tcim_top;
  import tc_pkg::*;
  import tb_graph_pkg::*;
  localparam int VB = 9, EB = 11, KB = VB - 6;
  localparam int ROWS = 8, MATS = 2, SUBARRAYS = 2, BANKS = 2;
  localparam int NSETS = BANKS * SUBARRAYS * MATS * ROWS / 8;
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

  tcim_top #(.VB(VB), .EB(EB), .ROWS(ROWS), .MATS(MATS), .SUBARRAYS(SUBARRAYS),
             .BANKS(BANKS)) dut (.*);

  // Mechanism tallies.
  int m_drop = 0, m_skip = 0, m_hit = 0, m_miss = 0, m_evict = 0;
  int m_roww = 0, m_rowr = 0, m_ovf = 0;

  initial begin
    repeat (3000000) @(posedge clk);
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

  task automatic run_graph(input string name);
    ref_t   r;
    longint bt;
    int     cyc = 0;
    r  = ref_run(VB, NSETS, ROWS);
    bt = brute_tc();
    stream_dir(DIR_ROW);
    check(!slice_overflow && int'(slice_n_valid) == r.valid_row_slices, {name, ": row slices"});
    m_drop += int'(slice_n_total - slice_n_valid);
    stream_dir(DIR_COL);
    check(!slice_overflow && int'(slice_n_valid) == r.valid_col_slices, {name, ": column slices"});
    m_drop += int'(slice_n_total - slice_n_valid);
    @(negedge clk);
    start = 1; num_v = VB'(nv);
    @(negedge clk);
    start = 0;
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    check(done, {name, ": done"});
    check(tc_count == longint'(bt) && r.tc == bt, $sformatf("%s: tc %0d ref %0d brute %0d", name, tc_count, r.tc, bt));
    check(int'(stats.nnz) == r.nnz, $sformatf("%s: nnz %0d ref %0d", name, stats.nnz, r.nnz));
    check(int'(stats.pairs) == r.pairs, $sformatf("%s: pairs %0d ref %0d", name, stats.pairs, r.pairs));
    check(int'(stats.skipped) == r.skipped, $sformatf("%s: skipped %0d ref %0d", name, stats.skipped, r.skipped));
    check(int'(stats.col_hit) == r.hit, $sformatf("%s: hits %0d ref %0d", name, stats.col_hit, r.hit));
    check(int'(stats.col_miss) == r.miss, $sformatf("%s: misses %0d ref %0d", name, stats.col_miss, r.miss));
    check(int'(stats.evict) == r.evict, $sformatf("%s: evictions %0d ref %0d", name, stats.evict, r.evict));
    check(int'(stats.row_write) == r.row_write, $sformatf("%s: row writes %0d ref %0d", name, stats.row_write, r.row_write));
    check(int'(stats.row_reuse) == r.row_reuse, $sformatf("%s: row reuse %0d ref %0d", name, stats.row_reuse, r.row_reuse));
    m_skip += int'(stats.skipped); m_hit += int'(stats.col_hit); m_miss += int'(stats.col_miss);
    m_evict += int'(stats.evict); m_roww += int'(stats.row_write); m_rowr += int'(stats.row_reuse);
    $display("%s: V=%0d nnz=%0d triangles=%0d pairs=%0d hit=%0d miss=%0d evict=%0d cycles=%0d",
             name, nv, stats.nnz, tc_count, stats.pairs, stats.col_hit, stats.col_miss, stats.evict, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Four-vertex example: edges 0-1, 0-2, 1-2, 1-3, 2-3; two triangles.
    clear(4);
    add_edge(0, 1); add_edge(0, 2); add_edge(1, 2); add_edge(1, 3); add_edge(2, 3);
    run_graph("example");
    check(tc_count == 2, "example has two triangles");
    // 5-clique spread over three slices.
    clear(150);
    add_edge(3, 70); add_edge(3, 100); add_edge(3, 140); add_edge(3, 141);
    add_edge(70, 100); add_edge(70, 140); add_edge(70, 141);
    add_edge(100, 140); add_edge(100, 141); add_edge(140, 141);
    run_graph("clique5");
    check(tc_count == 10, "5-clique has ten triangles");
    random_graph(200, 25, 600);
    run_graph("random200");
    // Store overflow: more valid row slices than entries.
    clear(450);
    for (int i = 0; i < 450; i++)
      for (int j = 0; j < 450; j++) adj[i][j] = (i != j) && ($urandom_range(0, 9) < 3);
    stream_dir(DIR_ROW);
    m_ovf += int'(slice_overflow);
    check(m_drop > 0, "invalid slices dropped");
    check(m_skip > 0, "slices skipped in merge");
    check(m_hit > 0, "column hits");
    check(m_miss > 0, "column misses");
    check(m_evict > 0, "evictions");
    check(m_roww > 0, "row-slice writes");
    check(m_rowr > 0, "row-slice reuse");
    check(m_ovf > 0, "store overflow");
    $display("mechanisms: dropped=%0d skipped=%0d hit=%0d miss=%0d evict=%0d row_write=%0d row_reuse=%0d overflow=%0d",
             m_drop, m_skip, m_hit, m_miss, m_evict, m_roww, m_rowr, m_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
