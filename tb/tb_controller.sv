// tb_controller: the controller with a graph store, a status table and a
// computational memory of only 16 slots (2 sets of 8 ways, 4 mats of 4
// rows), so that nearly every new column slice evicts one. The testbench
// fills the graph store directly (valid slices only, with pointers), runs
// several graphs and compares the triangle count with a brute-force count
// and every event counter (non-zeros, pairs, skipped slices, hits, misses,
// evictions, row-slice writes and reuses) with the reference model. It also
// checks busy/done and that a second run on the same graph gives the same
// result (the status table is cleared at start).
module tb_controller;
  import tc_pkg::*;
  import tb_graph_pkg::*;
  localparam int VB = 8, EB = 10, KB = VB - 6;
  localparam int ROWS = 4, NMATS = 4, NSETS = NMATS * ROWS / 8;
  localparam int GB = 2, RB = 3, SETB = 1, TAGW = VB + KB, KEYW = 2 * VB + 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          start = 0, busy, done;
  logic [VB-1:0] num_v = '0;
  logic [63:0]   tc_count;
  tc_stats_t     stats;

  // graph store write side, driven by the testbench
  logic          pw_en = 0, ew_en = 0;
  line_dir_e     pw_dir = DIR_ROW, ew_dir = DIR_ROW;
  logic [VB-1:0] pw_line = '0;
  logic [EB:0]   pw_val = '0;
  logic [EB-1:0] ew_addr = '0;
  logic [KB-1:0] ew_k = '0;
  logic [63:0]   ew_data = '0;

  logic [VB-1:0] rp_line, cp_line;
  logic [EB:0]   rp_start, rp_end, cp_start, cp_end;
  logic [EB-1:0] re_addr, ce_addr;
  logic [KB-1:0] re_k, ce_k;
  logic [63:0]   re_data, ce_data;

  graph_store #(.VB(VB), .EB(EB)) u_store (.*);

  logic                      st_clear, st_init_busy, st_wr_en, st_rl_valid, st_rl_wr_en;
  logic [SETB-1:0]           st_rd_set, st_wr_set;
  logic [7:0]                st_rd_valid;
  logic [7:0][TAGW-1:0]      st_rd_tag;
  logic [7:0][KEYW-1:0]      st_rd_key;
  logic [2:0]                st_wr_way;
  logic [TAGW-1:0]           st_wr_tag, st_rl_tag, st_rl_wr_tag;
  logic [KEYW-1:0]           st_wr_key;
  logic [GB-1:0]             st_rl_mat, st_rl_wr_mat;

  status_table #(.NSETS(NSETS), .TAGW(TAGW), .KEYW(KEYW), .NMATS(NMATS), .RLTW(TAGW)) u_st (
    .clk, .rst_n, .clear(st_clear), .init_busy(st_init_busy),
    .rd_set(st_rd_set), .rd_valid(st_rd_valid), .rd_tag(st_rd_tag), .rd_key(st_rd_key),
    .wr_en(st_wr_en), .wr_set(st_wr_set), .wr_way(st_wr_way), .wr_tag(st_wr_tag), .wr_key(st_wr_key),
    .rl_mat(st_rl_mat), .rl_valid(st_rl_valid), .rl_tag(st_rl_tag),
    .rl_wr_en(st_rl_wr_en), .rl_wr_mat(st_rl_wr_mat), .rl_wr_tag(st_rl_wr_tag));

  logic          mreq_valid, mrsp_valid;
  mem_op_e       mreq_op;
  logic [GB-1:0] mreq_mat;
  logic [RB-1:0] mreq_row_a, mreq_row_b;
  logic [63:0]   mreq_wdata, mrsp_data;
  logic [6:0]    mrsp_count;

  stt_mram_array #(.ROWS(ROWS), .MATS(2), .SUBARRAYS(1), .BANKS(2)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_op(mreq_op), .req_mat(mreq_mat),
    .row_a(mreq_row_a), .row_b(mreq_row_b), .wdata(mreq_wdata),
    .rsp_valid(mrsp_valid), .rsp_data(mrsp_data), .rsp_count(mrsp_count));

  controller #(.VB(VB), .EB(EB), .ROWS(ROWS), .NMATS(NMATS)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Compressed store written straight from the graph.
  task automatic load_store();
    for (int d = 0; d < 2; d++) begin
      int cnt = 0;
      @(negedge clk);
      pw_en = 1; pw_dir = line_dir_e'(d); pw_line = '0; pw_val = '0;
      for (int v = 0; v < nv; v++) begin
        for (int k = 0; k < nslices(); k++) begin
          logic [63:0] s = (d == 0) ? row_slice(v, k) : col_slice(v, k);
          if (s != 0) begin
            @(negedge clk);
            pw_en = 0;
            ew_en = 1; ew_dir = line_dir_e'(d); ew_addr = EB'(cnt); ew_k = KB'(k); ew_data = s;
            cnt++;
          end
        end
        @(negedge clk);
        ew_en = 0;
        pw_en = 1; pw_dir = line_dir_e'(d); pw_line = VB'(v + 1); pw_val = (EB+1)'(cnt);
      end
      @(negedge clk);
      pw_en = 0; ew_en = 0;
    end
  endtask

  task automatic run(input string name);
    ref_t   r = ref_run(VB, NSETS, ROWS);
    longint bt = brute_tc();
    int     cyc = 0;
    @(negedge clk);
    start = 1; num_v = VB'(nv);
    @(negedge clk);
    start = 0;
    check(busy && !done, {name, ": busy after start"});
    while (!done && cyc < 1000000) begin @(negedge clk); cyc++; end
    check(done && !busy, {name, ": done"});
    check(tc_count == longint'(bt), $sformatf("%s: tc %0d brute %0d", name, tc_count, bt));
    check(int'(stats.nnz) == r.nnz, $sformatf("%s: nnz %0d/%0d", name, stats.nnz, r.nnz));
    check(int'(stats.pairs) == r.pairs, $sformatf("%s: pairs %0d/%0d", name, stats.pairs, r.pairs));
    check(int'(stats.skipped) == r.skipped, $sformatf("%s: skipped %0d/%0d", name, stats.skipped, r.skipped));
    check(int'(stats.col_hit) == r.hit, $sformatf("%s: hit %0d/%0d", name, stats.col_hit, r.hit));
    check(int'(stats.col_miss) == r.miss, $sformatf("%s: miss %0d/%0d", name, stats.col_miss, r.miss));
    check(int'(stats.evict) == r.evict, $sformatf("%s: evict %0d/%0d", name, stats.evict, r.evict));
    check(int'(stats.row_write) == r.row_write, $sformatf("%s: row_write %0d/%0d", name, stats.row_write, r.row_write));
    check(int'(stats.row_reuse) == r.row_reuse, $sformatf("%s: row_reuse %0d/%0d", name, stats.row_reuse, r.row_reuse));
    $display("%s: tc=%0d pairs=%0d hit=%0d miss=%0d evict=%0d cycles=%0d",
             name, tc_count, stats.pairs, stats.col_hit, stats.col_miss, stats.evict, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    clear(4);
    add_edge(0, 1); add_edge(0, 2); add_edge(1, 2); add_edge(1, 3); add_edge(2, 3);
    load_store();
    run("example");
    check(tc_count == 2, "example: two triangles");
    random_graph(130, 40, 700);
    load_store();
    run("random130");
    run("random130-again");
    random_graph(250, 15, 800);
    load_store();
    run("random250");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
