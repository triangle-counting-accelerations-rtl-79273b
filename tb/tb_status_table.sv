// tb_status_table: checks that after reset the table is busy for exactly
// NSETS cycles and then reads all ways invalid (even after the array was
// dirty before a second reset), that slot writes set valid, tag and key of
// one way only, and that row-slice line tags are kept per mat.
module tb_status_table;
  localparam int NSETS = 16, WAYS = 8, TAGW = 10, KEYW = 12, NMATS = 4, RLTW = 10;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      init_busy, clear = 0;
  logic [3:0]                rd_set = '0, wr_set = '0;
  logic [WAYS-1:0]           rd_valid;
  logic [WAYS-1:0][TAGW-1:0] rd_tag;
  logic [WAYS-1:0][KEYW-1:0] rd_key;
  logic                      wr_en = 0;
  logic [2:0]                wr_way = '0;
  logic [TAGW-1:0]           wr_tag = '0;
  logic [KEYW-1:0]           wr_key = '0;
  logic [1:0]                rl_mat = '0, rl_wr_mat = '0;
  logic                      rl_valid, rl_wr_en = 0;
  logic [RLTW-1:0]           rl_tag, rl_wr_tag = '0;

  status_table #(.NSETS(NSETS), .WAYS(WAYS), .TAGW(TAGW), .KEYW(KEYW),
                 .NMATS(NMATS), .RLTW(RLTW)) dut (.*);

  logic          m_v [NSETS][WAYS];
  int            m_t [NSETS][WAYS];
  int            m_k [NSETS][WAYS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_and_wait();
    int n = 0;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (init_busy && n < 1000) begin @(negedge clk); n++; end
    checks++;
    if (n != NSETS) begin failures++; $display("FAIL init took %0d cycles", n); end
    for (int s = 0; s < NSETS; s++) begin
      rd_set = 4'(s);
      #1;
      checks++;
      if (rd_valid != '0) begin failures++; $display("FAIL set %0d not cleared", s); end
      for (int w = 0; w < WAYS; w++) m_v[s][w] = 0;
    end
    for (int m = 0; m < NMATS; m++) begin
      rl_mat = 2'(m);
      #1;
      checks++;
      if (rl_valid) begin failures++; $display("FAIL row line %0d valid after reset", m); end
    end
  endtask

  initial begin
    reset_and_wait();
    for (int r = 0; r < 2; r++) begin
      for (int t = 0; t < 200; t++) begin
        automatic int s = $urandom_range(0, NSETS - 1);
        automatic int w = $urandom_range(0, WAYS - 1);
        automatic int tg = $urandom_range(0, 1023);
        automatic int ky = $urandom_range(0, 4095);
        @(negedge clk);
        wr_en = 1; wr_set = 4'(s); wr_way = 3'(w); wr_tag = TAGW'(tg); wr_key = KEYW'(ky);
        rl_wr_en = (t % 5 == 0); rl_wr_mat = 2'(t % NMATS); rl_wr_tag = RLTW'(tg);
        m_v[s][w] = 1; m_t[s][w] = tg; m_k[s][w] = ky;
        @(negedge clk);
        wr_en = 0; rl_wr_en = 0;
        if (t % 5 == 0) begin
          rl_mat = 2'(t % NMATS);
          #1;
          checks++;
          if (!rl_valid || int'(rl_tag) != tg) begin failures++; $display("FAIL row line tag"); end
        end
        rd_set = 4'($urandom_range(0, NSETS - 1));
        #1;
        for (int x = 0; x < WAYS; x++) begin
          checks++;
          if (rd_valid[x] != m_v[rd_set][x] ||
              (m_v[rd_set][x] && (int'(rd_tag[x]) != m_t[rd_set][x] || int'(rd_key[x]) != m_k[rd_set][x]))) begin
            failures++; $display("FAIL set %0d way %0d", rd_set, x);
          end
        end
      end
      reset_and_wait();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
