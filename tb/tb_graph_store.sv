// tb_graph_store: writes random pointers and entries in both directions and
// reads them back through the four read ports, checking that directions do
// not alias and that the pointer ports return ptr[v] and ptr[v+1].
module tb_graph_store;
  import tc_pkg::*;
  localparam int VB = 8, EB = 6, KB = VB - 6;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          pw_en = 0, ew_en = 0;
  line_dir_e     pw_dir = DIR_ROW, ew_dir = DIR_ROW;
  logic [VB-1:0] pw_line = '0, rp_line = '0, cp_line = '0;
  logic [EB:0]   pw_val = '0, rp_start, rp_end, cp_start, cp_end;
  logic [EB-1:0] ew_addr = '0, re_addr = '0, ce_addr = '0;
  logic [KB-1:0] ew_k = '0, re_k, ce_k;
  logic [63:0]   ew_data = '0, re_data, ce_data;

  graph_store #(.VB(VB), .EB(EB)) dut (.*);

  int          mp [2][256];
  int          mk [2][64];
  logic [63:0] md [2][64];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 2; d++) begin
      for (int v = 0; v < 256; v++) begin
        mp[d][v] = $urandom_range(0, 64);
        @(negedge clk);
        pw_en = 1; pw_dir = line_dir_e'(d); pw_line = VB'(v); pw_val = (EB+1)'(mp[d][v]);
      end
      for (int e = 0; e < 64; e++) begin
        mk[d][e] = $urandom_range(0, 3);
        md[d][e] = {$urandom, $urandom};
        @(negedge clk);
        pw_en = 0;
        ew_en = 1; ew_dir = line_dir_e'(d); ew_addr = EB'(e); ew_k = KB'(mk[d][e]); ew_data = md[d][e];
      end
      @(negedge clk);
      ew_en = 0;
    end
    for (int t = 0; t < 300; t++) begin
      automatic int v1 = $urandom_range(0, 254);
      automatic int v2 = $urandom_range(0, 254);
      automatic int e1 = $urandom_range(0, 63);
      automatic int e2 = $urandom_range(0, 63);
      rp_line = VB'(v1); cp_line = VB'(v2); re_addr = EB'(e1); ce_addr = EB'(e2);
      #1;
      checks++;
      if (int'(rp_start) != mp[0][v1] || int'(rp_end) != mp[0][v1+1] ||
          int'(cp_start) != mp[1][v2] || int'(cp_end) != mp[1][v2+1] ||
          int'(re_k) != mk[0][e1] || re_data != md[0][e1] ||
          int'(ce_k) != mk[1][e2] || ce_data != md[1][e2]) begin
        failures++;
        $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
