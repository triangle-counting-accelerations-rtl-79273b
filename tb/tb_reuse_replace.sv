// tb_reuse_replace: random 8-way sets against a model of the policy: a tag
// match in a valid way is a hit; otherwise the lowest empty way is taken,
// and in a full set the way with the largest next-visit key (lowest way on
// a tie) is the victim and evict is raised.
module tb_reuse_replace;
  localparam int WAYS = 8, TAGW = 10, KEYW = 12;
  int checks = 0, failures = 0;

  logic [WAYS-1:0]           set_valid;
  logic [WAYS-1:0][TAGW-1:0] set_tag;
  logic [WAYS-1:0][KEYW-1:0] set_key;
  logic [TAGW-1:0]           req_tag;
  logic                      hit, evict;
  logic [2:0]                hit_way, victim_way;

  reuse_replace #(.WAYS(WAYS), .TAGW(TAGW), .KEYW(KEYW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_hit = 0, n_evict = 0, n_free = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic bit e_hit = 0, e_evict = 0, free = 0;
      automatic int e_hw = 0, e_vw = 0, best = -1;
      for (int w = 0; w < WAYS; w++) begin
        set_valid[w] = ($urandom_range(0, 9) != 0);
        set_tag[w]   = TAGW'($urandom_range(0, 15));
        set_key[w]   = KEYW'($urandom_range(0, 7) == 0 ? 4095 : $urandom_range(0, 40));
      end
      if (t % 3 == 0) set_valid = '1;
      req_tag = TAGW'($urandom_range(0, 31));
      for (int w = WAYS - 1; w >= 0; w--)
        if (set_valid[w] && set_tag[w] == req_tag) begin e_hit = 1; e_hw = w; end
      for (int w = WAYS - 1; w >= 0; w--)
        if (!set_valid[w]) begin free = 1; e_vw = w; end
      if (!free)
        for (int w = 0; w < WAYS; w++)
          if (int'(set_key[w]) > best) begin best = int'(set_key[w]); e_vw = w; end
      e_evict = !e_hit && !free;
      #1;
      checks++;
      if (hit != e_hit || (e_hit && int'(hit_way) != e_hw) || evict != e_evict ||
          (!e_hit && int'(victim_way) != e_vw)) begin
        failures++;
        $display("FAIL t=%0d hit=%0d/%0d way=%0d/%0d victim=%0d/%0d evict=%0d/%0d",
                 t, hit, e_hit, hit_way, e_hw, victim_way, e_vw, evict, e_evict);
      end
      n_hit += int'(e_hit); n_evict += int'(e_evict); n_free += int'(!e_hit && free);
    end
    checks++;
    if (n_hit == 0 || n_evict == 0 || n_free == 0) begin failures++; $display("FAIL cases not covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
