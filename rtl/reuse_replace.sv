// reuse_replace: data reuse and Priority data replacement for one set of the
// storage-status table.
//
// Reuse: the requested column slice (tag) is looked for in all ways of its
// set; a match in a valid way is a hit, and the slice is used where it is
// without a memory WRITE. Replacement: on a miss the slice needs a slot. An
// empty (invalid) way is taken first, the lowest-numbered one. If the set is
// full, the way whose resident slice has the largest next-visit key, i.e.
// the slice whose next use lies furthest in the future, is swapped out
// (evict high); ties go to the lowest-numbered way. The rule of swapping out
// the slice visited again last follows the design's Priority policy; the
// per-set search and the tie rule are this design's choices.
//
// Combinational.
module reuse_replace #(
  parameter int unsigned WAYS = tc_pkg::WAYS,
  parameter int unsigned TAGW = 26,
  parameter int unsigned KEYW = 33,
  parameter int unsigned WAYB = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0]           set_valid,
  input  logic [WAYS-1:0][TAGW-1:0] set_tag,
  input  logic [WAYS-1:0][KEYW-1:0] set_key,
  input  logic [TAGW-1:0]           req_tag,
  output logic                      hit,
  output logic [WAYB-1:0]           hit_way,
  output logic [WAYB-1:0]           victim_way,
  output logic                      evict
);

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (set_valid[w] && set_tag[w] == req_tag) begin
        hit     = 1'b1;
        hit_way = WAYB'(w);
      end
    end
  end

  logic            found_free;
  logic [WAYB-1:0] free_way;
  logic [WAYB-1:0] far_way;
  logic [KEYW-1:0] far_key;

  always_comb begin
    found_free = 1'b0;
    free_way   = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!set_valid[w]) begin
        found_free = 1'b1;
        free_way   = WAYB'(w);
      end
    end
    far_way = '0;
    far_key = set_key[0];
    for (int w = 1; w < WAYS; w++) begin
      if (set_key[w] > far_key) begin
        far_key = set_key[w];
        far_way = WAYB'(w);
      end
    end
    victim_way = found_free ? free_way : far_way;
    evict      = !hit && !found_free;
  end

endmodule
