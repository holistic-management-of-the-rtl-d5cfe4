// insertion_policy: warp-type-aware replacement and insertion for one L2 set.
//
// Each way of a set has a recency position (age 0 = MRU, WAYS-1 = LRU; the
// ages of a set are always a permutation of 0..WAYS-1) and a 2-bit class
// giving the warp type of the warp that brought the block in (paper: "two
// bits of metadata ... appended to the replacement policy bits").
//
// Victim: the first invalid way, else the valid way with the lowest class
// and, among those, the oldest. So a mostly-miss block goes before a
// balanced block, which goes before a mostly-hit/all-hit block, as the paper
// requires; LRU decides within a class.
// Insertion: a fill goes in at MRU for mostly-hit/all-hit warps, in the
// middle (age WAYS/2) for balanced warps and at LRU for mostly-miss/all-miss
// warps (paper: "closer to the MRU/LRU position"; the exact positions are
// this design's choice). A hit moves the block to MRU.
//
// The move of the target way to age p is done as in an LRU stack: ways
// older than the target's old age move one step younger, then ways at age
// >= p move one step older.
//
// Interface/timing: combinational. op_fill=0: hit update of way_i.
// op_fill=1, use_way=1: refill of way_i (line already present);
// op_fill=1, use_way=0: fill into victim_o. target_o is the way written.
module insertion_policy
  import medic_pkg::*;
#(
  parameter int unsigned WAYS = 8,
  localparam int unsigned AW  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic          valid_i [WAYS],
  input  logic [AW-1:0] age_i   [WAYS],
  input  ins_class_e    cls_i   [WAYS],
  input  logic          op_fill,
  input  logic          use_way,
  input  logic [AW-1:0] way_i,
  input  ins_class_e    new_cls,
  output logic [AW-1:0] victim_o,
  output logic [AW-1:0] target_o,
  output logic [AW-1:0] age_o   [WAYS]
);
  logic          found_inv;
  logic [AW-1:0] best;
  logic [AW+1:0] best_key, key;
  logic [AW-1:0] pos, a_t, a;

  always_comb begin
    // victim search
    found_inv = 1'b0;
    victim_o  = '0;
    best      = '0;
    best_key  = '1;
    for (int w = 0; w < WAYS; w++) begin
      key = {cls_i[w], ~age_i[w]};  // smaller key = evicted first
      if (!valid_i[w] && !found_inv) begin
        found_inv = 1'b1;
        victim_o  = AW'(w);
      end
      if (key < best_key || w == 0) begin
        best_key = key;
        best     = AW'(w);
      end
    end
    if (!found_inv) victim_o = best;

    target_o = (op_fill && !use_way) ? victim_o : way_i;

    if (!op_fill)                pos = '0;
    else if (new_cls == CLS_HIT) pos = '0;
    else if (new_cls == CLS_BAL) pos = AW'(WAYS / 2);
    else                         pos = AW'(WAYS - 1);

    a_t = age_i[target_o];
    for (int w = 0; w < WAYS; w++) begin
      a = age_i[w];
      if (a > a_t) a = a - 1'b1;
      if (a >= pos) a = a + 1'b1;
      age_o[w] = (AW'(w) == target_o) ? pos : a;
    end
  end
endmodule
