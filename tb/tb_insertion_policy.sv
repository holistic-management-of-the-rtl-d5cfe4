// tb_insertion_policy: random self-check of the warp-type-aware replacement
// of one set. The expected victim and recency order are computed by a
// reference written differently from the design: the set is kept as a list
// of ways ordered MRU -> LRU; a move deletes the way from the list and
// re-inserts it at the insertion position (MRU for mostly-hit/all-hit, the
// middle for balanced, LRU for mostly-miss/all-miss, MRU for a hit).
module tb_insertion_policy;
  import medic_pkg::*;
  localparam int WAYS = 8;
  localparam int AW   = 3;

  logic          valid_i [WAYS];
  logic [AW-1:0] age_i   [WAYS];
  ins_class_e    cls_i   [WAYS];
  logic          op_fill, use_way;
  logic [AW-1:0] way_i, victim_o, target_o;
  ins_class_e    new_cls;
  logic [AW-1:0] age_o   [WAYS];

  int checks = 0, failures = 0;

  insertion_policy #(.WAYS(WAYS)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[$];
    int exp_victim, t, pos, best;
    int n_miss_evict = 0, n_lru_ins = 0;
    for (int iter = 0; iter < 3000; iter++) begin
      // random permutation of ages
      order.delete();
      for (int w = 0; w < WAYS; w++) order.push_back(w);
      order.shuffle();                         // order[k] = way at age k
      for (int k = 0; k < WAYS; k++) age_i[order[k]] = AW'(k);
      for (int w = 0; w < WAYS; w++) begin
        valid_i[w] = ($urandom_range(0, 9) != 0) || iter < 1000;
        cls_i[w]   = ins_class_e'($urandom_range(0, 2));
      end
      op_fill = $urandom_range(0, 2) != 0;
      use_way = $urandom_range(0, 3) == 0;
      way_i   = AW'($urandom_range(0, WAYS - 1));
      new_cls = ins_class_e'($urandom_range(0, 2));
      #1;
      // reference victim
      exp_victim = -1;
      for (int w = 0; w < WAYS; w++) if (!valid_i[w] && exp_victim < 0) exp_victim = w;
      if (exp_victim < 0) begin
        best = 0;
        for (int w = 1; w < WAYS; w++)
          if (cls_i[w] < cls_i[best] || (cls_i[w] == cls_i[best] && age_i[w] > age_i[best]))
            best = w;
        exp_victim = best;
      end
      checks++;
      if (int'(victim_o) != exp_victim) begin
        failures++;
        $display("victim mismatch iter %0d: got %0d exp %0d", iter, victim_o, exp_victim);
      end
      if (int'(victim_o) == exp_victim && cls_i[exp_victim] == CLS_MISS) n_miss_evict++;
      // reference move
      t   = (op_fill && !use_way) ? exp_victim : int'(way_i);
      pos = !op_fill ? 0 : (new_cls == CLS_HIT) ? 0 : (new_cls == CLS_BAL) ? WAYS / 2 : WAYS - 1;
      if (op_fill && pos == WAYS - 1) n_lru_ins++;
      foreach (order[k]) if (order[k] == t) begin order.delete(k); break; end
      order.insert(pos, t);
      for (int k = 0; k < WAYS; k++) begin
        checks++;
        if (int'(age_o[order[k]]) != k) begin
          failures++;
          $display("age mismatch iter %0d way %0d: got %0d exp %0d", iter, order[k], age_o[order[k]], k);
        end
      end
      checks++;
      if (int'(target_o) != t) begin failures++; $display("target mismatch"); end
    end
    checks++;
    if (n_miss_evict == 0 || n_lru_ins == 0) begin failures++; $display("coverage hole"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
