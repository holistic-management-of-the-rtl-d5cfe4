// tb_l2_bank: self-check of one L2 bank against a reference cache kept in
// the testbench. Random requests of random warp types go into the request
// buffer; hit and miss outputs are drained at random; every miss comes back
// as a fill after a random delay and in random order, as DRAM would. The
// reference holds, per set, the ways in MRU -> LRU order with tag, valid
// and class, and applies the paper's rules: a hit moves the block to MRU;
// a fill evicts the first invalid way, else the lowest class (mostly-miss
// before balanced before mostly-hit), oldest first, and is inserted at MRU,
// the middle or LRU by the requesting warp's type. Every cycle it predicts
// whether a lookup takes place, its hit/miss outcome, and one cycle later
// the reply (with the line's data) or the miss request.
module tb_l2_bank;
  import medic_pkg::*;
  import tb_medic_util_pkg::*;
  localparam int NB = 4, SETS = 4, WAYS = 4, DEPTH = 4;

  logic       clk = 0, rst_n = 0;
  logic       req_valid, req_ready;
  l2_req_t    req;
  logic       hit_valid, hit_ready;
  mem_resp_t  hit_resp;
  logic       miss_valid, miss_ready;
  dram_req_t  miss_req;
  logic       fill_valid;
  dram_resp_t fill;
  logic       upd_valid;
  logic [WARP_W-1:0] upd_warp;
  logic       upd_hit;
  logic [2:0] buf_count;

  l2_bank #(.NUM_BANKS(NB), .SETS(SETS), .WAYS(WAYS), .REQ_BUF_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // reference cache
  int  order [SETS][$];
  bit  rvalid [SETS][WAYS];
  int  rtag   [SETS][WAYS];
  ins_class_e rcls [SETS][WAYS];
  l2_req_t rfifo [$];
  dram_req_t dram_list [$];
  int n_hit = 0, n_miss = 0, n_fill = 0, n_evict_miss_cls = 0, n_evict_over_hit = 0, n_lru_ins = 0,
      n_fill_blocks_lookup = 0;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int set_of(logic [ADDR_W-1:0] a); return int'(a / NB) % SETS; endfunction
  function automatic int tag_of(logic [ADDR_W-1:0] a); return int'(a / (NB * SETS)); endfunction

  function automatic int find(int s, int t);
    for (int w = 0; w < WAYS; w++) if (rvalid[s][w] && rtag[s][w] == t) return w;
    return -1;
  endfunction

  task automatic move(int s, int w, int pos);
    foreach (order[s][k]) if (order[s][k] == w) begin order[s].delete(k); break; end
    order[s].insert(pos, w);
  endtask

  task automatic ref_fill(dram_req_t r);
    int s, w, pos;
    ins_class_e c;
    bit has_hit_cls;
    s = set_of(r.addr);
    c = ins_class(r.wtype);
    w = find(s, tag_of(r.addr));
    if (w < 0) begin
      for (int k = 0; k < WAYS; k++) if (!rvalid[s][k] && w < 0) w = k;
      if (w < 0) begin
        // lowest class, then oldest: scan from LRU end
        w = order[s][WAYS-1];
        for (int k = WAYS - 1; k >= 0; k--) if (rcls[s][order[s][k]] < rcls[s][w]) w = order[s][k];
        has_hit_cls = 0;
        for (int k = 0; k < WAYS; k++) if (rcls[s][k] == CLS_HIT) has_hit_cls = 1;
        if (rcls[s][w] == CLS_MISS) n_evict_miss_cls++;
        if (rcls[s][w] != CLS_HIT && has_hit_cls && rcls[s][order[s][WAYS-1]] == CLS_HIT) n_evict_over_hit++;
      end
    end
    pos = (c == CLS_HIT) ? 0 : (c == CLS_BAL) ? WAYS / 2 : WAYS - 1;
    if (pos == WAYS - 1) n_lru_ins++;
    move(s, w, pos);
    rvalid[s][w] = 1; rtag[s][w] = tag_of(r.addr); rcls[s][w] = c;
  endtask

  task automatic new_req();
    req.id    = REQID_W'($urandom);
    req.warp  = WARP_W'($urandom);
    req.addr  = ADDR_W'($urandom_range(0, SETS * 8 - 1) * NB + 1);   // bank 1, 8 tags per set
    req.wtype = warp_type_e'($urandom_range(0, 4));
  endtask

  initial begin
    bit exp_hv, exp_mv, exp_lk, acc, ref_hit;
    mem_resp_t exp_h;
    dram_req_t exp_m;
    l2_req_t head;
    int k, s, w;
    for (int i = 0; i < SETS; i++) begin
      order[i].delete();
      for (int j = 0; j < WAYS; j++) begin order[i].push_back(j); rvalid[i][j] = 0; rtag[i][j] = 0; rcls[i][j] = CLS_MISS; end
    end
    req_valid = 0; hit_ready = 0; miss_ready = 0; fill_valid = 0; fill = '0; new_req();
    exp_hv = 0; exp_mv = 0; acc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      if (acc) begin new_req(); req_valid = 0; end
      if (!req_valid) req_valid = $urandom_range(0, 2) != 0;
      hit_ready  = $urandom_range(0, 3) != 0;
      miss_ready = $urandom_range(0, 3) != 0;
      fill_valid = (dram_list.size() != 0) && ($urandom_range(0, 3) == 0);
      if (fill_valid) begin
        k = $urandom_range(0, dram_list.size() - 1);
        fill.req  = dram_list[k];
        fill.data = line_data(dram_list[k].addr);
        dram_list.delete(k);
      end
      #1;
      // outputs registered at the previous edge
      checks += 3;
      if (hit_valid != exp_hv || (exp_hv && hit_resp != exp_h)) begin
        failures++; $display("cycle %0d: hit reply v%0d id %0d, expected v%0d id %0d (addr %0d/%0d warp %0d/%0d data %0d)", cyc, hit_valid, hit_resp.id, exp_hv, exp_h.id, hit_resp.addr, exp_h.addr, hit_resp.warp, exp_h.warp, hit_resp.data == exp_h.data);
      end
      if (miss_valid != exp_mv || (exp_mv && miss_req != exp_m)) begin
        failures++; $display("cycle %0d: miss v%0d id %0d, expected v%0d id %0d", cyc, miss_valid, miss_req.id, exp_mv, exp_m.id);
      end
      if (req_ready != (rfifo.size() < DEPTH)) begin failures++; $display("cycle %0d: req_ready", cyc); end
      if (hit_valid && hit_ready) exp_hv = 0;
      if (miss_valid && miss_ready) begin exp_mv = 0; dram_list.push_back(miss_req); end
      // lookup in this cycle?
      exp_lk = rfifo.size() != 0 && !fill_valid && (!hit_valid || hit_ready) && (!miss_valid || miss_ready);
      if (rfifo.size() != 0 && fill_valid) n_fill_blocks_lookup++;
      checks++;
      if (upd_valid != exp_lk) begin failures++; $display("cycle %0d: lookup %0d expected %0d", cyc, upd_valid, exp_lk); end
      if (fill_valid) begin ref_fill(fill.req); n_fill++; end
      if (exp_lk) begin
        head = rfifo.pop_front();
        s = set_of(head.addr);
        w = find(s, tag_of(head.addr));
        ref_hit = (w >= 0);
        checks++;
        if (upd_hit != ref_hit || upd_warp != head.warp) begin
          failures++; $display("cycle %0d: lookup addr %0d hit %0d expected %0d", cyc, head.addr, upd_hit, ref_hit);
        end
        if (ref_hit) begin
          n_hit++;
          move(s, w, 0);
          rcls[s][w] = ins_class(head.wtype);
          exp_hv = 1;
          exp_h  = '{id: head.id, warp: head.warp, addr: head.addr, l2_hit: 1'b1, data: line_data(head.addr)};
        end else begin
          n_miss++;
          exp_mv = 1;
          exp_m  = '{id: head.id, warp: head.warp, addr: head.addr, wtype: head.wtype, bypass: 1'b0,
                     high: (head.wtype == WT_ALL_HIT || head.wtype == WT_MOSTLY_HIT)};
        end
      end
      acc = req_valid && req_ready;
      if (acc) rfifo.push_back(req);
    end
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_evict_miss_cls == 0 || n_evict_over_hit == 0 || n_lru_ins == 0 || n_fill_blocks_lookup == 0) begin
      failures++; $display("coverage hole");
    end
    $display("hits %0d misses %0d fills %0d; evicted mostly-miss blocks %0d, kept an older mostly-hit block %0d times, LRU insertions %0d",
             n_hit, n_miss, n_fill, n_evict_miss_cls, n_evict_over_hit, n_lru_ins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
