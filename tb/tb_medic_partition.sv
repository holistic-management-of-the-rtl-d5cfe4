// tb_medic_partition: end-to-end test of the MeDiC memory partition at its
// default parameters, with a behavioural DRAM (dram_model).
//
// 64 warps (ids 0, 11, 22, ... so that the whole id range is used), in
// five groups by index g = id / 11, issue line reads, one offered per cycle:
//   warps  0..15  reuse a private set of 8 lines      (should become all-hit)
//   warps 16..31  stream through new lines            (all-miss, bypassed)
//   warps 32..47  half reuse, half stream             (balanced)
//   warps 48..55  90 % reuse                          (mostly-hit)
//   warps 56..63  10 % reuse                          (mostly-miss)
// Every reply is checked against the request it answers (id, warp, address)
// and against the line's content; every request must be answered exactly
// once. A directed prologue checks the hit latency: a hit in an idle bank
// accepted in cycle c is answered in cycle c+2 (one cycle in the request
// buffer, the one-cycle lookup the paper assumes, then the reply). The test counts
// each mechanism of the design and fails if one never happened: the five
// warp types, reclassification, bypassing, L2 hits, DRAM replies, fills at
// MRU / middle / LRU, high-priority-first scheduling, FR-FCFS reordering,
// request-buffer backpressure. It also checks that, after warm-up, requests
// of the reuse warps are classified mostly-hit or all-hit and that those of
// the streaming warps are bypassed.
module tb_medic_partition;
  import medic_pkg::*;
  import tb_medic_util_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       req_valid, req_ready;
  mem_req_t   req;
  logic       resp_valid, resp_ready;
  mem_resp_t  resp;
  logic       dram_req_valid, dram_req_ready;
  dram_req_t  dram_req;
  logic       dram_resp_valid, dram_resp_ready;
  dram_resp_t dram_resp;
  logic       ev_interval_end, ev_hp_sel, ev_row_hit, ev_reorder;
  logic [4:0] hq_count, lq_count;
  logic [3:0] buf_count [4];   // REQ_BUF_DEPTH = 8

  medic_partition dut (.*);

  dram_model #(.LATENCY(60), .ROW_HIT_LATENCY(30), .MAX_INFLIGHT(16)) u_dram (
    .clk, .rst_n,
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .resp_valid(dram_resp_valid), .resp_ready(dram_resp_ready), .resp(dram_resp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // outstanding requests by id
  mem_req_t outst [int];
  int unsigned next_addr = 32'h10000;
  int n_sent = 0, n_resp = 0;
  int n_type [5];
  int n_byp = 0, n_l2hit = 0, n_dram = 0, n_fill [3], n_hp = 0, n_reorder = 0, n_rowhit = 0,
      n_interval = 0, n_stall = 0;
  int late_reuse = 0, late_reuse_high = 0, late_stream = 0, late_stream_byp = 0;

  task automatic fail(string m);
    failures++;
    $display("FAIL @%0d: %s", cycle, m);
  endtask

  initial begin
    #20_000_000;
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] reuse_line(int w);
    return ADDR_W'(w * 64 + $urandom_range(0, 7) * 4 + (w % 4));  // 8 lines, one bank per warp
  endfunction

  function automatic mem_req_t make_req(int id);
    mem_req_t r;
    int w, pct;
    w = $urandom_range(0, 63);
    pct = (w < 16) ? 100 : (w < 32) ? 0 : (w < 48) ? 50 : (w < 56) ? 90 : 10;
    r.id   = REQID_W'(id);
    r.warp = WARP_W'(w * 11);   // spread over the 720 warp ids
    if ($urandom_range(1, 100) <= pct) r.addr = reuse_line(w);
    else begin r.addr = ADDR_W'(next_addr); next_addr++; end
    return r;
  endfunction

  // ---------------- reply checker and event counters ----------------
  always @(negedge clk) if (rst_n) begin
    if (resp_valid && resp_ready) begin
      checks++;
      if (!outst.exists(int'(resp.id))) fail($sformatf("reply with unknown id %0d", resp.id));
      else begin
        if (resp.warp != outst[int'(resp.id)].warp || resp.addr != outst[int'(resp.id)].addr)
          fail($sformatf("reply id %0d for wrong request", resp.id));
        outst.delete(int'(resp.id));
      end
      checks++;
      if (resp.data != line_data(resp.addr)) fail($sformatf("wrong data for line %h", resp.addr));
      n_resp++;
      if (resp.l2_hit) n_l2hit++; else n_dram++;
    end
    // class each bank actually used for its fills
    if (dut.g_bank[0].u_bank.fill_valid) n_fill[int'(dut.g_bank[0].u_bank.new_cls)]++;
    if (dut.g_bank[1].u_bank.fill_valid) n_fill[int'(dut.g_bank[1].u_bank.new_cls)]++;
    if (dut.g_bank[2].u_bank.fill_valid) n_fill[int'(dut.g_bank[2].u_bank.new_cls)]++;
    if (dut.g_bank[3].u_bank.fill_valid) n_fill[int'(dut.g_bank[3].u_bank.new_cls)]++;
    if (ev_hp_sel) n_hp++;
    if (ev_reorder) n_reorder++;
    if (ev_row_hit) n_rowhit++;
    if (ev_interval_end) n_interval++;
    if (req_valid && !req_ready) n_stall++;
    if (req_valid && req_ready) begin
      n_type[int'(dut.typed_req.wtype)]++;
      if (dut.byp_valid) n_byp++;
      if (cycle > 3 * 2048) begin
        if (req.warp / 11 < 16) begin
          late_reuse++;
          if (is_high(dut.typed_req.wtype)) late_reuse_high++;
        end else if (req.warp / 11 < 32) begin
          late_stream++;
          if (dut.byp_valid) late_stream_byp++;
        end
      end
    end
  end

  initial begin
    int id, t0, t1;
    mem_req_t r;
    req_valid = 0; req = '0; resp_ready = 1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- directed prologue: miss, then hit latency ----
    r = '{id: 8'd0, warp: '0, addr: ADDR_W'(25'h123)};
    for (int k = 0; k < 2; k++) begin
      req = r; req.id = REQID_W'(k); req_valid = 1;
      outst[k] = req;
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      t0 = cycle;
      @(negedge clk);
      req_valid = 0;
      n_sent++;
      while (!(resp_valid && resp.id == REQID_W'(k))) @(negedge clk);
      t1 = cycle;
      checks++;
      if (k == 0 && resp.l2_hit) fail("first access hit");
      if (k == 1) begin
        if (!resp.l2_hit) fail("second access missed");
        checks++;
        if (t1 - t0 != 2) fail($sformatf("hit latency %0d cycles, expected 2", t1 - t0));
      end
      @(negedge clk);
    end

    // ---- random traffic over several sampling intervals ----
    id = 2;
    while (cycle < 6 * 2048) begin
      if (!req_valid && outst.size() < 200) begin
        while (outst.exists(id % 256)) id++;
        req = make_req(id % 256);
        id++;
        req_valid = 1;
      end
      resp_ready = $urandom_range(0, 9) != 0;
      #1;
      if (req_valid && req_ready) begin
        outst[int'(req.id)] = req;
        n_sent++;
        @(negedge clk);
        req_valid = 0;
      end else @(negedge clk);
    end
    req_valid = 0;
    resp_ready = 1;
    // ---- drain ----
    t0 = cycle;
    while (outst.size() != 0 && cycle - t0 < 20000) @(negedge clk);
    checks++;
    if (outst.size() != 0) fail($sformatf("%0d requests never answered", outst.size()));

    // ---- mechanism coverage ----
    $display("requests %0d, replies %0d (L2 hits %0d, from DRAM %0d), bypassed %0d",
             n_sent, n_resp, n_l2hit, n_dram, n_byp);
    $display("warp types seen: all-hit %0d mostly-hit %0d balanced %0d mostly-miss %0d all-miss %0d",
             n_type[0], n_type[1], n_type[2], n_type[3], n_type[4]);
    $display("fills: at LRU %0d, middle %0d, at MRU %0d; high-priority-first %0d, FR-FCFS reorder %0d, row hits %0d",
             n_fill[0], n_fill[1], n_fill[2], n_hp, n_reorder, n_rowhit);
    $display("intervals %0d, request stalls %0d; late reuse requests high %0d/%0d, late stream requests bypassed %0d/%0d",
             n_interval, n_stall, late_reuse_high, late_reuse, late_stream_byp, late_stream);
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (n_type[t] == 0) fail($sformatf("warp type %0d never seen", t));
    end
    checks += 8;
    if (n_byp == 0) fail("no bypass");
    if (n_l2hit == 0 || n_dram == 0) fail("no L2 hit or no DRAM reply");
    if (n_fill[0] == 0 || n_fill[1] == 0 || n_fill[2] == 0) fail("a fill class never happened");
    if (n_hp == 0) fail("high-priority queue never went first");
    if (n_reorder == 0) fail("FR-FCFS never reordered");
    if (n_interval < 5) fail("too few sampling intervals");
    if (n_stall == 0) fail("request buffer never pushed back");
    if (n_resp != n_sent) fail("reply count differs from request count");
    checks += 2;
    if (late_reuse == 0 || late_reuse_high * 10 < late_reuse * 9)
      fail("reuse warps not classified mostly-hit/all-hit");
    if (late_stream == 0 || late_stream_byp * 2 < late_stream)
      fail("streaming warps not bypassed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
