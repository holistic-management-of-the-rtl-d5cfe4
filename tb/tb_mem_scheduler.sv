// tb_mem_scheduler: self-check of the warp-type-aware memory scheduler
// against a reference model kept in the testbench. Three sources offer
// random requests (random mostly-hit bit, addresses from a small set so
// that DRAM rows repeat) and DRAM accepts at random. The reference keeps
// two lists in acceptance order and an open-row table, and for every
// request sent to DRAM predicts it: the high-priority list if it is not
// empty, else the low one; in the list, the oldest request to an open row,
// else the oldest. It also checks that every request leaves exactly once
// and that a full low-priority queue never stops a high-priority request.
module tb_mem_scheduler;
  import medic_pkg::*;
  localparam int NS = 3, QD = 4, DB = 4, LPR = 4;

  logic      clk = 0, rst_n = 0;
  logic      src_valid [NS];
  logic      src_ready [NS];
  dram_req_t src_req   [NS];
  logic      dram_valid, dram_ready;
  dram_req_t dram_req;
  logic [2:0] hq_count, lq_count;
  logic      hp_sel, row_hit_sel, reorder_sel;

  mem_scheduler #(.NUM_SRC(NS), .QUEUE_DEPTH(QD), .DRAM_BANKS(DB), .LINES_PER_ROW(LPR)) dut (.*);

  int checks = 0, failures = 0;
  dram_req_t rq_h [$], rq_l [$];
  int  open_row [DB];
  bit  open_v [DB];
  int  n_hp = 0, n_reorder = 0, n_rowhit = 0, n_high_while_lfull = 0, n_sent = 0, n_offered = 0;

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bank_of(logic [ADDR_W-1:0] a); return int'(a / LPR) % DB; endfunction
  function automatic int row_of(logic [ADDR_W-1:0] a);  return int'(a / (LPR * DB)); endfunction

  function automatic int pick(ref dram_req_t q [$]);
    foreach (q[i]) if (open_v[bank_of(q[i].addr)] && open_row[bank_of(q[i].addr)] == row_of(q[i].addr)) return i;
    return 0;
  endfunction

  task automatic new_req(int s);
    src_req[s].id     = REQID_W'(n_offered++);
    src_req[s].warp   = WARP_W'($urandom);
    src_req[s].addr   = ADDR_W'($urandom_range(0, 63));
    src_req[s].wtype  = WT_BALANCED;
    src_req[s].bypass = $urandom_range(0, 1) != 0;
    src_req[s].high   = $urandom_range(0, 3) == 0;
  endtask

  initial begin
    int idx;
    bit acc [NS];
    int h_before;
    dram_req_t exp;
    foreach (acc[s]) acc[s] = 0;
    for (int s = 0; s < NS; s++) begin src_valid[s] = 0; new_req(s); end
    dram_ready = 0;
    foreach (open_v[b]) begin open_v[b] = 0; open_row[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (acc[s]) begin src_valid[s] = 0; new_req(s); acc[s] = 0; end
      for (int s = 0; s < NS; s++) if (!src_valid[s]) src_valid[s] = $urandom_range(0, 2) != 0;
      // phases of slow and fast DRAM so the queues fill and drain
      dram_ready = ((cyc / 200) % 2 == 0) ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 3) != 0);
      #1;
      // prediction of the request leaving in this cycle
      h_before = rq_h.size();
      checks++;
      if (dram_valid != (rq_h.size() + rq_l.size() != 0)) begin
        failures++; $display("cycle %0d: dram_valid %0d, model holds %0d", cyc, dram_valid, rq_h.size() + rq_l.size());
      end
      if (dram_valid && dram_ready) begin
        if (rq_h.size() != 0) begin
          idx = pick(rq_h); exp = rq_h[idx]; rq_h.delete(idx);
          if (rq_l.size() != 0) n_hp++;
        end else begin
          idx = pick(rq_l); exp = rq_l[idx]; rq_l.delete(idx);
        end
        if (idx != 0) n_reorder++;
        if (open_v[bank_of(exp.addr)] && open_row[bank_of(exp.addr)] == row_of(exp.addr)) n_rowhit++;
        checks++;
        if (dram_req != exp) begin
          failures++; $display("cycle %0d: sent id %0d addr %0d, expected id %0d addr %0d",
                               cyc, dram_req.id, dram_req.addr, exp.id, exp.addr);
        end
        open_v[bank_of(exp.addr)] = 1;
        open_row[bank_of(exp.addr)] = row_of(exp.addr);
        n_sent++;
      end
      // acceptance into the queues at this edge
      for (int s = 0; s < NS; s++) begin
        if (src_valid[s] && src_req[s].high) begin
          checks++;   // a high request must get in whenever the high queue has room
          if (h_before < QD && !src_ready[s]) begin
            // only one high request per cycle may enter
            int others; others = 0;
            for (int o = 0; o < NS; o++) if (o != s && src_valid[o] && src_req[o].high && src_ready[o]) others++;
            if (others == 0) begin failures++; $display("cycle %0d: high request refused", cyc); end
          end
          if (src_ready[s] && rq_l.size() >= QD) n_high_while_lfull++;
        end
        acc[s] = src_valid[s] && src_ready[s];
        if (acc[s]) begin
          if (src_req[s].high) rq_h.push_back(src_req[s]); else rq_l.push_back(src_req[s]);
        end
      end
    end
    checks++;
    if (n_hp == 0 || n_reorder == 0 || n_rowhit == 0 || n_high_while_lfull == 0) begin
      failures++;
      $display("coverage: hp %0d reorder %0d rowhit %0d high-while-low-full %0d", n_hp, n_reorder, n_rowhit, n_high_while_lfull);
    end
    $display("sent %0d: high-first %0d, reordered %0d, row hits %0d, high accepted with low full %0d",
             n_sent, n_hp, n_reorder, n_rowhit, n_high_while_lfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
