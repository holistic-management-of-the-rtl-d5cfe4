// tb_warp_type_id: self-check of warp type identification. Over many
// sampling intervals a random set of warps gets random numbers of L2
// lookups and hits on two update ports. At the end of each interval the
// type of every warp is compared with the hit-ratio bands of the paper,
// computed here in floating point: 100 % all-hit, >= 70 % mostly-hit,
// <= 20 % (and > 0) mostly-miss, 0 % all-miss, otherwise balanced; a warp
// without lookups is balanced. Counters are 4 bits wide here so that the
// saturation rule (stop counting when the access counter would overflow)
// is exercised. The interval length (64 cycles) is checked too.
module tb_warp_type_id;
  import medic_pkg::*;
  localparam int NW = 64, NU = 2, CW = 4, SI = 64, MAXC = (1 << CW) - 1;

  logic              clk = 0, rst_n = 0;
  logic              upd_valid [NU];
  logic [WARP_W-1:0] upd_warp  [NU];
  logic              upd_hit   [NU];
  logic [WARP_W-1:0] qry_warp, qry2_warp;
  warp_type_e        qry_type, qry2_type;
  logic              interval_end;

  int checks = 0, failures = 0;
  int ref_acc [NW], ref_hit [NW];
  int seen [5];

  warp_type_id #(.NUM_WARPS(NW), .NUM_UPD(NU), .CNT_W(CW), .SAMPLE_INTERVAL(SI)) dut (.*);

  always #500 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic warp_type_e ref_type(int h, int a);
    real r;
    if (a == 0) return WT_BALANCED;
    r = real'(h) / real'(a);
    if (h == a)     return WT_ALL_HIT;
    if (h == 0)     return WT_ALL_MISS;
    if (r >= 0.7)   return WT_MOSTLY_HIT;
    if (r <= 0.2)   return WT_MOSTLY_MISS;
    return WT_BALANCED;
  endfunction

  task automatic check_all_types(input string when);
    for (int w = 0; w < NW; w++) begin
      qry_warp = WARP_W'(w);
      qry2_warp = WARP_W'(NW - 1 - w);
      #1;
      checks += 2;
      if (qry2_type != ref_type(ref_hit[NW - 1 - w], ref_acc[NW - 1 - w])) begin
        failures++;
        $display("%s: second port, warp %0d type %0d", when, NW - 1 - w, qry2_type);
      end
      if (qry_type != ref_type(ref_hit[w], ref_acc[w])) begin
        failures++;
        $display("%s: warp %0d type %0d, expected %0d (hits %0d acc %0d)",
                 when, w, qry_type, ref_type(ref_hit[w], ref_acc[w]), ref_hit[w], ref_acc[w]);
      end
      seen[int'(qry_type)]++;
    end
  endtask

  initial begin
    int active [8];
    int pct [8];
    int cyc, last_end, inc_a [NW], inc_h [NW];
    for (int p = 0; p < NU; p++) begin upd_valid[p] = 0; upd_warp[p] = '0; upd_hit[p] = 0; end
    qry_warp = '0;
    qry2_warp = '0;
    foreach (ref_acc[w]) begin ref_acc[w] = 0; ref_hit[w] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    check_all_types("after reset");
    last_end = -1;
    cyc = 0;
    for (int iv = 0; iv < 40; iv++) begin
      foreach (ref_acc[w]) begin ref_acc[w] = 0; ref_hit[w] = 0; end
      for (int k = 0; k < 8; k++) begin
        active[k] = $urandom_range(0, NW - 1);
        pct[k]    = (k == 0) ? 100 : (k == 1) ? 0 : $urandom_range(0, 100);
      end
      // drive updates until the interval ends
      forever begin
        @(negedge clk);
        cyc++;
        if (interval_end) begin
          for (int p = 0; p < NU; p++) upd_valid[p] = 0;
          checks++;
          if (last_end >= 0 && cyc - last_end != SI) begin
            failures++; $display("interval length %0d", cyc - last_end);
          end
          last_end = cyc;
          break;
        end
        foreach (inc_a[w]) begin inc_a[w] = 0; inc_h[w] = 0; end
        for (int p = 0; p < NU; p++) begin
          int k;
          k = $urandom_range(0, 7);
          upd_valid[p] = $urandom_range(0, 3) != 0;
          upd_warp[p]  = WARP_W'(active[k]);
          upd_hit[p]   = $urandom_range(1, 100) <= pct[k];
          if (upd_valid[p]) begin
            inc_a[active[k]]++;
            if (upd_hit[p]) inc_h[active[k]]++;
          end
        end
        foreach (inc_a[w])
          if (ref_acc[w] + inc_a[w] <= MAXC) begin
            ref_acc[w] += inc_a[w];
            ref_hit[w] += inc_h[w];
          end
      end
      @(negedge clk);
      cyc++;
      check_all_types($sformatf("interval %0d", iv));
    end
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (seen[t] == 0) begin failures++; $display("warp type %0d never produced", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
