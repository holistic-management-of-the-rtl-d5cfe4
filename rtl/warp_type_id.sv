// warp_type_id: warp type identification logic of the MeDiC partition.
//
// For every warp it keeps two counters, L2 hits and L2 accesses, over a
// sampling interval (the paper's "two counters appended to the metadata of
// each warp"). Each L2 bank reports every finished lookup as (warp, hit) on
// one of the NUM_UPD update ports; all ports are counted in the same cycle.
// When the interval of SAMPLE_INTERVAL cycles ends, every warp that was
// looked up at least once is reclassified from its hit ratio into one of
// the paper's five types (all-hit 100 %, mostly-hit 70..<100 %, balanced
// 20..70 %, mostly-miss >0..20 %, all-miss 0 %), and both counters are
// cleared. Classification uses constant multiplies (hits*10 >= acc*7,
// hits*5 <= acc), one comparator pair per warp.
//
// Own choices, where the paper is silent: the interval is counted in
// cycles; a warp whose access counter would overflow stops counting for the
// rest of the interval, so its ratio stays exact; after reset every warp is
// balanced; a warp with no L2 lookup in an interval (for example because
// every request it made was bypassed) returns to balanced, so that it is
// measured again in the next interval.
//
// Interface/timing: qry_type / qry2_type are combinational reads of the
// stored type of qry_warp / qry2_warp (two read ports: one for arriving
// requests, one for lines returning from DRAM). upd_* is sampled on the clock edge. interval_end is high in the
// last cycle of an interval; the new types are visible the cycle after. A
// lookup reported in that last cycle is not counted.
module warp_type_id
  import medic_pkg::*;
#(
  parameter int unsigned NUM_WARPS       = 720,
  parameter int unsigned NUM_UPD         = 4,
  parameter int unsigned CNT_W           = 8,
  parameter int unsigned SAMPLE_INTERVAL = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              upd_valid [NUM_UPD],
  input  logic [WARP_W-1:0] upd_warp  [NUM_UPD],
  input  logic              upd_hit   [NUM_UPD],
  input  logic [WARP_W-1:0] qry_warp,
  output warp_type_e        qry_type,
  input  logic [WARP_W-1:0] qry2_warp,
  output warp_type_e        qry2_type,
  output logic              interval_end
);
  localparam int unsigned TW = $clog2(SAMPLE_INTERVAL);
  localparam int unsigned IW = $clog2(NUM_UPD + 1);

  logic [CNT_W-1:0] hits [NUM_WARPS];
  logic [CNT_W-1:0] accs [NUM_WARPS];
  warp_type_e       wtype [NUM_WARPS];
  logic [TW-1:0]    timer;
  logic [IW-1:0]    inc_a [NUM_WARPS];
  logic [IW-1:0]    inc_h [NUM_WARPS];

  assign interval_end = (timer == TW'(SAMPLE_INTERVAL - 1));
  assign qry_type     = wtype[qry_warp];
  assign qry2_type    = wtype[qry2_warp];

  always_comb begin
    for (int w = 0; w < NUM_WARPS; w++) begin
      inc_a[w] = '0;
      inc_h[w] = '0;
      for (int p = 0; p < NUM_UPD; p++)
        if (upd_valid[p] && int'(upd_warp[p]) == w) begin
          inc_a[w] = inc_a[w] + 1'b1;
          if (upd_hit[p]) inc_h[w] = inc_h[w] + 1'b1;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      timer <= '0;
      for (int w = 0; w < NUM_WARPS; w++) begin
        hits[w]  <= '0;
        accs[w]  <= '0;
        wtype[w] <= WT_BALANCED;
      end
    end else begin
      timer <= interval_end ? '0 : timer + 1'b1;
      for (int w = 0; w < NUM_WARPS; w++) begin
        if (interval_end) begin
          wtype[w] <= (accs[w] == '0) ? WT_BALANCED
                                      : classify(int'(hits[w]), int'(accs[w]));
          hits[w]  <= '0;
          accs[w]  <= '0;
        end else if ({1'b0, accs[w]} + (CNT_W+1)'(inc_a[w]) <= (CNT_W+1)'({CNT_W{1'b1}})) begin
          accs[w] <= accs[w] + CNT_W'(inc_a[w]);
          hits[w] <= hits[w] + CNT_W'(inc_h[w]);
        end
      end
    end
  end
endmodule
