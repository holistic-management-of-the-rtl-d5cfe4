// medic_partition: one GPU memory partition with Memory Divergence
// Correction (MeDiC).
//
// Data path, in the order of the paper's overview figure:
//   request -> warp_type_id (the warp's current type is attached)
//           -> bypass_logic: mostly-miss / all-miss warps go straight to the
//              DRAM queues, the rest to the request buffer of an L2 bank
//           -> l2_bank x NUM_BANKS: hit -> reply; miss -> DRAM queues
//           -> mem_scheduler: high-priority queue (mostly-hit / all-hit
//              warps) always before the low-priority queue, FR-FCFS in each
//           -> DRAM (outside this module, dram_req_* / dram_resp_*)
//   DRAM line -> reply, and, unless the request was bypassed, a fill of the
//              bank by the warp-type-aware insertion policy, which places
//              the line by the type the requesting warp has when the line
//              returns (the paper draws the insertion policy on the path
//              from DRAM back into the banks).
// Every L2 lookup feeds its hit/miss back to warp_type_id, which reclassifies
// all warps at the end of each sampling interval.
//
// Own choices (the paper gives no sizes or interfaces): all requests are
// line reads; replies of the banks and of DRAM share the reply port through
// a round-robin arbiter, and a DRAM line is taken (and filled) only when it
// wins that arbiter; the bank of a line is its low address bits.
//
// Interface/timing: all four ports are valid/ready. A request that hits in
// an idle bank, accepted in cycle c, is looked up in cycle c+1 and its reply
// is valid in cycle c+2. DRAM latency is whatever the DRAM behind
// dram_req_*/dram_resp_* takes; dram_resp_* may return lines in any order.
module medic_partition
  import medic_pkg::*;
#(
  parameter int unsigned NUM_WARPS       = 720,
  parameter int unsigned NUM_BANKS       = 4,
  parameter int unsigned SETS            = 32,
  parameter int unsigned WAYS            = 8,
  parameter int unsigned REQ_BUF_DEPTH   = 8,
  parameter int unsigned QUEUE_DEPTH     = 16,
  parameter int unsigned DRAM_BANKS      = 16,
  parameter int unsigned LINES_PER_ROW   = 16,
  parameter int unsigned CNT_W           = 8,
  parameter int unsigned SAMPLE_INTERVAL = 2048
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output mem_resp_t  resp,
  output logic       dram_req_valid,
  input  logic       dram_req_ready,
  output dram_req_t  dram_req,
  input  logic       dram_resp_valid,
  output logic       dram_resp_ready,
  input  dram_resp_t dram_resp,
  // status: one-cycle event pulses and queue occupancies
  output logic       ev_interval_end,  // warp types were re-evaluated
  output logic       ev_hp_sel,        // high-priority request went first
  output logic       ev_row_hit,       // request sent to DRAM hits the open row
  output logic       ev_reorder,       // FR-FCFS passed an older request
  output logic [$clog2(QUEUE_DEPTH+1)-1:0]   hq_count,
  output logic [$clog2(QUEUE_DEPTH+1)-1:0]   lq_count,
  output logic [$clog2(REQ_BUF_DEPTH+1)-1:0] buf_count [NUM_BANKS]
);
  localparam int unsigned BW   = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;
  localparam int unsigned NSRC = NUM_BANKS + 1;   // bank misses + bypass
  localparam int unsigned NRSP = NUM_BANKS + 1;   // bank hits + DRAM
  localparam int unsigned RW   = $clog2(NRSP);

  // ---------------- (1) warp type identification ----------------
  warp_type_e        qry_type, fill_type;
  logic              upd_valid [NUM_BANKS];
  logic [WARP_W-1:0] upd_warp  [NUM_BANKS];
  logic              upd_hit   [NUM_BANKS];

  warp_type_id #(.NUM_WARPS(NUM_WARPS), .NUM_UPD(NUM_BANKS), .CNT_W(CNT_W),
                 .SAMPLE_INTERVAL(SAMPLE_INTERVAL)) u_wtid (
    .clk, .rst_n, .upd_valid, .upd_warp, .upd_hit,
    .qry_warp(req.warp), .qry_type,
    .qry2_warp(dram_resp.req.warp), .qry2_type(fill_type),
    .interval_end(ev_interval_end));

  l2_req_t typed_req;
  assign typed_req = '{id: req.id, warp: req.warp, addr: req.addr, wtype: qry_type};

  // ---------------- (2) warp-type-aware bypassing ----------------
  logic      bank_in_valid [NUM_BANKS];
  logic      bank_in_ready [NUM_BANKS];
  l2_req_t   bank_in;
  logic      byp_valid, byp_ready;
  dram_req_t byp_req;

  bypass_logic #(.NUM_BANKS(NUM_BANKS)) u_byp (
    .in_valid(req_valid), .in_ready(req_ready), .in_req(typed_req),
    .bank_valid(bank_in_valid), .bank_ready(bank_in_ready), .bank_req(bank_in),
    .byp_valid, .byp_ready, .byp_req);

  // ---------------- L2 banks with (3) warp-type-aware insertion ----------------
  logic       src_valid [NSRC];
  logic       src_ready [NSRC];
  dram_req_t  src_req   [NSRC];
  logic       rsp_valid [NRSP];
  logic       rsp_ready [NRSP];
  mem_resp_t  rsp       [NRSP];
  logic       fill_fire;
  logic [BW-1:0] fill_bank;
  dram_resp_t fill_line;

  // A returning line is inserted according to the type its warp has now.
  always_comb begin
    fill_line           = dram_resp;
    fill_line.req.wtype = fill_type;
  end

  assign fill_bank = (NUM_BANKS > 1) ? BW'(dram_resp.req.addr) : '0;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    l2_bank #(.NUM_BANKS(NUM_BANKS), .SETS(SETS), .WAYS(WAYS),
              .REQ_BUF_DEPTH(REQ_BUF_DEPTH)) u_bank (
      .clk, .rst_n,
      .req_valid (bank_in_valid[b]), .req_ready(bank_in_ready[b]), .req(bank_in),
      .hit_valid (rsp_valid[b]), .hit_ready(rsp_ready[b]), .hit_resp(rsp[b]),
      .miss_valid(src_valid[b]), .miss_ready(src_ready[b]), .miss_req(src_req[b]),
      .fill_valid(fill_fire && fill_bank == BW'(b)), .fill(fill_line),
      .upd_valid (upd_valid[b]), .upd_warp(upd_warp[b]), .upd_hit(upd_hit[b]),
      .buf_count (buf_count[b]));
  end

  assign src_valid[NUM_BANKS] = byp_valid;
  assign src_req[NUM_BANKS]   = byp_req;
  assign byp_ready            = src_ready[NUM_BANKS];

  // ---------------- (4) warp-type-aware memory scheduler ----------------

  mem_scheduler #(.NUM_SRC(NSRC), .QUEUE_DEPTH(QUEUE_DEPTH), .DRAM_BANKS(DRAM_BANKS),
                  .LINES_PER_ROW(LINES_PER_ROW)) u_sched (
    .clk, .rst_n, .src_valid, .src_ready, .src_req,
    .dram_valid(dram_req_valid), .dram_ready(dram_req_ready), .dram_req,
    .hq_count, .lq_count, .hp_sel(ev_hp_sel), .row_hit_sel(ev_row_hit),
    .reorder_sel(ev_reorder));

  // ---------------- DRAM return and reply arbitration ----------------
  assign rsp_valid[NUM_BANKS] = dram_resp_valid;
  assign rsp[NUM_BANKS] = '{id: dram_resp.req.id, warp: dram_resp.req.warp,
                            addr: dram_resp.req.addr, l2_hit: 1'b0,
                            data: dram_resp.data};
  assign dram_resp_ready = rsp_ready[NUM_BANKS];
  assign fill_fire       = dram_resp_valid && dram_resp_ready && !dram_resp.req.bypass;

  logic [RW-1:0] rr, grant;
  logic          any;

  always_comb begin
    logic [RW-1:0] s;
    any   = 1'b0;
    grant = '0;
    for (int k = 0; k < NRSP; k++) begin
      s = RW'((int'(rr) + k) % NRSP);
      if (!any && rsp_valid[s]) begin
        any   = 1'b1;
        grant = s;
      end
    end
    resp_valid = any;
    resp       = rsp[grant];
    for (int i = 0; i < NRSP; i++)
      rsp_ready[i] = any && resp_ready && (grant == RW'(i));
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                  rr <= '0;
    else if (resp_valid && resp_ready)
      rr <= (int'(grant) == NRSP - 1) ? '0 : grant + 1'b1;
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (resp_valid && !resp_ready) |=> resp_valid);
endmodule
