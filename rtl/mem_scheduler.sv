// mem_scheduler: warp-type-aware memory scheduler of the MeDiC partition.
//
// Requests bound for DRAM (L2 misses from each bank and requests bypassed
// around the L2) carry a mostly-hit bit, set for mostly-hit and all-hit
// warps. As the paper describes, the request queue is split in two: a
// high-priority queue for requests with the bit set and a low-priority
// queue for the rest. Each queue is scheduled FR-FCFS (frfcfs_queue), and a
// request of the high-priority queue is always chosen over one of the
// low-priority queue ("any requests in high priority queue?" selects the
// mux in the paper's overview figure). Because the queues are separate, a
// full low-priority queue never blocks a high-priority request.
//
// Own choices: NUM_SRC request sources are served by two round-robin
// pickers, one per queue, so each queue can take one request per cycle; a
// source is only offered to a queue with room. The scheduler keeps the open
// row of every DRAM bank, set by the last request it sent to that bank
// (open-page policy), which is what FR-FCFS needs to tell row hits.
//
// Interface/timing: src_* and dram_* are valid/ready; one request leaves
// per cycle when dram_ready is high. Event outputs, one pulse per request
// sent: hp_sel when it came from the high-priority queue while the
// low-priority queue also held one; row_hit_sel when it hits the open row;
// reorder_sel when FR-FCFS took it ahead of an older request of its queue.
module mem_scheduler
  import medic_pkg::*;
#(
  parameter int unsigned NUM_SRC       = 5,
  parameter int unsigned QUEUE_DEPTH   = 16,
  parameter int unsigned DRAM_BANKS    = 16,
  parameter int unsigned LINES_PER_ROW = 16,
  localparam int unsigned CW           = $clog2(QUEUE_DEPTH + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       src_valid [NUM_SRC],
  output logic       src_ready [NUM_SRC],
  input  dram_req_t  src_req   [NUM_SRC],
  output logic       dram_valid,
  input  logic       dram_ready,
  output dram_req_t  dram_req,
  output logic [CW-1:0] hq_count,
  output logic [CW-1:0] lq_count,
  output logic       hp_sel,
  output logic       row_hit_sel,
  output logic       reorder_sel
);
  localparam int unsigned COL_W = $clog2(LINES_PER_ROW);
  localparam int unsigned DBW   = (DRAM_BANKS > 1) ? $clog2(DRAM_BANKS) : 1;
  localparam int unsigned SRCW  = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1;

  logic              open_valid [DRAM_BANKS];
  logic [ADDR_W-1:0] open_row   [DRAM_BANKS];

  // ---------------- enqueue: one round-robin picker per queue ----------------
  logic            hq_full, lq_full;
  logic            hq_enq, lq_enq;
  dram_req_t       hq_in, lq_in;
  logic [SRCW-1:0] rr_h, rr_l, pick_h, pick_l;

  always_comb begin
    logic [SRCW-1:0] s;
    hq_enq = 1'b0; lq_enq = 1'b0;
    pick_h = '0;   pick_l = '0;
    for (int k = 0; k < NUM_SRC; k++) begin
      s = SRCW'((int'(rr_h) + k) % NUM_SRC);
      if (!hq_enq && src_valid[s] && src_req[s].high && !hq_full) begin
        hq_enq = 1'b1; pick_h = s;
      end
      s = SRCW'((int'(rr_l) + k) % NUM_SRC);
      if (!lq_enq && src_valid[s] && !src_req[s].high && !lq_full) begin
        lq_enq = 1'b1; pick_l = s;
      end
    end
    hq_in = src_req[pick_h];
    lq_in = src_req[pick_l];
    for (int i = 0; i < NUM_SRC; i++)
      src_ready[i] = (hq_enq && pick_h == SRCW'(i)) || (lq_enq && pick_l == SRCW'(i));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rr_h <= '0;
      rr_l <= '0;
    end else begin
      if (hq_enq) rr_h <= (int'(pick_h) == NUM_SRC - 1) ? '0 : pick_h + 1'b1;
      if (lq_enq) rr_l <= (int'(pick_l) == NUM_SRC - 1) ? '0 : pick_l + 1'b1;
    end
  end

  // ---------------- the two queues ----------------
  logic      hq_sel_valid, lq_sel_valid, hq_rh, lq_rh, hq_no, lq_no;
  dram_req_t hq_sel, lq_sel;
  logic      fire, take_h;

  frfcfs_queue #(.DEPTH(QUEUE_DEPTH), .DRAM_BANKS(DRAM_BANKS), .COL_W(COL_W)) u_hq (
    .clk, .rst_n, .enq_valid(hq_enq), .enq_req(hq_in), .full(hq_full), .count(hq_count),
    .open_valid, .open_row, .sel_valid(hq_sel_valid), .sel_req(hq_sel),
    .sel_row_hit(hq_rh), .sel_not_oldest(hq_no), .deq(fire && take_h));

  frfcfs_queue #(.DEPTH(QUEUE_DEPTH), .DRAM_BANKS(DRAM_BANKS), .COL_W(COL_W)) u_lq (
    .clk, .rst_n, .enq_valid(lq_enq), .enq_req(lq_in), .full(lq_full), .count(lq_count),
    .open_valid, .open_row, .sel_valid(lq_sel_valid), .sel_req(lq_sel),
    .sel_row_hit(lq_rh), .sel_not_oldest(lq_no), .deq(fire && !take_h));

  // ---------------- priority mux ----------------
  assign take_h      = hq_sel_valid;
  assign dram_valid  = hq_sel_valid || lq_sel_valid;
  assign dram_req    = take_h ? hq_sel : lq_sel;
  assign fire        = dram_valid && dram_ready;
  assign hp_sel      = fire && take_h && lq_sel_valid;
  assign row_hit_sel = fire && (take_h ? hq_rh : lq_rh);
  assign reorder_sel = fire && (take_h ? hq_no : lq_no);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < DRAM_BANKS; b++) begin
        open_valid[b] <= 1'b0;
        open_row[b]   <= '0;
      end
    end else if (fire) begin
      open_valid[DBW'(dram_bank_of(dram_req.addr, COL_W, DBW))] <= 1'b1;
      open_row[DBW'(dram_bank_of(dram_req.addr, COL_W, DBW))]   <=
        dram_row_of(dram_req.addr, COL_W, DBW);
    end
  end

  a_high_first: assert property (@(posedge clk) disable iff (!rst_n)
    (fire && lq_sel_valid && hq_sel_valid) |-> dram_req.high);
endmodule
