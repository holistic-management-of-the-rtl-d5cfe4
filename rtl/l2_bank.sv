// l2_bank: one bank of the shared L2 cache in a MeDiC memory partition.
//
// Requests that were not bypassed wait in the bank's request buffer (a
// FIFO of REQ_BUF_DEPTH entries; the paper locates the L2 queuing delay
// here). Each cycle the oldest request is looked up in a SETS x WAYS
// set-associative tag/data array with a one-cycle lookup:
//   hit  -> the line is returned on hit_* and the block moves to MRU;
//   miss -> the request goes out on miss_* towards the DRAM queues, tagged
//           with the mostly-hit bit of its warp.
// Every lookup reports (warp, hit) on upd_* for warp type identification.
// Lines returned by DRAM arrive on fill_* and are written into the set by
// the warp-type-aware insertion policy (insertion_policy), which stores the
// 2-bit class of the requesting warp with the block.
//
// Own choices (the paper does not describe the bank's insides): a fill has
// priority over a lookup in the same cycle; there is no MSHR, so a second
// miss to a line already requested also goes to DRAM and its fill only
// refreshes the present block; hit and miss outputs are one-entry
// registers, and a lookup waits while the register it needs is full.
// Address map: line address = {tag, set, bank}.
//
// Timing: a request at the head of the buffer is looked up in one cycle and
// its reply or miss is valid the next cycle. Fills take one cycle.
module l2_bank
  import medic_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 4,
  parameter int unsigned SETS          = 32,
  parameter int unsigned WAYS          = 8,
  parameter int unsigned REQ_BUF_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the bypass demultiplexer
  input  logic              req_valid,
  output logic              req_ready,
  input  l2_req_t           req,
  // hit reply
  output logic              hit_valid,
  input  logic              hit_ready,
  output mem_resp_t         hit_resp,
  // miss towards the DRAM request queues
  output logic              miss_valid,
  input  logic              miss_ready,
  output dram_req_t         miss_req,
  // line returned by DRAM (always accepted)
  input  logic              fill_valid,
  input  dram_resp_t        fill,
  // lookup outcome for warp type identification
  output logic              upd_valid,
  output logic [WARP_W-1:0] upd_warp,
  output logic              upd_hit,
  // request buffer occupancy
  output logic [$clog2(REQ_BUF_DEPTH+1)-1:0] buf_count
);
  localparam int unsigned BW    = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 0;
  localparam int unsigned SW    = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned AW    = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = ADDR_W - BW - SW;

  // ---------------- request buffer ----------------
  logic    head_valid, head_pop;
  l2_req_t head;

  sync_fifo #(.W($bits(l2_req_t)), .DEPTH(REQ_BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (req_valid), .in_ready (req_ready), .in_data (req),
    .out_valid(head_valid), .out_ready(head_pop), .out_data(head),
    .count    (buf_count)
  );

  // ---------------- arrays ----------------
  logic [TAG_W-1:0]  tag_a  [SETS][WAYS];
  logic              vld_a  [SETS][WAYS];
  logic [AW-1:0]     age_a  [SETS][WAYS];
  ins_class_e        cls_a  [SETS][WAYS];
  logic [DATA_W-1:0] data_a [SETS*WAYS];

  // ---------------- lookup / fill select ----------------
  logic              lookup;
  logic [ADDR_W-1:0] sel_addr;
  logic [SW-1:0]     set_i;
  logic [TAG_W-1:0]  tag_i;
  logic              tag_hit;
  logic [AW-1:0]     hit_way;
  ins_class_e        new_cls;

  assign lookup   = head_valid && !fill_valid
                    && (!hit_valid  || hit_ready)
                    && (!miss_valid || miss_ready);
  assign head_pop = lookup;
  assign sel_addr = fill_valid ? fill.req.addr : head.addr;
  assign set_i    = SW'(sel_addr >> BW);
  assign tag_i    = TAG_W'(sel_addr >> (BW + SW));
  assign new_cls  = ins_class(fill_valid ? fill.req.wtype : head.wtype);

  always_comb begin
    tag_hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld_a[set_i][w] && tag_a[set_i][w] == tag_i && !tag_hit) begin
        tag_hit = 1'b1;
        hit_way = AW'(w);
      end
  end

  // ---------------- replacement / insertion ----------------
  logic [AW-1:0] victim, target;
  logic [AW-1:0] age_n [WAYS];

  insertion_policy #(.WAYS(WAYS)) u_ins (
    .valid_i (vld_a[set_i]),
    .age_i   (age_a[set_i]),
    .cls_i   (cls_a[set_i]),
    .op_fill (fill_valid),
    .use_way (tag_hit),
    .way_i   (hit_way),
    .new_cls (new_cls),
    .victim_o(victim),
    .target_o(target),
    .age_o   (age_n)
  );

  logic do_write;
  assign do_write = fill_valid || (lookup && tag_hit);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          vld_a[s][w] <= 1'b0;
          tag_a[s][w] <= '0;
          age_a[s][w] <= AW'(w);
          cls_a[s][w] <= CLS_MISS;
        end
    end else if (do_write) begin
      age_a[set_i]         <= age_n;
      cls_a[set_i][target] <= new_cls;
      if (fill_valid) begin
        vld_a[set_i][target] <= 1'b1;
        tag_a[set_i][target] <= tag_i;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) data_a[{set_i, target}] <= fill.data;
  end

  // ---------------- output registers ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hit_valid  <= 1'b0;
      miss_valid <= 1'b0;
      hit_resp   <= '0;
      miss_req   <= '0;
    end else begin
      if (hit_valid && hit_ready)   hit_valid  <= 1'b0;
      if (miss_valid && miss_ready) miss_valid <= 1'b0;
      if (lookup && tag_hit) begin
        hit_valid       <= 1'b1;
        hit_resp.id     <= head.id;
        hit_resp.warp   <= head.warp;
        hit_resp.addr   <= head.addr;
        hit_resp.l2_hit <= 1'b1;
        hit_resp.data   <= data_a[{set_i, hit_way}];
      end
      if (lookup && !tag_hit) begin
        miss_valid      <= 1'b1;
        miss_req.id     <= head.id;
        miss_req.warp   <= head.warp;
        miss_req.addr   <= head.addr;
        miss_req.wtype  <= head.wtype;
        miss_req.bypass <= 1'b0;
        miss_req.high   <= is_high(head.wtype);
      end
    end
  end

  assign upd_valid = lookup;
  assign upd_warp  = head.warp;
  assign upd_hit   = tag_hit;

  // a fill of a line not yet present goes to the chosen victim
  a_fill_victim: assert property (@(posedge clk) disable iff (!rst_n)
    (fill_valid && !tag_hit) |-> target == victim);

  a_fill_not_bypassed: assert property (@(posedge clk) disable iff (!rst_n)
    fill_valid |-> !fill.req.bypass);
endmodule
