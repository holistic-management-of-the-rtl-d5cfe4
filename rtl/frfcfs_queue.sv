// frfcfs_queue: one DRAM request queue scheduled first-ready, first-come
// first-served (FR-FCFS).
//
// Entries are kept in arrival order (entry 0 is the oldest); removing an
// entry shifts the younger ones down. The selected entry is the oldest one
// whose DRAM row is the row currently open in its DRAM bank (a row-buffer
// hit), or the oldest entry when there is none. The open-row table is
// supplied by the scheduler that owns the DRAM channel.
//
// Interface/timing: enq_* is accepted when !full (a push and a pop in the
// same cycle are allowed, but not a push into a full queue). sel_* is
// combinational from the queue contents and open rows; deq removes the
// selected entry at the clock edge.
module frfcfs_queue
  import medic_pkg::*;
#(
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned DRAM_BANKS = 16,
  parameter int unsigned COL_W      = 4,
  localparam int unsigned DBW       = (DRAM_BANKS > 1) ? $clog2(DRAM_BANKS) : 1,
  localparam int unsigned CW        = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enq_valid,
  input  dram_req_t         enq_req,
  output logic              full,
  output logic [CW-1:0]     count,
  input  logic              open_valid [DRAM_BANKS],
  input  logic [ADDR_W-1:0] open_row   [DRAM_BANKS],
  output logic              sel_valid,
  output dram_req_t         sel_req,
  output logic              sel_row_hit,
  output logic              sel_not_oldest,
  input  logic              deq
);
  localparam int unsigned IW = $clog2(DEPTH);

  dram_req_t q [DEPTH];
  logic [IW-1:0] sel_idx;

  assign full      = (count == CW'(DEPTH));
  assign sel_valid = (count != '0);

  always_comb begin
    logic [DBW-1:0] b;
    sel_idx     = '0;
    sel_row_hit = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      b = DBW'(dram_bank_of(q[i].addr, COL_W, DBW));
      if (CW'(i) < count && !sel_row_hit && open_valid[b]
          && open_row[b] == dram_row_of(q[i].addr, COL_W, DBW)) begin
        sel_row_hit = 1'b1;
        sel_idx     = $clog2(DEPTH)'(i);
      end
    end
    sel_req        = q[sel_idx];
    sel_not_oldest = (sel_idx != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      if (deq && sel_valid) begin
        for (int i = 0; i < DEPTH - 1; i++)
          if (i >= int'(sel_idx)) q[i] <= q[i+1];
        if (enq_valid && !full) q[IW'(count - 1'b1)] <= enq_req;
        if (!(enq_valid && !full)) count <= count - 1'b1;
      end else if (enq_valid && !full) begin
        q[IW'(count)] <= enq_req;
        count    <= count + 1'b1;
      end
    end
  end
endmodule
