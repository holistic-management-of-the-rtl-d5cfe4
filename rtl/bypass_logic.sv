// bypass_logic: warp-type-aware cache bypassing demultiplexer.
//
// A request whose warp is currently mostly-miss or all-miss is sent directly
// to the DRAM request queues (paper: such warps gain little from the few
// hits they get, and bypassing them removes their L2 queuing). Any other
// request goes to the request buffer of the L2 bank selected by the low
// line-address bits (the bank interleaving is this design's choice). The
// bypassed request carries the mostly-hit bit (always 0 for these types)
// and bypass=1, so that the returning line is not filled into the L2.
//
// Interface/timing: purely combinational valid/ready demultiplexer; in_ready
// is the ready of the one output the request is steered to.
module bypass_logic
  import medic_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 4
) (
  input  logic      in_valid,
  output logic      in_ready,
  input  l2_req_t   in_req,
  output logic      bank_valid [NUM_BANKS],
  input  logic      bank_ready [NUM_BANKS],
  output l2_req_t   bank_req,
  output logic      byp_valid,
  input  logic      byp_ready,
  output dram_req_t byp_req
);
  localparam int unsigned BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  logic          bypass;
  logic [BW-1:0] bank;

  assign bypass   = is_bypass(in_req.wtype);
  assign bank     = (NUM_BANKS > 1) ? BW'(in_req.addr) : '0;
  assign bank_req = in_req;

  always_comb begin
    byp_req.id     = in_req.id;
    byp_req.warp   = in_req.warp;
    byp_req.addr   = in_req.addr;
    byp_req.wtype  = in_req.wtype;
    byp_req.bypass = 1'b1;
    byp_req.high   = is_high(in_req.wtype);
    byp_valid      = in_valid && bypass;
    for (int b = 0; b < NUM_BANKS; b++)
      bank_valid[b] = in_valid && !bypass && (bank == BW'(b));
    in_ready = bypass ? byp_ready : bank_ready[bank];
  end
endmodule
