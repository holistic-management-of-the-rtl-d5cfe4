// dram_model: behavioural stand-in for the DRAM behind a memory partition
// (testbench only, not synthesizable design). It accepts one request per
// cycle while fewer than MAX_INFLIGHT are outstanding and returns each line,
// in order, LATENCY cycles after acceptance (ROW_HIT_LATENCY when the
// request reached an already open row of its DRAM bank, using the same
// address map as the scheduler). The returned data is line_data(addr).
module dram_model
  import medic_pkg::*;
  import tb_medic_util_pkg::*;
#(
  parameter int unsigned LATENCY         = 40,
  parameter int unsigned ROW_HIT_LATENCY = 20,
  parameter int unsigned MAX_INFLIGHT    = 16,
  parameter int unsigned DRAM_BANKS      = 16,
  parameter int unsigned LINES_PER_ROW   = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  dram_req_t  req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output dram_resp_t resp
);
  localparam int unsigned CW  = $clog2(LINES_PER_ROW);
  localparam int unsigned DBW = $clog2(DRAM_BANKS);

  dram_req_t   q_req [$];
  longint      q_due [$];
  longint      now;
  logic [ADDR_W-1:0] open_row [DRAM_BANKS];
  logic              open_v   [DRAM_BANKS];

  assign req_ready  = (q_req.size() < MAX_INFLIGHT);
  assign resp_valid = (q_req.size() != 0) && (q_due[0] <= now);
  always_comb begin
    resp = '0;
    if (q_req.size() != 0) begin
      resp.req  = q_req[0];
      resp.data = line_data(q_req[0].addr);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now <= 0;
      q_req.delete();
      q_due.delete();
      for (int b = 0; b < DRAM_BANKS; b++) begin open_v[b] <= 1'b0; open_row[b] <= '0; end
    end else begin
      int unsigned b;
      longint lat;
      now <= now + 1;
      if (resp_valid && resp_ready) begin
        void'(q_req.pop_front());
        void'(q_due.pop_front());
      end
      if (req_valid && req_ready) begin
        b   = int'(dram_bank_of(req.addr, CW, DBW));
        lat = (open_v[b] && open_row[b] == dram_row_of(req.addr, CW, DBW))
              ? longint'(ROW_HIT_LATENCY) : longint'(LATENCY);
        open_v[b]   <= 1'b1;
        open_row[b] <= dram_row_of(req.addr, CW, DBW);
        q_req.push_back(req);
        q_due.push_back(now + lat);
      end
    end
  end
endmodule
