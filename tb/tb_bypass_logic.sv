// tb_bypass_logic: random self-check of the bypass demultiplexer. For each
// warp type and address the expected destination is worked out from the
// paper's rule (mostly-miss and all-miss warps bypass the L2) and the bank
// interleaving (low line-address bits); ready must follow the destination.
module tb_bypass_logic;
  import medic_pkg::*;
  localparam int NB = 4;

  logic      in_valid, in_ready;
  l2_req_t   in_req;
  logic      bank_valid [NB];
  logic      bank_ready [NB];
  l2_req_t   bank_req;
  logic      byp_valid, byp_ready;
  dram_req_t byp_req;

  int checks = 0, failures = 0;

  bypass_logic #(.NUM_BANKS(NB)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (type %0d addr %h)", what, in_req.wtype, in_req.addr); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_byp;
    int   exp_bank;
    for (int i = 0; i < 2000; i++) begin
      in_valid      = $urandom_range(0, 5) != 0;
      in_req.id     = REQID_W'($urandom);
      in_req.warp   = WARP_W'($urandom);
      in_req.addr   = ADDR_W'($urandom);
      in_req.wtype  = warp_type_e'($urandom_range(0, 4));
      for (int b = 0; b < NB; b++) bank_ready[b] = $urandom_range(0, 1) != 0;
      byp_ready = $urandom_range(0, 1) != 0;
      #1;
      exp_byp  = (in_req.wtype == WT_ALL_MISS) || (in_req.wtype == WT_MOSTLY_MISS);
      exp_bank = int'(in_req.addr % NB);
      chk(byp_valid == (in_valid && exp_byp), "bypass valid");
      for (int b = 0; b < NB; b++)
        chk(bank_valid[b] == (in_valid && !exp_byp && b == exp_bank), "bank valid");
      chk(in_ready == (exp_byp ? byp_ready : bank_ready[exp_bank]), "ready");
      chk(bank_req == in_req, "bank payload");
      chk(byp_req.bypass && byp_req.addr == in_req.addr && byp_req.id == in_req.id
          && byp_req.warp == in_req.warp && (!exp_byp || !byp_req.high), "bypass payload");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
