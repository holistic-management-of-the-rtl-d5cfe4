// medic_pkg: types and constants shared by the MeDiC memory partition.
//
// A memory partition of a GPU serves line-sized read requests from many
// warps. MeDiC tags each warp with one of five warp types, measured from the
// warp's L2 hit ratio, and uses the type to (a) bypass the L2 for warps that
// rarely hit, (b) place L2 fills by type, and (c) give DRAM priority to
// warps that nearly always hit. The five types and the hit-ratio bands that
// define them follow the paper; all widths below are this design's choice,
// since the paper gives none.
package medic_pkg;

  // ---- sizes (own choices, the paper gives no widths) ----
  localparam int unsigned WARP_W  = 10;    // global warp id: up to 1024 warps
  localparam int unsigned ADDR_W  = 25;    // line address: 32-bit byte address, 128 B lines
  localparam int unsigned DATA_W  = 1024;  // one 128-byte line
  localparam int unsigned REQID_W = 8;     // requester tag returned with the reply

  // ---- warp types (paper: five types by shared-cache hit ratio) ----
  typedef enum logic [2:0] {
    WT_ALL_HIT      = 3'd0,  // 100 %
    WT_MOSTLY_HIT   = 3'd1,  // 70 % .. <100 %
    WT_BALANCED     = 3'd2,  // 20 % .. 70 %
    WT_MOSTLY_MISS  = 3'd3,  // >0 % .. 20 %
    WT_ALL_MISS     = 3'd4   // 0 %
  } warp_type_e;

  // 2-bit class stored with every L2 block; a lower class is evicted first.
  typedef enum logic [1:0] {
    CLS_MISS = 2'd0,  // mostly-miss / all-miss
    CLS_BAL  = 2'd1,  // balanced
    CLS_HIT  = 2'd2   // mostly-hit / all-hit
  } ins_class_e;

  // request arriving at the partition
  typedef struct packed {
    logic [REQID_W-1:0] id;
    logic [WARP_W-1:0]  warp;
    logic [ADDR_W-1:0]  addr;
  } mem_req_t;

  // request after warp type identification
  typedef struct packed {
    logic [REQID_W-1:0] id;
    logic [WARP_W-1:0]  warp;
    logic [ADDR_W-1:0]  addr;
    warp_type_e         wtype;
  } l2_req_t;

  // request to the DRAM request queues / to DRAM
  typedef struct packed {
    logic [REQID_W-1:0] id;
    logic [WARP_W-1:0]  warp;
    logic [ADDR_W-1:0]  addr;
    warp_type_e         wtype;
    logic               bypass;  // 1: bypassed the L2, do not fill
    logic               high;    // mostly-hit bit: 1 for mostly-hit / all-hit warps
  } dram_req_t;

  // line returned by DRAM: the request plus its data
  typedef struct packed {
    dram_req_t          req;
    logic [DATA_W-1:0]  data;
  } dram_resp_t;

  // reply to the requester
  typedef struct packed {
    logic [REQID_W-1:0] id;
    logic [WARP_W-1:0]  warp;
    logic [ADDR_W-1:0]  addr;
    logic               l2_hit;  // served by an L2 hit
    logic [DATA_W-1:0]  data;
  } mem_resp_t;

  // Bypass rule (paper): requests of mostly-miss and all-miss warps skip the L2.
  function automatic logic is_bypass(warp_type_e t);
    return (t == WT_MOSTLY_MISS) || (t == WT_ALL_MISS);
  endfunction

  // Mostly-hit bit (paper): set for mostly-hit warps, and all-hit warps.
  function automatic logic is_high(warp_type_e t);
    return (t == WT_MOSTLY_HIT) || (t == WT_ALL_HIT);
  endfunction

  function automatic ins_class_e ins_class(warp_type_e t);
    case (t)
      WT_ALL_HIT, WT_MOSTLY_HIT: return CLS_HIT;
      WT_BALANCED:               return CLS_BAL;
      default:                   return CLS_MISS;
    endcase
  endfunction

  // Hit-ratio bands of the paper. Boundaries (own choice where the printed
  // bands overlap): ratio >= 70 % is mostly-hit, ratio <= 20 % is mostly-miss.
  function automatic warp_type_e classify(int unsigned hits, int unsigned acc);
    if (hits == acc)                 return WT_ALL_HIT;
    else if (hits == 0)              return WT_ALL_MISS;
    else if (hits * 10 >= acc * 7)   return WT_MOSTLY_HIT;
    else if (hits * 5 <= acc)        return WT_MOSTLY_MISS;
    else                             return WT_BALANCED;
  endfunction

  // DRAM address map of a line address (own choice): {row, dram bank, column}.
  function automatic logic [ADDR_W-1:0] dram_bank_of(logic [ADDR_W-1:0] a,
                                                     int unsigned col_w,
                                                     int unsigned bank_w);
    return (a >> col_w) & ((ADDR_W'(1) << bank_w) - 1'b1);
  endfunction

  function automatic logic [ADDR_W-1:0] dram_row_of(logic [ADDR_W-1:0] a,
                                                    int unsigned col_w,
                                                    int unsigned bank_w);
    return a >> (col_w + bank_w);
  endfunction

endpackage
