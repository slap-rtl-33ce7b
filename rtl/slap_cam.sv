// slap_cam: the SLAP data memory of one CU, a small content-addressable store
// that completes the "triangular load".
//
// In a triangular load the GPCU, running ahead, computes a vector load address
// and sends the read request early; the data comes back from the memory
// hierarchy into this CAM, and the CU later picks it up by address when it
// reaches the load instruction. The paper gives this function and the name
// (SLAP Data Memory, CAM); the entry format, the merge rule and the ordering
// rules below are this design's own.
//
// Each entry holds an address, a 128-bit beat, and:
//   cnt      loads allocated but not yet consumed by the CU
//   req      read request not yet sent to memory
//   infl     read request sent, response not yet back
//   dv       data valid
// alloc (from the GPCU): an address that matches a live entry adds to its
//   count (one read per address); otherwise a free entry is taken and a read
//   queued. alloc_ready is low when no entry is free. It does not look at the
//   address (an allocation that would merge also waits), so that the GPCU's
//   stall decision does not depend on the address it is computing.
// Memory port: one request per cycle. A vector store from the CU has priority
//   and goes out in the cycle st_valid is high (st_ready = mem_req_ready); read
//   requests of queued entries go out in entry order otherwise.
// Responses are matched by address to the in-flight entry and fill it unless a
//   vector store already wrote fresher data into it.
// lookup (from the CU): lk_hit is high when a live entry of that address has
//   data; lk_consume then takes one count off it. An entry is free again once
//   its count is zero and no read of it is in flight.
// A vector store also overwrites the data of a live entry of the same address,
// so loads that follow the store in program order read the stored value.
module slap_cam
  import slap_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  // triangular load allocation
  input  logic      alloc_valid,
  input  word_t     alloc_addr,
  output logic      alloc_ready,
  // CU lookup
  input  word_t     lk_addr,
  output logic      lk_hit,
  output vec_t      lk_data,
  input  logic      lk_consume,
  // CU vector store
  input  logic      st_valid,
  input  word_t     st_addr,
  input  vec_t      st_data,
  output logic      st_ready,
  // memory hierarchy port
  output logic      mem_req_valid,
  output mem_req_t  mem_req,
  input  logic      mem_req_ready,
  input  logic      mem_resp_valid,
  input  mem_resp_t mem_resp,
  // status
  output logic      idle
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = 8;

  typedef struct packed {
    word_t         addr;
    logic [CW-1:0] cnt;
    logic          req;
    logic          infl;
    logic          dv;
  } ent_t;

  ent_t ent   [ENTRIES];
  vec_t data  [ENTRIES];

  logic [ENTRIES-1:0] live, al_match, lk_match, rsp_match, st_match, rq;
  logic           al_hit, free_any, rq_any, lk_any;
  logic [IW-1:0]  al_idx, free_idx, rq_idx, lk_idx;
  logic           do_alloc, do_rd_req;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      live[i]      = (ent[i].cnt != '0) || ent[i].infl || ent[i].req;
      al_match[i]  = live[i] && (ent[i].addr == alloc_addr);
      lk_match[i]  = live[i] && ent[i].dv && (ent[i].cnt != '0) && (ent[i].addr == lk_addr);
      rsp_match[i] = ent[i].infl && (ent[i].addr == mem_resp.addr);
      st_match[i]  = live[i] && (ent[i].addr == st_addr);
      rq[i]        = ent[i].req;
    end
    al_hit = 1'b0; al_idx = '0;
    free_any = 1'b0; free_idx = '0;
    rq_any = 1'b0; rq_idx = '0;
    lk_any = 1'b0; lk_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (al_match[i]) begin al_hit = 1'b1; al_idx = IW'(i); end
      if (!live[i])    begin free_any = 1'b1; free_idx = IW'(i); end
      if (rq[i])       begin rq_any = 1'b1; rq_idx = IW'(i); end
      if (lk_match[i]) begin lk_any = 1'b1; lk_idx = IW'(i); end
    end
  end

  assign alloc_ready = free_any;
  assign do_alloc    = alloc_valid && alloc_ready;
  assign lk_hit      = lk_any;
  assign lk_data     = data[lk_idx];

  // memory port: store first, then the oldest-indexed queued read
  assign st_ready      = mem_req_ready;
  assign do_rd_req     = !st_valid && rq_any && mem_req_ready;
  assign mem_req_valid = st_valid || rq_any;
  always_comb begin
    mem_req = '0;
    if (st_valid) begin
      mem_req.we    = 1'b1;
      mem_req.addr  = st_addr;
      mem_req.wdata = st_data;
      mem_req.wstrb = '1;
    end else begin
      mem_req.addr  = ent[rq_idx].addr;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        logic [CW-1:0] c;
        c = ent[i].cnt;
        if (lk_consume && lk_any && lk_idx == IW'(i)) c = c - 1'b1;
        if (do_alloc && al_hit && al_idx == IW'(i)) c = c + 1'b1;
        ent[i].cnt <= c;
        if (do_rd_req && rq_idx == IW'(i)) begin
          ent[i].req  <= 1'b0;
          ent[i].infl <= 1'b1;
        end
        if (mem_resp_valid && rsp_match[i]) begin
          ent[i].infl <= 1'b0;
          ent[i].dv   <= 1'b1;
        end
        if (st_valid && st_ready && st_match[i]) ent[i].dv <= 1'b1;
      end
      if (do_alloc && !al_hit) begin
        ent[free_idx].addr <= alloc_addr;
        ent[free_idx].cnt  <= CW'(1);
        ent[free_idx].req  <= 1'b1;
        ent[free_idx].infl <= 1'b0;
        ent[free_idx].dv   <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < ENTRIES; i++) begin
      if (st_valid && st_ready && st_match[i])
        data[i] <= st_data;
      else if (mem_resp_valid && rsp_match[i] && !ent[i].dv)
        data[i] <= mem_resp.rdata;
    end
  end

  assign idle = (live == '0);

  a_consume_hit: assert property (@(posedge clk) disable iff (!rst_n) lk_consume |-> lk_hit)
    else $error("slap_cam: consume without a hit");

endmodule
