// gpcu_dcache: the GPCU's scalar data cache.
//
// In SLAP only scalar loads and stores use this cache; vector data bypasses it
// through the CUs' own memory ports, which the paper credits with keeping the
// cache free of vector data. The paper evaluates 8, 16 and 32 KB and points to
// 16 KB as the size that loses little against 32 KB, which is the default
// here. It does not describe the cache itself, so this is the simplest one that
// does the job: direct-mapped, 16-byte lines (one memory beat), write-through
// with no allocation on a write miss, one request at a time (blocking).
//
// Interface: req_valid/req_ready handshake with req_we, req_addr (byte address
// of a 32-bit word) and req_wdata. A read answers with resp_valid/resp_rdata,
// two cycles after acceptance on a hit (array read, then tag compare) and after
// the line fill on a miss. A write gives no response; it is finished when
// req_ready rises again. ev_miss pulses once per read miss.
module gpcu_dcache
  import slap_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 16384
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  logic      req_we,
  input  word_t     req_addr,
  input  word_t     req_wdata,
  output logic      resp_valid,
  output word_t     resp_rdata,
  // memory hierarchy port
  output logic      mem_req_valid,
  output mem_req_t  mem_req,
  input  logic      mem_req_ready,
  input  logic      mem_resp_valid,
  input  mem_resp_t mem_resp,
  output logic      ev_miss
);
  localparam int unsigned LINES = SIZE_BYTES / 16;
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = XLEN - IW - 4;

  typedef enum logic [2:0] {IDLE, LOOKUP, MISS_REQ, MISS_WAIT, WR_REQ} state_e;
  state_e state;

  logic [TW-1:0] tags  [LINES];
  vec_t          lines [LINES];
  logic [LINES-1:0] valid;

  logic          q_we;
  word_t         q_addr, q_wdata;
  logic [TW-1:0] tag_rd;
  vec_t          line_rd;
  logic          val_rd;

  logic [IW-1:0] q_idx;
  logic [TW-1:0] q_tag;
  logic [1:0]    q_word;
  logic          hit;

  assign q_idx  = q_addr[IW+3:4];
  assign q_tag  = q_addr[XLEN-1:IW+4];
  assign q_word = q_addr[3:2];
  assign hit    = val_rd && (tag_rd == q_tag);

  assign req_ready = (state == IDLE);

  always_comb begin
    mem_req_valid = (state == MISS_REQ) || (state == WR_REQ);
    mem_req       = '0;
    mem_req.addr  = {q_addr[XLEN-1:4], 4'b0};
    if (state == WR_REQ) begin
      mem_req.we    = 1'b1;
      mem_req.wdata = {LANES{q_wdata}};
      mem_req.wstrb = LANES'(1) << q_word;
    end
  end

  assign ev_miss = (state == LOOKUP) && !q_we && !hit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      valid      <= '0;
      resp_valid <= 1'b0;
      q_we <= 1'b0; q_addr <= '0; q_wdata <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        IDLE: if (req_valid) begin
          q_we    <= req_we;
          q_addr  <= req_addr;
          q_wdata <= req_wdata;
          state   <= LOOKUP;
        end
        LOOKUP: begin
          if (q_we) begin
            if (hit) lines[q_idx][q_word*XLEN +: XLEN] <= q_wdata;
            state <= WR_REQ;
          end else if (hit) begin
            resp_valid <= 1'b1;
            resp_rdata <= line_rd[q_word*XLEN +: XLEN];
            state      <= IDLE;
          end else begin
            state <= MISS_REQ;
          end
        end
        MISS_REQ:  if (mem_req_ready) state <= MISS_WAIT;
        MISS_WAIT: if (mem_resp_valid) begin
          lines[q_idx] <= mem_resp.rdata;
          tags[q_idx]  <= q_tag;
          valid[q_idx] <= 1'b1;
          resp_valid   <= 1'b1;
          resp_rdata   <= mem_resp.rdata[q_word*XLEN +: XLEN];
          state        <= IDLE;
        end
        WR_REQ:    if (mem_req_ready) state <= IDLE;
        default:   state <= IDLE;
      endcase
    end
  end

  // array read in the cycle the request is accepted
  always_ff @(posedge clk) begin
    if (state == IDLE && req_valid) begin
      tag_rd  <= tags[req_addr[IW+3:4]];
      line_rd <= lines[req_addr[IW+3:4]];
      val_rd  <= valid[req_addr[IW+3:4]];
    end
  end

endmodule
