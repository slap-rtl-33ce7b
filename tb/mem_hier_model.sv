// mem_hier_model: behavioural model of the memory hierarchy behind a SLAP
// cluster (shared SRAM / DRAM). Not synthesizable; testbenches only.
//
// NP independent ports. Each port takes a request when fewer than MAXP reads
// are pending and a pseudo-random back-pressure draw allows it. Writes update
// the storage at acceptance. Reads sample the storage at acceptance and answer
// after LAT_MIN..LAT_MAX cycles, possibly out of order, one response per port
// per cycle, with the request address echoed. Untouched memory reads as
// init_word(), a fixed function of the byte address, so testbenches can
// predict it. poke_word() lets a testbench place data before a run.
module mem_hier_model
  import slap_pkg::*;
#(
  parameter int unsigned NP      = 1,
  parameter int unsigned LAT_MIN = 4,
  parameter int unsigned LAT_MAX = 30,
  parameter int unsigned MAXP    = 8,
  parameter int unsigned BP_PCT  = 10    // percent of cycles with ready low
) (
  input  logic            clk,
  input  logic [NP-1:0]   req_valid,
  input  mem_req_t        req       [NP],
  output logic [NP-1:0]   req_ready,
  output logic [NP-1:0]   resp_valid,
  output mem_resp_t       resp      [NP]
);
  vec_t mem [word_t];

  typedef struct {
    word_t addr;
    vec_t  data;
    int    due;
  } pend_t;
  pend_t pend [NP][$];
  int    cyc = 0;
  int    nreq = 0;

  function automatic word_t init_word(input word_t a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A_1234;
  endfunction

  function automatic vec_t read_line(input word_t a);
    word_t la;
    vec_t  v;
    la = {a[31:4], 4'b0};
    if (mem.exists(la)) return mem[la];
    for (int l = 0; l < LANES; l++) v[l*XLEN +: XLEN] = init_word(la + word_t'(4*l));
    return v;
  endfunction

  function automatic word_t peek_word(input word_t a);
    vec_t v;
    v = read_line(a);
    return v[a[3:2]*XLEN +: XLEN];
  endfunction

  // testbench back door: set one 32-bit word
  function automatic void poke_word(input word_t a, input word_t d);
    word_t la;
    vec_t  v;
    la = {a[31:4], 4'b0};
    v  = read_line(la);
    v[a[3:2]*XLEN +: XLEN] = d;
    mem[la] = v;
  endfunction

  initial begin
    req_ready  = '1;
    resp_valid = '0;
    for (int p = 0; p < NP; p++) resp[p] = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NP; p++) begin
      // accept
      if (req_valid[p] && req_ready[p]) begin
        word_t la;
        la = {req[p].addr[31:4], 4'b0};
        nreq++;
        if (req[p].we) begin
          vec_t v;
          v = read_line(la);
          for (int l = 0; l < LANES; l++)
            if (req[p].wstrb[l]) v[l*XLEN +: XLEN] = req[p].wdata[l*XLEN +: XLEN];
          mem[la] = v;
        end else begin
          pend_t e;
          e.addr = la;
          e.data = read_line(la);
          e.due  = cyc + LAT_MIN + int'($urandom_range(LAT_MAX - LAT_MIN));
          pend[p].push_back(e);
        end
      end
      // respond: first due entry (entries may be due out of order)
      resp_valid[p] <= 1'b0;
      for (int i = 0; i < pend[p].size(); i++) begin
        if (pend[p][i].due <= cyc) begin
          resp_valid[p]    <= 1'b1;
          resp[p].addr     <= pend[p][i].addr;
          resp[p].rdata    <= pend[p][i].data;
          pend[p].delete(i);
          break;
        end
      end
      req_ready[p] <= (pend[p].size() < int'(MAXP) - 1) && ($urandom_range(99) >= BP_PCT);
    end
  end
endmodule
