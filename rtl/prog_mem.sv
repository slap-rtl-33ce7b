// prog_mem: program memory holding 64-bit VLIW bundles, shared by the GPCUs.
//
// The paper draws one program memory feeding both GPCUs (and an "Instruction
// Cache/SRAM" per GPCU in the pipeline figure) without giving its size or
// organisation; here it is a plain SRAM array with one read port per GPCU and a
// write port for loading programs. DEPTH (1024 bundles) is this design's choice.
//
// Timing follows the paper's three fetch phases: the address is sent in
// PF_ADRSEND (rd_en/rd_addr sampled at edge t), the array is read in PF_WAIT
// (word registered at edge t+1) and the bundle is received in PF_REC
// (rd_data valid after edge t+2). A write takes effect at the clock edge.
module prog_mem
  import slap_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NPORT = 2
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  bundle_t                   wdata,
  input  logic [NPORT-1:0]          rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr [NPORT],
  output bundle_t                   rd_data [NPORT]
);
  bundle_t mem [DEPTH];
  bundle_t wait_q [NPORT];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NPORT; p++) begin
      if (rd_en[p]) wait_q[p] <= mem[rd_addr[p]];   // PF_WAIT
      rd_data[p] <= wait_q[p];                      // PF_REC
    end
  end
endmodule
