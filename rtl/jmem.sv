// jmem: memory unit of a processor FPGA, holding the j-particles.
//
// The host writes j-data over the 64-bit local bus, two FP25 quantities per
// transfer; the memory is therefore built as NPAIR banks, each DEPTH words of
// two quantities, and a write fills one bank at one index. During a run the
// control unit presents one index per clock on raddr and the whole j-particle
// (all 2*NPAIR quantities) appears on rdata one clock later, which is how a
// j-particle reaches the pipelines at one per clock. DEPTH = 8192 is the j-data
// capacity of the design this follows; the banking and the registered read
// (block-RAM style) are this design's own.
module jmem
  import sph_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int NPAIR = 6,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [3:0]           wpair,
  input  logic [AW-1:0]        waddr,
  input  fp_t  [1:0]           wdata,
  input  logic [AW-1:0]        raddr,
  output fp_t  [2*NPAIR-1:0]   rdata
);

  for (genvar b = 0; b < NPAIR; b++) begin : g_bank
    logic [2*FP_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wpair == 4'(b)) mem[waddr] <= wdata;
      rdata[2*b +: 2] <= mem[raddr];
    end
  end

endmodule
