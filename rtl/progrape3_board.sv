// progrape3_board: the SPH accelerator board, an interface FPGA and NCHIP
// processor FPGAs on one 64-bit local bus.
//
// The host loads j-particles into the processor chips (broadcast to all chips
// of a stage), loads one i-particle into each pipeline, starts the chips,
// waits for host_done, has the interface gather every f-register into its
// f-buffer, and reads the results from there. Each processor chip is built for
// one SPH stage: chips whose bit is set in STAGE2_CHIPS carry second-stage
// pipelines, the others first-stage pipelines. The default 4'b1100 gives two
// chips (4 pipelines) per stage, the split used for the neighbour-list method;
// STAGE2_CHIPS = 0 gives eight first-stage pipelines, the split used for
// direct summation. Four chips of two pipelines each, the bus widths and the
// 8192-particle j-memory follow the design this implements; which chips carry
// which stage is this design's choice.
//
// Read data of the chips are ORed: a chip drives zeros unless it answers a
// read. Bus and pipelines share one clock.
module progrape3_board
  import sph_pkg::*;
#(
  parameter int              NCHIP        = 4,
  parameter int              NPIPE        = 2,
  parameter int              JDEPTH       = 8192,
  parameter logic [NCHIP-1:0] STAGE2_CHIPS = 4'b1100
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_we,
  input  logic               host_re,
  input  logic [HOST_AW-1:0] host_addr,
  input  logic [63:0]        host_wdata,
  output logic [63:0]        host_rdata,
  output logic               host_rvalid,
  output logic               host_busy,
  output logic               host_done
);

  logic [NCHIP-1:0] lb_cs, chip_busy, chip_done, chip_rvalid;
  logic             lb_we, lb_re;
  logic [LB_AW-1:0] lb_addr;
  logic [63:0]      lb_wdata, lb_rdata;
  logic [63:0]      chip_rdata [NCHIP];

  iface_unit #(.NCHIP(NCHIP), .NPIPE(NPIPE)) u_iface (
    .clk(clk), .rst_n(rst_n),
    .host_we(host_we), .host_re(host_re), .host_addr(host_addr), .host_wdata(host_wdata),
    .host_rdata(host_rdata), .host_rvalid(host_rvalid), .host_busy(host_busy),
    .host_done(host_done),
    .lb_cs(lb_cs), .lb_we(lb_we), .lb_re(lb_re), .lb_addr(lb_addr), .lb_wdata(lb_wdata),
    .lb_rdata(lb_rdata), .lb_rvalid(|chip_rvalid), .chip_busy(chip_busy)
  );

  for (genvar c = 0; c < NCHIP; c++) begin : g_chip
    proc_fpga #(.STAGE(STAGE2_CHIPS[c] ? 2 : 1), .NPIPE(NPIPE), .JDEPTH(JDEPTH)) u_chip (
      .clk(clk), .rst_n(rst_n),
      .lb_cs(lb_cs[c]), .lb_we(lb_we), .lb_re(lb_re), .lb_addr(lb_addr), .lb_wdata(lb_wdata),
      .lb_rdata(chip_rdata[c]), .lb_rvalid(chip_rvalid[c]),
      .busy(chip_busy[c]), .done(chip_done[c])
    );
  end

  always_comb begin
    lb_rdata = '0;
    for (int c = 0; c < NCHIP; c++) lb_rdata |= chip_rdata[c];
  end

  // At most one chip answers a read.
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(chip_rvalid));

endmodule
