// iface_unit: the interface FPGA, between the host and the local bus.
//
// Host side: a word port (host_we / host_re, 24-bit address, 64-bit data) that
// stands in for the PCI target. Address bits [23:20] are a chip mask: a write
// with several mask bits set is broadcast to those processor FPGAs (this is
// how the same j-particles reach every chip), a read must name one chip. With
// mask 0 the host reaches the interface's own registers:
//   0        COLLECT (write): gather all f-registers of all pipelines
//   1        STATUS  (read):  {collect busy, chip busy bits}
//   [19]=1   f-buffer (read): entry pipeline*NFREG + register
// A read answers with host_rvalid two clocks after the request for a chip,
// one clock after it for an interface register. host_done is high when no
// chip is running; host_busy while a collection is in progress, during which
// the host must not access the chips.
//
// f-data collection: for each f-register k the unit broadcasts FSEL = k to all
// chips, spends one turnaround clock, then reads register k of every pipeline
// in turn, one per clock, into the f-buffer. One register of all pipelines
// costs 2 + NCHIP*NPIPE bus clocks and the whole set NFREG*(2 + NCHIP*NPIPE),
// the transfer-time model t_internal = n_freg (2 + n_pipe) / c_bus of the
// design this follows. What the two extra clocks do, the host port and the
// maps are this design's own.
module iface_unit
  import sph_pkg::*;
#(
  parameter int NCHIP = 4,
  parameter int NPIPE = 2,
  localparam int NP   = NCHIP * NPIPE
) (
  input  logic               clk,
  input  logic               rst_n,
  // host port
  input  logic               host_we,
  input  logic               host_re,
  input  logic [HOST_AW-1:0] host_addr,
  input  logic [63:0]        host_wdata,
  output logic [63:0]        host_rdata,
  output logic               host_rvalid,
  output logic               host_busy,
  output logic               host_done,
  // local bus master
  output logic [NCHIP-1:0]   lb_cs,
  output logic               lb_we,
  output logic               lb_re,
  output logic [LB_AW-1:0]   lb_addr,
  output logic [63:0]        lb_wdata,
  input  logic [63:0]        lb_rdata,
  input  logic               lb_rvalid,
  input  logic [NCHIP-1:0]   chip_busy
);

  localparam int PW = $clog2(NP + 2);

  logic [3:0]  hmask;
  logic        own_wr, own_rd;
  assign hmask  = host_addr[23:20];
  assign own_wr = host_we && hmask == '0;
  assign own_rd = host_re && hmask == '0;

  // ---------------- collection sequencer
  logic                     coll;    // issuing
  logic [2:0]               kreg;    // register index
  logic [PW-1:0]            ph;      // 0: FSEL broadcast, 1: turnaround, 2..: reads
  logic                     rd_coll, pend_coll;
  logic [$clog2(NP)-1:0]    rd_pipe, pend_pipe;
  logic [2:0]               rd_k, pend_k;
  logic [ACC_W-1:0]         fbuf [NP * NFREG];
  int                       pidx;

  assign pidx = int'(ph) - 2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      coll     <= 1'b0;
      kreg     <= '0;
      ph       <= '0;
      lb_cs    <= '0;
      lb_we    <= 1'b0;
      lb_re    <= 1'b0;
      lb_addr  <= '0;
      lb_wdata <= '0;
      rd_coll  <= 1'b0;
      rd_pipe  <= '0;
      rd_k     <= '0;
    end else begin
      lb_cs   <= '0;
      lb_we   <= 1'b0;
      lb_re   <= 1'b0;
      rd_coll <= 1'b0;
      if (coll) begin
        if (ph == '0) begin
          lb_cs    <= '1;
          lb_we    <= 1'b1;
          lb_addr  <= {RG_CTRL, 14'd0, CR_FSEL};
          lb_wdata <= 64'(kreg);
        end else if (ph >= PW'(2)) begin
          lb_cs    <= NCHIP'(1) << (pidx / NPIPE);
          lb_re    <= 1'b1;
          lb_addr  <= {RG_FREG, 9'd0, 1'b1, 4'(pidx % NPIPE), 4'd0};
          rd_coll  <= 1'b1;
          rd_pipe  <= ($clog2(NP))'(pidx);
          rd_k     <= kreg;
        end
        if (ph == PW'(NP + 1)) begin
          ph <= '0;
          if (kreg == 3'(NFREG - 1)) coll <= 1'b0;
          kreg <= kreg + 1'b1;
        end else ph <= ph + 1'b1;
      end else if (own_wr && host_addr[19:0] == 20'd0) begin
        coll <= 1'b1;
        kreg <= '0;
        ph   <= '0;
      end else if ((host_we || host_re) && hmask != '0) begin
        lb_cs    <= NCHIP'(hmask);
        lb_we    <= host_we;
        lb_re    <= host_re;
        lb_addr  <= host_addr[LB_AW-1:0];
        lb_wdata <= host_wdata;
      end
    end
  end

  // ---------------- read returns
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_coll <= 1'b0;
      pend_pipe <= '0;
      pend_k    <= '0;
    end else begin
      pend_coll <= rd_coll;
      pend_pipe <= rd_pipe;
      pend_k    <= rd_k;
    end
    if (lb_rvalid && pend_coll)
      fbuf[int'(pend_pipe) * NFREG + int'(pend_k)] <= lb_rdata;
  end

  logic        own_rvalid;
  logic [63:0] own_rdata;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      own_rvalid <= 1'b0;
      own_rdata  <= '0;
    end else begin
      own_rvalid <= own_rd;
      if (host_addr[19]) own_rdata <= fbuf[int'(host_addr[15:0]) % (NP * NFREG)];
      else if (host_addr[19:0] == 20'd1) own_rdata <= 64'({host_busy, chip_busy});
      else own_rdata <= '0;
    end
  end

  assign host_rvalid = own_rvalid || (lb_rvalid && !pend_coll);
  assign host_rdata  = own_rvalid ? own_rdata : lb_rdata;
  assign host_busy   = coll || rd_coll || pend_coll;
  assign host_done   = !(|chip_busy);

  a_no_host_chip_access_in_collect: assert property (@(posedge clk) disable iff (!rst_n)
    host_busy |-> !((host_we || host_re) && hmask != '0));
  a_chip_read_one_hot: assert property (@(posedge clk) disable iff (!rst_n)
    (host_re && hmask != '0) |-> $onehot(hmask));

endmodule
