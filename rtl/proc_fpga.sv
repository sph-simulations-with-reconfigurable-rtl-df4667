// proc_fpga: one processor FPGA of the board, configured for one SPH stage.
//
// It holds the three units the board architecture places on each processor
// chip: a memory unit (jmem) for the j-particles, a control unit (ctrl_unit)
// that streams them, and a pipeline unit of NPIPE pipelines (sph_pipe1 when
// STAGE = 1, sph_pipe2 when STAGE = 2), each with its own i-register and
// f-registers. All pipelines see the same j-particle each clock and differ only
// in their i-particle, so the chip computes NPIPE i-particles against all nj
// j-particles in about nj clocks. Two pipelines per chip and 8192 j-particles
// follow the design this implements.
//
// The chip is a slave on the 64-bit local bus (see the map in sph_pkg):
//   control  NJ, START, STATUS ({busy, done}), ALPHA, BETA (stage 2 only),
//            FSEL (f-register picked by "use FSEL" reads)
//   j-data   write of two quantities of one j-particle
//   i-data   write of two quantities of one pipeline's i-register
//   f-data   read of one pipeline's f-register
// Writes take effect at the clock edge where lb_cs and lb_we are high; a read
// (lb_cs and lb_re) returns lb_rdata with lb_rvalid one clock later. lb_rdata
// is zero whenever no read of this chip is answered, so the board ORs the
// chips' read data. The bus protocol and the map are this design's own; the
// figures give only a 64-bit local bus.
module proc_fpga
  import sph_pkg::*;
#(
  parameter int STAGE  = 1,
  parameter int NPIPE  = 2,
  parameter int JDEPTH = 8192,
  localparam int JAW   = $clog2(JDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lb_cs,
  input  logic              lb_we,
  input  logic              lb_re,
  input  logic [LB_AW-1:0]  lb_addr,
  input  logic [63:0]       lb_wdata,
  output logic [63:0]       lb_rdata,
  output logic              lb_rvalid,
  output logic              busy,
  output logic              done
);

  localparam int JW    = (STAGE == 1) ? P1_JW : P2_JW;
  localparam int LAT   = (STAGE == 1) ? P1_LAT : P2_LAT;
  localparam int NPAIR = JW / 2;

  // ---------------- bus decode
  logic [1:0] region;
  logic       wr;
  assign region = lb_addr[19:18];
  assign wr     = lb_cs && lb_we;

  // ---------------- control registers
  logic [JAW:0] nj;
  fp_t          alpha, beta;
  logic [2:0]   fsel;
  logic         start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nj    <= '0;
      alpha <= FP_ONE;
      beta  <= FP_TWO;
      fsel  <= '0;
    end else if (wr && region == RG_CTRL) begin
      unique case (lb_addr[3:0])
        CR_NJ:    nj    <= lb_wdata[JAW:0];
        CR_ALPHA: alpha <= lo_word(lb_wdata);
        CR_BETA:  beta  <= lo_word(lb_wdata);
        CR_FSEL:  fsel  <= lb_wdata[2:0];
        default: ;
      endcase
    end
  end
  assign start = wr && region == RG_CTRL && lb_addr[3:0] == CR_START;

  // ---------------- control unit
  logic [JAW-1:0] jaddr;
  logic           jaddr_valid, acc_clear;

  ctrl_unit #(.DEPTH(JDEPTH), .DRAIN(LAT + 1)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .nj(nj),
    .jaddr(jaddr), .jaddr_valid(jaddr_valid), .acc_clear(acc_clear),
    .busy(busy), .done(done)
  );

  // ---------------- memory unit
  fp_t [JW-1:0] jdata;
  logic         j_valid;

  jmem #(.DEPTH(JDEPTH), .NPAIR(NPAIR)) u_jmem (
    .clk(clk), .we(wr && region == RG_JMEM), .wpair(lb_addr[16:13]),
    .waddr(lb_addr[JAW-1:0]), .wdata({hi_word(lb_wdata), lo_word(lb_wdata)}),
    .raddr(jaddr), .rdata(jdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) j_valid <= 1'b0;
    else        j_valid <= jaddr_valid;
  end

  // ---------------- pipeline unit
  logic [2:0]              freg_sel;
  logic signed [ACC_W-1:0] fdata [NPIPE];
  assign freg_sel = lb_addr[8] ? fsel : lb_addr[2:0];

  for (genvar p = 0; p < NPIPE; p++) begin : g_pipe
    logic iwe;
    assign iwe = wr && region == RG_IREG && lb_addr[7:4] == 4'(p);
    if (STAGE == 1) begin : g_s1
      sph_pipe1 u_pipe (
        .clk(clk), .rst_n(rst_n),
        .ireg_we(iwe), .ireg_pair(lb_addr[2:0]),
        .ireg_wdata({hi_word(lb_wdata), lo_word(lb_wdata)}),
        .acc_clear(acc_clear), .j_valid(j_valid), .j_data(jdata),
        .freg_sel(freg_sel), .freg_data(fdata[p])
      );
    end else begin : g_s2
      sph_pipe2 u_pipe (
        .clk(clk), .rst_n(rst_n),
        .ireg_we(iwe), .ireg_pair(lb_addr[2:0]),
        .ireg_wdata({hi_word(lb_wdata), lo_word(lb_wdata)}),
        .alpha(alpha), .beta(beta),
        .acc_clear(acc_clear), .j_valid(j_valid), .j_data(jdata),
        .freg_sel(freg_sel), .freg_data(fdata[p])
      );
    end
  end

  // ---------------- read port
  logic [63:0] rd_next;
  always_comb begin
    rd_next = '0;
    unique case (region)
      RG_CTRL: begin
        if (lb_addr[3:0] == CR_STATUS)  rd_next = {62'd0, busy, done};
        else if (lb_addr[3:0] == CR_NJ) rd_next = 64'(nj);
      end
      RG_FREG: begin
        for (int p = 0; p < NPIPE; p++)
          if (lb_addr[7:4] == 4'(p)) rd_next = fdata[p];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lb_rvalid <= 1'b0;
      lb_rdata  <= '0;
    end else begin
      lb_rvalid <= lb_cs && lb_re;
      lb_rdata  <= (lb_cs && lb_re) ? rd_next : '0;
    end
  end

  // The host must not touch j-data or i-registers while a run is in progress.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wr && (region == RG_JMEM || region == RG_IREG)));
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(lb_we && lb_re));

endmodule
