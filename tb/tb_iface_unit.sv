// tb_iface_unit: self-checking testbench of the interface FPGA.
//
// The four processor chips are replaced by behavioural local-bus slaves. Each
// records the writes it sees, keeps an FSEL register, and answers a read one
// clock later with a value built from its chip number, the pipeline, the
// register and a random salt (zero read data when not answering, ORed as on
// the board). Checked:
//   - host writes with random chip masks reach exactly the masked chips
//     (broadcast), with the address and data unchanged;
//   - host reads of one chip return that chip's value two clocks after the
//     request;
//   - COLLECT fills the f-buffer with register k of every pipeline of every
//     chip, takes NFREG*(2 + NCHIP*NPIPE) bus clocks plus three (the
//     COLLECT write and the two-clock return of the last read), and host_busy
//     covers it;
//   - STATUS and host_done follow chip_busy.
module tb_iface_unit;
  import sph_pkg::*;

  localparam int NCHIP = 4;
  localparam int NPIPE = 2;
  localparam int NP    = NCHIP * NPIPE;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               host_we = 1'b0, host_re = 1'b0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [63:0]        host_wdata = '0;
  logic [63:0]        host_rdata;
  logic               host_rvalid, host_busy, host_done;
  logic [NCHIP-1:0]   lb_cs;
  logic               lb_we, lb_re;
  logic [LB_AW-1:0]   lb_addr;
  logic [63:0]        lb_wdata;
  logic [63:0]        lb_rdata;
  logic               lb_rvalid;
  logic [NCHIP-1:0]   chip_busy = '0;

  iface_unit #(.NCHIP(NCHIP), .NPIPE(NPIPE)) dut (.*);

  // ---------------- chip models
  logic [63:0]      salt = '0;
  logic [2:0]       fsel [NCHIP];
  logic [63:0]      crd  [NCHIP];
  logic [NCHIP-1:0] crv;
  int               nwr  [NCHIP];
  logic [LB_AW-1:0] last_a [NCHIP];
  logic [63:0]      last_d [NCHIP];

  function automatic logic [63:0] model(int c, logic [LB_AW-1:0] a, logic [2:0] fs);
    logic [2:0] k;
    k = a[8] ? fs : a[2:0];
    return salt ^ {16'(c + 1), 16'(a[7:4]), 16'(k), 16'(a[19:16] ^ a[15:0])};
  endfunction

  for (genvar c = 0; c < NCHIP; c++) begin : g_chip
    always_ff @(posedge clk) begin
      crv[c] <= rst_n && lb_cs[c] && lb_re;
      crd[c] <= (rst_n && lb_cs[c] && lb_re) ? model(c, lb_addr, fsel[c]) : '0;
      if (!rst_n) begin
        fsel[c] <= '0;
        nwr[c]  <= 0;
      end else if (lb_cs[c] && lb_we) begin
        nwr[c]    <= nwr[c] + 1;
        last_a[c] <= lb_addr;
        last_d[c] <= lb_wdata;
        if (lb_addr[19:18] == RG_CTRL && lb_addr[3:0] == CR_FSEL) fsel[c] <= lb_wdata[2:0];
      end
    end
  end
  assign lb_rdata  = crd[0] | crd[1] | crd[2] | crd[3];
  assign lb_rvalid = |crv;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(logic [3:0] mask, logic [19:0] a, logic [63:0] d);
    @(negedge clk);
    host_we = 1'b1; host_addr = {mask, a}; host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  // returns the data and the number of clock edges from request to rvalid
  task automatic hread(logic [3:0] mask, logic [19:0] a, output logic [63:0] d, output int lat);
    @(negedge clk);
    host_re = 1'b1; host_addr = {mask, a};
    @(negedge clk);
    host_re = 1'b0;
    lat = 1;
    while (!host_rvalid && lat < 10) begin @(negedge clk); lat++; end
    d = host_rdata;
  endtask

  initial begin
    logic [63:0] d;
    logic [19:0] a;
    logic [3:0]  m;
    int lat, cyc, nprev [NCHIP];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // broadcast and single writes
    for (int t = 0; t < 60; t++) begin
      m = 4'($urandom_range(1, 15));
      a = 20'($urandom) & 20'hBFFFF;  // any region but the f-data reads
      if (a[19:18] == RG_CTRL) a[3:0] = CR_NJ;  // do not disturb FSEL here
      d = {$urandom, $urandom};
      for (int c = 0; c < NCHIP; c++) nprev[c] = nwr[c];
      hwrite(m, a, d);
      @(negedge clk);  // the interface registers the bus cycle
      for (int c = 0; c < NCHIP; c++) begin
        check(nwr[c] == nprev[c] + int'(m[c]), $sformatf("write mask %b chip %0d", m, c));
        if (m[c]) check(last_a[c] == a && last_d[c] == d, "written address and data");
      end
    end

    // single-chip reads
    for (int t = 0; t < 40; t++) begin
      int c;
      c = $urandom_range(0, NCHIP - 1);
      salt = {$urandom, $urandom};
      a = {RG_FREG, 10'd0, 4'($urandom_range(0, NPIPE - 1)), 1'b0, 3'($urandom)};
      hread(4'(1 << c), a, d, lat);
      check(lat == 2, $sformatf("chip read latency %0d", lat));
      check(d == model(c, a, 3'd0), $sformatf("chip %0d read data", c));
    end

    // collection, three rounds with different data
    for (int r = 0; r < 3; r++) begin
      salt = {$urandom, $urandom};
      hwrite(4'b0000, 20'd0, 64'd1);
      cyc = 1;
      check(host_busy, "busy during collection");
      while (host_busy && cyc < 1000) begin @(negedge clk); cyc++; end
      check(cyc == NFREG * (2 + NP) + 3,
            $sformatf("collection %0d clocks, expected %0d", cyc, NFREG * (2 + NP) + 3));
      for (int c = 0; c < NCHIP; c++) check(fsel[c] == 3'(NFREG - 1), "FSEL left at last register");
      for (int p = 0; p < NP; p++)
        for (int k = 0; k < NFREG; k++) begin
          hread(4'b0000, 20'h80000 | 20'(p * NFREG + k), d, lat);
          check(lat == 1, "f-buffer read latency");
          check(d == model(p / NPIPE, {RG_FREG, 9'd0, 1'b1, 4'(p % NPIPE), 4'd0}, 3'(k)),
                $sformatf("round %0d f-buffer pipe %0d reg %0d", r, p, k));
        end
    end

    // status and done
    for (int t = 0; t < 16; t++) begin
      @(negedge clk);
      chip_busy = 4'(t);
      hread(4'b0000, 20'd1, d, lat);
      check(d == 64'(t), "STATUS chip busy bits");
      check(host_done == (t == 0), "host_done");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
