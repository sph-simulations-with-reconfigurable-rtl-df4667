// ctrl_unit: control unit of a processor FPGA.
//
// A start pulse begins a run over nj j-particles. The unit first pulses
// acc_clear for one clock, which zeroes the f-registers of every pipeline, then
// puts the j-indexes 0, 1, ..., nj-1 on jaddr, one per clock, with jaddr_valid
// high. The memory unit answers each index one clock later, so the valid for
// the pipelines is jaddr_valid delayed by one clock (done in proc_fpga). After
// the last index the unit waits DRAIN clocks for the pipelines to empty and
// then drops busy and raises done, which stays high until the next start.
// Sequencing j-indexes at one per clock and signalling the end of the sum
// follow the design this implements; the clear cycle, the drain counter and
// the done flag are this design's own.
//
// Timing: start at edge t -> acc_clear during cycle t+1 -> jaddr 0 during
// cycle t+2 -> done visible after 2 + nj + DRAIN edges. A start while busy is
// ignored.
module ctrl_unit #(
  parameter int DEPTH = 8192,
  parameter int DRAIN = 12,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   nj,
  output logic [AW-1:0] jaddr,
  output logic          jaddr_valid,
  output logic          acc_clear,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN} state_t;
  state_t     st;
  logic [AW:0] idx, n;
  logic [$clog2(DRAIN+1)-1:0] dcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      idx  <= '0;
      n    <= '0;
      dcnt <= '0;
      done <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          st   <= S_CLEAR;
          n    <= (nj > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : nj;
          done <= 1'b0;
        end
        S_CLEAR: begin
          idx <= '0;
          if (n == '0) begin
            st   <= S_DRAIN;
            dcnt <= '0;
          end else st <= S_RUN;
        end
        S_RUN: begin
          idx <= idx + 1'b1;
          if (idx + 1'b1 == n) begin
            st   <= S_DRAIN;
            dcnt <= '0;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == DRAIN - 1) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign jaddr       = idx[AW-1:0];
  assign jaddr_valid = (st == S_RUN);
  assign acc_clear   = (st == S_CLEAR);
  assign busy        = (st != S_IDLE);

endmodule
