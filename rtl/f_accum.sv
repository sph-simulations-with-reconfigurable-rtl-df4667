// f_accum: one f-register of a pipeline, a fixed-point accumulator.
//
// Each valid cycle the floating-point term is converted to 64-bit two's
// complement with ACC_FRAC = 32 fraction bits and added to the sum. Summing in
// fixed point, as the design this follows does, makes the result independent
// of the order of the j-particles. `clear` zeroes the sum; if a term arrives
// in the same cycle, the sum restarts from that term. The binary point, the
// wrap-around on overflow and the one-cycle update are this design's choices.
//
// Timing: sum shows a term one clock after add_valid.
module f_accum
  import sph_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    add_valid,
  input  fp_t                     term,
  output logic signed [ACC_W-1:0] sum
);

  logic signed [ACC_W-1:0] conv;
  assign conv = fp_to_fix64(term, ACC_FRAC);

  always_ff @(posedge clk) begin
    if (!rst_n)         sum <= '0;
    else if (clear)     sum <= add_valid ? conv : '0;
    else if (add_valid) sum <= sum + conv;
  end

endmodule
