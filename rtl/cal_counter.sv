// cal_counter: the 6-bit up-counter of one offset-calibration block.
//
// Each summing amplifier of the output stage has an offset-calibration block:
// a 6-bit voltage-mode R-2R DAC whose code C5..C0 comes from this up-counter.
// The BISC control moves the DAC by clearing the counter and stepping it up,
// one count per clock while `inc` is high. `clr` wins over `inc`. The counter
// saturates at 2^W-1 rather than wrapping (a design choice; the source circuit
// is only described as an up-counter). Reset value is `RST_VAL`.
// Timing: `cnt` changes on the clock edge after `clr`/`inc`.
module cal_counter #(
  parameter int unsigned W = 6,
  parameter logic [W-1:0] RST_VAL = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         inc,
  output logic [W-1:0] cnt
);
  always_ff @(posedge clk) begin
    if (!rst_n)               cnt <= RST_VAL;
    else if (clr)             cnt <= '0;
    else if (inc && cnt != '1) cnt <= cnt + 1'b1;
  end
endmodule
