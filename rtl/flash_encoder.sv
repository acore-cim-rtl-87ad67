// flash_encoder: digital back end of the 6-bit flash ADC: bubble correction,
// thermometer-to-binary encoder and output latches.
//
// Input is the comparator word `thermo`, bit k-1 high when the input is above
// threshold k (k = 1..2^BQ-1). A single out-of-place comparator ("bubble") is
// removed by replacing each bit with the majority of itself and its two
// neighbours (the word is padded with 1 below and 0 above). The corrected
// word is turned into a one-hot marker of its top 1, which an OR-plane encoder
// converts to binary; all-zero gives code 0. The code is latched on the clock
// edge, so `q` is valid one clock after `thermo`. The bubble-correction and
// encoder circuits are this design's choice; only their names are given.
module flash_encoder #(
  parameter int unsigned BQ = 6,
  localparam int unsigned NT = (1 << BQ) - 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NT-1:0] thermo,
  output logic [BQ-1:0] q
);
  logic [NT+1:0] pad;
  logic [NT-1:0] corr, onehot;
  logic [BQ-1:0] code;

  assign pad = {1'b0, thermo, 1'b1};

  always_comb begin
    for (int unsigned k = 0; k < NT; k++)
      corr[k] = (pad[k] & pad[k+1]) | (pad[k+1] & pad[k+2]) | (pad[k] & pad[k+2]);
    for (int unsigned k = 0; k < NT; k++)
      onehot[k] = corr[k] & ((k == NT - 1) ? 1'b1 : !corr[k+1]);
    code = '0;
    for (int unsigned k = 0; k < NT; k++)
      if (onehot[k]) code = code | BQ'(k + 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) q <= '0;
    else        q <= code;
  end
endmodule
