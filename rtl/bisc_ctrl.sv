// bisc_ctrl: BISC control of the output stage, the hardware side of the
// processor-run self-calibration.
//
// The processor measures each column, fits its gain and offset error and
// writes the resulting trims here, one 32-bit word per column:
//   [5:0]   potentiometer code of SA1 (gain of the positive line)
//   [13:8]  potentiometer code of SA2 (gain of the negative line / output)
//   [21:16] calibration-DAC target of SA1 (V_CAL of SA1)
//   [29:24] calibration-DAC target of SA2 (V_CAL of SA2)
// Potentiometer codes drive the digital potentiometers directly. Each
// calibration DAC is driven by its own 6-bit up-counter (cal_counter); the
// controller moves every counter to its target: it counts up one step per
// clock while below the target, and clears the counter first when the target
// is below its value. `busy` is high while any counter is still moving, for at
// most 64 clocks after a write. All trims reset to code 32 (nominal R_SA,
// V_CAL = V_BIAS). Field layout and the clear-and-count rule are this
// design's choice.
module bisc_ctrl #(
  parameter int unsigned M  = 32,
  parameter int unsigned TW = 6,
  parameter int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [CW-1:0] col,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata,
  output logic [TW-1:0] pot1 [M],
  output logic [TW-1:0] pot2 [M],
  output logic [TW-1:0] vcal1 [M],
  output logic [TW-1:0] vcal2 [M],
  output logic          busy
);
  localparam logic [TW-1:0] MID = TW'(1 << (TW - 1));

  logic [TW-1:0] tgt1 [M];
  logic [TW-1:0] tgt2 [M];
  logic [M-1:0]  clr1, inc1, clr2, inc2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(M); c++) begin
        pot1[c] <= MID; pot2[c] <= MID; tgt1[c] <= MID; tgt2[c] <= MID;
      end
    end else if (we) begin
      pot1[col] <= wdata[TW-1:0];
      pot2[col] <= wdata[8 +: TW];
      tgt1[col] <= wdata[16 +: TW];
      tgt2[col] <= wdata[24 +: TW];
    end
  end

  always_comb begin
    for (int c = 0; c < int'(M); c++) begin
      clr1[c] = vcal1[c] > tgt1[c];
      inc1[c] = vcal1[c] < tgt1[c];
      clr2[c] = vcal2[c] > tgt2[c];
      inc2[c] = vcal2[c] < tgt2[c];
    end
  end

  for (genvar c = 0; c < int'(M); c++) begin : g_cnt
    cal_counter #(.W(TW), .RST_VAL(MID)) u_cnt1 (
      .clk, .rst_n, .clr(clr1[c]), .inc(inc1[c]), .cnt(vcal1[c]));
    cal_counter #(.W(TW), .RST_VAL(MID)) u_cnt2 (
      .clk, .rst_n, .clr(clr2[c]), .inc(inc2[c]), .cnt(vcal2[c]));
  end

  assign busy = |{clr1, inc1, clr2, inc2};

  always_comb begin
    rdata = '0;
    rdata[TW-1:0]   = pot1[col];
    rdata[8 +: TW]  = pot2[col];
    rdata[16 +: TW] = tgt1[col];
    rdata[24 +: TW] = tgt2[col];
  end
endmodule
