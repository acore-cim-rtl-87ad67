// acore_cim_top: the mixed-signal compute-in-memory core with its AXI4-Lite
// control interface, as seen by the RISC-V processor that drives it.
//
// Data path of one inference (every block below is one file):
//   sram_codec   stores the N input codes and N x M weights written over the bus
//   input_dac    N R-2R DACs turn the input codes into row voltages
//   sample_hold  N S&H circuits hold the row voltages for the inference
//   mwc_array    N x M MDAC weight cells sum signed currents per column
//   sa2          M two-stage summing amplifiers with BISC trims give V_SA
//   adc_mux_sel + amux  connect one V_SA per clock to the ADC
//   flash_frontend + flash_encoder  6-bit flash ADC
//   adc_ctrl     stores the M codes as Q[0..M-1]
// Control: axil_regs (bus slave and register map), cim_ctrl (S&H routine),
// bisc_ctrl (trim registers and calibration-DAC up-counters).
// The processor writes inputs and weights, writes CTRL.start, polls STATUS
// until not busy and reads Q. An inference keeps the core busy for
// SH_CYCLES + M + 4 clocks: SH_CYCLES clocks of settling (one S&H period,
// 1 us at the 32 MHz clock), one clock per column for the ADC sweep and four
// clocks of hand-over between the controllers. The
// self-calibration is run by the processor: it measures known MACs, fits
// gain and offset per column and writes new trims (see the end-to-end
// testbench for the routine). The analog blocks are behavioural models with
// per-column gain and offset errors set by SEED, GAIN_ERR and OFFSET_ERR_UV.
module acore_cim_top
  import cim_pkg::*;
#(
  parameter int unsigned N             = 32'(cim_pkg::N_ROWS),
  parameter int unsigned M             = 32'(cim_pkg::M_COLS),
  parameter int unsigned SH_CYCLES     = 32,
  parameter int          SEED          = 1,
  parameter real         GAIN_ERR      = 0.05,
  parameter int          OFFSET_ERR_UV = 5000
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t axil_req,
  output axil_rsp_t axil_rsp
);
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  // ---------------- control interface ----------------
  logic          start, busy, inf_done, bisc_busy;
  logic [15:0]   inf_count;
  logic [9:0]    ref_l_mv, ref_h_mv;
  logic          sram_we, sram_is_input;
  logic [RW-1:0] sram_row;
  logic [CW-1:0] sram_col;
  logic [7:0]    sram_wdata, sram_rdata;
  logic          trim_we;
  logic [CW-1:0] trim_col;
  logic [31:0]   trim_wdata, trim_rdata;
  logic [5:0]    q [M];

  axil_regs #(.N(N), .M(M)) u_regs (
    .clk, .rst_n, .req(axil_req), .rsp(axil_rsp),
    .start_o(start), .busy_i(busy), .bisc_busy_i(bisc_busy), .inf_count_i(inf_count),
    .adc_ref_l_mv_o(ref_l_mv), .adc_ref_h_mv_o(ref_h_mv),
    .sram_we_o(sram_we), .sram_is_input_o(sram_is_input), .sram_row_o(sram_row),
    .sram_col_o(sram_col), .sram_wdata_o(sram_wdata), .sram_rdata_i(sram_rdata),
    .trim_we_o(trim_we), .trim_col_o(trim_col), .trim_wdata_o(trim_wdata),
    .trim_rdata_i(trim_rdata), .q_i(q));

  // ---------------- SRAM cells ----------------
  logic [6:0] in_code [N];
  logic [7:0] weight  [N][M];

  sram_codec #(.N(N), .M(M)) u_sram (
    .clk, .rst_n, .we(sram_we), .is_input(sram_is_input), .row(sram_row),
    .col(sram_col), .wdata(sram_wdata), .rdata(sram_rdata),
    .in_code, .weight);

  // ---------------- S&H routine ----------------
  logic sh_sample, s1, adc_start, adc_done;

  cim_ctrl #(.SH_CYCLES(SH_CYCLES)) u_ctrl (
    .clk, .rst_n, .start, .adc_done, .sh_sample, .s1, .adc_start,
    .busy, .done(inf_done), .inf_count);

  // ---------------- input array ----------------
  uv_t v_dac [N];
  uv_t v_row [N];

  for (genvar r = 0; r < int'(N); r++) begin : g_row
    input_dac   u_dac (.code(in_code[r]), .v_dac(v_dac[r]));
    sample_hold u_sh  (.clk, .rst_n, .sample(sh_sample), .v_in(v_dac[r]), .v_out(v_row[r]));
  end

  // ---------------- CIM array ----------------
  pa_t i_pos [M];
  pa_t i_neg [M];

  mwc_array #(.N(N), .M(M)) u_array (.v_in(v_row), .weight, .i_pos, .i_neg);

  // ---------------- output stage with BISC ----------------
  logic [5:0] pot1 [M];
  logic [5:0] pot2 [M];
  logic [5:0] vcal1 [M];
  logic [5:0] vcal2 [M];
  uv_t        v_x  [M];
  uv_t        v_sa [M];

  bisc_ctrl #(.M(M)) u_bisc (
    .clk, .rst_n, .we(trim_we), .col(trim_col), .wdata(trim_wdata), .rdata(trim_rdata),
    .pot1, .pot2, .vcal1, .vcal2, .busy(bisc_busy));

  for (genvar c = 0; c < int'(M); c++) begin : g_col
    sa2 #(.COL(c), .SEED(SEED), .GAIN_ERR(GAIN_ERR), .OFFSET_ERR_UV(OFFSET_ERR_UV)) u_sa (
      .i_pos(i_pos[c]), .i_neg(i_neg[c]), .s1, .pot1(pot1[c]), .pot2(pot2[c]),
      .vcal1(vcal1[c]), .vcal2(vcal2[c]), .v_x(v_x[c]), .v_sa(v_sa[c]));
  end

  // ---------------- multiplexed flash ADC ----------------
  logic          mux_clr, mux_en;
  logic [CW-1:0] mux_cnt;
  logic [M-1:0]  mux_sel;
  uv_t           v_mux;
  logic [62:0]   thermo;
  logic [5:0]    q_adc;

  adc_mux_sel #(.M(M)) u_sel (.clk, .rst_n, .clr(mux_clr), .en(mux_en), .cnt(mux_cnt), .sel(mux_sel));
  amux #(.M(M)) u_amux (.sel(mux_sel), .v_in(v_sa), .v_out(v_mux));
  flash_frontend #(.BQ(6)) u_flash (
    .v_in(v_mux), .v_ref_l(uv_t'(ref_l_mv) * 1000), .v_ref_h(uv_t'(ref_h_mv) * 1000), .thermo);
  flash_encoder #(.BQ(6)) u_enc (.clk, .rst_n, .thermo, .q(q_adc));

  adc_ctrl #(.M(M), .BQ(6), .LAT(1)) u_adc (
    .clk, .rst_n, .start(adc_start), .mux_clr, .mux_en, .col(mux_cnt), .q_in(q_adc),
    .q, .busy(), .done(adc_done));
endmodule
