// cim_pkg: constants, analog unit types, register map and AXI4-Lite bundles
// shared by every block of the mixed-signal CIM core.
//
// Sizes follow the prototype: a 36 x 32 (N x M) array of MDAC weight cells,
// 6+1-bit inputs, 6-bit weights with two sign bits, a 6-bit flash ADC and
// 6-bit calibration trims. Analog quantities cross module boundaries of the
// behavioural models as signed integers: voltages in microvolts (uv_t) and
// currents in picoamperes (pa_t), which keeps every port two-state and exact.
// The register map and bus widths other than the 32-bit data bus are this
// design's own choice.
package cim_pkg;

  // ---------------- array geometry and precisions ----------------
  localparam int unsigned N_ROWS   = 36;  // rows: input DACs / MWC rows
  localparam int unsigned M_COLS   = 32;  // columns: 2SA + ADC channels
  localparam int unsigned BD       = 7;   // input code: D6 sign + D5..D0
  localparam int unsigned BW       = 8;   // weight: W7,W6 signs + W5..W0
  localparam int unsigned BMAG     = 6;   // magnitude bits of input and weight
  localparam int unsigned BQ       = 6;   // flash ADC resolution
  localparam int unsigned TRIM_W   = 6;   // potentiometer / calibration DAC code
  localparam int unsigned TRIM_MID = 32;  // nominal trim code

  // ---------------- analog units ----------------
  typedef int signed uv_t;  // voltage, microvolts
  typedef int signed pa_t;  // current, picoamperes

  localparam uv_t V_INL_UV  = 200_000;  // low input reference
  localparam uv_t V_INH_UV  = 600_000;  // high input reference
  localparam uv_t V_BIAS_UV = 400_000;  // zero level of the analog path

  localparam int R_U_OHM      = 385_000;  // MDAC unit resistance (polysilicon)
  localparam int R_SA_NOM_OHM = 10_700;   // nominal 2SA transresistance

  // Digital potentiometer: R = R_SA_NOM * (96 + code) / 128, code 32 = nominal.
  function automatic real pot_ohm(input logic [TRIM_W-1:0] code);
    return real'(R_SA_NOM_OHM) * (96.0 + real'(code)) / 128.0;
  endfunction

  // Offset calibration R-2R DAC between V_INL and V_INH, code 32 = V_BIAS.
  function automatic real caldac_uv(input logic [TRIM_W-1:0] code);
    return real'(V_INL_UV) + real'(V_INH_UV - V_INL_UV) * real'(code) / 64.0;
  endfunction

  // Deterministic pseudo-random number in [-1, 1] used to give each column
  // of the behavioural 2SA model its own gain and offset error.
  function automatic real err_frac(input int col, input int which, input int seed);
    int unsigned h;
    h = 32'(col) * 32'd2654435761 ^ 32'(which) * 32'd40503 ^ 32'(seed) * 32'd97;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return (real'(h % 32'd2001) - 1000.0) / 1000.0;
  endfunction

  // ---------------- register map (byte addresses) ----------------
  localparam int unsigned ADDR_W = 16;
  localparam logic [ADDR_W-1:0] REG_CTRL    = 16'h0000;  // W: bit0 start
  localparam logic [ADDR_W-1:0] REG_STATUS  = 16'h0004;  // R: busy, bisc busy, count
  localparam logic [ADDR_W-1:0] REG_ADC_REF = 16'h0008;  // RW: [9:0] VL mV, [25:16] VH mV
  localparam logic [ADDR_W-1:0] BASE_INPUT  = 16'h0100;  // + 4*row
  localparam logic [ADDR_W-1:0] BASE_Q      = 16'h0200;  // + 4*col
  localparam logic [ADDR_W-1:0] BASE_TRIM   = 16'h0300;  // + 4*col
  localparam logic [ADDR_W-1:0] BASE_WEIGHT = 16'h2000;  // + 4*(row*M + col)

  localparam logic [9:0] ADC_REF_L_MV_RST = 10'd200;
  localparam logic [9:0] ADC_REF_H_MV_RST = 10'd600;

  // ---------------- AXI4-Lite ----------------
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  typedef struct packed {
    logic [ADDR_W-1:0] awaddr;
    logic              awvalid;
    logic [31:0]       wdata;
    logic [3:0]        wstrb;
    logic              wvalid;
    logic              bready;
    logic [ADDR_W-1:0] araddr;
    logic              arvalid;
    logic              rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    axi_resp_e   bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    axi_resp_e   rresp;
    logic        rvalid;
  } axil_rsp_t;

endpackage
