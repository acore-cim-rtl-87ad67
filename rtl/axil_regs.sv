// axil_regs: AXI4-Lite slave with the control registers of the CIM core.
//
// The processor reaches the whole CIM core through this 32-bit AXI4-Lite
// slave. Byte address map (word aligned, see cim_pkg):
//   0x0000 CTRL     W   bit0: start one inference (self-clearing)
//   0x0004 STATUS   R   bit0 inference busy, bit1 BISC busy, [31:16] inferences done
//   0x0008 ADC_REF  RW  [9:0] low ADC reference in mV, [25:16] high reference in mV
//   0x0100+4r INPUT RW  [6:0] input code of row r (D6 sign, D5..D0)
//   0x0200+4c Q     R   [5:0] last ADC result of column c
//   0x0300+4c TRIM  RW  BISC trims of column c (layout in bisc_ctrl)
//   0x2000+4(r*M+c) WEIGHT RW [7:0] weight of cell (r,c) (W7,W6 signs, W5..W0)
// One transaction is served at a time; a write needs AW and W together and
// is applied at the handshake edge and BVALID rises with it. A read address
// is registered at the AR handshake edge, the register is looked up in the
// next clock and RVALID rises one edge after the handshake edge. Unmapped addresses answer
// DECERR; writes to read-only registers are ignored with OKAY. WSTRB is
// ignored. The map and response rules are this design's own.
module axil_regs
  import cim_pkg::*;
#(
  parameter int unsigned N  = 32'(cim_pkg::N_ROWS),
  parameter int unsigned M  = 32'(cim_pkg::M_COLS),
  parameter int unsigned RW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     req,
  output axil_rsp_t     rsp,
  // control and status
  output logic          start_o,
  input  logic          busy_i,
  input  logic          bisc_busy_i,
  input  logic [15:0]   inf_count_i,
  output logic [9:0]    adc_ref_l_mv_o,
  output logic [9:0]    adc_ref_h_mv_o,
  // SRAM control
  output logic          sram_we_o,
  output logic          sram_is_input_o,
  output logic [RW-1:0] sram_row_o,
  output logic [CW-1:0] sram_col_o,
  output logic [7:0]    sram_wdata_o,
  input  logic [7:0]    sram_rdata_i,
  // BISC control
  output logic          trim_we_o,
  output logic [CW-1:0] trim_col_o,
  output logic [31:0]   trim_wdata_o,
  input  logic [31:0]   trim_rdata_i,
  // ADC results
  input  logic [5:0]    q_i [M]
);
  typedef enum logic [1:0] {S_IDLE, S_BRESP, S_RLOOK, S_RRESP} state_e;
  typedef enum logic [2:0] {R_NONE, R_CTRL, R_STATUS, R_ADCREF, R_INPUT, R_Q, R_TRIM, R_WEIGHT} region_e;

  state_e            state;
  logic [ADDR_W-1:0] raddr, addr;
  region_e           region;
  logic [31:0]       idx;        // word index inside the region
  logic              wr_hs, rd_hs;
  logic              bvalid, rvalid;
  axi_resp_e         bresp, rresp;
  logic [31:0]       rdata;

  assign wr_hs = (state == S_IDLE) && req.awvalid && req.wvalid;
  assign rd_hs = (state == S_IDLE) && !wr_hs && req.arvalid;
  assign addr  = (state == S_IDLE) ? req.awaddr : raddr;

  // address decode
  always_comb begin
    region = R_NONE;
    idx    = '0;
    if (addr == REG_CTRL)         region = R_CTRL;
    else if (addr == REG_STATUS)  region = R_STATUS;
    else if (addr == REG_ADC_REF) region = R_ADCREF;
    else if (addr >= BASE_INPUT && 32'(addr) < 32'(BASE_INPUT) + 4 * N) begin
      region = R_INPUT;  idx = 32'(addr - BASE_INPUT) >> 2;
    end else if (addr >= BASE_Q && 32'(addr) < 32'(BASE_Q) + 4 * M) begin
      region = R_Q;      idx = 32'(addr - BASE_Q) >> 2;
    end else if (addr >= BASE_TRIM && 32'(addr) < 32'(BASE_TRIM) + 4 * M) begin
      region = R_TRIM;   idx = 32'(addr - BASE_TRIM) >> 2;
    end else if (addr >= BASE_WEIGHT && 32'(addr) < 32'(BASE_WEIGHT) + 4 * N * M) begin
      region = R_WEIGHT; idx = 32'(addr - BASE_WEIGHT) >> 2;
    end
    if (addr[1:0] != 2'b00) region = R_NONE;
  end

  // strobes towards the SRAM codec and the BISC control
  always_comb begin
    sram_is_input_o = (region == R_INPUT);
    sram_row_o      = (region == R_INPUT) ? RW'(idx) : RW'(idx / M);
    sram_col_o      = CW'(idx % M);
    sram_wdata_o    = req.wdata[7:0];
    sram_we_o       = wr_hs && (region == R_INPUT || region == R_WEIGHT);
    trim_col_o      = CW'(idx);
    trim_wdata_o    = req.wdata;
    trim_we_o       = wr_hs && (region == R_TRIM);
  end

  assign start_o = wr_hs && (region == R_CTRL) && req.wdata[0];

  // read mux
  logic [31:0] rmux;
  always_comb begin
    rmux = '0;
    unique case (region)
      R_STATUS: rmux = {inf_count_i, 14'd0, bisc_busy_i, busy_i};
      R_ADCREF: rmux = {6'd0, adc_ref_h_mv_o, 6'd0, adc_ref_l_mv_o};
      R_INPUT, R_WEIGHT: rmux = 32'(sram_rdata_i);
      R_Q:      rmux = 32'(q_i[CW'(idx)]);
      R_TRIM:   rmux = trim_rdata_i;
      default:  rmux = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; raddr <= '0;
      bvalid <= 1'b0; bresp <= RESP_OKAY; rvalid <= 1'b0; rresp <= RESP_OKAY; rdata <= '0;
      adc_ref_l_mv_o <= ADC_REF_L_MV_RST;
      adc_ref_h_mv_o <= ADC_REF_H_MV_RST;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (wr_hs) begin
            if (region == R_ADCREF) begin
              adc_ref_l_mv_o <= req.wdata[9:0];
              adc_ref_h_mv_o <= req.wdata[25:16];
            end
            bvalid <= 1'b1;
            bresp  <= (region == R_NONE) ? RESP_DECERR : RESP_OKAY;
            state <= S_BRESP;
          end else if (rd_hs) begin
            raddr <= req.araddr;
            state <= S_RLOOK;
          end
        end
        S_BRESP: if (req.bready) begin bvalid <= 1'b0; state <= S_IDLE; end
        S_RLOOK: begin
          rdata  <= rmux;
          rresp  <= (region == R_NONE) ? RESP_DECERR : RESP_OKAY;
          rvalid <= 1'b1;
          state <= S_RRESP;
        end
        S_RRESP: if (req.rready) begin rvalid <= 1'b0; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ready signals are combinational acknowledgements of the handshakes
  always_comb begin
    rsp         = '0;
    rsp.awready = wr_hs;
    rsp.wready  = wr_hs;
    rsp.bvalid  = bvalid;
    rsp.bresp   = bresp;
    rsp.arready = rd_hs;
    rsp.rvalid  = rvalid;
    rsp.rdata   = rdata;
    rsp.rresp   = rresp;
  end

  // AXI4-Lite rules: a raised VALID stays until its READY
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.bvalid && !req.bready |=> rsp.bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata));
endmodule
