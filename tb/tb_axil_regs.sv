// tb_axil_regs: drives AXI4-Lite reads and writes into the register block and
// checks responses (OKAY / DECERR), the start strobe, the ADC reference
// register, the decode of input, weight and trim writes into row/column
// strobes, read-back of SRAM, trim, Q and status, and the read latency.
module tb_axil_regs;
  import cim_pkg::*;
  localparam int N = 36, M = 32;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic start_o, busy_i = 0, bisc_busy_i = 0;
  logic [15:0] inf_count_i = 16'h1234;
  logic [9:0] ref_l, ref_h;
  logic sram_we, sram_is_input, trim_we;
  logic [5:0] sram_row; logic [4:0] sram_col, trim_col;
  logic [7:0] sram_wdata, sram_rdata;
  logic [31:0] trim_wdata, trim_rdata;
  logic [5:0] q_i [M];
  int checks = 0, failures = 0, n_start = 0;
  // strobe capture
  int last_row, last_col, last_is_in, last_wdata, last_trim_col, n_sram_we, n_trim_we;
  always #5 clk = ~clk;

  axil_regs #(.N(N), .M(M)) dut (.clk, .rst_n, .req, .rsp, .start_o, .busy_i, .bisc_busy_i,
    .inf_count_i, .adc_ref_l_mv_o(ref_l), .adc_ref_h_mv_o(ref_h),
    .sram_we_o(sram_we), .sram_is_input_o(sram_is_input), .sram_row_o(sram_row),
    .sram_col_o(sram_col), .sram_wdata_o(sram_wdata), .sram_rdata_i(sram_rdata),
    .trim_we_o(trim_we), .trim_col_o(trim_col), .trim_wdata_o(trim_wdata),
    .trim_rdata_i(trim_rdata), .q_i);

  // stand-in memories answer reads from the presented address
  assign sram_rdata = sram_is_input ? 8'(8'h40 + sram_row) : 8'(sram_row * 3 + sram_col);
  assign trim_rdata = 32'hA500_0000 | 32'(trim_col);
  for (genvar c = 0; c < M; c++) begin : g_q
    assign q_i[c] = 6'(c + 17);
  end

  always @(posedge clk) begin
    if (start_o) n_start++;
    if (sram_we) begin
      n_sram_we++; last_row = sram_row; last_col = sram_col; last_is_in = sram_is_input; last_wdata = sram_wdata;
    end
    if (trim_we) begin n_trim_we++; last_trim_col = trim_col; end
  end

  task automatic axi_write(input logic [15:0] a, input logic [31:0] d, output axi_resp_e resp);
    req.awaddr = a; req.awvalid = 1; req.wdata = d; req.wvalid = 1; req.wstrb = 4'hF;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    #1 req.awvalid = 0; req.wvalid = 0; req.bready = 1;
    while (!rsp.bvalid) begin @(posedge clk); #1; end
    resp = rsp.bresp;
    @(posedge clk); #1 req.bready = 0;
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d, output axi_resp_e resp, output int lat);
    req.araddr = a; req.arvalid = 1; lat = 0;
    do @(posedge clk); while (!rsp.arready);
    #1 req.arvalid = 0; req.rready = 1;
    while (!rsp.rvalid) begin @(posedge clk); #1; lat++; end
    d = rsp.rdata; resp = rsp.rresp;
    @(posedge clk); #1 req.rready = 0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    axi_resp_e r; logic [31:0] d; int lat;
    req = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(ref_l == 200 && ref_h == 600, "ADC reference reset");
    axi_read(REG_STATUS, d, r, lat);
    chk(r == RESP_OKAY && d == 32'h1234_0000, "status read");
    chk(lat == 1, $sformatf("read latency %0d", lat));
    busy_i = 1; bisc_busy_i = 1;
    axi_read(REG_STATUS, d, r, lat);
    chk(d[1:0] == 2'b11, "status busy bits");
    busy_i = 0; bisc_busy_i = 0;
    axi_write(REG_CTRL, 32'h1, r);
    chk(r == RESP_OKAY && n_start == 1, "start strobe");
    axi_write(REG_CTRL, 32'h0, r);
    chk(n_start == 1, "no start for bit0 = 0");
    axi_write(REG_ADC_REF, {6'd0, 10'd630, 6'd0, 10'd190}, r);
    chk(ref_l == 190 && ref_h == 630, "ADC references written");
    axi_read(REG_ADC_REF, d, r, lat);
    chk(d == {6'd0, 10'd630, 6'd0, 10'd190}, "ADC references read");
    for (int i = 0; i < 40; i++) begin
      int rr, cc; rr = $urandom % N; cc = $urandom % M;
      axi_write(16'(BASE_WEIGHT + 4 * (rr * M + cc)), 32'(i + 1), r);
      chk(r == RESP_OKAY && last_row == rr && last_col == cc && !last_is_in && last_wdata == i + 1,
          $sformatf("weight write decode r%0d c%0d", rr, cc));
      axi_read(16'(BASE_WEIGHT + 4 * (rr * M + cc)), d, r, lat);
      chk(d == 32'(rr * 3 + cc), "weight read-back address");
      axi_write(16'(BASE_INPUT + 4 * rr), 32'h55, r);
      chk(last_row == rr && last_is_in && last_wdata == 8'h55, "input write decode");
      axi_read(16'(BASE_INPUT + 4 * rr), d, r, lat);
      chk(d == 32'(8'h40 + rr), "input read-back");
      axi_write(16'(BASE_TRIM + 4 * cc), 32'h0102_0304, r);
      chk(last_trim_col == cc, "trim decode");
      axi_read(16'(BASE_TRIM + 4 * cc), d, r, lat);
      chk(d == (32'hA500_0000 | 32'(cc)), "trim read");
      axi_read(16'(BASE_Q + 4 * cc), d, r, lat);
      chk(d == 32'(cc + 17), "Q read");
    end
    axi_write(16'h1000, 32'h1, r);
    chk(r == RESP_DECERR, "unmapped write DECERR");
    axi_read(16'(BASE_WEIGHT + 4 * N * M), d, r, lat);
    chk(r == RESP_DECERR, "past the weights DECERR");
    axi_read(16'(BASE_Q + 2), d, r, lat);
    chk(r == RESP_DECERR, "unaligned DECERR");
    chk(n_sram_we == 80 && n_trim_we == 40, "strobe counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
