// tb_mlp_mnist: the MNIST multilayer perceptron workload (784 inputs, 72
// hidden neurons, 10 outputs) run on the 36 x 32 core by tiling, with the
// testbench in the role of the RISC-V processor.
//
// A 784 x 72 layer needs 22 row tiles (the last one 28 rows, the rest of its
// inputs set to 0) times 3 column tiles (the last one 8 columns, the rest of
// its weights 0): 66 tiles. The 72 x 10 layer needs 2 row tiles. For each
// tile the processor loads 36 x 32 weights and 36 inputs over AXI4-Lite,
// runs one inference, reads the 32 ADC codes and adds (Q - 32), the signed
// code around the zero level, to the neuron's partial sum. Between the
// layers it applies ReLU and scales the hidden sums back to 6-bit input
// codes. No image data are available here, so pixels (0..63) and signed
// 6-bit weights are pseudo-random; the data path and the arithmetic are the
// same as for trained weights.
//
// The core is built without amplifier errors (GAIN_ERR = 0, OFFSET_ERR_UV =
// 0) so every tile can be checked against its ideal code: each ADC code must
// be within 0.6 LSB of the exact value (0.5 LSB quantization plus the
// integer rounding of the models), and each neuron's accumulated sum within
// 0.6 LSB per tile of the exact multiply-accumulate. Calibration against
// amplifier errors is exercised by tb_acore_cim_top. Counted: tiles run,
// weight words written, partial sums accumulated.
module tb_mlp_mnist;
  import cim_pkg::*;
  localparam int N = 36, M = 32;
  localparam int IN = 784, HID = 72, OUT = 10;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  int checks = 0, failures = 0;
  int n_tiles = 0, n_wwrites = 0, n_partial = 0;

  logic [5:0] x   [IN];        // pixels
  logic [7:0] w1  [IN][HID];   // sign-magnitude weights, W6 = +, W7 = -
  logic [7:0] w2  [HID][OUT];
  logic [5:0] h   [HID];       // hidden activations as input codes
  int         acc1 [HID], acc2 [OUT];     // accumulated (Q - 32)
  real        ex1 [HID], ex2 [OUT];       // exact accumulated codes
  int unsigned s = 32'd12345;

  always #5 clk = ~clk;

  acore_cim_top #(.GAIN_ERR(0.0), .OFFSET_ERR_UV(0)) dut (
    .clk, .rst_n, .axil_req(req), .axil_rsp(rsp));

  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    req.awaddr = a; req.awvalid = 1; req.wdata = d; req.wvalid = 1; req.wstrb = 4'hF;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    #1 req.awvalid = 0; req.wvalid = 0; req.bready = 1;
    while (!rsp.bvalid) begin @(posedge clk); #1; end
    if (rsp.bresp != RESP_OKAY) begin failures++; $display("FAIL write resp at %h", a); end
    @(posedge clk); #1 req.bready = 0;
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    req.araddr = a; req.arvalid = 1;
    do @(posedge clk); while (!rsp.arready);
    #1 req.arvalid = 0; req.rready = 1;
    while (!rsp.rvalid) begin @(posedge clk); #1; end
    d = rsp.rdata;
    @(posedge clk); #1 req.rready = 0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int unsigned rnd();
    s = s * 32'd1103515245 + 32'd12345;
    return s >> 8;
  endfunction

  // exact (unrounded) ADC code of a column at the default references 0.2 / 0.6 V,
  // from the sums of input code x weight magnitude on the positive and the
  // negative line: Q = (0.2 V + R_SA * I_MAC) * 63 / 0.4 V, 31.5 at zero current
  function automatic real code_of(input int unsigned dw_sum_pos, input int unsigned dw_sum_neg);
    real i_pa;
    // one input step is 0.2 V / 64 = 3125 uV; I = V / R_U * W / 64
    i_pa = 3125.0 * (real'(dw_sum_pos) - real'(dw_sum_neg)) * 1.0e6 / real'(R_U_OHM) / 64.0;
    return (real'(R_SA_NOM_OHM) * i_pa * 1.0e-6 + 200000.0) * 63.0 / 400000.0;
  endfunction

  // one tile: rows r0.., columns c0.. of a layer with n_in inputs and n_out neurons
  task automatic run_tile(input int layer, input int r0, input int c0,
                          input int n_in, input int n_out);
    logic [31:0] d;
    for (int r = 0; r < N; r++) begin
      logic [5:0] xi;
      xi = (r0 + r < n_in) ? ((layer == 1) ? x[r0 + r] : h[r0 + r]) : 6'd0;
      axi_write(16'(BASE_INPUT + 4 * r), {25'd0, 1'b1, xi});
      for (int c = 0; c < M; c++) begin
        logic [7:0] wv;
        wv = 8'd0;
        if (r0 + r < n_in && c0 + c < n_out)
          wv = (layer == 1) ? w1[r0 + r][c0 + c] : w2[r0 + r][c0 + c];
        axi_write(16'(BASE_WEIGHT + 4 * (r * M + c)), 32'(wv));
        n_wwrites++;
      end
    end
    axi_write(REG_CTRL, 32'h1);
    do axi_read(REG_STATUS, d); while (d[0]);
    n_tiles++;
    for (int c = 0; c < M; c++) begin
      int unsigned sp, sn;
      real qe, dq;
      axi_read(16'(BASE_Q + 4 * c), d);
      sp = 0; sn = 0;
      for (int r = 0; r < N; r++)
        if (r0 + r < n_in && c0 + c < n_out) begin
          logic [7:0] wv; int unsigned xi;
          wv = (layer == 1) ? w1[r0 + r][c0 + c] : w2[r0 + r][c0 + c];
          xi = (layer == 1) ? 32'(x[r0 + r]) : 32'(h[r0 + r]);
          if (wv[6]) sp += xi * 32'(wv[5:0]);
          if (wv[7]) sn += xi * 32'(wv[5:0]);
        end
      qe = code_of(sp, sn);
      dq = real'(d[5:0]) - qe;
      chk(dq < 0.6 && dq > -0.6,
          $sformatf("layer %0d tile (%0d,%0d) col %0d: Q=%0d exact %f", layer, r0, c0, c, d[5:0], qe));
      if (c0 + c < n_out) begin
        if (layer == 1) begin acc1[c0 + c] += int'(d[5:0]) - 32; ex1[c0 + c] += qe - 31.5; end
        else            begin acc2[c0 + c] += int'(d[5:0]) - 32; ex2[c0 + c] += qe - 31.5; end
        n_partial++;
      end
    end
  endtask

  initial begin
    int tiles1, tiles2, best_hw, best_ex;
    req = '0;
    for (int i = 0; i < IN; i++) x[i] = 6'(rnd() % 64);
    for (int i = 0; i < IN; i++)
      for (int j = 0; j < HID; j++) begin
        int unsigned v; v = rnd();
        w1[i][j] = {v[0], ~v[0], 6'(v >> 4)};
      end
    for (int i = 0; i < HID; i++)
      for (int j = 0; j < OUT; j++) begin
        int unsigned v; v = rnd();
        w2[i][j] = {v[0], ~v[0], 6'(v >> 4)};
      end
    for (int j = 0; j < HID; j++) begin acc1[j] = 0; ex1[j] = 0.0; end
    for (int j = 0; j < OUT; j++) begin acc2[j] = 0; ex2[j] = 0.0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---- hidden layer: 22 x 3 tiles ----
    tiles1 = 0;
    for (int c0 = 0; c0 < HID; c0 += M)
      for (int r0 = 0; r0 < IN; r0 += N) begin
        run_tile(1, r0, c0, IN, HID);
        tiles1++;
      end
    chk(tiles1 == 66, $sformatf("hidden layer tiles %0d", tiles1));
    // ex1 holds the exact code sum (each tile's zero level is code 31.5 on the
    // exact scale, i.e. 32 after rounding); the error per tile is <= 0.6 LSB
    for (int j = 0; j < HID; j++) begin
      real e; e = real'(acc1[j]) - (ex1[j] - 0.5 * 22.0);
      chk(e < 0.6 * 22.0 && e > -0.6 * 22.0, $sformatf("hidden %0d sum %0d exact %f", j, acc1[j], ex1[j]));
      // ReLU, then scale back to a 6-bit input code
      h[j] = (acc1[j] <= 0) ? 6'd0 : (acc1[j] * 4 > 63) ? 6'd63 : 6'(acc1[j] * 4);
    end

    // ---- output layer: 2 tiles ----
    tiles2 = 0;
    for (int r0 = 0; r0 < HID; r0 += N) begin
      run_tile(2, r0, 0, HID, OUT);
      tiles2++;
    end
    chk(tiles2 == 2, $sformatf("output layer tiles %0d", tiles2));
    best_hw = 0; best_ex = 0;
    for (int j = 0; j < OUT; j++) begin
      real e; e = real'(acc2[j]) - (ex2[j] - 0.5 * 2.0);
      chk(e < 1.2 && e > -1.2, $sformatf("output %0d sum %0d exact %f", j, acc2[j], ex2[j]));
      if (acc2[j] > acc2[best_hw]) best_hw = j;
      if (ex2[j] > ex2[best_ex]) best_ex = j;
    end
    $display("largest output: core %0d, unquantized arithmetic %0d", best_hw, best_ex);

    $display("mechanisms: tiles=%0d weight_writes=%0d partial_sums=%0d", n_tiles, n_wwrites, n_partial);
    chk(n_tiles == 68, "68 tiles for the 784-72-10 network");
    chk(n_wwrites == 68 * N * M, "weights reloaded for every tile");
    chk(n_partial == 66 * 24 + 2 * 10, "partial sums accumulated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
