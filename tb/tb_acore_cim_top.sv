// tb_acore_cim_top: end-to-end test of the CIM core at its full 36 x 32 size,
// with the testbench in the role of the RISC-V processor on the AXI4-Lite bus.
//
// 1. Widens the ADC references to 0.19 / 0.63 V, as the calibration routine
//    asks, and runs the characterization phase: all weights at the maximum
//    magnitude on one summation line (negative line, then positive line),
//    inputs stepped in Z = 8 equal steps (codes 0, 7, ..., 49), one
//    inference per step. The
//    nominal code Q_nom of every point is computed here from the cell
//    equation and the ADC transfer function.
// 2. Fits gain g and offset e of each column and line by least squares and
//    writes new potentiometer and calibration-DAC codes (correction phase):
//    the negative line trims SA2, the positive line then trims SA1.
// 3. Repeats the characterization and checks every point is within 1.5 LSB,
//    that every column's compute SNR is above 20 dB, that the average SNR
//    rose by more than 1.5 dB, and that the spread of gains narrowed.
// 4. With the default references, runs random signed MACs before and after
//    calibration and compares with the ideal result.
// Counted mechanisms that must each occur: inferences, ADC clipping at the
// default references, reference switch, trim update with counter clear and
// with count-up, BISC busy seen on the bus. Also checks the inference
// latency (busy for SH_CYCLES + M + 4 clocks) and weight read-back.
module tb_acore_cim_top;
  import cim_pkg::*;
  localparam int N = 36, M = 32, Z = 8, SH = 32;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  int checks = 0, failures = 0;
  int n_inf = 0, n_clip = 0, n_refsw = 0, n_clr = 0, n_up = 0, n_bisc_busy = 0;
  int busy_len = 0, busy_cnt = 0, busy_bad = 0;
  real vl_uv = 200000.0, vh_uv = 600000.0;
  int q_meas [Z][M];
  real qn [2][Z];            // nominal codes per line and step
  real qa [2][Z][M];         // measured codes
  real g_fit [2][M], e_fit [2][M];
  int pot1 [M], pot2 [M], cal1 [M], cal2 [M];
  real snr_before [M], snr_after [M];

  always #5 clk = ~clk;   // 32 MHz in the silicon; time units are arbitrary here

  acore_cim_top dut (.clk, .rst_n, .axil_req(req), .axil_rsp(rsp));

  // inference latency and counter activity, observed inside the core
  always @(posedge clk) begin
    if (!rst_n) busy_cnt = 0;   // state before reset is arbitrary
    else if (dut.busy) busy_cnt++;
    else if (busy_cnt != 0) begin
      if (busy_cnt != SH + M + 4) busy_bad++;
      busy_len = busy_cnt; busy_cnt = 0; n_inf++;
    end
    if (rst_n) for (int c = 0; c < M; c++) begin
      if (dut.u_bisc.clr1[c] || dut.u_bisc.clr2[c]) n_clr++;
      if (dut.u_bisc.inc1[c] || dut.u_bisc.inc2[c]) n_up++;
    end
  end

  // ---------------- bus functional model ----------------
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

  // ---------------- processor routines ----------------
  task automatic set_refs(input int l_mv, input int h_mv);
    axi_write(REG_ADC_REF, {6'd0, 10'(h_mv), 6'd0, 10'(l_mv)});
    vl_uv = real'(l_mv) * 1000.0; vh_uv = real'(h_mv) * 1000.0; n_refsw++;
  endtask

  task automatic run_inference(output int q [M]);
    logic [31:0] d;
    axi_write(REG_CTRL, 32'h1);
    do axi_read(REG_STATUS, d); while (d[0]);
    for (int c = 0; c < M; c++) begin
      axi_read(16'(BASE_Q + 4 * c), d);
      q[c] = int'(d[5:0]);
    end
  endtask

  task automatic write_all_weights(input logic [7:0] w);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < M; c++) axi_write(16'(BASE_WEIGHT + 4 * (r * M + c)), 32'(w));
  endtask

  // ideal column code for a given signed MAC current (pA), references, V_CAL = V_BIAS
  function automatic real q_nominal(input real i_pa);
    return (real'(R_SA_NOM_OHM) * i_pa * 1.0e-6 + 400000.0 - vl_uv) * 63.0 / (vh_uv - vl_uv);
  endfunction

  function automatic int clip_round(input real q);
    int k; k = int'($floor(q + 0.5));
    return (k < 0) ? 0 : (k > 63) ? 63 : k;
  endfunction

  // stepped input, all rows equal, positive sign; weights at the maximum magnitude
  // (0, 7, ..., 49: equally spaced, leaving room for the column errors)
  function automatic int step_code(input int z);
    return 7 * z;
  endfunction

  // characterization of one line: line 0 negative (W7), line 1 positive (W6)
  task automatic characterize(input int line);
    write_all_weights(line != 0 ? 8'h7F : 8'hBF);
    for (int z = 0; z < Z; z++) begin
      int d; real i_col;
      d = step_code(z);
      for (int r = 0; r < N; r++) axi_write(16'(BASE_INPUT + 4 * r), 32'(8'h40 | d));
      i_col = real'(N) * (3125.0 * real'(d)) * 1.0e6 / real'(R_U_OHM) * 63.0 / 64.0;
      qn[line][z] = q_nominal(line != 0 ? i_col : -i_col);
      run_inference(q_meas[z]);
      for (int c = 0; c < M; c++) qa[line][z][c] = real'(q_meas[z][c]);
    end
  endtask

  // least-squares gain and offset (equations of the online characterization)
  task automatic fit(input int line);
    for (int c = 0; c < M; c++) begin
      real sx, sy, sxy, sxx;
      sx = 0; sy = 0; sxy = 0; sxx = 0;
      for (int z = 0; z < Z; z++) begin
        sx += qn[line][z]; sy += qa[line][z][c];
        sxy += qn[line][z] * qa[line][z][c]; sxx += qn[line][z] * qn[line][z];
      end
      g_fit[line][c] = (real'(Z) * sxy - sx * sy) / (real'(Z) * sxx - sx * sx);
      e_fit[line][c] = (sy - g_fit[line][c] * sx) / real'(Z);
    end
  endtask

  function automatic real snr_db(input int c);
    real mn, me, vn, ve; int k;
    mn = 0; me = 0; vn = 0; ve = 0; k = 0;
    for (int l = 0; l < 2; l++) for (int z = 0; z < Z; z++) begin
      mn += qn[l][z]; me += qn[l][z] - qa[l][z][c]; k++;
    end
    mn /= k; me /= k;
    for (int l = 0; l < 2; l++) for (int z = 0; z < Z; z++) begin
      vn += (qn[l][z] - mn) ** 2; ve += (qn[l][z] - qa[l][z][c] - me) ** 2;
    end
    if (ve < 1.0e-3 * k) ve = 1.0e-3 * k;   // floor for a perfect column
    return 10.0 * $log10(vn / ve);
  endfunction

  task automatic write_trims();
    logic [31:0] d;
    for (int c = 0; c < M; c++)
      axi_write(16'(BASE_TRIM + 4 * c),
                {2'b0, 6'(cal2[c]), 2'b0, 6'(cal1[c]), 2'b0, 6'(pot2[c]), 2'b0, 6'(pot1[c])});
    axi_read(REG_STATUS, d);
    if (d[1]) n_bisc_busy++;
    do axi_read(REG_STATUS, d); while (d[1]);
    for (int c = 0; c < M; c++)
      chk(int'(dut.vcal1[c]) == cal1[c] && int'(dut.vcal2[c]) == cal2[c], "counters reached trims");
  endtask

  function automatic int clamp6(input real v);
    int k; k = int'($floor(v + 0.5));
    return (k < 0) ? 0 : (k > 63) ? 63 : k;
  endfunction

  // random signed MAC test at the current trims; returns worst error in LSB
  task automatic random_macs(input int n_tests, input int unsigned seed, output int worst, output int n_big);
    int unsigned s;
    int q [M];
    logic [6:0] xin [N];
    logic [7:0] w [N][M];
    s = seed; worst = 0; n_big = 0;
    for (int t = 0; t < n_tests; t++) begin
      for (int r = 0; r < N; r++) begin
        s = s * 1103515245 + 12345; xin[r] = 7'(s >> 9);
        axi_write(16'(BASE_INPUT + 4 * r), 32'(xin[r]));
        for (int c = 0; c < M; c++) begin
          s = s * 1103515245 + 12345;
          w[r][c] = {(s >> 20) % 3 == 1, (s >> 20) % 3 == 2, 6'(s >> 10)};
          axi_write(16'(BASE_WEIGHT + 4 * (r * M + c)), 32'(w[r][c]));
        end
      end
      run_inference(q);
      for (int c = 0; c < M; c++) begin
        real i_mac; int e, err;
        i_mac = 0;
        for (int r = 0; r < N; r++) begin
          real v; v = (xin[r][6] ? 3125.0 : -3125.0) * real'(xin[r][5:0]);
          i_mac += v * 1.0e6 / real'(R_U_OHM) * real'(w[r][c][5:0]) / 64.0
                   * (real'(w[r][c][6]) - real'(w[r][c][7]));
        end
        e = clip_round(q_nominal(i_mac));
        err = (q[c] > e) ? q[c] - e : e - q[c];
        if (err > worst) worst = err;
        if (err > 1) n_big++;
      end
    end
  endtask

  initial begin
    logic [31:0] d;
    int qdef [M];
    int worst_before, worst_after, big_before, big_after;
    real avg_b, avg_a, gmin, gmax, gspread_b;
    req = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // weight read-back and reset trims
    axi_write(16'(BASE_WEIGHT + 4 * (5 * M + 7)), 32'hA5);
    axi_read(16'(BASE_WEIGHT + 4 * (5 * M + 7)), d);
    chk(d == 32'hA5, "weight read-back");
    axi_read(16'(BASE_TRIM), d);
    chk(d == 32'h2020_2020, "trim reset value");

    // ---- uncalibrated random MACs with the default references ----
    random_macs(3, 32'd7, worst_before, big_before);

    // ---- ADC clipping at the default references: full negative MAC ----
    write_all_weights(8'hBF);
    for (int r = 0; r < N; r++) axi_write(16'(BASE_INPUT + 4 * r), 32'(8'h40 | 63));
    run_inference(qdef);
    for (int c = 0; c < M; c++) if (qdef[c] == 0) n_clip++;
    chk(busy_len == SH + M + 4, $sformatf("inference busy for %0d clocks", busy_len));

    // ---- characterization with widened references ----
    set_refs(190, 630);
    for (int c = 0; c < M; c++) begin pot1[c] = 32; pot2[c] = 32; cal1[c] = 32; cal2[c] = 32; end
    characterize(0);
    characterize(1);
    fit(0); fit(1);
    for (int c = 0; c < M; c++) snr_before[c] = snr_db(c);
    gspread_b = 0;
    for (int l = 0; l < 2; l++) for (int c = 0; c < M; c++)
      if ((g_fit[l][c] - 1.0) ** 2 > gspread_b) gspread_b = (g_fit[l][c] - 1.0) ** 2;
    for (int z = 0; z < Z; z++)
      for (int l = 0; l < 2; l++)
        for (int c = 0; c < M; c++)
          chk(qa[l][z][c] > 0 && qa[l][z][c] < 63, "no clipping with widened references");

    // ---- correction, SA2 from the negative line ----
    for (int c = 0; c < M; c++) begin
      real eps, qn0;
      qn0 = q_nominal(0.0);
      // R' = alpha_D R / g, alpha_D = 1; offset referred to zero current
      pot2[c] = clamp6(real'(96 + pot2[c]) / g_fit[0][c] - 96.0);
      eps = e_fit[0][c] + (g_fit[0][c] - 1.0) * qn0;
      cal2[c] = clamp6(real'(cal2[c]) - eps / 63.0 * (vh_uv - vl_uv) / 6250.0);
    end
    write_trims();
    characterize(1);
    fit(1);
    // ---- correction, SA1 from the positive line (V_X enters SA2 inverted) ----
    for (int c = 0; c < M; c++) begin
      real eps, qn0;
      qn0 = q_nominal(0.0);
      pot1[c] = clamp6(real'(96 + pot1[c]) / g_fit[1][c] - 96.0);
      eps = e_fit[1][c] + (g_fit[1][c] - 1.0) * qn0;
      cal1[c] = clamp6(real'(cal1[c]) + eps / 63.0 * (vh_uv - vl_uv) / 6250.0);
    end
    write_trims();

    // ---- verification ----
    characterize(0);
    characterize(1);
    fit(0); fit(1);
    avg_b = 0; avg_a = 0; gmin = 9; gmax = 0;
    for (int c = 0; c < M; c++) begin
      snr_after[c] = snr_db(c);
      avg_b += snr_before[c] / M; avg_a += snr_after[c] / M;
      chk(snr_after[c] > 20.0, $sformatf("SNR col %0d %f -> %f", c, snr_before[c], snr_after[c]));
      for (int l = 0; l < 2; l++) begin
        if (g_fit[l][c] < gmin) gmin = g_fit[l][c];
        if (g_fit[l][c] > gmax) gmax = g_fit[l][c];
        for (int z = 0; z < Z; z++) begin
          real e; e = qa[l][z][c] - qn[l][z];
          chk(e <= 1.5 && e >= -1.5, $sformatf("calibrated col %0d line %0d step %0d err %f", c, l, z, e));
        end
      end
    end
    chk(gmin > 0.95 && gmax < 1.05, $sformatf("calibrated gains %f..%f", gmin, gmax));
    chk((gmin - 1.0) ** 2 < gspread_b && (gmax - 1.0) ** 2 < gspread_b,
        $sformatf("gain spread narrowed (before +/-%f)", $sqrt(gspread_b)));
    $display("compute SNR average %0.1f dB -> %0.1f dB", avg_b, avg_a);
    chk(avg_a > avg_b + 1.5, "average compute SNR improves by more than 1.5 dB");

    // ---- signed MACs after calibration, default references ----
    set_refs(200, 600);
    random_macs(3, 32'd7, worst_after, big_after);
    $display("random MACs: worst error %0d LSB (%0d > 1 LSB) before, %0d LSB (%0d) after",
             worst_before, big_before, worst_after, big_after);
    chk(worst_after <= 2, "calibrated MAC error within 2 LSB");
    chk(big_after < big_before, "calibration reduces large MAC errors");

    // ---- mechanisms ----
    $display("mechanisms: inferences=%0d clip=%0d refswitch=%0d counter_clear=%0d counter_up=%0d bisc_busy=%0d",
             n_inf, n_clip, n_refsw, n_clr, n_up, n_bisc_busy);
    chk(n_inf > 0, "inference ran");
    chk(n_clip > 0, "ADC clipping seen at default references");
    chk(n_refsw > 0, "reference switch");
    chk(n_clr > 0, "calibration counter cleared");
    chk(n_up > 0, "calibration counter counted up");
    chk(n_bisc_busy > 0, "BISC busy seen");
    chk(busy_bad == 0, "every inference had the same latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
