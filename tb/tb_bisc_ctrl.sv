// tb_bisc_ctrl: writes trim words for random columns and checks the
// potentiometer codes, the read-back, that every calibration counter reaches
// its target, and the time it takes: (target - value) clocks when counting
// up, 1 + target clocks when the counter must be cleared first.
module tb_bisc_ctrl;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] col;
  logic [31:0] wdata, rdata;
  logic [5:0] pot1 [M], pot2 [M], vcal1 [M], vcal2 [M];
  logic busy;
  int checks = 0, failures = 0;
  int e_p1 [M], e_p2 [M], e_v1 [M], e_v2 [M];
  always #5 clk = ~clk;
  bisc_ctrl #(.M(M)) dut (.clk, .rst_n, .we, .col, .wdata, .rdata, .pot1, .pot2, .vcal1, .vcal2, .busy);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int steps(input int from, input int to);
    return (to >= from) ? to - from : 1 + to;
  endfunction

  initial begin
    col = 0; wdata = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < M; c++) begin e_p1[c] = 32; e_p2[c] = 32; e_v1[c] = 32; e_v2[c] = 32; end
    for (int c = 0; c < M; c++)
      chk(pot1[c] == 32 && pot2[c] == 32 && vcal1[c] == 32 && vcal2[c] == 32, "reset trims");
    for (int i = 0; i < 40; i++) begin
      int c, p1, p2, v1, v2, n, exp_n;
      c = $urandom % M; p1 = $urandom % 64; p2 = $urandom % 64; v1 = $urandom % 64; v2 = $urandom % 64;
      exp_n = steps(e_v1[c], v1);
      if (steps(e_v2[c], v2) > exp_n) exp_n = steps(e_v2[c], v2);
      col = 5'(c); wdata = {2'b0, 6'(v2), 2'b0, 6'(v1), 2'b0, 6'(p2), 2'b0, 6'(p1)};
      we = 1; @(posedge clk); #1 we = 0;
      chk(rdata == wdata, "read-back");
      chk(pot1[c] == 6'(p1) && pot2[c] == 6'(p2), "potentiometer codes");
      n = 0;
      while (busy) begin @(posedge clk); #1; n++; end
      chk(n == exp_n, $sformatf("settle clocks %0d exp %0d", n, exp_n));
      chk(vcal1[c] == 6'(v1) && vcal2[c] == 6'(v2), "counters at target");
      e_p1[c] = p1; e_p2[c] = p2; e_v1[c] = v1; e_v2[c] = v2;
    end
    for (int c = 0; c < M; c++)
      chk(int'(pot1[c]) == e_p1[c] && int'(pot2[c]) == e_p2[c] && int'(vcal1[c]) == e_v1[c]
          && int'(vcal2[c]) == e_v2[c], "other columns untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
