// tb_flash_encoder: drives every clean thermometer code and codes with one
// bubble (a single comparator flipped away from the transition) and checks
// the latched binary output one clock later.
module tb_flash_encoder;
  logic clk = 0, rst_n = 0;
  logic [62:0] thermo;
  logic [5:0] q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  flash_encoder #(.BQ(6)) dut (.clk, .rst_n, .thermo, .q);

  function automatic logic [62:0] therm(input int k);
    return (k == 0) ? '0 : (63'((64'(1) << k) - 1));
  endfunction

  task automatic apply(input logic [62:0] t, input int exp, input string what);
    thermo = t;
    @(posedge clk); #1;
    checks++;
    if (int'(q) != exp) begin failures++; $display("FAIL %s: q=%0d exp=%0d t=%h", what, q, exp, t); end
  endtask

  initial begin
    thermo = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k <= 63; k++) apply(therm(k), k, "clean");
    // a 0 three places below the transition, and a 1 three places above
    for (int k = 5; k <= 58; k++) begin
      logic [62:0] t;
      t = therm(k); t[k-3] = 1'b0;
      apply(t, k, "bubble low");
      t = therm(k); t[k+2] = 1'b1;
      apply(t, k, "bubble high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
