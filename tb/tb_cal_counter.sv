// tb_cal_counter: checks reset value, counting, clear priority and
// saturation of the 6-bit calibration up-counter against a reference count.
module tb_cal_counter;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [5:0] cnt;
  int checks = 0, failures = 0;
  int ref_cnt;
  always #5 clk = ~clk;
  cal_counter #(.W(6), .RST_VAL(6'd32)) dut (.clk, .rst_n, .clr, .inc, .cnt);

  task automatic chk(input int exp, input string what);
    checks++;
    if (int'(cnt) != exp) begin failures++; $display("FAIL %s: cnt=%0d exp=%0d", what, cnt, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 chk(32, "reset");
    rst_n = 1; ref_cnt = 32;
    for (int i = 0; i < 200; i++) begin
      clr = ($urandom % 10) == 0;
      inc = ($urandom % 3) != 0;
      @(posedge clk);
      if (clr) ref_cnt = 0; else if (inc && ref_cnt < 63) ref_cnt++;
      #1 chk(ref_cnt, "random");
    end
    clr = 1; @(posedge clk); #1 chk(0, "clear");
    clr = 1; inc = 1; @(posedge clk); #1 chk(0, "clear wins");
    clr = 0; inc = 1;
    repeat (70) @(posedge clk);
    #1 chk(63, "saturate");
    inc = 0; @(posedge clk); #1 chk(63, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
