// tb_adc_mux_sel: checks that the column counter walks 0..M-1 and wraps,
// that `sel` is one-hot on the counted column while enabled and zero while
// disabled, and that clear returns to column 0.
module tb_adc_mux_sel;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [4:0] cnt;
  logic [M-1:0] sel;
  int checks = 0, failures = 0, exp_col;
  always #5 clk = ~clk;
  adc_mux_sel #(.M(M)) dut (.clk, .rst_n, .clr, .en, .cnt, .sel);

  task automatic chk(input string what);
    logic [M-1:0] exp_sel;
    exp_sel = en ? (M'(1) << exp_col) : '0;
    checks++;
    if (int'(cnt) != exp_col || sel !== exp_sel) begin
      failures++; $display("FAIL %s: cnt=%0d exp=%0d sel=%h exp=%h", what, cnt, exp_col, sel, exp_sel);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1; exp_col = 0;
    #1 chk("idle");
    #1 en = 1;
    for (int i = 0; i < 3 * M; i++) begin
      #1 chk("sweep");
      @(posedge clk); exp_col = (exp_col + 1) % M;
    end
    #1 en = 0; #1 chk("disabled");
    repeat (3) @(posedge clk); #1 chk("disabled hold");
    clr = 1; @(posedge clk); #1 clr = 0; exp_col = 0; #1 chk("clear");
    en = 1; #1 chk("column 0 again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
