// tb_sample_hold: checks reset to the zero level, capture on a strobe and
// holding while the input moves.
module tb_sample_hold;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, sample = 0;
  uv_t v_in, v_out;
  int checks = 0, failures = 0, held;
  always #5 clk = ~clk;
  sample_hold dut (.clk, .rst_n, .sample, .v_in, .v_out);
  initial begin
    v_in = 123;
    repeat (2) @(posedge clk); #1;
    checks++; if (v_out != V_BIAS_UV) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      v_in = 200000 + int'($urandom % 400000); sample = 1; held = v_in;
      @(posedge clk); #1 sample = 0;
      for (int j = 0; j < 4; j++) begin
        v_in = int'($urandom % 800000);
        @(posedge clk); #1;
        checks++; if (v_out != held) begin failures++; $display("FAIL hold %0d %0d", v_out, held); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
