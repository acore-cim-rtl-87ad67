// tb_cim_ctrl: checks the S&H routine: one sample strobe right after start,
// S1 closed throughout, the ADC start seen exactly SH_CYCLES + 2 edges after the
// start, completion after the ADC reports done, the inference counter, and
// that a start while busy is ignored.
module tb_cim_ctrl;
  localparam int SH = 32;
  logic clk = 0, rst_n = 0, start = 0, adc_done = 0;
  logic sh_sample, s1, adc_start, busy, done;
  logic [15:0] inf_count;
  int checks = 0, failures = 0, cyc = 0, n_sample, t_start, t_adc, t_done;
  always #5 clk = ~clk;
  cim_ctrl #(.SH_CYCLES(SH)) dut (.clk, .rst_n, .start, .adc_done, .sh_sample, .s1,
    .adc_start, .busy, .done, .inf_count);

  always @(posedge clk) begin
    cyc++;
    if (sh_sample) n_sample++;
    if (adc_start) t_adc = cyc;
    if (done) t_done = cyc;
    if (busy && !s1) begin failures++; $display("FAIL s1 open while busy"); end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(!s1 && !busy && inf_count == 0, "idle after reset");
    for (int k = 1; k <= 3; k++) begin
      n_sample = 0; t_adc = -1; t_done = -1;
      @(posedge clk); #1 start = 1; t_start = cyc;
      @(posedge clk); #1 start = 0;
      repeat (5) @(posedge clk);
      #1 start = 1;                 // ignored while busy
      @(posedge clk); #1 start = 0;
      wait (t_adc >= 0);
      chk(t_adc - t_start == SH + 2, $sformatf("adc_start at %0d", t_adc - t_start));
      repeat (10) @(posedge clk);
      chk(t_done < 0 && busy, "waits for ADC");
      #1 adc_done = 1; @(posedge clk); #1 adc_done = 0;
      @(posedge clk); #1;
      chk(t_done > 0 && !busy && !s1, "done");
      chk(n_sample == 1, $sformatf("one S&H strobe (%0d)", n_sample));
      chk(inf_count == 16'(k), "inference count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
