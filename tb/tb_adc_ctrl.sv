// tb_adc_ctrl: runs ADC sweeps with the column counter and a stand-in ADC
// that latches a known code per column one clock after the multiplexer
// selects it, and checks every stored result, the sweep length and that
// `done` comes M + 3 clocks after `start`.
module tb_adc_ctrl;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic mux_clr, mux_en, busy, done;
  logic [4:0] col;
  logic [M-1:0] sel;
  logic [5:0] q_in, q [M];
  int checks = 0, failures = 0, en_cycles, t0, lat;
  int unsigned salt;
  always #5 clk = ~clk;

  adc_mux_sel #(.M(M)) u_sel (.clk, .rst_n, .clr(mux_clr), .en(mux_en), .cnt(col), .sel);
  adc_ctrl #(.M(M), .BQ(6), .LAT(1)) dut (.clk, .rst_n, .start, .mux_clr, .mux_en, .col,
    .q_in, .q, .busy, .done);

  function automatic logic [5:0] code_of(input int c);
    return 6'((c * 7 + salt) % 64);
  endfunction

  // stand-in flash ADC: latch the code of the selected column
  always_ff @(posedge clk) begin
    q_in <= 6'd0;
    for (int c = 0; c < M; c++) if (sel[c]) q_in <= code_of(c);
  end

  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (mux_en) en_cycles++;
  end

  initial begin
    salt = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int sweep = 0; sweep < 3; sweep++) begin
      salt = 13 * sweep + 5; en_cycles = 0;
      @(posedge clk); #1 start = 1; t0 = cyc;
      @(posedge clk); #1 start = 0;
      while (!done) @(posedge clk);
      lat = cyc - t0;
      checks++;
      if (lat != M + 3) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (en_cycles != M) begin failures++; $display("FAIL en cycles %0d", en_cycles); end
      #1;
      for (int c = 0; c < M; c++) begin
        checks++;
        if (q[c] != code_of(c)) begin failures++; $display("FAIL sweep %0d col %0d q=%0d exp=%0d", sweep, c, q[c], code_of(c)); end
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
