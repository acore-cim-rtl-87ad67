// tb_sram_codec: random writes of input codes and weights against a shadow
// copy; checks the parallel cell outputs after every write and the
// read-back port for every cell at the end.
module tb_sram_codec;
  localparam int N = 36, M = 32;
  logic clk = 0, rst_n = 0, we = 0, is_input = 0;
  logic [5:0] row; logic [4:0] col;
  logic [7:0] wdata, rdata;
  logic [6:0] in_code [N];
  logic [7:0] weight [N][M];
  logic [6:0] s_in [N];
  logic [7:0] s_w [N][M];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_codec #(.N(N), .M(M)) dut (.clk, .rst_n, .we, .is_input, .row, .col, .wdata, .rdata, .in_code, .weight);

  task automatic compare_all(input string what);
    int bad = 0;
    for (int r = 0; r < N; r++) begin
      if (in_code[r] != s_in[r]) bad++;
      for (int c = 0; c < M; c++) if (weight[r][c] != s_w[r][c]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d cells differ", what, bad); end
  endtask

  initial begin
    row = 0; col = 0; wdata = 0;
    for (int r = 0; r < N; r++) begin s_in[r] = 0; for (int c = 0; c < M; c++) s_w[r][c] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare_all("reset");
    for (int i = 0; i < 600; i++) begin
      is_input = ($urandom % 4) == 0;
      row = 6'($urandom % N); col = 5'($urandom % M); wdata = 8'($urandom);
      we = 1; @(posedge clk); #1 we = 0;
      if (is_input) s_in[row] = wdata[6:0]; else s_w[row][col] = wdata;
      compare_all("after write");
    end
    for (int r = 0; r < N; r++) begin
      is_input = 1; row = 6'(r); #1;
      checks++; if (rdata != {1'b0, s_in[r]}) begin failures++; $display("FAIL rd input %0d", r); end
      is_input = 0;
      for (int c = 0; c < M; c++) begin
        col = 5'(c); #1;
        checks++; if (rdata != s_w[r][c]) begin failures++; $display("FAIL rd w %0d %0d", r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
