// tb_amux: each one-hot select passes its column, no select gives 0 V.
module tb_amux;
  import cim_pkg::*;
  localparam int M = 32;
  logic [M-1:0] sel;
  uv_t v_in [M], v_out;
  int checks = 0, failures = 0;
  amux #(.M(M)) dut (.sel, .v_in, .v_out);
  initial begin
    for (int c = 0; c < M; c++) v_in[c] = 1000 * (c + 1) + 7;
    sel = '0; #1;
    checks++; if (v_out != 0) begin failures++; $display("FAIL none"); end
    for (int c = 0; c < M; c++) begin
      sel = M'(1) << c; #1;
      checks++; if (v_out != 1000 * (c + 1) + 7) begin failures++; $display("FAIL col %0d", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
