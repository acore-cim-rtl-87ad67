// tb_mwc_array: random row voltages and weights on a 6 x 5 array; each
// column's positive and negative line currents are compared with a sum
// worked out here in integer arithmetic (within 1 pA of rounding).
module tb_mwc_array;
  import cim_pkg::*;
  localparam int N = 6, M = 5;
  uv_t v_in [N];
  logic [7:0] weight [N][M];
  pa_t i_pos [M], i_neg [M];
  int checks = 0, failures = 0;
  mwc_array #(.N(N), .M(M)) dut (.v_in, .weight, .i_pos, .i_neg);
  initial begin
    for (int t = 0; t < 200; t++) begin
      longint ep [M], en [M];
      for (int r = 0; r < N; r++) begin
        v_in[r] = 200000 + int'($urandom % 400001);
        for (int c = 0; c < M; c++) weight[r][c] = 8'($urandom);
      end
      #1;
      for (int c = 0; c < M; c++) begin
        ep[c] = 0; en[c] = 0;
        for (int r = 0; r < N; r++) begin
          // (v - 0.4V)[uV] * 1e6 / 385000 * D / 64  in pA, kept in femtoamps x 1e3
          longint num; num = longint'(v_in[r] - 400000) * 1000000 * longint'(weight[r][c][5:0]);
          if (weight[r][c][7:6] == 2'b01) ep[c] += num;
          if (weight[r][c][7:6] == 2'b10) en[c] += num;
        end
        checks += 2;
        if ((longint'(i_pos[c]) * 385000 * 64 - ep[c]) > 385000 * 64 || (ep[c] - longint'(i_pos[c]) * 385000 * 64) > 385000 * 64) begin
          failures++; $display("FAIL pos col %0d: %0d vs %f", c, i_pos[c], real'(ep[c]) / (385000.0 * 64.0));
        end
        if ((longint'(i_neg[c]) * 385000 * 64 - en[c]) > 385000 * 64 || (en[c] - longint'(i_neg[c]) * 385000 * 64) > 385000 * 64) begin
          failures++; $display("FAIL neg col %0d: %0d vs %f", c, i_neg[c], real'(en[c]) / (385000.0 * 64.0));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
