// cim_ctrl: S&H routine of one inference.
//
// On `start` it pulses `sh_sample` so the N sample-and-hold circuits capture
// the input DAC voltages, and closes the 2SA switches S1 (`s1` high). It then
// waits SH_CYCLES clocks, one S&H period (1 us at the 32 MHz ADC clock), for
// the column currents to settle into the 2SA outputs, and pulses `adc_start`
// to digitize the M outputs one after another. When the sweep reports
// `adc_done` it opens S1, pulses `done` and counts the inference in
// `inf_count`. With the adc_ctrl sweep of M + 3 clocks, `busy` lasts
// SH_CYCLES + M + 4 clocks. Inference and conversion run one after the
// other, not overlapped (a design choice). `start` while busy is ignored.
module cim_ctrl #(
  parameter int unsigned SH_CYCLES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        adc_done,
  output logic        sh_sample,
  output logic        s1,
  output logic        adc_start,
  output logic        busy,
  output logic        done,
  output logic [15:0] inf_count
);
  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_CONV} state_e;
  state_e state;
  logic [$clog2(SH_CYCLES+1)-1:0] tmr;

  assign busy = (state != S_IDLE);
  assign s1   = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; tmr <= '0; sh_sample <= 1'b0; adc_start <= 1'b0;
      done <= 1'b0; inf_count <= '0;
    end else begin
      sh_sample <= 1'b0; adc_start <= 1'b0; done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_SETTLE; sh_sample <= 1'b1; tmr <= ($bits(tmr))'(SH_CYCLES - 1);
        end
        S_SETTLE: begin
          if (tmr == '0) begin state <= S_CONV; adc_start <= 1'b1; end
          else tmr <= tmr - 1'b1;
        end
        S_CONV: if (adc_done) begin
          state <= S_IDLE; done <= 1'b1; inf_count <= inf_count + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
