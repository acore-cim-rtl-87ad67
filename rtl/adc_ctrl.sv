// adc_ctrl: sequencer of one ADC sweep over the M column outputs.
//
// On `start` it clears the multiplexer counter and then enables it for M
// clocks, so the column counter `col` steps 0..M-1 and the multiplexer
// connects one 2SA output per clock to the flash ADC. The flash ADC latches
// its code one clock later (LAT = 1), so the controller delays the column
// index by LAT clocks and stores `q_in` in the result register of that column.
// `done` pulses for one clock when the last result is stored; it rises at
// the (M + LAT + 1)-th clock edge after the edge that samples `start`.
// Results Q[0..M-1] hold until the next sweep
// overwrites them. `start` while busy is ignored.
module adc_ctrl #(
  parameter int unsigned M   = 32,
  parameter int unsigned BQ  = 6,
  parameter int unsigned LAT = 1,
  parameter int unsigned CW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          mux_clr,
  output logic          mux_en,
  input  logic [CW-1:0] col,
  input  logic [BQ-1:0] q_in,
  output logic [BQ-1:0] q [M],
  output logic          busy,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_CLR, S_RUN, S_DRAIN} state_e;
  state_e state;
  logic [CW:0]   n_left;
  logic [LAT-1:0] v_pipe;
  logic [CW-1:0] c_pipe [LAT];

  assign mux_clr = (state == S_CLR);
  assign mux_en  = (state == S_RUN);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      n_left <= '0;
      done   <= 1'b0;
      v_pipe <= '0;
      for (int i = 0; i < int'(LAT); i++) c_pipe[i] <= '0;
      for (int c = 0; c < int'(M); c++)   q[c] <= '0;
    end else begin
      done <= 1'b0;
      // align column index with the latched ADC code
      v_pipe[0] <= mux_en;
      c_pipe[0] <= col;
      for (int i = 1; i < int'(LAT); i++) begin
        v_pipe[i] <= v_pipe[i-1];
        c_pipe[i] <= c_pipe[i-1];
      end
      if (v_pipe[LAT-1]) q[c_pipe[LAT-1]] <= q_in;
      unique case (state)
        S_IDLE:  if (start) state <= S_CLR;
        S_CLR:   begin state <= S_RUN; n_left <= (CW+1)'(M); end
        S_RUN:   begin
                   n_left <= n_left - 1'b1;
                   if (n_left == 1) begin state <= S_DRAIN; n_left <= (CW+1)'(LAT); end
                 end
        S_DRAIN: begin
                   n_left <= n_left - 1'b1;
                   if (n_left == 1) begin state <= S_IDLE; done <= 1'b1; end
                 end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
