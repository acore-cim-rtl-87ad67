// sram_codec: word-line / bit-line codec of the CIM core's 6T-SRAM cells and
// the bits those cells hold.
//
// Every row of the array shares one word line between the input DAC of that
// row (7 bits: D6 sign, D5..D0 magnitude) and the M MDAC weight cells of the
// row (8 bits each: W7 negative sign, W6 positive sign, W5..W0 magnitude).
// A write decodes `row` into a one-hot word line and `col` (or `is_input`)
// into a one-hot bit-line group, and the single cell at their crossing takes
// `wdata`. All cell contents are available in parallel at `in_code` and
// `weight`, as the analog DACs and weight cells read them continuously.
// `rdata` returns the addressed cell combinationally for bus read-back.
// Cells reset to 0 (idle weight, zero input); real 6T cells have no reset.
module sram_codec #(
  parameter int unsigned N  = 32'(cim_pkg::N_ROWS),
  parameter int unsigned M  = 32'(cim_pkg::M_COLS),
  parameter int unsigned BD = 7,
  parameter int unsigned BW = 8,
  parameter int unsigned RW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic          is_input,
  input  logic [RW-1:0] row,
  input  logic [CW-1:0] col,
  input  logic [BW-1:0] wdata,
  output logic [BW-1:0] rdata,
  output logic [BD-1:0] in_code [N],
  output logic [BW-1:0] weight  [N][M]
);
  logic [N-1:0] wl;      // word lines
  logic [M:0]   bl;      // bit-line groups: M weight columns + input DAC

  always_comb begin
    wl = '0; bl = '0;
    for (int unsigned r = 0; r < N; r++) wl[r] = we && (row == RW'(r));
    for (int unsigned c = 0; c < M; c++) bl[c] = !is_input && (col == CW'(c));
    bl[M] = is_input;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(N); r++) begin
        in_code[r] <= '0;
        for (int c = 0; c < int'(M); c++) weight[r][c] <= '0;
      end
    end else begin
      for (int r = 0; r < int'(N); r++) begin
        if (wl[r] && bl[M]) in_code[r] <= wdata[BD-1:0];
        for (int c = 0; c < int'(M); c++)
          if (wl[r] && bl[c]) weight[r][c] <= wdata;
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (int'(row) < int'(N)) begin
      if (is_input)              rdata = BW'(in_code[row]);
      else if (int'(col) < int'(M)) rdata = weight[row][col];
    end
  end
endmodule
