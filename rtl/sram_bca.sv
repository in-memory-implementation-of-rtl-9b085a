// Bit-cell array (BCA) of one layer.
//
// N_COL columns (N banks of M columns, one bank per output neuron) by N_ROW
// rows of 6T cells. The last BW rows hold the synaptic weights in column-major
// order: column c keeps one BW-bit weight, bit i in row N_ROW-1-i (b0 in the
// bottom row), negative weights in 1's complement. The rows above are plain
// digital storage.
//
// Two digital ports, both synchronous to clk:
//   * a conventional row port (row_we / row_addr / row_wdata, row_rdata one
//     cycle after the address) standing for the standard SRAM interface;
//   * a column port used by the signed flash ADC to write one trained weight
//     (col_we / col_addr / col_wdata) into the weight rows of one column.
// wcell exposes the contents of the weight cells of every column; the
// bit-line models use it during the multi-row functional read. A row write
// and a column write in the same cycle to the same cell: the column write wins.
// The array has no reset, like any SRAM. Row count is this design's choice.
module sram_bca #(
  parameter int N_COL = 20,
  parameter int N_ROW = 16,
  parameter int BW    = 4
) (
  input  logic                     clk,
  input  logic                     row_we,
  input  logic [$clog2(N_ROW)-1:0] row_addr,
  input  logic [N_COL-1:0]         row_wdata,
  output logic [N_COL-1:0]         row_rdata,
  input  logic                     col_we,
  input  logic [$clog2(N_COL)-1:0] col_addr,
  input  logic [BW-1:0]            col_wdata,
  output logic [BW-1:0]            wcell [N_COL]
);
  logic [N_COL-1:0] mem [N_ROW];

  always_ff @(posedge clk) begin
    if (row_we) mem[row_addr] <= row_wdata;
    if (col_we)
      for (int i = 0; i < BW; i++) mem[N_ROW-1-i][col_addr] <= col_wdata[i];
    row_rdata <= mem[row_addr];
  end

  always_comb
    for (int c = 0; c < N_COL; c++)
      for (int i = 0; i < BW; i++) wcell[c][i] = mem[N_ROW-1-i][c];

  initial assert (N_ROW >= BW) else $error("sram_bca: N_ROW must hold the BW weight rows");
endmodule
