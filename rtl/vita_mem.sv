// vita_mem: on-chip buffer (BRAM) model used for every ViTA buffer.
//
// A ROWS x COLS array of DW-bit elements. It has RP read ports and WP write ports. Each read
// port returns RW consecutive elements of one row, starting at a column address; each write
// port writes up to WW consecutive elements of one row under a per-element enable. Reads are
// synchronous: data for an address presented in cycle t is on rd_data in cycle t+1. Elements
// beyond the end of a row read as zero and are never written.
//
// The paper gives the buffers (Input/MSA, W^Q/W^K/W^V, MSA-concat weights, Q/K/V, SA results)
// and their double-buffered halves; the multi-port, row/column-addressed organisation is this
// design's own choice. It lets one model serve row reads (LayerNorm, PE rows) and column
// reads (skip connections) without a banking scheme. Two writes to the same element in one
// cycle are an error (the higher-numbered port wins in simulation).
module vita_mem #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 768,
  parameter int unsigned DW   = 8,
  parameter int unsigned RP   = 16,
  parameter int unsigned RW   = 6,
  parameter int unsigned WP   = 16,
  parameter int unsigned WW   = 6,
  localparam int unsigned RA  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CA  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                clk,
  input  logic [RA-1:0]       rd_row  [RP],
  input  logic [CA-1:0]       rd_col  [RP],
  output logic [DW-1:0]       rd_data [RP][RW],
  input  logic [WP-1:0][WW-1:0] wr_en,
  input  logic [RA-1:0]       wr_row  [WP],
  input  logic [CA-1:0]       wr_col  [WP],
  input  logic [DW-1:0]       wr_data [WP][WW]
);

  logic [DW-1:0] mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(WP); p++)
      for (int e = 0; e < int'(WW); e++)
        if (wr_en[p][e] && (int'(wr_col[p]) + e < int'(COLS)) && (int'(wr_row[p]) < int'(ROWS)))
          mem[wr_row[p]][int'(wr_col[p]) + e] <= wr_data[p][e];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(RP); p++)
      for (int e = 0; e < int'(RW); e++)
        if ((int'(rd_col[p]) + e < int'(COLS)) && (int'(rd_row[p]) < int'(ROWS)))
          rd_data[p][e] <= mem[rd_row[p]][int'(rd_col[p]) + e];
        else
          rd_data[p][e] <= '0;
  end

endmodule
