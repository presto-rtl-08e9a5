// opnd_buf: one round's worth of per-element operands (the round constants of
// one ARK, or the noise of AGN), loaded row by row from a FIFO and read by
// row or by column.
//
// Round constants arrive from the sampler in element order, V per FIFO word,
// i.e. as rows of the state matrix. Because the optimised schedule lets the
// state reach ARK in column-major order every other round, ARK must be able
// to read the constants of a whole column; this buffer holds ROWS rows so it
// can. Lane j of rd_data is element V*rd_idx + j (rd_col = 0) or V*j + rd_idx
// (rd_col = 1); rows that were never written read as zero after clear. How the
// constants are buffered is not described in the paper and is this design's
// choice.
module opnd_buf
  import presto_pkg::*;
#(
  parameter int V    = 8,
  parameter int ROWS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 we,
  input  logic [$clog2(V)-1:0] wrow,
  input  logic [V-1:0][QW-1:0] wdata,
  input  logic                 rd_col,
  input  logic [$clog2(V)-1:0] rd_idx,
  output logic [V-1:0][QW-1:0] rd_data
);
  logic [V-1:0][V-1:0][QW-1:0] m;   // m[row][col]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         m <= '0;
    else if (clear)                     m <= '0;
    else if (we && int'(wrow) < ROWS)   m[wrow] <= wdata;
  end

  always_comb begin
    for (int j = 0; j < V; j++)
      rd_data[j] = rd_col ? m[j][rd_idx] : m[rd_idx][j];
  end
endmodule
