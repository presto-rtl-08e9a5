// ic_rom: the constant initial state ic fed to the first ARK ("ROM" in the
// block diagrams). Following the HERA and Rubato specifications, ic is
// (1, 2, ..., n); the paper only names the vector. The ROM is read like the
// state: one row (col = 0) or one column (col = 1) per cycle, lane j holding
// element V*idx + j or V*j + idx, plus one. Purely combinational; its
// contents are generated from that formula.
module ic_rom
  import presto_pkg::*;
#(
  parameter int V = 8
) (
  input  logic                 col,
  input  logic [$clog2(V)-1:0] idx,
  output logic [V-1:0][QW-1:0] data
);
  always_comb begin
    for (int j = 0; j < V; j++)
      data[j] = col ? QW'(V*j + int'(idx) + 1) : QW'(V*int'(idx) + j + 1);
  end
endmodule
