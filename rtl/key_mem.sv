// key_mem: the key memory ("Mem" in the block diagrams). Holds the n = V*V
// key elements of Z_q, written one element at a time from data_in.
//
// The state is a V x V matrix with element e = V*row + col. ARK sees the state
// either one row per cycle (rd_col = 0, rd_idx = row) or one column per cycle
// (rd_col = 1, rd_idx = column), so the key is read in the same orientation:
// lane j of rd_data is element V*rd_idx + j or V*j + rd_idx. Reads are
// combinational; a write takes effect at the clock edge. The register-file
// organisation and the element-wise write port are this design's choice.
module key_mem
  import presto_pkg::*;
#(
  parameter int V = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [7:0]             waddr,
  input  logic [QW-1:0]          wdata,
  input  logic                   rd_col,
  input  logic [$clog2(V)-1:0]   rd_idx,
  output logic [V-1:0][QW-1:0]   rd_data
);
  localparam int N = V * V;

  logic [N-1:0][QW-1:0] k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      k <= '0;
    else if (we && int'(waddr) < N)  k[waddr[$clog2(N)-1:0]] <= wdata;
  end

  always_comb begin
    for (int j = 0; j < V; j++)
      rd_data[j] = rd_col ? k[V*j + int'(rd_idx)] : k[V*int'(rd_idx) + j];
  end

endmodule
