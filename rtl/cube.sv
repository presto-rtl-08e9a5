// cube: HERA's nonlinear layer, x -> x^3 mod q on each of V lanes.
//
// Cube acts element by element, so it keeps whatever order (row- or
// column-major) the state arrives in and never has to wait for other
// elements. Two pipeline stages: x^2 mod q, then x^2 * x mod q; the tag
// (out_col/out_idx) travels with the data, latency 2 advancing cycles. The
// two-stage split is this design's choice.
module cube
  import presto_pkg::*;
#(
  parameter int          V = 4,
  parameter int unsigned Q = Q_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adv,
  input  logic                 in_valid,
  input  logic                 in_col,
  input  logic [$clog2(V)-1:0] in_idx,
  input  logic [V-1:0][QW-1:0] in_data,
  output logic                 out_valid,
  output logic                 out_col,
  output logic [$clog2(V)-1:0] out_idx,
  output logic [V-1:0][QW-1:0] out_data
);
  localparam logic [QW+1:0] MU = barrett_mu(Q);

  logic                 s1_valid, s1_col;
  logic [$clog2(V)-1:0] s1_idx;
  logic [V-1:0][QW-1:0] s1_x, s1_sq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_col    <= 1'b0;
      s1_idx    <= '0;
      s1_x      <= '0;
      s1_sq     <= '0;
      out_valid <= 1'b0;
      out_col   <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else if (adv) begin
      s1_valid  <= in_valid;
      s1_col    <= in_col;
      s1_idx    <= in_idx;
      s1_x      <= in_data;
      for (int j = 0; j < V; j++)
        s1_sq[j] <= mod_mac(in_data[j], in_data[j], '0, Q, MU);
      out_valid <= s1_valid;
      out_col   <= s1_col;
      out_idx   <= s1_idx;
      for (int j = 0; j < V; j++)
        out_data[j] <= mod_mac(s1_sq[j], s1_x[j], '0, Q, MU);
    end
  end
endmodule
