// agn: Rubato's last layers, truncation Tr_{n,l} followed by AGN (adding the
// discrete Gaussian noise), on V elements per cycle.
//
// Each input vector (tag in_col/in_idx as in ark) gets the matching noise
// elements added mod q. Truncation is done by marking: out_mask lane j is set
// only if the lane's element index (V*idx + j for a row, V*j + idx for a
// column) is below L, so the host keeps exactly the first l elements. The
// result is registered, one advancing cycle of latency.
module agn
  import presto_pkg::*;
#(
  parameter int          V = 8,
  parameter int          L = 60,
  parameter int unsigned Q = Q_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adv,
  input  logic                 in_valid,
  input  logic                 in_col,
  input  logic [$clog2(V)-1:0] in_idx,
  input  logic [V-1:0][QW-1:0] in_data,
  input  logic [V-1:0][QW-1:0] noise,
  output logic                 out_valid,
  output logic                 out_col,
  output logic [$clog2(V)-1:0] out_idx,
  output logic [V-1:0]         out_mask,
  output logic [V-1:0][QW-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= 1'b0;
      out_idx   <= '0;
      out_mask  <= '0;
      out_data  <= '0;
    end else if (adv) begin
      out_valid <= in_valid;
      out_col   <= in_col;
      out_idx   <= in_idx;
      for (int j = 0; j < V; j++) begin
        out_data[j] <= mod_add(in_data[j], noise[j], Q);
        out_mask[j] <= in_col ? ((V*j + int'(in_idx)) < L) : ((V*int'(in_idx) + j) < L);
      end
    end
  end
endmodule
