// ark: AddRoundKey with randomized key schedule, x + k (.) rc mod q, on V
// elements per cycle (the paper's ARK, vectorized to v lanes).
//
// in_data carries V state elements tagged with their orientation (in_col) and
// row/column index (in_idx); key and rc are the matching V key elements and
// round constants, read by the surrounding logic with the same tag. The result
// is registered: it appears one advancing cycle later with the same tag. adv is
// the datapath's global advance; while it is low the output holds. Each lane
// is one modular multiply-add (a DSP multiplier in the paper's FPGA build).
module ark
  import presto_pkg::*;
#(
  parameter int          V = 8,
  parameter int unsigned Q = Q_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adv,
  input  logic                 in_valid,
  input  logic                 in_col,
  input  logic [$clog2(V)-1:0] in_idx,
  input  logic [V-1:0][QW-1:0] in_data,
  input  logic [V-1:0][QW-1:0] key,
  input  logic [V-1:0][QW-1:0] rc,
  output logic                 out_valid,
  output logic                 out_col,
  output logic [$clog2(V)-1:0] out_idx,
  output logic [V-1:0][QW-1:0] out_data
);
  localparam logic [QW+1:0] MU = barrett_mu(Q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else if (adv) begin
      out_valid <= in_valid;
      out_col   <= in_col;
      out_idx   <= in_idx;
      for (int j = 0; j < V; j++)
        out_data[j] <= mod_mac(key[j], rc[j], in_data[j], Q, MU);
    end
  end
endmodule
