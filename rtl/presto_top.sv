// presto_top: the two stream-key accelerators of the design, side by side:
// HERA (Par-128a: n = 16, 5 rounds, two 4-wide lanes) and Rubato (Par-128L:
// n = 64, 2 rounds, l = 60 outputs, one 8-wide lane), both in the fully
// optimised configuration (vectorised, function-overlapped, transposition-
// invariant MRMC schedule, decoupled RNG).
//
// Each accelerator has its own command and data_in port (see presto_pkg for
// the commands) and its own key-stream output; they share only clock and
// reset. Outputs are vectors of Z_q elements tagged with row/column
// orientation and index; for Rubato a lane mask marks the l kept elements.
module presto_top
  import presto_pkg::*;
#(
  parameter int          HERA_LANES = 2,
  parameter int          HERA_R     = 5,
  parameter int          RUBATO_R   = 2,
  parameter int          RUBATO_V   = 8,
  parameter int          RUBATO_L   = 60,
  parameter int unsigned Q          = Q_DEFAULT
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // HERA
  input  cmd_t                              hera_cmd,
  input  logic [DATA_W-1:0]                 hera_data_in,
  output logic [HERA_LANES-1:0]             hera_out_valid,
  output logic [HERA_LANES-1:0]             hera_out_col,
  output logic [HERA_LANES-1:0][1:0]        hera_out_idx,
  output logic [HERA_LANES-1:0][3:0][QW-1:0] hera_out,
  output logic [HERA_LANES-1:0]             hera_busy,
  output logic [HERA_LANES-1:0]             hera_done,
  output logic [HERA_LANES-1:0]             hera_stall,
  // Rubato
  input  cmd_t                              rubato_cmd,
  input  logic [DATA_W-1:0]                 rubato_data_in,
  output logic                              rubato_out_valid,
  output logic                              rubato_out_col,
  output logic [$clog2(RUBATO_V)-1:0]       rubato_out_idx,
  output logic [RUBATO_V-1:0]               rubato_out_mask,
  output logic [RUBATO_V-1:0][QW-1:0]       rubato_out,
  output logic                              rubato_busy,
  output logic                              rubato_done,
  output logic                              rubato_stall
);
  hera_accel #(.LANES(HERA_LANES), .R(HERA_R), .Q(Q)) u_hera (
    .clk, .rst_n, .cmd(hera_cmd), .data_in(hera_data_in),
    .data_out_valid(hera_out_valid), .data_out_col(hera_out_col),
    .data_out_idx(hera_out_idx), .data_out(hera_out),
    .busy(hera_busy), .done(hera_done), .stall(hera_stall)
  );

  presto_core #(
    .SCHEME(SCHEME_RUBATO), .V(RUBATO_V), .R(RUBATO_R), .L(RUBATO_L), .Q(Q)
  ) u_rubato (
    .clk, .rst_n, .cmd(rubato_cmd), .data_in(rubato_data_in),
    .data_out_valid(rubato_out_valid), .data_out_col(rubato_out_col),
    .data_out_idx(rubato_out_idx), .data_out_mask(rubato_out_mask), .data_out(rubato_out),
    .busy(rubato_busy), .done(rubato_done), .stall(rubato_stall)
  );
endmodule
