// hera_accel: the HERA accelerator, LANES independent 4-wide lanes.
//
// To match the 8 elements per cycle of the Rubato design, the paper gives the
// optimised HERA design two lanes, each 4 elements wide (v = sqrt(16) = 4).
// Each lane here is a complete presto_core (its own AES, rejection sampler,
// FIFO, key memory, ARK, MRMC and Cube); how the paper's lanes share logic is
// not described, so nothing is shared. Host writes (key, AES key) go to all
// lanes, so the lanes use the same key; CMD_START with addr = lane number
// starts that lane with its own nonce. Each lane has its own output port.
// HERA Par-128a: n = 16, R = 5 rounds, no truncation (L = n), no noise.
module hera_accel
  import presto_pkg::*;
#(
  parameter int          LANES         = 2,
  parameter int          R             = 5,
  parameter int unsigned Q             = Q_DEFAULT,
  parameter int          RC_FIFO_DEPTH = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  cmd_t                         cmd,
  input  logic [DATA_W-1:0]            data_in,
  output logic [LANES-1:0]             data_out_valid,
  output logic [LANES-1:0]             data_out_col,
  output logic [LANES-1:0][1:0]        data_out_idx,
  output logic [LANES-1:0][3:0][QW-1:0] data_out,
  output logic [LANES-1:0]             busy,
  output logic [LANES-1:0]             done,
  output logic [LANES-1:0]             stall
);
  for (genvar g = 0; g < LANES; g++) begin : g_lane
    presto_core #(
      .SCHEME(SCHEME_HERA), .V(4), .R(R), .L(16), .Q(Q),
      .RC_FIFO_DEPTH(RC_FIFO_DEPTH), .LANE_ID(g)
    ) u_core (
      .clk, .rst_n, .cmd, .data_in,
      .data_out_valid(data_out_valid[g]), .data_out_col(data_out_col[g]),
      .data_out_idx(data_out_idx[g]), .data_out_mask(), .data_out(data_out[g]),
      .busy(busy[g]), .done(done[g]), .stall(stall[g])
    );
  end
endmodule
