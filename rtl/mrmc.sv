// mrmc: fused MixColumns/MixRows unit, MRMC(X) = MixRows(MixColumns(X)),
// with the paper's transposition-invariant data schedule.
//
// The state X is a V x V matrix over Z_q, streamed as V vectors of V elements,
// either rows (in_col = 0) or columns (in_col = 1). Stage 1 multiplies every
// incoming vector by the constant matrix M_v as soon as it arrives and stores
// the product as one column of an intermediate matrix Z, in the slot given by
// its index, so the vectors may arrive in any order. When all V are in, stage 2
// emits Z's rows one per cycle, each multiplied by M_v again. For column input
// this is exactly MixColumns then MixRows and the output is row-major; for row
// input the unit treats the rows as the columns of X^T and produces
// MRMC(X^T) = MRMC(X)^T, i.e. the true result in column-major order. So the
// unit never waits for a column to be assembled, and every pass flips the
// orientation (out_col = ~in_col), which is the paper's MRMC optimization.
//
// Multiplication by the small constants of M_v is shift-and-add (no
// multipliers), as in the paper. Z is double-buffered so a new state can enter
// while the previous one is emitted. Timing: the first output vector is
// registered on the advancing edge after the one that took the last input
// vector (so it is consumed two advancing cycles after that input), then one
// vector per cycle in index order 0..V-1. The bank scheme and latency are this design's choices.
module mrmc
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
  output logic                 out_valid,
  output logic                 out_col,
  output logic [$clog2(V)-1:0] out_idx,
  output logic [V-1:0][QW-1:0] out_data
);
  localparam int            IW = $clog2(V);
  localparam logic [QW+1:0] MU = barrett_mu(Q);

  // c * x by shifts and adds (c is a small constant)
  function automatic logic [QW+7:0] cmul(input logic [QW-1:0] x, input int unsigned c);
    logic [QW+7:0] s;
    s = '0;
    for (int b = 0; b < 8; b++)
      if (c[b]) s = s + ((QW+8)'(x) << b);
    return s;
  endfunction

  function automatic logic [V-1:0][QW-1:0] mat_vec(input logic [V-1:0][QW-1:0] u);
    logic [V-1:0][QW-1:0] y;
    logic [QW+7:0]        acc;
    for (int i = 0; i < V; i++) begin
      acc = '0;
      for (int j = 0; j < V; j++)
        acc = acc + cmul(u[j], mv_coef(V, i, j));
      y[i] = mod_red((2*QW)'(acc), Q, MU);
    end
    return y;
  endfunction

  logic [1:0][V-1:0][V-1:0][QW-1:0] z;      // z[bank][slot][lane]
  logic [1:0]                       full;
  logic [1:0]                       ocol;
  logic                             wb, rb;
  logic [IW:0]                      cnt1;
  logic [IW-1:0]                    oi;
  logic [V-1:0][QW-1:0]             row_u;

  always_comb begin
    for (int s = 0; s < V; s++) row_u[s] = z[rb][s][oi];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z         <= '0;
      full      <= '0;
      ocol      <= '0;
      wb        <= 1'b0;
      rb        <= 1'b0;
      cnt1      <= '0;
      oi        <= '0;
      out_valid <= 1'b0;
      out_col   <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else if (adv) begin
      // stage 1: MixColumns of one incoming vector
      if (in_valid) begin
        z[wb][in_idx] <= mat_vec(in_data);
        if (cnt1 == (IW+1)'(V-1)) begin
          cnt1     <= '0;
          full[wb] <= 1'b1;
          ocol[wb] <= ~in_col;
          wb       <= ~wb;
        end else begin
          cnt1 <= cnt1 + 1'b1;
        end
      end
      // stage 2: MixRows, one output vector per cycle
      out_valid <= full[rb];
      if (full[rb]) begin
        out_data <= mat_vec(row_u);
        out_col  <= ocol[rb];
        out_idx  <= oi;
        if (oi == IW'(V-1)) begin
          oi       <= '0;
          full[rb] <= 1'b0;
          rb       <= ~rb;
        end else begin
          oi <= oi + 1'b1;
        end
      end
    end
  end

  a_bank_free: assert property (@(posedge clk) disable iff (!rst_n)
    adv && in_valid |-> !full[wb]) else $error("mrmc: input while both banks are full");

endmodule
