// feistel: Rubato's nonlinear layer, f_1 = y_1 and f_i = y_i + y_{i-1}^2 mod q
// (indices in row-major element order), on V lanes per cycle.
//
// Row-major input (in_col = 0, rows in order): lane j of row r needs its left
// neighbour, which is lane j-1 of the same row or, for j = 0, the last element
// of the previous row, kept in a register. Every row leaves one cycle later.
// Column-major input (in_col = 1, columns 0..V-1 in order): column c needs
// column c-1, the previous input, so columns 1..V-1 leave one cycle after they
// arrive. Column 0 needs column V-1 of the row above, so it is held back and
// leaves right after column V-1: the output order is 1, 2, ..., V-1, 0. This
// is the one-cycle Feistel stall and the rotated column order that the paper's
// optimized schedule shows (Fig. 5, "f2 ... f8, f1"); the following MRMC
// accepts columns in any order.
//
// Two sets of V modular squarers are used: one for the vector being passed
// through, one for the held-back column 0 (computed when column V-1 arrives).
// Using a second set is this design's choice.
module feistel
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

  logic [V-1:0][QW-1:0] prev, hold, pend;
  logic                 pend_v;
  logic [V-1:0][QW-1:0] op, f_now, f_def;
  logic                 emits;

  // squaring operand of the vector being passed through
  always_comb begin
    for (int j = 0; j < V; j++) begin
      if (in_col)      op[j] = prev[j];
      else if (j > 0)  op[j] = in_data[j-1];
      else             op[j] = (in_idx == '0) ? '0 : prev[V-1];
    end
    for (int j = 0; j < V; j++) begin
      f_now[j] = mod_mac(op[j], op[j], in_data[j], Q, MU);
      // held column 0: row r needs element (r-1, V-1), lane r-1 of column V-1
      f_def[j] = (j == 0) ? hold[0]
                          : mod_mac(in_data[j-1], in_data[j-1], hold[j], Q, MU);
    end
  end

  assign emits = in_valid && !(in_col && in_idx == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      hold      <= '0;
      pend      <= '0;
      pend_v    <= 1'b0;
      out_valid <= 1'b0;
      out_col   <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else if (adv) begin
      if (in_valid) prev <= in_data;
      if (in_valid && in_col && in_idx == '0) hold <= in_data;
      if (pend_v) begin
        out_valid <= 1'b1;
        out_col   <= 1'b1;
        out_idx   <= '0;
        out_data  <= pend;
        pend_v    <= 1'b0;
      end else begin
        out_valid <= emits;
        out_col   <= in_col;
        out_idx   <= in_idx;
        out_data  <= f_now;
      end
      if (in_valid && in_col && in_idx == IW'(V-1)) begin
        pend   <= f_def;
        pend_v <= 1'b1;
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    adv |-> !(pend_v && emits)) else $error("feistel: output collision");

endmodule
