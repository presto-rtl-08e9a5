// vec_packer: gathers a variable number of samples per cycle into V-wide
// vectors, for the round-constant and noise FIFOs.
//
// Each cycle the sampler offers NIN candidate samples with a mask of the ones
// it accepted. They are appended, in lane order, to a staging buffer; whenever
// V samples are staged one vector leaves (out_valid/out_ready). Exactly TOTAL
// samples are taken after start; the remainder of the last input word is
// dropped and the final, partly filled vector is padded with zeros. done rises
// when that last vector has left. The paper does not describe this packing;
// it is the simplest logic that turns the sampler output into the vectors the
// v-wide datapath reads.
//
// in_ready is high when the buffer can take a full input word after this
// cycle's output; at most one vector leaves per cycle.
module vec_packer #(
  parameter int V     = 8,
  parameter int NIN   = 5,
  parameter int W     = 25,
  parameter int TOTAL = 188
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [NIN-1:0]        in_mask,
  input  logic [NIN-1:0][W-1:0] in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [V-1:0][W-1:0]   out_data,
  output logic                  active,
  output logic                  done
);
  localparam int CAP = V + NIN;
  localparam int CW  = $clog2(CAP + 1);
  localparam int TW  = $clog2(TOTAL + 1);

  logic [CAP-1:0][W-1:0] stg, stg_n;
  logic [CW-1:0]         cnt, cnt_n, cnt_pop;
  logic [TW-1:0]         taken, taken_n;
  logic                  all_taken, pop;

  assign all_taken = (taken == TW'(TOTAL));
  assign out_valid = active && ((cnt >= CW'(V)) || (all_taken && cnt != 0));
  assign pop       = out_valid && out_ready;
  assign cnt_pop   = pop ? ((cnt >= CW'(V)) ? cnt - CW'(V) : '0) : cnt;
  assign in_ready  = active && !all_taken && (cnt_pop <= CW'(V));

  always_comb begin
    for (int i = 0; i < V; i++)
      out_data[i] = (CW'(i) < cnt) ? stg[i] : '0;
  end

  always_comb begin
    stg_n   = stg;
    taken_n = taken;
    if (pop)
      for (int i = 0; i < CAP; i++)
        stg_n[i] = (i + V < CAP) ? stg[i+V] : '0;
    cnt_n = cnt_pop;
    if (in_valid && in_ready) begin
      for (int j = 0; j < NIN; j++) begin
        if (in_mask[j] && taken_n != TW'(TOTAL)) begin
          stg_n[cnt_n] = in_data[j];
          cnt_n        = cnt_n + 1'b1;
          taken_n      = taken_n + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stg    <= '0;
      cnt    <= '0;
      taken  <= '0;
      active <= 1'b0;
      done   <= 1'b0;
    end else if (start) begin
      stg    <= '0;
      cnt    <= '0;
      taken  <= '0;
      active <= 1'b1;
      done   <= 1'b0;
    end else if (active) begin
      stg   <= stg_n;
      cnt   <= cnt_n;
      taken <= taken_n;
      if (all_taken && cnt_n == 0) begin
        active <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cnt <= CW'(CAP)) else $error("vec_packer: overflow");

endmodule
