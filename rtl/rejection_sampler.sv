// rejection_sampler: uniform sampler over Z_q driven by AES in counter mode,
// producing the round constants rc of ARK as V-wide vectors.
//
// After start it issues the AES blocks {nonce, DOMAIN, counter} for
// counter = 0, 1, 2, ... Each 128-bit output block is cut, from bit 0 up, into
// NPB = floor(128/QW) candidates of QW bits; a candidate is accepted when it
// is below Q (rejection sampling, as the paper names it). Accepted values go
// through vec_packer, which hands out exactly TOTAL of them as V-wide vectors.
// The paper counts random bits as if all 128 bits were used (4700 bits, about
// 37 AES calls for 188 constants); cutting whole QW-bit chunks and dropping
// the 3 spare bits is this design's simplification.
//
// Each start flips a one-bit epoch that travels with every AES block, so blocks
// still in flight from a previous key stream are dropped. aes_en is the AES
// pipeline's advance signal: the pipeline holds while its output is a current
// block the packer cannot take.
module rejection_sampler
  import presto_pkg::*;
#(
  parameter int          V      = 8,
  parameter int unsigned Q      = Q_DEFAULT,
  parameter int          TOTAL  = 188,
  parameter bit          DOMAIN = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [63:0]         nonce,
  // AES request side
  output logic                aes_en,
  output logic                aes_in_valid,
  output logic [127:0]        aes_in_block,
  output logic                aes_in_tag,
  // AES result side
  input  logic                aes_out_valid,
  input  logic [127:0]        aes_out_block,
  input  logic                aes_out_tag,
  // packed round constants
  output logic                vec_valid,
  input  logic                vec_ready,
  output logic [V-1:0][QW-1:0] vec_data,
  output logic                done
);
  localparam int NPB = 128 / QW;

  logic        epoch;
  logic [62:0] ctr;
  logic [63:0] nonce_q;
  logic        active, pk_ready, current;
  logic [NPB-1:0]         mask;
  logic [NPB-1:0][QW-1:0] cand;

  always_comb begin
    for (int j = 0; j < NPB; j++) begin
      cand[j] = aes_out_block[QW*j +: QW];
      mask[j] = (cand[j] < QW'(Q));
    end
  end

  assign current      = aes_out_valid && (aes_out_tag == epoch) && active;
  assign aes_en       = !current || pk_ready;
  assign aes_in_valid = active;
  assign aes_in_block = {nonce_q, DOMAIN, ctr};
  assign aes_in_tag   = epoch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      epoch   <= 1'b0;
      ctr     <= '0;
      nonce_q <= '0;
    end else if (start) begin
      epoch   <= ~epoch;
      ctr     <= '0;
      nonce_q <= nonce;
    end else if (active && aes_en) begin
      ctr <= ctr + 1'b1;
    end
  end

  vec_packer #(.V(V), .NIN(NPB), .W(QW), .TOTAL(TOTAL)) u_pack (
    .clk, .rst_n, .start,
    .in_valid (current),
    .in_ready (pk_ready),
    .in_mask  (mask),
    .in_data  (cand),
    .out_valid(vec_valid),
    .out_ready(vec_ready),
    .out_data (vec_data),
    .active   (active),
    .done     (done)
  );

endmodule
