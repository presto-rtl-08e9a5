// dgd_sampler: discrete Gaussian noise sampler for Rubato's AGN layer, using
// the inverse-CDF method with AES output as its random source (as the paper
// describes it), and producing the noise as V-wide vectors of Z_q.
//
// The CDF table holds 2*TAIL entries of 64 bits (lambda/2 bits of precision
// for lambda = 128, as the paper states). Entry i is floor(2^64 * P(E <= i -
// TAIL)) for the noise E; it is written by the host (cdf_we/addr/data), so the
// width of the distribution is a run-time choice: the paper does not give it.
// Each 128-bit AES block yields two 64-bit uniforms u; the sample is
// e = #{i : u >= CDF[i]} - TAIL, i.e. the smallest e with u < CDF[e+TAIL], and
// e = TAIL when u is above every entry. All entries are compared in parallel;
// e is mapped into Z_q (negative e becomes Q + e).
//
// The AES request/epoch/back-pressure handling is the same as in
// rejection_sampler; the blocks are {nonce, DOMAIN, counter} with DOMAIN = 1
// so that the noise stream differs from the round-constant stream.
module dgd_sampler
  import presto_pkg::*;
#(
  parameter int          V      = 8,
  parameter int unsigned Q      = Q_DEFAULT,
  parameter int          TOTAL  = 60,
  parameter int          TAIL   = 32,
  parameter bit          DOMAIN = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [63:0]          nonce,
  // CDF table write port
  input  logic                 cdf_we,
  input  logic [7:0]           cdf_addr,
  input  logic [63:0]          cdf_data,
  // AES request side
  output logic                 aes_en,
  output logic                 aes_in_valid,
  output logic [127:0]         aes_in_block,
  output logic                 aes_in_tag,
  // AES result side
  input  logic                 aes_out_valid,
  input  logic [127:0]         aes_out_block,
  input  logic                 aes_out_tag,
  // packed noise
  output logic                 vec_valid,
  input  logic                 vec_ready,
  output logic [V-1:0][QW-1:0] vec_data,
  output logic                 done
);
  localparam int ENTRIES = 2 * TAIL;
  localparam int IW      = $clog2(ENTRIES + 1);

  logic [63:0] cdf [ENTRIES];

  always_ff @(posedge clk) begin
    if (cdf_we && int'(cdf_addr) < ENTRIES) cdf[cdf_addr[$clog2(ENTRIES)-1:0]] <= cdf_data;
  end

  function automatic logic [QW-1:0] sample(input logic [63:0] u);
    logic [IW-1:0] n;
    n = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (u >= cdf[i]) n = n + 1'b1;
    if (int'(n) >= TAIL) return QW'(int'(n) - TAIL);
    else                 return QW'(Q - unsigned'(TAIL - int'(n)));
  endfunction

  logic        epoch;
  logic [62:0] ctr;
  logic [63:0] nonce_q;
  logic        active, pk_ready, current;
  logic [1:0][QW-1:0] smp;

  assign smp[0] = sample(aes_out_block[63:0]);
  assign smp[1] = sample(aes_out_block[127:64]);

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

  vec_packer #(.V(V), .NIN(2), .W(QW), .TOTAL(TOTAL)) u_pack (
    .clk, .rst_n, .start,
    .in_valid (current),
    .in_ready (pk_ready),
    .in_mask  (2'b11),
    .in_data  (smp),
    .out_valid(vec_valid),
    .out_ready(vec_ready),
    .out_data (vec_data),
    .active   (active),
    .done     (done)
  );

endmodule
