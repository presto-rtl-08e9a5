// presto_core: one accelerator lane for HERA or Rubato stream-key generation,
// the block diagram of the paper's fully optimised design (D3) with the
// vector width V as the lane width.
//
//   AES -> rejection sampler -> rc FIFO -> operand buffers --rc--+
//   key memory ------------------------------------------k-------+-> ARK
//   ic ROM / NL / MRMC --(3-way mux)------------------------x-----+
//   ARK / NL --(2-way mux)--> MRMC --> NL (Cube or Feistel)
//   Rubato only: AES -> discrete Gaussian sampler -> noise FIFO -> AGN
//
// The state is a V x V matrix (n = V*V elements) streamed one row or one
// column per cycle; every vector carries its orientation and index. MRMC
// flips the orientation on every pass, so ARK, the key memory and the operand
// buffers all work in either orientation (see mrmc, feistel). SCHEME selects
// Cube (HERA) or Feistel plus noise sampler and AGN (Rubato); the round
// structure (R rounds, output length L) is shared. Sampling runs concurrently
// with the rounds (RNG decoupling); the datapath stalls only when a constant
// is not yet there.
//
// Interface: cmd/data_in as decoded by presto_ctrl. After CMD_START the key
// stream leaves on data_out as V vectors, data_out_col/idx telling which row
// or column each is and data_out_mask which lanes belong to the first L
// elements (Rubato's truncation). done pulses with the last vector; busy is
// high from the start to the last vector. One key stream is generated at a
// time per lane. stall is high in cycles where the datapath waits for
// constants or noise.
//
// Lint notes: in the HERA configuration the controller's CDF and noise-buffer
// outputs have no load (there is no Gaussian sampler), and ic_valid is only
// used inside the controller; the samplers' done and the FIFOs' count outputs
// are left open because the controller tracks progress itself. These unused
// signals are expected.
module presto_core
  import presto_pkg::*;
#(
  parameter scheme_e     SCHEME        = SCHEME_RUBATO,
  parameter int          V             = 8,
  parameter int          R             = 2,
  parameter int          L             = 60,
  parameter int unsigned Q             = Q_DEFAULT,
  parameter int          RC_FIFO_DEPTH = 8,
  parameter int          NZ_FIFO_DEPTH = 8,
  parameter int          TAIL          = 32,
  parameter int          LANE_ID       = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cmd_t                 cmd,
  input  logic [DATA_W-1:0]    data_in,
  output logic                 data_out_valid,
  output logic                 data_out_col,
  output logic [$clog2(V)-1:0] data_out_idx,
  output logic [V-1:0]         data_out_mask,
  output logic [V-1:0][QW-1:0] data_out,
  output logic                 busy,
  output logic                 done,
  output logic                 stall
);
  localparam int  IW      = $clog2(V);
  localparam int  N       = V * V;
  localparam int  LROWS   = (L + V - 1) / V;
  localparam bit  HAS_AGN = (SCHEME == SCHEME_RUBATO);
  localparam int  RC_TOT  = R * N + L;

  typedef logic [V-1:0][QW-1:0] vec_t;

  // ---------------- controller ----------------
  logic          key_we, cdf_we, aes_key_load, aes_key_ready, aes_rc_ready, aes_nz_ready;
  logic [7:0]    key_addr, cdf_addr;
  logic [QW-1:0] key_wdata;
  logic [63:0]   cdf_wdata, nonce;
  logic [127:0]  aes_key;
  logic          smp_start;
  logic          rc_fifo_valid, rc_fifo_pop, rcb_clear, rcb_sel;
  logic [1:0]    rcb_we;
  logic [IW-1:0] rcb_wrow, nzb_wrow, ic_idx;
  logic          nz_fifo_valid, nz_fifo_pop, nzb_we;
  logic          adv, ic_valid, ark_in_valid, mrmc_src, mrmc_in_valid, nl_in_valid, fin_valid;
  logic [1:0]    ark_src;

  logic          ark_out_valid, ark_out_col, mrmc_out_valid, mrmc_out_col;
  logic          nl_out_valid, nl_out_col, agn_out_valid, agn_out_col;
  logic [IW-1:0] ark_out_idx, mrmc_out_idx, nl_out_idx, agn_out_idx;
  vec_t          ark_out, mrmc_out, nl_out, agn_out;
  logic [V-1:0]  agn_out_mask;

  assign aes_key_ready = aes_rc_ready && (HAS_AGN ? aes_nz_ready : 1'b1);

  presto_ctrl #(.V(V), .R(R), .L(L), .HAS_AGN(HAS_AGN), .LANE_ID(LANE_ID)) u_ctrl (
    .clk, .rst_n, .cmd, .data_in, .busy, .done,
    .key_we, .key_addr, .key_wdata, .cdf_we, .cdf_addr, .cdf_wdata,
    .aes_key_load, .aes_key, .aes_key_ready,
    .smp_start, .nonce,
    .rc_fifo_valid, .rc_fifo_pop, .rcb_clear, .rcb_we, .rcb_wrow, .rcb_sel,
    .nz_fifo_valid, .nz_fifo_pop, .nzb_we, .nzb_wrow,
    .ark_out_valid, .mrmc_out_valid, .nl_out_valid, .agn_out_valid,
    .adv, .ic_valid, .ic_idx, .ark_src, .ark_in_valid, .mrmc_src, .mrmc_in_valid,
    .nl_in_valid, .fin_valid, .stall
  );

  // ---------------- round-constant RNG ----------------
  logic         rc_aes_en, rc_aes_iv, rc_aes_itag, rc_aes_ov, rc_aes_otag;
  logic [127:0] rc_aes_iblk, rc_aes_oblk;
  logic         rs_valid, rs_ready;
  vec_t         rs_data, rc_fifo_data;

  aes128_core #(.TAG_W(1)) u_aes_rc (
    .clk, .rst_n, .key_load(aes_key_load), .key(aes_key), .key_ready(aes_rc_ready),
    .en(rc_aes_en), .in_valid(rc_aes_iv), .in_block(rc_aes_iblk), .in_tag(rc_aes_itag),
    .out_valid(rc_aes_ov), .out_block(rc_aes_oblk), .out_tag(rc_aes_otag)
  );

  rejection_sampler #(.V(V), .Q(Q), .TOTAL(RC_TOT), .DOMAIN(1'b0)) u_rs (
    .clk, .rst_n, .start(smp_start), .nonce,
    .aes_en(rc_aes_en), .aes_in_valid(rc_aes_iv), .aes_in_block(rc_aes_iblk),
    .aes_in_tag(rc_aes_itag), .aes_out_valid(rc_aes_ov), .aes_out_block(rc_aes_oblk),
    .aes_out_tag(rc_aes_otag),
    .vec_valid(rs_valid), .vec_ready(rs_ready), .vec_data(rs_data), .done()
  );

  vec_fifo #(.W(V*QW), .DEPTH(RC_FIFO_DEPTH)) u_rc_fifo (
    .clk, .rst_n, .clear(smp_start),
    .in_valid(rs_valid), .in_ready(rs_ready), .in_data(rs_data),
    .out_valid(rc_fifo_valid), .out_ready(rc_fifo_pop), .out_data(rc_fifo_data), .count()
  );

  // ---------------- operand stores ----------------
  logic          ark_in_col;
  logic [IW-1:0] ark_in_idx;
  vec_t          ark_in, key_v, rc0_v, rc1_v, ic_v;

  key_mem #(.V(V)) u_key (
    .clk, .rst_n, .we(key_we), .waddr(key_addr), .wdata(key_wdata),
    .rd_col(ark_in_col), .rd_idx(ark_in_idx), .rd_data(key_v)
  );

  ic_rom #(.V(V)) u_ic (.col(1'b0), .idx(ic_idx), .data(ic_v));

  opnd_buf #(.V(V), .ROWS(V)) u_rcb0 (
    .clk, .rst_n, .clear(rcb_clear), .we(rcb_we[0]), .wrow(rcb_wrow), .wdata(rc_fifo_data),
    .rd_col(ark_in_col), .rd_idx(ark_in_idx), .rd_data(rc0_v)
  );
  opnd_buf #(.V(V), .ROWS(V)) u_rcb1 (
    .clk, .rst_n, .clear(rcb_clear), .we(rcb_we[1]), .wrow(rcb_wrow), .wdata(rc_fifo_data),
    .rd_col(ark_in_col), .rd_idx(ark_in_idx), .rd_data(rc1_v)
  );

  // ---------------- ARK ----------------
  always_comb begin
    unique case (ark_src)
      2'd0:    begin ark_in = ic_v;     ark_in_col = 1'b0;         ark_in_idx = ic_idx;       end
      2'd2:    begin ark_in = mrmc_out; ark_in_col = mrmc_out_col; ark_in_idx = mrmc_out_idx; end
      default: begin ark_in = nl_out;   ark_in_col = nl_out_col;   ark_in_idx = nl_out_idx;   end
    endcase
  end

  ark #(.V(V), .Q(Q)) u_ark (
    .clk, .rst_n, .adv, .in_valid(ark_in_valid), .in_col(ark_in_col), .in_idx(ark_in_idx),
    .in_data(ark_in), .key(key_v), .rc(rcb_sel ? rc1_v : rc0_v),
    .out_valid(ark_out_valid), .out_col(ark_out_col), .out_idx(ark_out_idx), .out_data(ark_out)
  );

  // ---------------- MRMC ----------------
  mrmc #(.V(V), .Q(Q)) u_mrmc (
    .clk, .rst_n, .adv, .in_valid(mrmc_in_valid),
    .in_col (mrmc_src ? nl_out_col : ark_out_col),
    .in_idx (mrmc_src ? nl_out_idx : ark_out_idx),
    .in_data(mrmc_src ? nl_out     : ark_out),
    .out_valid(mrmc_out_valid), .out_col(mrmc_out_col), .out_idx(mrmc_out_idx),
    .out_data(mrmc_out)
  );

  // ---------------- scheme-specific layers ----------------
  generate
    if (SCHEME == SCHEME_HERA) begin : g_hera
      cube #(.V(V), .Q(Q)) u_cube (
        .clk, .rst_n, .adv, .in_valid(nl_in_valid), .in_col(mrmc_out_col),
        .in_idx(mrmc_out_idx), .in_data(mrmc_out),
        .out_valid(nl_out_valid), .out_col(nl_out_col), .out_idx(nl_out_idx), .out_data(nl_out)
      );
      assign nz_fifo_valid = 1'b0;
      assign aes_nz_ready  = 1'b1;
      assign agn_out_valid = 1'b0;
      assign agn_out_col   = 1'b0;
      assign agn_out_idx   = '0;
      assign agn_out_mask  = '0;
      assign agn_out       = '0;
    end else begin : g_rubato
      feistel #(.V(V), .Q(Q)) u_feistel (
        .clk, .rst_n, .adv, .in_valid(nl_in_valid), .in_col(mrmc_out_col),
        .in_idx(mrmc_out_idx), .in_data(mrmc_out),
        .out_valid(nl_out_valid), .out_col(nl_out_col), .out_idx(nl_out_idx), .out_data(nl_out)
      );

      logic         nz_aes_en, nz_aes_iv, nz_aes_itag, nz_aes_ov, nz_aes_otag;
      logic [127:0] nz_aes_iblk, nz_aes_oblk;
      logic         dg_valid, dg_ready;
      vec_t         dg_data, nz_fifo_data, nz_v;

      aes128_core #(.TAG_W(1)) u_aes_nz (
        .clk, .rst_n, .key_load(aes_key_load), .key(aes_key), .key_ready(aes_nz_ready),
        .en(nz_aes_en), .in_valid(nz_aes_iv), .in_block(nz_aes_iblk), .in_tag(nz_aes_itag),
        .out_valid(nz_aes_ov), .out_block(nz_aes_oblk), .out_tag(nz_aes_otag)
      );

      dgd_sampler #(.V(V), .Q(Q), .TOTAL(L), .TAIL(TAIL), .DOMAIN(1'b1)) u_dgd (
        .clk, .rst_n, .start(smp_start), .nonce,
        .cdf_we, .cdf_addr, .cdf_data(cdf_wdata),
        .aes_en(nz_aes_en), .aes_in_valid(nz_aes_iv), .aes_in_block(nz_aes_iblk),
        .aes_in_tag(nz_aes_itag), .aes_out_valid(nz_aes_ov), .aes_out_block(nz_aes_oblk),
        .aes_out_tag(nz_aes_otag),
        .vec_valid(dg_valid), .vec_ready(dg_ready), .vec_data(dg_data), .done()
      );

      vec_fifo #(.W(V*QW), .DEPTH(NZ_FIFO_DEPTH)) u_nz_fifo (
        .clk, .rst_n, .clear(smp_start),
        .in_valid(dg_valid), .in_ready(dg_ready), .in_data(dg_data),
        .out_valid(nz_fifo_valid), .out_ready(nz_fifo_pop), .out_data(nz_fifo_data), .count()
      );

      opnd_buf #(.V(V), .ROWS(LROWS)) u_nzb (
        .clk, .rst_n, .clear(smp_start), .we(nzb_we), .wrow(nzb_wrow), .wdata(nz_fifo_data),
        .rd_col(ark_out_col), .rd_idx(ark_out_idx), .rd_data(nz_v)
      );

      agn #(.V(V), .L(L), .Q(Q)) u_agn (
        .clk, .rst_n, .adv, .in_valid(fin_valid), .in_col(ark_out_col), .in_idx(ark_out_idx),
        .in_data(ark_out), .noise(nz_v),
        .out_valid(agn_out_valid), .out_col(agn_out_col), .out_idx(agn_out_idx),
        .out_mask(agn_out_mask), .out_data(agn_out)
      );
    end
  endgenerate

  // ---------------- key-stream output ----------------
  always_comb begin
    if (HAS_AGN) begin
      data_out_valid = agn_out_valid && adv;
      data_out_col   = agn_out_col;
      data_out_idx   = agn_out_idx;
      data_out_mask  = agn_out_mask;
      data_out       = agn_out;
    end else begin
      data_out_valid = fin_valid && adv;
      data_out_col   = ark_out_col;
      data_out_idx   = ark_out_idx;
      data_out_mask  = '1;
      data_out       = ark_out;
    end
  end

endmodule
