// aes128_core: fully pipelined AES-128 encryption, one 128-bit block per cycle.
//
// The accelerator uses AES in counter mode as its extendable-output function:
// the paper relies on an AES core of 128 bit/cycle throughput for both the
// round-constant and the noise sampler. This core is a plain FIPS-197
// implementation written for this design: ten round stages, each holding its
// own S-boxes, plus the initial AddRoundKey on the input.
//
// Key schedule: pulse key_load with the key; the ten round keys are computed
// iteratively, one per cycle, and key_ready rises 10 cycles later. Blocks must
// only be issued while key_ready is high.
//
// Pipeline: a block accepted with in_valid while en is high appears on
// out_block with out_valid 11 advancing cycles later, carrying its in_tag.
// When en is low the whole pipeline holds (used as back-pressure by the
// sampler behind it).
//
// The S-box table is computed at elaboration from its definition (inverse in
// GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the affine map), not pasted.
module aes128_core #(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_load,
  input  logic [127:0]     key,
  output logic             key_ready,
  input  logic             en,
  input  logic             in_valid,
  input  logic [127:0]     in_block,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [127:0]     out_block,
  output logic [TAG_W-1:0] out_tag
);

  // ---- GF(2^8) helpers and S-box --------------------------------------
  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = 8'h00;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] t;
    logic [7:0] inv, s;
    for (int x = 0; x < 256; x++) begin
      // x^254 = x^-1 (and 0 -> 0)
      inv = 8'h01;
      for (int i = 7; i >= 0; i--) begin
        inv = gmul(inv, inv);
        if (i != 0) inv = gmul(inv, 8'(x));
      end
      s = inv;
      for (int i = 0; i < 8; i++)
        s[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
      t[x] = s ^ 8'h63;
    end
    return t;
  endfunction

  localparam logic [255:0][7:0] SBOX = gen_sbox();

  // State byte b (0..15) is bits [127-8b -: 8], FIPS-197 column-major order.
  function automatic logic [7:0] get_b(input logic [127:0] s, input int b);
    return s[127-8*b -: 8];
  endfunction

  function automatic logic [127:0] sub_shift(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(4*c+r) -: 8] = SBOX[get_b(s, 4*((c+r)%4)+r)];
    return o;
  endfunction

  function automatic logic [127:0] mix_cols(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_b(s, 4*c); a1 = get_b(s, 4*c+1); a2 = get_b(s, 4*c+2); a3 = get_b(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  function automatic logic [127:0] next_rk(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {SBOX[w3[23:16]], SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    t[31:24] = t[31:24] ^ rcon;
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // ---- key schedule ----------------------------------------------------
  logic [10:0][127:0] rk;
  logic [3:0]         kcnt;
  logic [7:0]         rcon;
  logic               kbusy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk        <= '0;
      kcnt      <= '0;
      rcon      <= 8'h01;
      kbusy     <= 1'b0;
      key_ready <= 1'b0;
    end else if (key_load) begin
      rk[0]     <= key;
      kcnt      <= 4'd1;
      rcon      <= 8'h01;
      kbusy     <= 1'b1;
      key_ready <= 1'b0;
    end else if (kbusy) begin
      rk[kcnt]  <= next_rk(rk[kcnt-1], rcon);
      rcon      <= xtime(rcon);
      kcnt      <= kcnt + 4'd1;
      if (kcnt == 4'd10) begin
        kbusy     <= 1'b0;
        key_ready <= 1'b1;
      end
    end
  end

  // ---- round pipeline --------------------------------------------------
  logic [10:0][127:0]     st;
  logic [10:0]            vld;
  logic [10:0][TAG_W-1:0] tg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= '0;
      vld <= '0;
      tg  <= '0;
    end else if (en) begin
      st[0]  <= in_block ^ rk[0];
      vld[0] <= in_valid;
      tg[0]  <= in_tag;
      for (int r = 1; r <= 10; r++) begin
        st[r]  <= (r == 10) ? (sub_shift(st[r-1]) ^ rk[r])
                            : (mix_cols(sub_shift(st[r-1])) ^ rk[r]);
        vld[r] <= vld[r-1];
        tg[r]  <= tg[r-1];
      end
    end
  end

  assign out_valid = vld[10];
  assign out_block = st[10];
  assign out_tag   = tg[10];

endmodule
