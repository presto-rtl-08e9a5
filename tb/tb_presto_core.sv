// tb_presto_core: one Rubato lane at its default size (v = 8, 2 rounds,
// l = 60) and, sharing the command port, a second lane of another size
// (v = 6, 3 rounds, l = 36, LANE_ID 1) to exercise the parameterisation.
// After loading the AES key, the cipher keys and the CDF table, several key
// streams are started back to back with random nonces, and every output
// element is compared with presto_ref_pkg::keystream. It also checks that a
// START sent while a lane is busy is ignored, that done pulses once per
// stream, that the truncation mask marks exactly the first l elements and
// that no stream takes more than a generous cycle budget.
module tb_presto_core;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  localparam int TAIL = 32, NKEYS = 4;
  localparam int VA = 8, RA = 2, LA = 60;
  localparam int VB = 6, RB = 3, LB = 36;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cmd_t cmd;
  logic [63:0] data_in;
  logic a_valid, a_col, a_busy, a_done, a_stall, b_valid, b_col, b_busy, b_done, b_stall;
  logic [2:0] a_idx, b_idx;
  logic [VA-1:0] a_mask;
  logic [VB-1:0] b_mask;
  logic [VA-1:0][QW-1:0] a_out;
  logic [VB-1:0][QW-1:0] b_out;
  presto_core u_a (.clk, .rst_n, .cmd, .data_in, .data_out_valid(a_valid), .data_out_col(a_col),
    .data_out_idx(a_idx), .data_out_mask(a_mask), .data_out(a_out), .busy(a_busy), .done(a_done),
    .stall(a_stall));
  presto_core #(.SCHEME(SCHEME_RUBATO), .V(VB), .R(RB), .L(LB), .LANE_ID(1)) u_b (
    .clk, .rst_n, .cmd, .data_in, .data_out_valid(b_valid), .data_out_col(b_col),
    .data_out_idx(b_idx), .data_out_mask(b_mask), .data_out(b_out), .busy(b_busy), .done(b_done),
    .stall(b_stall));
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (30000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  longint unsigned a_got[64], b_got[36];
  int a_cnt, b_cnt, a_dn, b_dn, a_bad_mask, b_bad_mask;
  always @(posedge clk) if (rst_n) begin
    int e;
    if (a_valid) for (int j = 0; j < VA; j++) begin
      e = a_col ? VA*j + int'(a_idx) : VA*int'(a_idx) + j;
      if (a_mask[j] != (e < LA)) a_bad_mask++;
      if (a_mask[j]) begin a_got[e] = a_out[j]; a_cnt++; end
    end
    if (b_valid) for (int j = 0; j < VB; j++) begin
      e = b_col ? VB*j + int'(b_idx) : VB*int'(b_idx) + j;
      if (b_mask[j] != (e < LB)) b_bad_mask++;
      if (b_mask[j]) begin b_got[e] = b_out[j]; b_cnt++; end
    end
    if (a_done) a_dn++;
    if (b_done) b_dn++;
  end

  task automatic hcmd(cmd_op_e op, int addr, logic [63:0] d);
    cmd.op = op; cmd.addr = 8'(addr); data_in = d;
    @(posedge clk); #1;
    cmd.op = CMD_NOP; cmd.addr = '0; data_in = '0;
  endtask

  logic [127:0] xk;
  vec_t ka, kb, rc, nz, ks;
  longint unsigned cdf[];
  initial begin
    cmd = '{op: CMD_NOP, addr: '0}; data_in = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // a START before the AES key exists must be ignored
    hcmd(CMD_START, 0, 64'h1);
    repeat (3) @(posedge clk); #1;
    chk(!a_busy, "start ignored without AES key");
    xk = {$urandom, $urandom, $urandom, $urandom};
    ka = new[VA*VA]; kb = new[VB*VB];
    foreach (ka[i]) ka[i] = rand_elem();
    foreach (kb[i]) kb[i] = rand_elem();
    make_cdf(3.2, TAIL, cdf);
    // both lanes share the port, so both get the same AES key and table;
    // lane B's key is written after lane A's (same addresses, 36 of them)
    hcmd(CMD_XOF_KEY, 0, xk[63:0]);
    hcmd(CMD_XOF_KEY, 1, xk[127:64]);
    foreach (cdf[i]) hcmd(CMD_CDF, i, cdf[i]);
    for (int i = 0; i < VA*VA; i++) hcmd(CMD_KEY, i, (i < VB*VB) ? kb[i] : ka[i]);
    for (int i = 0; i < VB*VB; i++) ka[i] = kb[i];
    repeat (12) @(posedge clk); #1;
    for (int k = 0; k < NKEYS; k++) begin
      logic [63:0] na, nb;
      int t;
      na = {$urandom, $urandom}; nb = {$urandom, $urandom};
      a_cnt = 0; b_cnt = 0; a_dn = 0; b_dn = 0;
      hcmd(CMD_START, 0, na);
      hcmd(CMD_START, 1, nb);
      hcmd(CMD_START, 0, ~na);      // lane busy: ignored
      t = 0;
      while ((a_busy || b_busy) && t < 400) begin @(posedge clk); #1; t++; end
      chk(t < 400, "stream finished within 400 cycles");
      repeat (2) @(posedge clk); #1;
      chk(a_dn == 1 && b_dn == 1, "one done pulse per stream");
      rc = gen_rc(xk, na, RA*VA*VA + LA); nz = gen_noise(xk, na, cdf, TAIL, LA);
      ks = keystream(1'b1, VA, RA, LA, ka, rc, nz);
      chk(a_cnt == LA, $sformatf("lane A %0d elements", a_cnt));
      for (int i = 0; i < LA; i++) chk(a_got[i] == ks[i], $sformatf("key %0d A elem %0d", k, i));
      rc = gen_rc(xk, nb, RB*VB*VB + LB); nz = gen_noise(xk, nb, cdf, TAIL, LB);
      ks = keystream(1'b1, VB, RB, LB, kb, rc, nz);
      chk(b_cnt == LB, $sformatf("lane B %0d elements", b_cnt));
      for (int i = 0; i < LB; i++) chk(b_got[i] == ks[i], $sformatf("key %0d B elem %0d", k, i));
    end
    chk(a_bad_mask == 0 && b_bad_mask == 0, "truncation masks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
