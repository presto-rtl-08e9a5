// tb_hera_accel: the two-lane HERA accelerator (v = 4, 5 rounds). Both lanes
// share the AES key and the cipher key; each is started with its own nonce,
// lane 1 a random number of cycles after lane 0, for several streams, and
// every element is compared with presto_ref_pkg::keystream. Latency from
// START to done is measured per lane; it must not exceed the 90 cycles the
// paper reports for its HERA design.
module tb_hera_accel;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  localparam int NKEYS = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cmd_t cmd;
  logic [63:0] data_in;
  logic [1:0] valid, col, busy, done, stall;
  logic [1:0][1:0] idx;
  logic [1:0][3:0][QW-1:0] dout;
  hera_accel dut (.clk, .rst_n, .cmd, .data_in, .data_out_valid(valid), .data_out_col(col),
                  .data_out_idx(idx), .data_out(dout), .busy, .done, .stall);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int cyc = 0, t0[2], lat[2], cnt[2], n_stall = 0;
  longint unsigned got[2][16];
  always @(posedge clk) begin
    int e;
    cyc++;
    if (stall != 0) n_stall++;
    for (int g = 0; g < 2; g++) begin
      if (cmd.op == CMD_START && int'(cmd.addr) == g && !busy[g]) t0[g] = cyc;
      if (done[g]) lat[g] = cyc - t0[g];
      if (valid[g]) for (int j = 0; j < 4; j++) begin
        e = col[g] ? 4*j + int'(idx[g]) : 4*int'(idx[g]) + j;
        got[g][e] = dout[g][j]; cnt[g]++;
      end
    end
  end

  task automatic hcmd(cmd_op_e op, int addr, logic [63:0] d);
    cmd.op = op; cmd.addr = 8'(addr); data_in = d;
    @(posedge clk); #1;
    cmd.op = CMD_NOP; cmd.addr = '0; data_in = '0;
  endtask

  logic [127:0] xk;
  vec_t key, rc, nz, ks;
  int worst = 0;
  initial begin
    cmd = '{op: CMD_NOP, addr: '0}; data_in = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    xk = {$urandom, $urandom, $urandom, $urandom};
    key = new[16];
    foreach (key[i]) key[i] = rand_elem();
    hcmd(CMD_XOF_KEY, 0, xk[63:0]);
    hcmd(CMD_XOF_KEY, 1, xk[127:64]);
    foreach (key[i]) hcmd(CMD_KEY, i, key[i]);
    repeat (12) @(posedge clk); #1;
    for (int k = 0; k < NKEYS; k++) begin
      logic [63:0] n[2];
      n[0] = {$urandom, $urandom}; n[1] = {$urandom, $urandom};
      cnt = '{0, 0};
      hcmd(CMD_START, 0, n[0]);
      repeat ($urandom % 30) @(posedge clk);
      #1 hcmd(CMD_START, 1, n[1]);
      while (busy != 0) begin @(posedge clk); #1; end
      repeat (2) @(posedge clk); #1;
      for (int g = 0; g < 2; g++) begin
        rc = gen_rc(xk, n[g], 6*16);
        ks = keystream(1'b0, 4, 5, 16, key, rc, nz);
        chk(cnt[g] == 16, $sformatf("lane %0d: %0d elements", g, cnt[g]));
        for (int i = 0; i < 16; i++) chk(got[g][i] == ks[i], $sformatf("key %0d lane %0d elem %0d", k, g, i));
        chk(lat[g] <= 90, $sformatf("lane %0d latency %0d", g, lat[g]));
        if (lat[g] > worst) worst = lat[g];
      end
    end
    $display("HERA latency START->done: worst %0d cycles (paper: 90); stall cycles %0d", worst, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
