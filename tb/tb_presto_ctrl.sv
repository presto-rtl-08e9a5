// tb_presto_ctrl: the controller alone (Rubato defaults: v = 8, 2 rounds,
// l = 60, AGN present) against simple behavioural stand-ins for the datapath
// units: ARK, NL and AGN pass a vector on one advancing cycle later, MRMC
// emits V vectors on consecutive cycles after collecting V. The round-constant
// and noise FIFOs are modelled as counters refilled at a random rate, slowly
// for some streams so that the datapath must stall.
//
// Checked per stream: ARK takes V vectors from the ic ROM, (R-1)V from NL and
// V from MRMC; MRMC takes RV vectors from ARK and V from NL; NL takes RV;
// exactly V final vectors reach AGN; RV + ceil(l/V) constant rows and
// ceil(l/V) noise rows are popped; every stall has a vector waiting at ARK
// or AGN; done pulses once and busy falls. Also the host decode: key and CDF
// writes, the two AES key halves and the key-load pulse, START ignored while
// busy or before the AES key is ready.
module tb_presto_ctrl;
  import presto_pkg::*;
  localparam int V = 8, R = 2, L = 60, LROWS = (L + V - 1) / V;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cmd_t cmd;
  logic [63:0] data_in;
  logic busy, done, key_we, cdf_we, aes_key_load, aes_key_ready = 0, smp_start;
  logic [7:0] key_addr, cdf_addr;
  logic [QW-1:0] key_wdata;
  logic [63:0] cdf_wdata, nonce;
  logic [127:0] aes_key;
  logic rc_fifo_valid, rc_fifo_pop, rcb_clear, rcb_sel, nz_fifo_valid, nz_fifo_pop, nzb_we;
  logic [1:0] rcb_we, ark_src;
  logic [2:0] rcb_wrow, nzb_wrow, ic_idx;
  logic ark_out_valid = 0, mrmc_out_valid = 0, nl_out_valid = 0, agn_out_valid = 0;
  logic adv, ic_valid, ark_in_valid, mrmc_src, mrmc_in_valid, nl_in_valid, fin_valid, stall;
  presto_ctrl #(.V(V), .R(R), .L(L), .HAS_AGN(1'b1), .LANE_ID(0)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // FIFO stand-ins
  int rc_avail = 0, nz_avail = 0, rate = 1;
  assign rc_fifo_valid = (rc_avail > 0);
  assign nz_fifo_valid = (nz_avail > 0);
  // unit stand-ins and event counters
  int m_cnt = 0, m_emit = 0;
  int n_ark_src[3], n_mrmc_ark, n_mrmc_nl, n_nl, n_fin, n_rc_pop, n_nz_pop, n_done, n_bad_stall, n_stall;
  always @(posedge clk) if (rst_n) begin
    if (rc_fifo_pop) begin rc_avail--; n_rc_pop++; end
    if (nz_fifo_pop) begin nz_avail--; n_nz_pop++; end
    if ($urandom % rate == 0) begin if (rc_avail < 8) rc_avail++; if (nz_avail < 8) nz_avail++; end
    if (done) n_done++;
    if (busy && !adv) begin
      n_stall++;
      if (!ark_in_valid && !fin_valid) n_bad_stall++;
    end
    if (adv) begin
      if (ark_in_valid) n_ark_src[ark_src]++;
      if (mrmc_in_valid) begin if (mrmc_src) n_mrmc_nl++; else n_mrmc_ark++; end
      if (nl_in_valid) n_nl++;
      if (fin_valid) n_fin++;
      ark_out_valid <= ark_in_valid;
      nl_out_valid  <= nl_in_valid;
      agn_out_valid <= fin_valid;
      if (mrmc_in_valid) m_cnt = m_cnt + 1;
      mrmc_out_valid <= (m_emit > 0) || (m_cnt == V);
      if (m_emit > 0) m_emit = m_emit - 1;
      if (m_cnt == V) begin m_cnt = 0; m_emit = m_emit + V - 1; end
    end
  end

  task automatic hcmd(cmd_op_e op, int addr, logic [63:0] d);
    cmd.op = op; cmd.addr = 8'(addr); data_in = d;
    #1;
    if (op == CMD_KEY) chk(key_we && key_addr == 8'(addr) && key_wdata == d[QW-1:0], "key write decode");
    if (op == CMD_CDF) chk(cdf_we && cdf_addr == 8'(addr) && cdf_wdata == d, "cdf write decode");
    if (op != CMD_KEY) chk(!key_we, "no spurious key write");
    @(posedge clk); #1;
    cmd.op = CMD_NOP; cmd.addr = '0; data_in = '0;
  endtask

  initial begin
    logic [127:0] xk;
    cmd = '{op: CMD_NOP, addr: '0}; data_in = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    hcmd(CMD_START, 0, 64'h5);
    chk(!busy, "START ignored before AES key ready");
    hcmd(CMD_KEY, 5, 64'h123456789);
    hcmd(CMD_CDF, 9, 64'hfedcba9876543210);
    xk = {$urandom, $urandom, $urandom, $urandom};
    hcmd(CMD_XOF_KEY, 0, xk[63:0]);
    chk(!aes_key_load, "no key load after half 0");
    hcmd(CMD_XOF_KEY, 1, xk[127:64]);
    chk(aes_key_load && aes_key == xk, "AES key assembled and loaded");
    @(posedge clk); #1 chk(!aes_key_load, "key load is a pulse");
    aes_key_ready = 1;
    for (int s = 0; s < 8; s++) begin
      logic [63:0] n;
      rate = (s % 2) ? 6 : 1;
      n_ark_src = '{0, 0, 0}; n_mrmc_ark = 0; n_mrmc_nl = 0; n_nl = 0; n_fin = 0;
      n_rc_pop = 0; n_nz_pop = 0; n_done = 0;
      n = {$urandom, $urandom};
      cmd.op = CMD_START; cmd.addr = 8'd0; data_in = n; #1;
      chk(smp_start && nonce == n, "sampler start with nonce");
      @(posedge clk); #1;
      cmd.op = CMD_NOP;
      chk(busy, "busy after START");
      cmd.op = CMD_START; data_in = ~n; #1;
      chk(!smp_start, "START ignored while busy");
      @(posedge clk); #1 cmd.op = CMD_NOP;
      while (busy) begin @(posedge clk); #1; end
      repeat (2) @(posedge clk); #1;
      chk(n_ark_src[0] == V && n_ark_src[1] == (R-1)*V && n_ark_src[2] == V,
          $sformatf("ARK sources %0d %0d %0d", n_ark_src[0], n_ark_src[1], n_ark_src[2]));
      chk(n_mrmc_ark == R*V && n_mrmc_nl == V, $sformatf("MRMC sources %0d %0d", n_mrmc_ark, n_mrmc_nl));
      chk(n_nl == R*V, "NL inputs");
      chk(n_fin == V, "final vectors");
      chk(n_rc_pop == R*V + LROWS, $sformatf("rc rows popped %0d", n_rc_pop));
      chk(n_nz_pop == LROWS, $sformatf("noise rows popped %0d", n_nz_pop));
      chk(n_done == 1, "one done pulse");
    end
    chk(n_stall > 0, "stalls occurred with a slow constant supply");
    chk(n_bad_stall == 0, "every stall had a waiting vector");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
