// tb_presto_top: end-to-end test of both accelerators at their default sizes
// (HERA: 2 lanes, v = 4, 5 rounds; Rubato: v = 8, 2 rounds, l = 60).
//
// The host loads the AES key, the cipher key and (Rubato) the Gaussian CDF
// table, then starts NKEYS key streams per lane with different nonces. Every
// output element is compared with presto_ref_pkg, which recomputes the
// whole cipher, AES included, from its definition. It also measures the
// latency from START to done (HERA must not exceed the paper's 90 cycles,
// Rubato's stall-free part must not exceed its 66 cycles), the MRMC idle time
// between passes (HERA at most 5 cycles, Rubato's final round at most 2) and
// counts the mechanisms the design relies on:
// stalls while round constants are missing, round constants still being
// sampled while the rounds run (RNG decoupling), MRMC passes entered in row
// and in column order, the Feistel unit's held-back column, rejected
// samples. Each must occur at least once (FIFO back-pressure is only
// reported).
module tb_presto_top;
  import presto_pkg::*;
  import presto_ref_pkg::*;

  localparam int NKEYS = 3;
  localparam int TAIL  = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cmd_t        hera_cmd, rubato_cmd;
  logic [63:0] hera_data_in, rubato_data_in;
  logic [1:0]  hera_out_valid, hera_out_col, hera_busy, hera_done, hera_stall;
  logic [1:0][1:0] hera_out_idx;
  logic [1:0][3:0][QW-1:0] hera_out;
  logic        rubato_out_valid, rubato_out_col, rubato_busy, rubato_done, rubato_stall;
  logic [2:0]  rubato_out_idx;
  logic [7:0]  rubato_out_mask;
  logic [7:0][QW-1:0] rubato_out;

  presto_top dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output capture ----------------
  longint unsigned hera_got[2][16];
  int              hera_cnt[2];
  longint unsigned rub_got[64];
  int              rub_cnt, rub_mask_cnt;
  int              hera_col_vecs, rub_col_vecs, rub_row_vecs;

  always @(posedge clk) begin
    int e;
    for (int g = 0; g < 2; g++)
      if (hera_out_valid[g]) begin
        for (int j = 0; j < 4; j++) begin
          e = hera_out_col[g] ? 4*j + int'(hera_out_idx[g]) : 4*int'(hera_out_idx[g]) + j;
          hera_got[g][e] = hera_out[g][j];
          hera_cnt[g]++;
        end
        if (hera_out_col[g]) hera_col_vecs++;
      end
    if (rubato_out_valid) begin
      for (int j = 0; j < 8; j++) begin
        e = rubato_out_col ? 8*j + int'(rubato_out_idx) : 8*int'(rubato_out_idx) + j;
        if (rubato_out_mask[j]) begin
          rub_got[e] = rubato_out[j];
          rub_cnt++;
        end
        if (rubato_out_mask[j] != (e < 60)) rub_mask_cnt++;
      end
      if (rubato_out_col) rub_col_vecs++; else rub_row_vecs++;
    end
  end

  int hera_t0[2], lat_h[2];
  always @(posedge clk) begin
    for (int g = 0; g < 2; g++) begin
      if (hera_cmd.op == CMD_START && int'(hera_cmd.addr) == g) hera_t0[g] = cycle;
      if (hera_done[g]) lat_h[g] = cycle - hera_t0[g];
    end
  end

  // ---------------- mechanism counters (observed inside the design) ------
  int n_stall_r, n_stall_h, n_decoupled, n_mrmc_row_in, n_mrmc_col_in, n_feistel_hold;
  int n_reject, n_fifo_full;
  always @(posedge clk) if (rst_n) begin
    if (rubato_stall) n_stall_r++;
    if (hera_stall != 0) n_stall_h++;
    if (dut.u_rubato.rs_valid && dut.u_rubato.rs_ready && dut.u_rubato.u_ctrl.arkin_pass != 0)
      n_decoupled++;
    if (dut.u_rubato.mrmc_in_valid && dut.u_rubato.adv) begin
      if (dut.u_rubato.u_mrmc.in_col) n_mrmc_col_in++; else n_mrmc_row_in++;
    end
    if (dut.u_rubato.g_rubato.u_feistel.pend_v && dut.u_rubato.adv) n_feistel_hold++;
    if (dut.u_rubato.u_rs.current && dut.u_rubato.u_rs.pk_ready && !(&dut.u_rubato.u_rs.mask))
      n_reject++;
    if (dut.u_rubato.rs_valid && !dut.u_rubato.rs_ready) n_fifo_full++;
  end

  // MRMC idle cycles between two passes of one stream (last input of one pass
  // to first input of the next), the figure quoted for the optimised designs
  // (HERA 5, Rubato 2). For Rubato the gap inside the final round (MRMC ->
  // Feistel -> MRMC) is checked; the gap from one round into the next also
  // passes ARK and waits for Feistel's held column, and is only reported.
  int r_in_cnt, r_last_in, r_gap_max, r_gap_rf, h_in_cnt, h_last_in, h_gap_max, acyc_r, acyc_h;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_rubato.adv) acyc_r++;
    if (dut.u_rubato.mrmc_in_valid && dut.u_rubato.adv) begin
      if (r_in_cnt % 8 == 0 && r_in_cnt % 24 != 0) begin
        if (dut.u_rubato.mrmc_src) begin
          if (acyc_r - r_last_in - 1 > r_gap_max) r_gap_max = acyc_r - r_last_in - 1;
        end else if (acyc_r - r_last_in - 1 > r_gap_rf) r_gap_rf = acyc_r - r_last_in - 1;
      end
      r_in_cnt++; r_last_in = acyc_r;
    end
    if (dut.u_hera.g_lane[0].u_core.adv) acyc_h++;
    if (dut.u_hera.g_lane[0].u_core.mrmc_in_valid && dut.u_hera.g_lane[0].u_core.adv) begin
      if (h_in_cnt % 4 == 0 && h_in_cnt % 24 != 0 && acyc_h - h_last_in - 1 > h_gap_max)
        h_gap_max = acyc_h - h_last_in - 1;
      h_in_cnt++; h_last_in = acyc_h;
    end
  end

  // ---------------- host ----------------
  task automatic hcmd(ref cmd_t c, ref logic [63:0] d, input cmd_op_e op, input int addr,
                      input logic [63:0] data);
    c.op = op; c.addr = 8'(addr); d = data;
    @(posedge clk); #1;
    c.op = CMD_NOP; c.addr = '0; d = '0;
  endtask

  logic [127:0]    xk_h, xk_r;
  vec_t            key_h, key_r, rc, nz, ref_ks;
  longint unsigned cdf[];
  logic [63:0]     nonce;
  int              t0, lat_r, stall0;

  initial begin
    hera_cmd = '{op: CMD_NOP, addr: '0}; rubato_cmd = '{op: CMD_NOP, addr: '0};
    hera_data_in = '0; rubato_data_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // AES reference check (FIPS-197 C.1) of the model itself
    check(aes_enc(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff)
          == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "reference AES vector");

    xk_h = {$urandom, $urandom, $urandom, $urandom};
    xk_r = {$urandom, $urandom, $urandom, $urandom};
    key_h = new[16]; key_r = new[64];
    foreach (key_h[i]) key_h[i] = rand_elem();
    foreach (key_r[i]) key_r[i] = rand_elem();
    make_cdf(3.2, TAIL, cdf);

    hcmd(hera_cmd, hera_data_in, CMD_XOF_KEY, 0, xk_h[63:0]);
    hcmd(hera_cmd, hera_data_in, CMD_XOF_KEY, 1, xk_h[127:64]);
    foreach (key_h[i]) hcmd(hera_cmd, hera_data_in, CMD_KEY, i, key_h[i]);
    hcmd(rubato_cmd, rubato_data_in, CMD_XOF_KEY, 0, xk_r[63:0]);
    hcmd(rubato_cmd, rubato_data_in, CMD_XOF_KEY, 1, xk_r[127:64]);
    foreach (key_r[i]) hcmd(rubato_cmd, rubato_data_in, CMD_KEY, i, key_r[i]);
    foreach (cdf[i]) hcmd(rubato_cmd, rubato_data_in, CMD_CDF, i, cdf[i]);
    repeat (12) @(posedge clk);

    for (int k = 0; k < NKEYS; k++) begin
      logic [63:0] nh[2], nr;
      nh[0] = {$urandom, $urandom}; nh[1] = {$urandom, $urandom}; nr = {$urandom, $urandom};
      hera_cnt = '{0, 0}; rub_cnt = 0; stall0 = n_stall_r;
      fork
        begin
          for (int g = 0; g < 2; g++) begin
            hera_cmd.op = CMD_START; hera_cmd.addr = 8'(g); hera_data_in = nh[g];
            @(posedge clk); #1;
            hera_cmd.op = CMD_NOP; hera_cmd.addr = '0;
          end
          wait (hera_busy == 2'b00 && hera_done == 2'b00);
          @(posedge clk);
        end
        begin
          rubato_cmd.op = CMD_START; rubato_data_in = nr;
          @(posedge clk); #1;
          t0 = cycle - 1;
          rubato_cmd.op = CMD_NOP;
          @(posedge clk iff rubato_done);
          lat_r = cycle - t0;
        end
      join
      repeat (3) @(posedge clk);

      // compare HERA lanes
      for (int g = 0; g < 2; g++) begin
        rc = gen_rc(xk_h, nh[g], 6*16);
        ref_ks = keystream(1'b0, 4, 5, 16, key_h, rc, nz);
        check(hera_cnt[g] == 16, $sformatf("hera lane %0d produced %0d elements", g, hera_cnt[g]));
        for (int i = 0; i < 16; i++)
          check(hera_got[g][i] == ref_ks[i],
                $sformatf("key %0d hera lane %0d elem %0d got %0d exp %0d", k, g, i,
                          hera_got[g][i], ref_ks[i]));
      end
      // compare Rubato
      rc = gen_rc(xk_r, nr, 2*64 + 60);
      nz = gen_noise(xk_r, nr, cdf, TAIL, 60);
      ref_ks = keystream(1'b1, 8, 2, 60, key_r, rc, nz);
      check(rub_cnt == 60, $sformatf("rubato produced %0d elements", rub_cnt));
      for (int i = 0; i < 60; i++)
        check(rub_got[i] == ref_ks[i],
              $sformatf("key %0d rubato elem %0d got %0d exp %0d", k, i, rub_got[i], ref_ks[i]));
      $display("key %0d: latency START->done  HERA lane0 %0d  lane1 %0d  Rubato %0d cycles (%0d of them stalled)",
               k, lat_h[0], lat_h[1], lat_r, n_stall_r - stall0);
      // paper: 90 cycles (HERA), 66 cycles (Rubato, after RNG start-up)
      check(lat_h[0] <= 90 && lat_h[1] <= 90, "HERA latency within the paper's 90 cycles");
      check(lat_r - (n_stall_r - stall0) <= 66, "Rubato datapath latency within the paper's 66 cycles");
    end

    check(rub_mask_cnt == 0, "Rubato truncation mask marks exactly the first 60 elements");
    $display("mechanisms: rubato stall %0d, hera stall %0d, sampling during rounds %0d, MRMC row-in %0d col-in %0d, Feistel held column %0d, rejected blocks %0d, FIFO full %0d, hera col-major out %0d, rubato col-major out %0d",
             n_stall_r, n_stall_h, n_decoupled, n_mrmc_row_in, n_mrmc_col_in, n_feistel_hold,
             n_reject, n_fifo_full, hera_col_vecs, rub_col_vecs);
    $display("MRMC idle between passes (advancing cycles): HERA %0d (paper: 5), Rubato %0d inside the final round (paper: 2), %0d from a round into the next (through ARK and the held Feistel column)",
             h_gap_max, r_gap_max, r_gap_rf);
    check(h_gap_max <= 5, "HERA MRMC idle between passes within the paper's 5 cycles");
    check(r_gap_max <= 2, "Rubato MRMC idle inside the final round within the paper's 2 cycles");
    check(n_stall_r > 0,      "a datapath stall for missing constants occurred (Rubato)");
    check(n_stall_h > 0,      "a datapath stall for missing constants occurred (HERA)");
    check(n_decoupled > 0,    "round constants were sampled while rounds ran");
    check(n_mrmc_row_in > 0,  "MRMC took a row-major state");
    check(n_mrmc_col_in > 0,  "MRMC took a column-major state");
    check(n_feistel_hold > 0, "Feistel held back and later emitted column 0");
    check(n_reject > 0,       "a candidate was rejected by the sampler");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
