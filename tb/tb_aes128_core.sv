// tb_aes128_core: checks the pipelined AES-128 core against the FIPS-197
// example vector and against the behavioural AES of presto_ref_pkg for random
// keys and blocks, issued back to back with random pipeline holds (en = 0).
// Also checks the 10-cycle key expansion and the 11-cycle latency.
module tb_aes128_core;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic key_load = 0, key_ready, en = 1, in_valid = 0, out_valid;
  logic [127:0] key = '0, in_block = '0, out_block;
  logic in_tag = 0, out_tag;
  aes128_core dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [127:0] exp_q[$];
  int issued_at[$], lat, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && en && out_valid) begin
    logic [127:0] e;
    e = exp_q.pop_front();
    chk(out_block == e, $sformatf("block %h exp %h", out_block, e));
    lat = cyc - issued_at.pop_front();
  end

  initial begin
    int kr;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      key = (t == 0) ? 128'h000102030405060708090a0b0c0d0e0f : {$urandom, $urandom, $urandom, $urandom};
      key_load = 1; @(posedge clk); #1 key_load = 0;
      kr = 0;
      while (!key_ready) begin @(posedge clk); #1 kr++; end
      chk(kr == 10, $sformatf("key expansion took %0d cycles", kr));
      for (int i = 0; i < 40; i++) begin
        in_valid = 1;
        in_block = (t == 0 && i == 0) ? 128'h00112233445566778899aabbccddeeff
                                      : {$urandom, $urandom, $urandom, $urandom};
        en = (t == 0) ? 1'b1 : ($urandom % 4 != 0);
        if (en) begin
          exp_q.push_back((t == 0 && i == 0) ? 128'h69c4e0d86a7b0430d8cdb78070b4c55a
                                             : aes_enc(key, in_block));
          issued_at.push_back(cyc);
        end
        @(posedge clk); #1;
      end
      in_valid = 0; en = 1;
      repeat (14) @(posedge clk); #1;
      chk(exp_q.size() == 0, "all blocks came out");
      if (t == 0) chk(lat == 11, $sformatf("latency %0d, expected 11", lat));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
