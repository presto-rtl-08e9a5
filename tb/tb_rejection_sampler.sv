// tb_rejection_sampler: the sampler driving a real AES core; the round
// constants it delivers (with random back-pressure from the consumer) must
// equal presto_ref_pkg::gen_rc for the same key and nonce, in order, with the
// final vector zero-padded. A second start with another nonce checks that
// blocks still in flight from the first stream are dropped.
module tb_rejection_sampler;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, TOTAL = 188;
  logic start = 0, vec_valid, vec_ready = 0, done;
  logic [63:0] nonce = '0;
  logic aes_en, aes_iv, aes_itag, aes_ov, aes_otag, key_load = 0, key_ready;
  logic [127:0] aes_iblk, aes_oblk, key = '0;
  logic [V-1:0][QW-1:0] vec_data;
  aes128_core u_aes (.clk, .rst_n, .key_load, .key, .key_ready, .en(aes_en), .in_valid(aes_iv),
                     .in_block(aes_iblk), .in_tag(aes_itag), .out_valid(aes_ov),
                     .out_block(aes_oblk), .out_tag(aes_otag));
  rejection_sampler #(.V(V), .TOTAL(TOTAL)) dut (
    .clk, .rst_n, .start, .nonce, .aes_en, .aes_in_valid(aes_iv), .aes_in_block(aes_iblk),
    .aes_in_tag(aes_itag), .aes_out_valid(aes_ov), .aes_out_block(aes_oblk),
    .aes_out_tag(aes_otag), .vec_valid, .vec_ready, .vec_data, .done);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint unsigned got[$];
  vec_t ref_rc;
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    key = {$urandom, $urandom, $urandom, $urandom};
    key_load = 1; @(posedge clk); #1 key_load = 0;
    wait (key_ready); @(posedge clk); #1;
    for (int run = 0; run < 2; run++) begin
      got.delete();
      nonce = {$urandom, $urandom};
      start = 1; @(posedge clk); #1 start = 0;
      // first run is cut short after 10 cycles by the second start
      if (run == 0) begin
        vec_ready = 1; repeat (16) @(posedge clk); #1;
        nonce = {$urandom, $urandom}; got.delete();
        start = 1; @(posedge clk); #1 start = 0;
      end
      while (!done) begin
        vec_ready = ($urandom % 3 != 0);
        #1;
        if (vec_valid && vec_ready) for (int j = 0; j < V; j++) got.push_back(longint'(vec_data[j]));
        @(posedge clk); #1;
      end
      ref_rc = gen_rc(key, nonce, TOTAL);
      chk(got.size() == ((TOTAL + V - 1) / V) * V, $sformatf("got %0d samples", got.size()));
      for (int i = 0; i < got.size(); i++)
        chk(got[i] == ((i < TOTAL) ? ref_rc[i] : 0), $sformatf("rc %0d got %0d exp %0d", i, got[i], (i < TOTAL) ? ref_rc[i] : 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
