// tb_dgd_sampler: the Gaussian sampler driving a real AES core, with a CDF
// table for sigma = 3.2 written through its table port. Every noise value it
// delivers must equal presto_ref_pkg::gen_noise (a sequential table search)
// for the same key and nonce; the sample mean and spread are checked loosely.
module tb_dgd_sampler;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, TOTAL = 60, TAIL = 32;
  logic start = 0, vec_valid, vec_ready = 0, done, cdf_we = 0;
  logic [7:0] cdf_addr = '0;
  logic [63:0] nonce = '0, cdf_data = '0;
  logic aes_en, aes_iv, aes_itag, aes_ov, aes_otag, key_load = 0, key_ready;
  logic [127:0] aes_iblk, aes_oblk, key = '0;
  logic [V-1:0][QW-1:0] vec_data;
  aes128_core u_aes (.clk, .rst_n, .key_load, .key, .key_ready, .en(aes_en), .in_valid(aes_iv),
                     .in_block(aes_iblk), .in_tag(aes_itag), .out_valid(aes_ov),
                     .out_block(aes_oblk), .out_tag(aes_otag));
  dgd_sampler #(.V(V), .TOTAL(TOTAL), .TAIL(TAIL)) dut (
    .clk, .rst_n, .start, .nonce, .cdf_we, .cdf_addr, .cdf_data,
    .aes_en, .aes_in_valid(aes_iv), .aes_in_block(aes_iblk),
    .aes_in_tag(aes_itag), .aes_out_valid(aes_ov), .aes_out_block(aes_oblk),
    .aes_out_tag(aes_otag), .vec_valid, .vec_ready, .vec_data, .done);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (8000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  longint unsigned got[$], cdf[];
  vec_t ref_nz;
  real sum = 0, sq = 0;
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    make_cdf(3.2, TAIL, cdf);
    foreach (cdf[i]) begin cdf_we = 1; cdf_addr = 8'(i); cdf_data = cdf[i]; @(posedge clk); #1; end
    cdf_we = 0;
    key = {$urandom, $urandom, $urandom, $urandom};
    key_load = 1; @(posedge clk); #1 key_load = 0;
    wait (key_ready); @(posedge clk); #1;
    for (int run = 0; run < 8; run++) begin
      got.delete();
      nonce = {$urandom, $urandom};
      start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin
        vec_ready = ($urandom % 4 != 0);
        #1;
        if (vec_valid && vec_ready) for (int j = 0; j < V; j++) got.push_back(longint'(vec_data[j]));
        @(posedge clk); #1;
      end
      ref_nz = gen_noise(key, nonce, cdf, TAIL, TOTAL);
      chk(got.size() == 64, $sformatf("got %0d samples", got.size()));
      for (int i = 0; i < TOTAL; i++) begin
        real e;
        chk(got[i] == ref_nz[i], $sformatf("noise %0d got %0d exp %0d", i, got[i], ref_nz[i]));
        e = (got[i] > QREF/2) ? -real'(QREF - got[i]) : real'(got[i]);
        sum += e; sq += e*e;
      end
    end
    sum = sum / (8*TOTAL); sq = $sqrt(sq / (8*TOTAL));
    $display("noise mean %f rms %f (sigma 3.2)", sum, sq);
    chk(sum > -1.0 && sum < 1.0 && sq > 2.5 && sq < 4.0, "noise statistics");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
