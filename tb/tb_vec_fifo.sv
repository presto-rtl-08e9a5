// tb_vec_fifo: random pushes and pops against a queue model; checks data order,
// count, full/empty flags and the clear input.
module tb_vec_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int W = 16, D = 5;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  vec_fifo #(.W(W), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [W-1:0] q[$];
  int nfull = 0;
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      in_valid  = ($urandom % 3 != 0);
      out_ready = ($urandom % 2 == 0);
      in_data   = W'($urandom);
      if (i == 1000) clear = 1;
      #1;
      chk(out_valid == (q.size() != 0), "empty flag");
      chk(int'(count) == q.size(), $sformatf("count %0d model %0d", count, q.size()));
      chk(in_ready == (q.size() < D || out_ready), "full flag");
      if (q.size() == D) nfull++;
      if (out_valid) chk(out_data == q[0], "head data");
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (out_valid && out_ready) void'(q.pop_front());
        if (in_valid && in_ready) q.push_back(in_data);
      end
      #1 clear = 0;
    end
    chk(nfull > 0, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
