// tb_vec_packer: random accept masks and random output back-pressure; checks
// that exactly TOTAL samples come out in order, packed V per vector, that the
// last vector is zero-padded and that done rises; repeated after a new start.
module tb_vec_packer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 4, NIN = 5, W = 12, TOTAL = 23;
  logic start = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, active, done;
  logic [NIN-1:0] in_mask = '0;
  logic [NIN-1:0][W-1:0] in_data = '0;
  logic [V-1:0][W-1:0] out_data;
  vec_packer #(.V(V), .NIN(NIN), .W(W), .TOTAL(TOTAL)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [W-1:0] sent[$], got[$];
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int nvec;
      nvec = 0;
      sent.delete(); got.delete();
      start = 1; @(posedge clk); #1 start = 0;
      while (!done) begin
        in_valid = ($urandom % 4 != 0);
        for (int j = 0; j < NIN; j++) begin in_mask[j] = ($urandom % 5 != 0); in_data[j] = W'($urandom); end
        out_ready = ($urandom % 3 != 0);
        #1;
        if (in_valid && in_ready)
          for (int j = 0; j < NIN; j++) if (in_mask[j] && sent.size() < TOTAL) sent.push_back(in_data[j]);
        if (out_valid && out_ready) begin
          for (int j = 0; j < V; j++) got.push_back(out_data[j]);
          nvec++;
        end
        @(posedge clk); #1;
      end
      chk(nvec == (TOTAL + V - 1) / V, $sformatf("vectors %0d", nvec));
      for (int i = 0; i < got.size(); i++)
        chk(got[i] == ((i < TOTAL) ? sent[i] : '0), $sformatf("sample %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
