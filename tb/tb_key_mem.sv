// tb_key_mem: writes random key elements and reads every row and column back,
// checking the lane-to-element mapping of both orientations.
module tb_key_mem;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8;
  logic we = 0, rd_col = 0;
  logic [7:0] waddr = '0;
  logic [QW-1:0] wdata = '0;
  logic [2:0] rd_idx = '0;
  logic [V-1:0][QW-1:0] rd_data;
  key_mem #(.V(V)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [QW-1:0] k[64];
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      k[i] = QW'($urandom); we = 1; waddr = 8'(i); wdata = k[i]; @(posedge clk); #1;
    end
    we = 1; waddr = 8'd200; wdata = '1; @(posedge clk); #1 we = 0;   // out of range: ignored
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < V; i++) begin
        rd_col = c[0]; rd_idx = 3'(i); #1;
        for (int j = 0; j < V; j++)
          chk(rd_data[j] == (c ? k[V*j+i] : k[V*i+j]), $sformatf("col %0d idx %0d lane %0d", c, i, j));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
