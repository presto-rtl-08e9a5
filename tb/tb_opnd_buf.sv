// tb_opnd_buf: loads rows, reads every row and column back in both
// orientations, checks that rows beyond ROWS are not stored and that clear
// empties the buffer.
module tb_opnd_buf;
  import presto_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, ROWS = 7;
  logic clear = 0, we = 0, rd_col = 0;
  logic [2:0] wrow = '0, rd_idx = '0;
  logic [V-1:0][QW-1:0] wdata = '0, rd_data;
  opnd_buf #(.V(V), .ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [QW-1:0] m[V][V];
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int r = 0; r < V; r++) begin
      for (int j = 0; j < V; j++) begin m[r][j] = (r < ROWS) ? QW'($urandom) : '0; wdata[j] = (r < ROWS) ? m[r][j] : '1; end
      we = 1; wrow = 3'(r); @(posedge clk); #1;
    end
    we = 0;
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < V; i++) begin
        rd_col = c[0]; rd_idx = 3'(i); #1;
        for (int j = 0; j < V; j++)
          chk(rd_data[j] == (c ? m[j][i] : m[i][j]), $sformatf("col %0d idx %0d lane %0d", c, i, j));
      end
    clear = 1; @(posedge clk); #1 clear = 0;
    rd_col = 0; rd_idx = 3'd2; #1 chk(rd_data == '0, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
