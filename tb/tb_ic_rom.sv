// tb_ic_rom: reads every row and column of the constant vector ic and checks
// that element e (row-major) holds e + 1, for v = 8 and v = 4.
module tb_ic_rom;
  import presto_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic col8 = 0, col4 = 0;
  logic [2:0] idx8 = '0;
  logic [1:0] idx4 = '0;
  logic [7:0][QW-1:0] d8;
  logic [3:0][QW-1:0] d4;
  ic_rom #(.V(8)) dut8 (.col(col8), .idx(idx8), .data(d8));
  ic_rom #(.V(4)) dut4 (.col(col4), .idx(idx4), .data(d4));
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 8; i++) begin
        col8 = c[0]; idx8 = 3'(i); col4 = c[0]; idx4 = 2'(i % 4); #1;
        for (int j = 0; j < 8; j++) chk(int'(d8[j]) == (c ? 8*j+i : 8*i+j) + 1, "v=8");
        for (int j = 0; j < 4; j++) chk(int'(d4[j]) == (c ? 4*j+i%4 : 4*(i%4)+j) + 1, "v=4");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
