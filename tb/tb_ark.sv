// tb_ark: random vectors, keys, constants, valid gaps and stalls (adv = 0).
// A cycle-exact model (one register stage, frozen while adv = 0) predicts
// out = key * rc + x mod q per lane and the passed-through tags after every
// clock edge; the edge cases q-1 and 0 are mixed in.
module tb_ark;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8;
  logic adv = 0, in_valid = 0, in_col = 0, out_valid, out_col;
  logic [2:0] in_idx = '0, out_idx;
  logic [V-1:0][QW-1:0] in_data = '0, key = '0, rc = '0, out_data;
  ark #(.V(V)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [QW-1:0] rnd();
    int k = $urandom % 8;
    return (k == 0) ? QW'(QREF - 1) : (k == 1) ? '0 : QW'(rand_elem());
  endfunction
  logic m_valid = 0, m_col = 0; logic [2:0] m_idx = '0; logic [V-1:0][QW-1:0] m_data = '0;
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      adv = ($urandom % 5 != 0); in_valid = ($urandom % 4 != 0);
      in_col = 1'($urandom); in_idx = 3'($urandom);
      for (int j = 0; j < V; j++) begin in_data[j] = rnd(); key[j] = rnd(); rc[j] = rnd(); end
      @(posedge clk);
      if (adv) begin
        m_valid = in_valid; m_col = in_col; m_idx = in_idx;
        for (int j = 0; j < V; j++) m_data[j] = QW'((64'(in_data[j]) + 64'(key[j]) * 64'(rc[j])) % QREF);
      end
      #1;
      chk(out_valid == m_valid, "valid");
      if (m_valid) chk(out_col == m_col && out_idx == m_idx && out_data == m_data, $sformatf("data at %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
