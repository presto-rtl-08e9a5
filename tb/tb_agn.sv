// tb_agn: random vectors, noise, tags, valid gaps and stalls. A cycle-exact
// model (one register stage, frozen while adv = 0) predicts out = x + noise
// mod q and the truncation mask (element index below L, element = V*idx + lane
// for rows, V*lane + idx for columns) after every edge.
module tb_agn;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, L = 60;
  logic adv = 0, in_valid = 0, in_col = 0, out_valid, out_col;
  logic [2:0] in_idx = '0, out_idx;
  logic [V-1:0] out_mask;
  logic [V-1:0][QW-1:0] in_data = '0, noise = '0, out_data;
  agn #(.V(V), .L(L)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic m_valid = 0, m_col = 0; logic [2:0] m_idx = '0; logic [V-1:0] m_mask = '0;
  logic [V-1:0][QW-1:0] m_data = '0;
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      adv = ($urandom % 5 != 0); in_valid = ($urandom % 4 != 0);
      in_col = 1'($urandom); in_idx = 3'($urandom);
      for (int j = 0; j < V; j++) begin
        longint unsigned u, w;
        u = {32'($urandom), 32'($urandom)}; w = 64'($urandom % 8);
        if (u % 6 == 0) in_data[j] = QW'(QREF - 1); else in_data[j] = QW'(u % QREF);
        if (u[40]) noise[j] = QW'(w); else noise[j] = QW'(QREF - 1 - w);
      end
      @(posedge clk);
      if (adv) begin
        m_valid = in_valid; m_col = in_col; m_idx = in_idx;
        for (int j = 0; j < V; j++) begin
          m_data[j] = QW'((64'(in_data[j]) + 64'(noise[j])) % QREF);
          m_mask[j] = ((in_col ? V*j + int'(in_idx) : V*int'(in_idx) + j) < L);
        end
      end
      #1;
      chk(out_valid == m_valid, "valid");
      if (m_valid) chk(out_col == m_col && out_idx == m_idx && out_data == m_data && out_mask == m_mask,
                       $sformatf("data at %0d: mask %b exp %b %h\n%h\n%h\n%h", i, out_mask, m_mask, out_data, m_data, in_data, noise));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
