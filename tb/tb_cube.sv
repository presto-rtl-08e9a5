// tb_cube: random vectors (edge values 0, 1, q-1 mixed in), valid gaps and
// stalls. A cycle-exact two-stage model, frozen while adv = 0, predicts
// out = x^3 mod q and the passed-through tags after every edge.
module tb_cube;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 4;
  logic adv = 0, in_valid = 0, in_col = 0, out_valid, out_col;
  logic [1:0] in_idx = '0, out_idx;
  logic [V-1:0][QW-1:0] in_data = '0, out_data;
  cube #(.V(V)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic m_valid[2] = '{0, 0}, m_col[2] = '{0, 0}; logic [1:0] m_idx[2] = '{0, 0};
  logic [V-1:0][QW-1:0] m_data[2] = '{'0, '0};
  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      adv = ($urandom % 5 != 0); in_valid = ($urandom % 4 != 0);
      in_col = 1'($urandom); in_idx = 2'($urandom);
      for (int j = 0; j < V; j++)
        case ($urandom % 8) 0: in_data[j] = '0; 1: in_data[j] = 1; 2: in_data[j] = QW'(QREF - 1);
          default: in_data[j] = QW'($urandom % QREF); endcase
      @(posedge clk);
      if (adv) begin
        m_valid[1] = m_valid[0]; m_col[1] = m_col[0]; m_idx[1] = m_idx[0]; m_data[1] = m_data[0];
        m_valid[0] = in_valid; m_col[0] = in_col; m_idx[0] = in_idx;
        for (int j = 0; j < V; j++)
          m_data[0][j] = QW'((((64'(in_data[j]) * 64'(in_data[j])) % QREF) * 64'(in_data[j])) % QREF);
      end
      #1;
      chk(out_valid == m_valid[1], "valid");
      if (m_valid[1]) chk(out_col == m_col[1] && out_idx == m_idx[1] && out_data == m_data[1],
                          $sformatf("data at %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
