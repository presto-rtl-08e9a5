// tb_feistel: random 8 x 8 states through the Feistel layer, each streamed as
// rows or as columns (in index order, random gaps and stalls, and at least
// one idle cycle after the last column, as the preceding MRMC always leaves).
// Outputs are compared element by element with presto_ref_pkg::nonlin. It
// also checks the timing: every vector leaves on the advancing edge after it
// arrived, except that in column mode column 0 is held and leaves right after
// column V-1, so the column order is 1, 2, ..., V-1, 0.
module tb_feistel;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, NST = 60;
  logic adv = 0, in_valid = 0, in_col = 0, out_valid, out_col;
  logic [2:0] in_idx = '0, out_idx;
  logic [V-1:0][QW-1:0] in_data = '0, out_data;
  feistel #(.V(V)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (40000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  vec_t exp_st[$];
  bit   exp_col[$];
  int   acyc = 0, in_at[$], ost = 0, ovec = 0, n_held = 0;
  always @(posedge clk) if (rst_n && adv) begin
    acyc++;
    if (in_valid) in_at.push_back(acyc);
    if (out_valid) begin
      vec_t y;
      int   want;
      y = exp_st[0];
      want = exp_col[0] ? (ovec + 1) % V : ovec;
      chk(out_col == exp_col[0] && int'(out_idx) == want, $sformatf("order: got idx %0d want %0d", out_idx, want));
      for (int j = 0; j < V; j++)
        chk(64'(out_data[j]) == (out_col ? y[V*j + want] : y[V*want + j]),
            $sformatf("state %0d vec %0d lane %0d", ost, want, j));
      if (exp_col[0] && want == 0) begin
        // column 0 arrived first and leaves one cycle after column V-1 left
        chk(acyc == in_at[V-1] + 2, "held column timing");
        n_held++;
      end else chk(acyc == in_at[exp_col[0] ? want : want] + 1, "pass-through timing");
      ovec++;
      if (ovec == V) begin
        ovec = 0; ost++; void'(exp_st.pop_front()); void'(exp_col.pop_front());
        for (int k = 0; k < V; k++) void'(in_at.pop_front());
      end
    end
  end

  initial begin
    vec_t x;
    x = new[V*V];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < NST; s++) begin
      bit col;
      col = 1'($urandom);
      foreach (x[i]) x[i] = rand_elem();
      exp_st.push_back(nonlin(x, 1'b1));
      exp_col.push_back(col);
      for (int k = 0; k < V; k++) begin
        while ($urandom % 3 == 0) begin adv = 1'($urandom % 4 != 0); in_valid = 1'b0; @(posedge clk); #1; end
        adv = 1'b1; in_valid = 1'b1; in_col = col; in_idx = 3'(k);
        for (int j = 0; j < V; j++) in_data[j] = QW'(col ? x[V*j + k] : x[V*k + j]);
        @(posedge clk); #1;
      end
      in_valid = 1'b0; adv = 1'b1;
      @(posedge clk); #1;
      // wait until the state has left before the next (the datapath loop
      // never overlaps two states in this unit)
      while (ost <= s) begin adv = 1'($urandom % 4 != 0); @(posedge clk); #1; end
    end
    chk(ost == NST, $sformatf("%0d states out", ost));
    chk(n_held > 0, "column mode exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
