// tb_mrmc: streams random 8 x 8 states through MRMC, each as rows or as
// columns and with the vectors in a random order, with random gaps and
// stalls (adv = 0). Every output state is compared with MixRows(MixColumns(X))
// from presto_ref_pkg; the output orientation must be the opposite of the
// input one and the vectors must leave in index order. The latency from the
// last input vector to the first output vector is checked: the first output
// is registered on the advancing edge after the one that took the last input,
// so the consumer takes it on the second advancing edge, and the output to be one vector per advancing cycle.
module tb_mrmc;
  import presto_pkg::*;
  import presto_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int V = 8, NST = 60;
  logic adv = 0, in_valid = 0, in_col = 0, out_valid, out_col;
  logic [2:0] in_idx = '0, out_idx;
  logic [V-1:0][QW-1:0] in_data = '0, out_data;
  mrmc #(.V(V)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end endtask
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  vec_t exp_st[$];
  bit   exp_col[$];
  int   acyc = 0, in_cnt = 0, last_in[$];
  // consumer: samples outputs on advancing edges
  int ost = 0, ovec = 0, first_at;
  always @(posedge clk) if (rst_n && adv) begin
    acyc++;
    if (in_valid) begin
      in_cnt++;
      if (in_cnt == V) begin in_cnt = 0; last_in.push_back(acyc); end
    end
    if (out_valid) begin
      vec_t y;
      if (ovec == 0) begin
        chk(acyc - last_in[0] == 2, $sformatf("latency %0d", acyc - last_in[0]));
        first_at = acyc; void'(last_in.pop_front());
      end else chk(acyc - first_at == ovec, "one vector per cycle");
      y = exp_st[0];
      chk(out_col == exp_col[0] && int'(out_idx) == ovec, "orientation/order");
      for (int j = 0; j < V; j++)
        chk(64'(out_data[j]) == (out_col ? y[V*j + ovec] : y[V*ovec + j]), $sformatf("state %0d vec %0d lane %0d", ost, ovec, j));
      ovec++;
      if (ovec == V) begin ovec = 0; ost++; void'(exp_st.pop_front()); void'(exp_col.pop_front()); end
    end
  end

  initial begin
    vec_t x;
    int perm[V];
    x = new[V*V];
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < NST; s++) begin
      bit col;
      col = 1'($urandom);
      foreach (x[i]) x[i] = rand_elem();
      for (int i = 0; i < V; i++) perm[i] = i;
      if (s % 3 != 0) perm.shuffle();
      exp_st.push_back(mix_rows(mix_columns(x, V), V));
      exp_col.push_back(!col);
      for (int k = 0; k < V; k++) begin
        // random stalls and gaps before each vector
        do begin
          adv = ($urandom % 4 != 0); in_valid = 1'b0;
          if ($urandom % 3 == 0) begin @(posedge clk); #1; end
          else break;
        end while (1);
        adv = 1'b1; in_valid = 1'b1; in_col = col; in_idx = 3'(perm[k]);
        for (int j = 0; j < V; j++) in_data[j] = QW'(col ? x[V*j + perm[k]] : x[V*perm[k] + j]);
        @(posedge clk); #1;
      end
      in_valid = 1'b0;
      adv = ($urandom % 4 != 0);
    end
    in_valid = 1'b0;
    for (int i = 0; i < 100; i++) begin adv = ($urandom % 4 != 0); @(posedge clk); #1; end
    chk(ost == NST, $sformatf("%0d states out", ost));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
