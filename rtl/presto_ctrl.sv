// presto_ctrl: the global controller of one accelerator lane.
//
// Host side: decodes the command port. CMD_KEY writes one key element into
// the key memory, CMD_XOF_KEY writes half of the 128-bit AES key (writing
// half 1 starts the AES key expansion), CMD_CDF writes one entry of the
// Gaussian CDF table, and CMD_START with addr == LANE_ID starts one key
// stream with data_in as the nonce. START is ignored while busy or before the
// AES keys are expanded.
//
// Round sequencing: the cipher is ARK(ic), then R-1 rounds MRMC -> NL -> ARK,
// then the final round MRMC -> NL -> MRMC -> ARK (-> AGN for Rubato), where NL
// is Cube (HERA) or Feistel (Rubato). Each unit streams one state as V
// vectors; the controller counts the vectors leaving each unit to know which
// pass it is in, and routes them: ARK's input comes from the ic ROM (first
// pass), from NL (rounds 1..R-1) or from MRMC (last pass), and MRMC's input
// from ARK or, in the final round, from NL. This is the three-way ARK
// multiplexer and the two-way MRMC multiplexer of the block diagrams.
//
// Round constants: the rejection sampler fills the rc FIFO ahead of use (RNG
// decoupling). The controller moves one pass worth of constants (V rows, and
// ceil(L/V) rows for the last pass) from the FIFO into one of two operand
// buffers; pass p uses buffer p mod 2, so the next pass's constants are loaded
// while the current pass runs. The noise is moved likewise into one buffer.
// If a vector reaches ARK (or AGN) before its operands are loaded, the whole
// datapath stalls (adv = 0) until they are: with decoupling this happens only
// while the RNG starts up. The double buffering and the stall rule are this
// design's choices; the paper states only that ARK consumes constants on
// demand from a small FIFO.
module presto_ctrl
  import presto_pkg::*;
#(
  parameter int V       = 8,
  parameter int R       = 2,
  parameter int L       = 60,
  parameter bit HAS_AGN = 1'b1,
  parameter int LANE_ID = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host
  input  cmd_t                 cmd,
  input  logic [DATA_W-1:0]    data_in,
  output logic                 busy,
  output logic                 done,
  // key memory / CDF / AES key
  output logic                 key_we,
  output logic [7:0]           key_addr,
  output logic [QW-1:0]        key_wdata,
  output logic                 cdf_we,
  output logic [7:0]           cdf_addr,
  output logic [63:0]          cdf_wdata,
  output logic                 aes_key_load,
  output logic [127:0]         aes_key,
  input  logic                 aes_key_ready,
  // samplers
  output logic                 smp_start,
  output logic [63:0]          nonce,
  // rc FIFO -> operand buffers
  input  logic                 rc_fifo_valid,
  output logic                 rc_fifo_pop,
  output logic                 rcb_clear,
  output logic [1:0]           rcb_we,
  output logic [$clog2(V)-1:0] rcb_wrow,
  output logic                 rcb_sel,
  // noise FIFO -> noise buffer
  input  logic                 nz_fifo_valid,
  output logic                 nz_fifo_pop,
  output logic                 nzb_we,
  output logic [$clog2(V)-1:0] nzb_wrow,
  // datapath
  input  logic                 ark_out_valid,
  input  logic                 mrmc_out_valid,
  input  logic                 nl_out_valid,
  input  logic                 agn_out_valid,
  output logic                 adv,
  output logic                 ic_valid,
  output logic [$clog2(V)-1:0] ic_idx,
  output logic [1:0]           ark_src,       // 0 ic, 1 NL, 2 MRMC
  output logic                 ark_in_valid,
  output logic                 mrmc_src,      // 0 ARK, 1 NL
  output logic                 mrmc_in_valid,
  output logic                 nl_in_valid,
  output logic                 fin_valid,     // final ARK output (to AGN / data_out)
  // event counters for observation
  output logic                 stall
);
  localparam int IW      = $clog2(V);
  localparam int PW      = $clog2(R + 2);
  localparam int LROWS   = (L + V - 1) / V;

  // ---------------- host commands ----------------
  logic [63:0] xk_lo;
  logic        start_ok;

  assign key_we    = (cmd.op == CMD_KEY);
  assign key_addr  = cmd.addr;
  assign key_wdata = data_in[QW-1:0];
  assign cdf_we    = (cmd.op == CMD_CDF);
  assign cdf_addr  = cmd.addr;
  assign cdf_wdata = data_in;
  assign start_ok  = (cmd.op == CMD_START) && (int'(cmd.addr) == LANE_ID) &&
                     !busy && aes_key_ready;
  assign smp_start = start_ok;
  assign nonce     = data_in;     // taken by the samplers with smp_start

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xk_lo        <= '0;
      aes_key      <= '0;
      aes_key_load <= 1'b0;
    end else begin
      aes_key_load <= 1'b0;
      if (cmd.op == CMD_XOF_KEY) begin
        if (!cmd.addr[0]) xk_lo <= data_in;
        else begin
          aes_key      <= {data_in, xk_lo};
          aes_key_load <= 1'b1;
        end
      end
    end
  end

  // ---------------- pass tracking and routing ----------------
  logic [IW-1:0] ark_cnt, mrmc_cnt, nl_cnt, arkin_cnt, out_cnt;
  logic [PW-1:0] ark_pass, mrmc_pass, nl_pass, arkin_pass;
  logic          nl_to_ark, nl_to_mrmc, mrmc_to_ark, mrmc_to_nl, ark_to_mrmc;
  logic [1:0]    rc_rdy;
  logic          nz_rdy;
  logic          out_fire;

  assign nl_to_ark   = nl_out_valid   && (nl_pass   != PW'(R-1));
  assign nl_to_mrmc  = nl_out_valid   && (nl_pass   == PW'(R-1));
  assign mrmc_to_ark = mrmc_out_valid && (mrmc_pass == PW'(R));
  assign mrmc_to_nl  = mrmc_out_valid && (mrmc_pass != PW'(R));
  assign ark_to_mrmc = ark_out_valid  && (ark_pass  != PW'(R));
  assign fin_valid   = ark_out_valid  && (ark_pass  == PW'(R));

  assign ark_src       = ic_valid ? 2'd0 : (mrmc_to_ark ? 2'd2 : 2'd1);
  assign ark_in_valid  = ic_valid || nl_to_ark || mrmc_to_ark;
  assign mrmc_src      = nl_to_mrmc;
  assign mrmc_in_valid = ark_to_mrmc || nl_to_mrmc;
  assign nl_in_valid   = mrmc_to_nl;
  assign rcb_sel       = arkin_pass[0];

  assign adv = !(ark_in_valid && !rc_rdy[arkin_pass[0]]) &&
               !(HAS_AGN && fin_valid && !nz_rdy);
  assign stall = busy && !adv;

  assign out_fire = adv && (HAS_AGN ? agn_out_valid : fin_valid);

  // vector counter within a pass, pass counter
  function automatic logic [IW+PW-1:0] step(input logic [IW-1:0] c, input logic [PW-1:0] p);
    if (c == IW'(V-1)) return {IW'(0), p + PW'(1)};
    else               return {c + IW'(1), p};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      ic_valid   <= 1'b0;
      ic_idx     <= '0;
      ark_cnt    <= '0; ark_pass   <= '0;
      mrmc_cnt   <= '0; mrmc_pass  <= '0;
      nl_cnt     <= '0; nl_pass    <= '0;
      arkin_cnt  <= '0; arkin_pass <= '0;
      out_cnt    <= '0;
    end else if (start_ok) begin
      busy       <= 1'b1;
      done       <= 1'b0;
      ic_valid   <= 1'b1;
      ic_idx     <= '0;
      ark_cnt    <= '0; ark_pass   <= '0;
      mrmc_cnt   <= '0; mrmc_pass  <= '0;
      nl_cnt     <= '0; nl_pass    <= '0;
      arkin_cnt  <= '0; arkin_pass <= '0;
      out_cnt    <= '0;
    end else begin
      done <= 1'b0;
      if (busy && adv) begin
        if (ic_valid) begin
          ic_idx <= ic_idx + 1'b1;
          if (ic_idx == IW'(V-1)) ic_valid <= 1'b0;
        end
        if (ark_in_valid) begin
          {arkin_cnt, arkin_pass} <= step(arkin_cnt, arkin_pass);
        end
        if (ark_out_valid) begin
          {ark_cnt, ark_pass} <= step(ark_cnt, ark_pass);
        end
        if (mrmc_out_valid) begin
          {mrmc_cnt, mrmc_pass} <= step(mrmc_cnt, mrmc_pass);
        end
        if (nl_out_valid) begin
          {nl_cnt, nl_pass} <= step(nl_cnt, nl_pass);
        end
        if (out_fire) begin
          out_cnt <= out_cnt + 1'b1;
          if (out_cnt == IW'(V-1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------- operand buffer loading ----------------
  logic [PW-1:0] ld_pass;
  logic [IW-1:0] ld_row;
  logic          ld_bank, ld_go, ld_last;
  logic          arkin_pass_end;
  logic [IW-1:0] nz_row;
  logic          nz_go;

  assign ld_bank        = ld_pass[0];
  assign ld_last        = (ld_pass == PW'(R)) ? (ld_row == IW'(LROWS-1)) : (ld_row == IW'(V-1));
  assign ld_go          = busy && (ld_pass <= PW'(R)) && !rc_rdy[ld_bank] && rc_fifo_valid;
  assign rc_fifo_pop    = ld_go;
  assign rcb_we         = ld_go ? (ld_bank ? 2'b10 : 2'b01) : 2'b00;
  assign rcb_wrow       = ld_row;
  assign rcb_clear      = start_ok;
  assign arkin_pass_end = busy && adv && ark_in_valid && (arkin_cnt == IW'(V-1));

  assign nz_go       = HAS_AGN && busy && !nz_rdy && nz_fifo_valid;
  assign nz_fifo_pop = nz_go;
  assign nzb_we      = nz_go;
  assign nzb_wrow    = nz_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_pass <= '0;
      ld_row  <= '0;
      rc_rdy  <= '0;
      nz_row  <= '0;
      nz_rdy  <= 1'b0;
    end else if (start_ok) begin
      ld_pass <= '0;
      ld_row  <= '0;
      rc_rdy  <= '0;
      nz_row  <= '0;
      nz_rdy  <= 1'b0;
    end else begin
      if (ld_go) begin
        if (ld_last) begin
          ld_row          <= '0;
          ld_pass         <= ld_pass + 1'b1;
          rc_rdy[ld_bank] <= 1'b1;
        end else begin
          ld_row <= ld_row + 1'b1;
        end
      end
      if (arkin_pass_end) rc_rdy[arkin_pass[0]] <= 1'b0;
      if (nz_go) begin
        if (nz_row == IW'(LROWS-1)) nz_rdy <= 1'b1;
        else                        nz_row <= nz_row + 1'b1;
      end
    end
  end

  // a buffer is never refilled while the pass that uses it still reads it
  a_no_refill: assert property (@(posedge clk) disable iff (!rst_n)
    ld_go |-> !rc_rdy[ld_bank]) else $error("presto_ctrl: refilling a buffer in use");

endmodule
