// presto_pkg: types, constants and arithmetic shared by the HERA and Rubato
// key-stream accelerators.
//
// Every datapath element is an integer modulo the prime Q (25 bits). Modular
// reduction uses Barrett's method with k = QW, valid for any x < 2^(2*QW),
// which covers a product of two residues plus a residue. The mixing matrix
// M_v is circulant; MV_ROW4/6/8 give its first row for v = 4, 6, 8. The
// v = 4 row (2,3,1,1) is printed in the paper; the v = 6 and v = 8 rows and the
// modulus value are taken from the published HERA/Rubato specifications,
// the paper itself only implies a 25-bit modulus (188 constants = 4700 bits).
//
// The command interface (cmd_t plus a 64-bit data word) is this design's own
// choice: the paper only names "command" and "data_in" ports.
package presto_pkg;

  // ---- modulus -----------------------------------------------------------
  localparam int QW = 25;                        // bits per element
  localparam int unsigned Q_DEFAULT = 33292289;  // 0x1FC0001 = 2^25 - 2^18 + 1

  typedef logic [QW-1:0] elem_t;

  // floor(2^(2*QW) / q)
  function automatic logic [QW+1:0] barrett_mu(input int unsigned q);
    logic [63:0] num;
    num = 64'd1 << (2*QW);
    return (QW+2)'(num / 64'(q));
  endfunction

  // x mod q for x < 2^(2*QW)
  function automatic elem_t mod_red(input logic [2*QW-1:0] x, input int unsigned q,
                                    input logic [QW+1:0] mu);
    logic [2*QW+2:0] t;
    logic [QW+2:0]   qt;
    logic [2*QW:0]   r;
    t  = (2*QW+3)'(x >> (QW-1)) * (2*QW+3)'(mu);
    qt = (QW+3)'(t >> (QW+1));
    r  = (2*QW+1)'(x) - (2*QW+1)'(qt) * (2*QW+1)'(q);
    if (r >= (2*QW+1)'(q)) r = r - (2*QW+1)'(q);
    if (r >= (2*QW+1)'(q)) r = r - (2*QW+1)'(q);
    return elem_t'(r);
  endfunction

  function automatic elem_t mod_add(input elem_t a, input elem_t b, input int unsigned q);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (QW+1)'(q)) s = s - (QW+1)'(q);
    return elem_t'(s);
  endfunction

  // a*b + c mod q
  function automatic elem_t mod_mac(input elem_t a, input elem_t b, input elem_t c,
                                    input int unsigned q, input logic [QW+1:0] mu);
    logic [2*QW-1:0] p;
    p = (2*QW)'(a) * (2*QW)'(b) + (2*QW)'(c);
    return mod_red(p, q, mu);
  endfunction

  // ---- mixing matrix -----------------------------------------------------
  // First row of the circulant M_v; row i is the first row rotated right by i.
  function automatic int unsigned mv_first_row(input int v, input int unsigned j);
    int unsigned r4[4] = '{2, 3, 1, 1};
    int unsigned r6[6] = '{4, 2, 4, 3, 1, 1};
    int unsigned r8[8] = '{5, 3, 4, 3, 6, 2, 1, 1};
    case (v)
      4:       return r4[j];
      6:       return r6[j];
      default: return r8[j];
    endcase
  endfunction

  function automatic int unsigned mv_coef(input int v, input int i, input int j);
    return mv_first_row(v, unsigned'((j - i + v) % v));
  endfunction

  // ---- schemes -----------------------------------------------------------
  typedef enum logic {SCHEME_HERA = 1'b0, SCHEME_RUBATO = 1'b1} scheme_e;

  // ---- host commands -----------------------------------------------------
  typedef enum logic [2:0] {
    CMD_NOP     = 3'd0,
    CMD_KEY     = 3'd1,  // key element  addr   <- data_in[QW-1:0]
    CMD_XOF_KEY = 3'd2,  // AES key half addr[0] <- data_in (addr 1 starts expansion)
    CMD_CDF     = 3'd3,  // CDF table entry addr <- data_in (Rubato)
    CMD_START   = 3'd4   // generate one key stream, nonce <- data_in, lane <- addr
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e    op;
    logic [7:0] addr;
  } cmd_t;

  localparam int DATA_W = 64;

endpackage
