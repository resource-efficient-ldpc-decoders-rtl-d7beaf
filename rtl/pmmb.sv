// pmmb: Permuted Matrix Memory Block.
//
// Look-up tables that describe the code to the two processing units.  For a
// layer (core row) i and a Level-2 block row m it returns
//   *_tab : for each core column j and each row a of the Permuted matrix
//           R_x, x = RSEL[i][j], the column RCOL[x][a] of its non-zero entry and
//           that entry's circulant shift RSHF[x][a];
//   *_addr: for each core column j, the block column (m + LSHIFT[i][j]) mod N, which
//           is the word address of the block row's messages in BRAM (i,j).
// Port a serves the CNPU when it reads B_C, port b the VNPU when it writes B_V;
// the two are three clocks apart in the pipeline and may look at different
// layers.  Purely combinational.  The tables themselves are in ldpc_pkg.
// The helper functions take int indices, of which only the low bits are ever
// non-zero; lint reports the upper bits as unused, which is expected.
module pmmb
  import ldpc_pkg::*;
#(
  parameter int N  = 4,
  localparam int NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [1:0]                     a_layer,
  input  logic [NW-1:0]                  a_m,
  output prow_t [CORE_COLS-1:0][R_DIM-1:0] a_tab,
  output logic [CORE_COLS-1:0][NW-1:0]   a_addr,
  input  logic [1:0]                     b_layer,
  input  logic [NW-1:0]                  b_m,
  output prow_t [CORE_COLS-1:0][R_DIM-1:0] b_tab,
  output logic [CORE_COLS-1:0][NW-1:0]   b_addr
);

  function automatic prow_t row_of(logic [1:0] layer, int j, int a);
    int x;
    x = RSEL[(int'(layer) < CORE_ROWS) ? int'(layer) : 0][j];
    return '{col: RCOL[x][a], shift: RSHF[x][a]};
  endfunction

  function automatic logic [NW-1:0] addr_of(logic [1:0] layer, logic [NW-1:0] m, int j);
    int l;
    l = (int'(layer) < CORE_ROWS) ? int'(layer) : 0;
    return NW'((int'(m) + LSHIFT[l][j]) % N);
  endfunction

  always_comb begin
    for (int j = 0; j < CORE_COLS; j++) begin
      for (int a = 0; a < R_DIM; a++) begin
        a_tab[j][a] = row_of(a_layer, j, a);
        b_tab[j][a] = row_of(b_layer, j, a);
      end
      a_addr[j] = addr_of(a_layer, a_m, j);
      b_addr[j] = addr_of(b_layer, b_m, j);
    end
  end

endmodule
