// ldpc_pkg: constants, types and code tables shared by the 3L-HQC-LP LDPC decoder.
//
// The parity-check matrix has three levels.  Level 1 is the 3x6 core matrix of a
// rate-1/2 (3,6)-regular code.  Level 2 expands every core element (i,j) into an
// NxN block-diagonal array, circularly shifted by LSHIFT[i][j], whose non-zero
// blocks are the 6x6 Permuted matrix R_x, x = RSEL[i][j].  Level 3 expands
// every non-zero entry of R_x into a PxP identity circularly shifted by the entry's
// subscript.  Indices used throughout the RTL:
//   variable (column) c = ((j*N + n)*R_DIM + r)*P + p
//   check    (row)    h = ((i*N + m)*R_DIM + a)*P + q
//   edge (h,c) exists when n = (m + LSHIFT[i][j]) mod N, r = RCOL[x][a] and
//   p = (q + RSHF[x][a]) mod P, with x = RSEL[i][j].
// The R_0..R_2 tables are the example Permuted matrices printed with the
// construction.  Which of them each core element uses (RSEL) and the Level-2
// shifts (LSHIFT) are this design's own choice: each layer uses the three
// matrices in a different order, and the shifts differ between layers.  If
// either were constant along a core row or column the code would split into
// independent short codes.  Messages are 3-bit sign-magnitude values,
// channel LLRs 4-bit two's complement (positive = bit 0); both widths are this
// design's choice.  A lint of this package on its own reports the code tables
// as unused parameters; the PMMB is the module that reads them.
package ldpc_pkg;

  localparam int CORE_ROWS = 3;    // core matrix rows (layers), column weight 3
  localparam int CORE_COLS = 6;    // core matrix columns, row weight 6
  localparam int R_DIM     = 6;    // size of a Permuted matrix
  localparam int MSG_W     = 3;    // extrinsic message: sign + 2-bit magnitude
  localparam int MAG_W     = 2;
  localparam int MSG_MAX   = 3;
  localparam int LLR_W     = 4;    // intrinsic (channel) message
  localparam int SUM_W     = 6;    // variable-node accumulator, holds -20..19

  typedef logic [MSG_W-1:0] msg_t;                 // {sign, magnitude}
  typedef struct packed { logic hd; msg_t msg; } vmsg_t;  // B_C entry: hard decision + message
  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic signed [SUM_W-1:0] sum_t;
  typedef struct packed { logic [2:0] col; logic [2:0] shift; } prow_t;  // one row of a Permuted matrix

  // Permuted matrices R_0, R_1, R_2: column of the non-zero entry of each row ...
  localparam logic [2:0] RCOL [CORE_ROWS][R_DIM] = '{
    '{3'd0, 3'd2, 3'd4, 3'd5, 3'd3, 3'd1},
    '{3'd1, 3'd3, 3'd0, 3'd5, 3'd4, 3'd2},
    '{3'd2, 3'd4, 3'd1, 3'd5, 3'd3, 3'd0}};
  // ... and the circular shift of its PxP identity.
  localparam logic [2:0] RSHF [CORE_ROWS][R_DIM] = '{
    '{3'd1, 3'd3, 3'd5, 3'd6, 3'd4, 3'd2},
    '{3'd2, 3'd4, 3'd1, 3'd6, 3'd5, 3'd3},
    '{3'd1, 3'd5, 3'd4, 3'd3, 3'd6, 3'd2}};
  // Permuted matrix used by core element (i,j): x = (i + j) mod 3.
  localparam int RSEL [CORE_ROWS][CORE_COLS] = '{
    '{0, 1, 2, 0, 1, 2},
    '{1, 2, 0, 1, 2, 0},
    '{2, 0, 1, 2, 0, 1}};
  // Level-2 circular shift of core element (i,j), taken mod N.
  localparam int LSHIFT [CORE_ROWS][CORE_COLS] = '{
    '{0, 1, 2, 3, 0, 1},
    '{0, 2, 1, 3, 1, 0},
    '{0, 3, 1, 2, 2, 3}};

  function automatic sum_t msg_val(msg_t m);
    sum_t v;
    v = sum_t'(m[MAG_W-1:0]);
    return m[MSG_W-1] ? -v : v;
  endfunction

  // Saturate to +-MSG_MAX and encode as sign-magnitude (zero is always +0).
  function automatic msg_t sat_msg(sum_t x);
    msg_t m;
    if (x > sum_t'(MSG_MAX))       m = {1'b0, MAG_W'(MSG_MAX)};
    else if (x < -sum_t'(MSG_MAX)) m = {1'b1, MAG_W'(MSG_MAX)};
    else if (x < 0)                m = {1'b1, MAG_W'(-x)};
    else                           m = {1'b0, MAG_W'(x)};
    return m;
  endfunction

endpackage
