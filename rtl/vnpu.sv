// vnpu: Variable Node Processing Unit with the check-to-variable store B_V.
//
// B_V is split into CORE_ROWS x CORE_COLS block RAMs, one per core-matrix element
// (i,j), each N words of PAR messages; word n of RAM (i,j) holds, in column
// order, the messages that layer i sends to the PAR variables of block column n
// of core column j.  With this split the three reads of a VNP clock and the six
// writes of a CNP clock each go to a different RAM.
//   VNP read : rd_en with (rd_j, rd_n) reads word rd_n of the three RAMs of core
//              column rd_j; the words reach rd_c2v two clocks later (RAM clock,
//              then a register after the column select).
//   CNP write: wr_en with the check-ordered replies wr_c2v[j] of a block row of
//              layer wr_layer.  Using the PMMB table wr_tab each Permuted-matrix
//              row a is moved back to block column wr_tab[j][a].col and rotated by
//              wr_tab[j][a].shift, then word wr_addr[j] of RAM (wr_layer, j) is
//              written, in the same clock.
module vnpu
  import ldpc_pkg::*;
#(
  parameter int P  = 16,
  parameter int N  = 4,
  localparam int PAR = R_DIM * P,
  localparam int NW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                            clk,
  input  logic                            rd_en,
  input  logic [2:0]                      rd_j,
  input  logic [NW-1:0]                   rd_n,
  output msg_t [CORE_ROWS-1:0][PAR-1:0]   rd_c2v,
  input  logic                            wr_en,
  input  logic [1:0]                      wr_layer,
  input  prow_t [CORE_COLS-1:0][R_DIM-1:0]               wr_tab,
  input  logic [CORE_COLS-1:0][NW-1:0]    wr_addr,
  input  msg_t [CORE_COLS-1:0][PAR-1:0]   wr_c2v
);

  logic [PAR*MSG_W-1:0]           ram_q   [CORE_ROWS][CORE_COLS];
  msg_t [CORE_COLS-1:0][PAR-1:0]  col_ord;
  logic [2:0]                     rd_j_q;

  // Check order (a, q) -> column order (RCOL, (q + RSHF) mod P).
  always_comb begin
    col_ord = '0;
    for (int j = 0; j < CORE_COLS; j++)
      for (int a = 0; a < R_DIM; a++)
        for (int q = 0; q < P; q++)
          col_ord[j][int'(wr_tab[j][a].col) * P + (q + int'(wr_tab[j][a].shift)) % P] = wr_c2v[j][a * P + q];
  end

  for (genvar i = 0; i < CORE_ROWS; i++) begin : g_row
    for (genvar j = 0; j < CORE_COLS; j++) begin : g_col
      msg_ram #(.W(PAR*MSG_W), .DEPTH(N)) u_bv (
        .clk,
        .we   (wr_en && (int'(wr_layer) == i)),
        .waddr(wr_addr[j]),
        .wdata(col_ord[j]),
        .re   (rd_en),
        .raddr(rd_n),
        .rdata(ram_q[i][j]));
    end
  end

  always_ff @(posedge clk) begin
    rd_j_q <= rd_j;
    for (int i = 0; i < CORE_ROWS; i++)
      rd_c2v[i] <= ram_q[i][(int'(rd_j_q) < CORE_COLS) ? int'(rd_j_q) : 0];
  end

endmodule
