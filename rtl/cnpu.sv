// cnpu: Check Node Processing Unit with the variable-to-check store B_C.
//
// B_C is split like B_V into CORE_ROWS x CORE_COLS block RAMs of N words; word n
// of RAM (i,j) holds, in column order, the messages (with hard decisions) that
// the PAR variables of block column n of core column j send to layer i.
//   VNP write: wr_en with (wr_j, wr_n) writes wr_v2c[i] into word wr_n of RAM
//              (i, wr_j) for all three layers in one clock.
//   CNP read : rd_en with layer rd_layer reads word rd_addr[j] of every RAM
//              (rd_layer, j).  One clock later the layer's words are selected and
//              permuted into check order with the PMMB table rd_tab: check (a,q)
//              takes the entry of core column j at column rd_tab[j][a].col,
//              position (q + rd_tab[j][a].shift) mod P.  The result is registered, so rd_v2c
//              is valid two clocks after rd_en.
module cnpu
  import ldpc_pkg::*;
#(
  parameter int P  = 16,
  parameter int N  = 4,
  localparam int PAR = R_DIM * P,
  localparam int NW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                             clk,
  input  logic                             wr_en,
  input  logic [2:0]                       wr_j,
  input  logic [NW-1:0]                    wr_n,
  input  vmsg_t [CORE_ROWS-1:0][PAR-1:0]   wr_v2c,
  input  logic                             rd_en,
  input  logic [1:0]                       rd_layer,
  input  logic [CORE_COLS-1:0][NW-1:0]     rd_addr,
  input  prow_t [CORE_COLS-1:0][R_DIM-1:0]                rd_tab,
  output vmsg_t [CORE_COLS-1:0][PAR-1:0]   rd_v2c
);

  logic [PAR*(MSG_W+1)-1:0]        ram_q [CORE_ROWS][CORE_COLS];
  logic [1:0]                      layer_q;
  prow_t [CORE_COLS-1:0][R_DIM-1:0]               tab_q;
  vmsg_t [CORE_COLS-1:0][PAR-1:0]  sel;
  vmsg_t [CORE_COLS-1:0][PAR-1:0]  chk_ord;

  for (genvar i = 0; i < CORE_ROWS; i++) begin : g_row
    for (genvar j = 0; j < CORE_COLS; j++) begin : g_col
      msg_ram #(.W(PAR*(MSG_W+1)), .DEPTH(N)) u_bc (
        .clk,
        .we   (wr_en && (int'(wr_j) == j)),
        .waddr(wr_n),
        .wdata(wr_v2c[i]),
        .re   (rd_en),
        .raddr(rd_addr[j]),
        .rdata(ram_q[i][j]));
    end
  end

  always_ff @(posedge clk) begin
    layer_q <= rd_layer;
    tab_q   <= rd_tab;
  end

  // Column order (RCOL, (q + RSHF) mod P) -> check order (a, q).
  always_comb begin
    for (int j = 0; j < CORE_COLS; j++) begin
      sel[j] = ram_q[(int'(layer_q) < CORE_ROWS) ? int'(layer_q) : 0][j];
      for (int a = 0; a < R_DIM; a++)
        for (int q = 0; q < P; q++)
          chk_ord[j][a * P + q] = sel[j][int'(tab_q[j][a].col) * P + (q + int'(tab_q[j][a].shift)) % P];
    end
  end

  always_ff @(posedge clk) rd_v2c <= chk_ord;

endmodule
