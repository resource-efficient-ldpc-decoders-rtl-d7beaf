// decode_processor: the Decode Processor (DP).
//
// Wires the VNPU (with B_V), CNPU (with B_C), the variable and check node chains,
// the IMB and the PMMB into two four-stage pipelines that the Decode Controller
// drives one step per clock:
//   VNP step (vnp_issue, vn_j, vn_n), block column n of core column j:
//     t   read B_V (three layers) and the IMB
//     t+1 column select / IMB output register
//     t+2 variable nodes, output registered
//     t+3 write the messages (with hard decisions) into B_C and the hard
//         decisions into the decoded-frame buffer
//   CNP step (cnp_issue, cn_i, cn_m), block row m of layer i:
//     t   PMMB port a gives the B_C addresses; read B_C
//     t+1 layer select and permutation into check order, registered
//     t+2 check nodes, output registered
//     t+3 PMMB port b gives the table of the same layer; un-permute and write
//         B_V; pc_valid/pc_fail report the parity of the block row
// A phase of J (or K) steps therefore needs J+3 (K+3) clocks before the other
// phase may read what it wrote, six clocks of pipeline latency per iteration.
// The decoded-frame buffer (J words of PAR hard decisions) is this design's own
// addition, read by the controller through fr_re/fr_addr with one clock latency.
// The first-iteration flag travels only as far as the variable nodes (stage
// t+2), so its copy in the t+3 register v3 is unused; lint reports that bit.
module decode_processor
  import ldpc_pkg::*;
#(
  parameter int P  = 16,
  parameter int N  = 4,
  localparam int PAR = R_DIM * P,
  localparam int J   = CORE_COLS * N,
  localparam int NW  = (N > 1) ? $clog2(N) : 1,
  localparam int JW  = (J > 1) ? $clog2(J) : 1
) (
  input  logic             clk,
  input  logic             rst,
  // variable node processing
  input  logic             vnp_issue,
  input  logic [2:0]       vn_j,
  input  logic [NW-1:0]    vn_n,
  input  logic             first_iter,
  // check node processing
  input  logic             cnp_issue,
  input  logic [1:0]       cn_i,
  input  logic [NW-1:0]    cn_m,
  output logic             pc_valid,
  output logic             pc_fail,
  // intrinsic message load
  input  logic             ld_en,
  input  logic [JW-1:0]    ld_addr,
  input  llr_t [PAR-1:0]   ld_data,
  // decoded frame read
  input  logic             fr_re,
  input  logic [JW-1:0]    fr_addr,
  output logic [PAR-1:0]   fr_data
);

  typedef struct packed { logic valid; logic [2:0] j; logic [NW-1:0] n; logic first; } vstep_t;
  typedef struct packed { logic valid; logic [1:0] i; logic [NW-1:0] m; } cstep_t;

  vstep_t v1, v2, v3;
  cstep_t c1, c2, c3;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= '0; v2 <= '0; v3 <= '0;
      c1 <= '0; c2 <= '0; c3 <= '0;
    end else begin
      v1 <= '{valid: vnp_issue, j: vn_j, n: vn_n, first: first_iter};
      v2 <= v1;
      v3 <= v2;
      c1 <= '{valid: cnp_issue, i: cn_i, m: cn_m};
      c2 <= c1;
      c3 <= c2;
    end
  end

  // ---- PMMB ---------------------------------------------------------------
  prow_t [CORE_COLS-1:0][R_DIM-1:0]             a_tab, b_tab;
  logic [CORE_COLS-1:0][NW-1:0]  a_addr, b_addr;

  pmmb #(.N(N)) u_pmmb (
    .a_layer(cn_i), .a_m(cn_m), .a_tab, .a_addr,
    .b_layer(c3.i), .b_m(c3.m), .b_tab, .b_addr);

  // ---- VNP path ------------------------------------------------------------
  msg_t  [CORE_ROWS-1:0][PAR-1:0]  vn_c2v;
  llr_t  [PAR-1:0]                 vn_llr;
  vmsg_t [CORE_ROWS-1:0][PAR-1:0]  vn_v2c;
  logic                            vn_out_valid;
  logic  [JW-1:0]                  vn_word, wb_word;

  assign vn_word = JW'(int'(vn_j) * N + int'(vn_n));
  assign wb_word = JW'(int'(v3.j) * N + int'(v3.n));

  imb #(.P(P), .N(N)) u_imb (
    .clk, .ld_en, .ld_addr, .ld_data,
    .rd_en(vnp_issue), .rd_addr(vn_word), .rd_data(vn_llr));

  // ---- CNP path ------------------------------------------------------------
  vmsg_t [CORE_COLS-1:0][PAR-1:0]  cn_v2c;
  msg_t  [CORE_COLS-1:0][PAR-1:0]  cn_c2v;
  logic                            cn_out_valid;
  logic                            cn_fail;

  vnpu #(.P(P), .N(N)) u_vnpu (
    .clk,
    .rd_en(vnp_issue), .rd_j(vn_j), .rd_n(vn_n), .rd_c2v(vn_c2v),
    .wr_en(cn_out_valid), .wr_layer(c3.i), .wr_tab(b_tab), .wr_addr(b_addr), .wr_c2v(cn_c2v));

  vn_array #(.PAR(PAR)) u_vn (
    .clk, .in_valid(v2.valid), .first_iter(v2.first), .llr(vn_llr), .c2v(vn_c2v),
    .out_valid(vn_out_valid), .v2c(vn_v2c));

  cnpu #(.P(P), .N(N)) u_cnpu (
    .clk,
    .wr_en(vn_out_valid), .wr_j(v3.j), .wr_n(v3.n), .wr_v2c(vn_v2c),
    .rd_en(cnp_issue), .rd_layer(cn_i), .rd_addr(a_addr), .rd_tab(a_tab), .rd_v2c(cn_v2c));

  cn_array #(.PAR(PAR)) u_cn (
    .clk, .in_valid(c2.valid), .v2c(cn_v2c),
    .out_valid(cn_out_valid), .c2v(cn_c2v), .pc_fail(cn_fail));

  assign pc_valid = cn_out_valid;
  assign pc_fail  = cn_fail;

  // ---- decoded frame buffer --------------------------------------------------
  logic [PAR-1:0] hd_word;
  always_comb
    for (int k = 0; k < PAR; k++) hd_word[k] = vn_v2c[0][k].hd;

  msg_ram #(.W(PAR), .DEPTH(J)) u_frame (
    .clk, .we(vn_out_valid), .waddr(wb_word), .wdata(hd_word),
    .re(fr_re), .raddr(fr_addr), .rdata(fr_data));

  // The node pipelines must follow the issue pipelines exactly.
  always_ff @(posedge clk) begin
    if (!rst) begin
      assert (vn_out_valid == v3.valid) else $error("VNP pipeline out of step");
      assert (cn_out_valid == c3.valid) else $error("CNP pipeline out of step");
      assert (!(vnp_issue && cnp_issue)) else $error("VNP and CNP issued together");
    end
  end

endmodule
