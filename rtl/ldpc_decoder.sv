// ldpc_decoder: partially-parallel 3L-HQC-LP LDPC decoder, top level.
//
// Decodes frames of a rate-1/2 (3,6)-regular code of length 6*N*6*P (2304 bits
// with the defaults N=4, P=16) with PAR = 6*P = 96 variable and check nodes
// working in parallel.  Each iteration is a variable-node phase of J = 6N clocks
// followed by a check-node phase of K = 3N clocks, plus six clocks of pipeline
// latency: 42 clocks per iteration by default.  Decoding stops as soon as every
// parity check holds, or after MAX_ITER iterations.
// Interface (all synchronous to clk, rst active high):
//   load/llr_in   : while idle, one word of 96 channel LLRs (4-bit two's
//                   complement, positive = bit 0) per clock with load=1; word w
//                   holds code bits 96w .. 96w+95.  J words make a frame.
//   start         : starts decoding the loaded frame.
//   busy          : decoding or streaming out.
//   dec_ready     : Decoded Data Ready, high from the end of decoding until the
//                   next start; iter_count and converged are then valid.
//   frame_valid/frame_addr/frame_data : the decoded frame, J words of 96 bits,
//                   streamed right after dec_ready rises.
//   vnp_active/cnp_active : the phase strobes of the two processing phases.
// The block structure (controller plus processor holding VNPU, CNPU, VN, CN,
// IMB, PMMB) follows the paper; port widths and protocols are this design's.
module ldpc_decoder
  import ldpc_pkg::*;
#(
  parameter int P        = 16,
  parameter int N        = 4,
  parameter int MAX_ITER = 10,
  localparam int PAR = R_DIM * P,
  localparam int J   = CORE_COLS * N,
  localparam int JW  = (J > 1) ? $clog2(J) : 1,
  localparam int IW  = $clog2(MAX_ITER + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load,
  input  logic             start,
  input  llr_t [PAR-1:0]   llr_in,
  output logic             busy,
  output logic             dec_ready,
  output logic             converged,
  output logic [IW-1:0]    iter_count,
  output logic             frame_valid,
  output logic [JW-1:0]    frame_addr,
  output logic [PAR-1:0]   frame_data,
  output logic             vnp_active,
  output logic             cnp_active
);

  localparam int NW = (N > 1) ? $clog2(N) : 1;

  logic             ld_en;
  logic [JW-1:0]    ld_addr;
  logic             vnp_issue, cnp_issue, first_iter;
  logic [2:0]       vn_j;
  logic [NW-1:0]    vn_n, cn_m;
  logic [1:0]       cn_i;
  logic             pc_valid, pc_fail;
  logic             fr_re;
  logic [JW-1:0]    fr_addr;

  decode_controller #(.N(N), .MAX_ITER(MAX_ITER)) u_dc (
    .clk, .rst, .load, .start,
    .ld_en, .ld_addr,
    .vnp_issue, .vn_j, .vn_n, .first_iter,
    .cnp_issue, .cn_i, .cn_m,
    .pc_valid, .pc_fail,
    .fr_re, .fr_addr,
    .busy, .vnp_active, .cnp_active, .dec_ready, .converged, .iter_count,
    .frame_valid, .frame_addr);

  decode_processor #(.P(P), .N(N)) u_dp (
    .clk, .rst,
    .vnp_issue, .vn_j, .vn_n, .first_iter,
    .cnp_issue, .cn_i, .cn_m, .pc_valid, .pc_fail,
    .ld_en, .ld_addr, .ld_data(llr_in),
    .fr_re, .fr_addr, .fr_data(frame_data));

endmodule
