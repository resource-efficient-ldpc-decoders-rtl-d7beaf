// imb: Intrinsic Message Block.
//
// Holds the channel LLRs of one frame, J = CORE_COLS*N words of PAR = R_DIM*P
// LLRs each, word w covering variables w*PAR .. w*PAR+PAR-1 (core column j and
// block column n give w = j*N + n).  A word is written per clock while ld_en is
// high.  A read issued with rd_en appears on rd_data two clocks later (the BRAM
// clock plus an output register), which lines it up with the check messages that
// the VNPU delivers to the variable nodes.
module imb
  import ldpc_pkg::*;
#(
  parameter int P  = 16,
  parameter int N  = 4,
  localparam int PAR = R_DIM * P,
  localparam int J   = CORE_COLS * N,
  localparam int JW  = (J > 1) ? $clog2(J) : 1
) (
  input  logic                 clk,
  input  logic                 ld_en,
  input  logic [JW-1:0]        ld_addr,
  input  llr_t [PAR-1:0]       ld_data,
  input  logic                 rd_en,
  input  logic [JW-1:0]        rd_addr,
  output llr_t [PAR-1:0]       rd_data
);

  logic [PAR*LLR_W-1:0] ram_q;

  msg_ram #(.W(PAR*LLR_W), .DEPTH(J)) u_ram (
    .clk, .we(ld_en), .waddr(ld_addr), .wdata(ld_data),
    .re(rd_en), .raddr(rd_addr), .rdata(ram_q));

  always_ff @(posedge clk) rd_data <= ram_q;

endmodule
