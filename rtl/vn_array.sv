// vn_array: the chain of PAR variable nodes (VN).
//
// Each node k has column weight 3: it takes its channel LLR llr[k] and the three
// check-to-variable messages c2v[i][k], one per layer i, forms
//   total = llr + c2v[0] + c2v[1] + c2v[2]
// and sends layer i the extrinsic message total - c2v[i], saturated to +-3 and
// coded as 3-bit sign-magnitude.  The hard decision is total < 0 (bit 1) and is
// sent along with every message so that the check nodes can evaluate the parity
// checks.  In the first iteration (first_iter=1) the check messages are taken as
// zero, so B_V need not be cleared.  Inputs and outputs are in column order.
// One clock of latency: out_valid/v2c are registered.
module vn_array
  import ldpc_pkg::*;
#(
  parameter int PAR = 96
) (
  input  logic                             clk,
  input  logic                             in_valid,
  input  logic                             first_iter,
  input  llr_t  [PAR-1:0]                  llr,
  input  msg_t  [CORE_ROWS-1:0][PAR-1:0]   c2v,
  output logic                             out_valid,
  output vmsg_t [CORE_ROWS-1:0][PAR-1:0]   v2c
);

  vmsg_t [CORE_ROWS-1:0][PAR-1:0] v2c_d;

  always_comb begin
    for (int k = 0; k < PAR; k++) begin
      sum_t in_v [CORE_ROWS];
      sum_t total;
      total = sum_t'(llr_t'(llr[k]));
      for (int i = 0; i < CORE_ROWS; i++) begin
        in_v[i] = first_iter ? '0 : msg_val(c2v[i][k]);
        total   = total + in_v[i];
      end
      for (int i = 0; i < CORE_ROWS; i++) begin
        v2c_d[i][k].msg = sat_msg(total - in_v[i]);
        v2c_d[i][k].hd  = total[SUM_W-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    v2c       <= v2c_d;
  end

endmodule
