// cn_array: the chain of PAR check nodes (CN).
//
// Each node k has row weight 6: it takes one variable-to-check message from each
// core column j (v2c[j][k], already permuted into check order by the CNPU) and
// applies the min-sum rule on 3-bit sign-magnitude values: the reply to input j
// has the sign of the product of the other five signs and the smallest magnitude
// among the other five inputs (computed from the smallest and second-smallest
// magnitude and the position of the smallest).  The node also XORs the six hard
// decisions carried with the messages; pc_fail reports that at least one of the
// PAR checks of the word is unsatisfied.  The min-sum rule stands in for the
// paper's "modified min-sum", which is only named there.  One clock of latency:
// out_valid, c2v and pc_fail are registered.
module cn_array
  import ldpc_pkg::*;
#(
  parameter int PAR = 96
) (
  input  logic                             clk,
  input  logic                             in_valid,
  input  vmsg_t [CORE_COLS-1:0][PAR-1:0]   v2c,
  output logic                             out_valid,
  output msg_t  [CORE_COLS-1:0][PAR-1:0]   c2v,
  output logic                             pc_fail
);

  msg_t [CORE_COLS-1:0][PAR-1:0] c2v_d;
  logic [PAR-1:0]                parity;

  always_comb begin
    for (int k = 0; k < PAR; k++) begin
      logic             sprod;
      logic [MAG_W-1:0] min1, min2;
      int               idx;
      sprod = 1'b0;
      parity[k] = 1'b0;
      min1 = '1;
      min2 = '1;
      idx  = 0;
      for (int j = 0; j < CORE_COLS; j++) begin
        logic [MAG_W-1:0] mg;
        mg = v2c[j][k].msg[MAG_W-1:0];
        sprod     = sprod ^ v2c[j][k].msg[MSG_W-1];
        parity[k] = parity[k] ^ v2c[j][k].hd;
        if (mg < min1) begin
          min2 = min1;
          min1 = mg;
          idx  = j;
        end else if (mg < min2) begin
          min2 = mg;
        end
      end
      for (int j = 0; j < CORE_COLS; j++) begin
        c2v_d[j][k] = {sprod ^ v2c[j][k].msg[MSG_W-1], (j == idx) ? min2 : min1};
      end
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    c2v       <= c2v_d;
    pc_fail   <= in_valid && (|parity);
  end

endmodule
