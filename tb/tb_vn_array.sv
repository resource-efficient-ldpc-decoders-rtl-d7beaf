// tb_vn_array: random LLRs and check messages (all sign-magnitude codes,
// including -0) against the variable-node rule worked out with integers here:
// out_i = clamp(llr + sum(c2v) - c2v_i, -3, 3), hd = (llr + sum(c2v) < 0), with
// the check messages taken as zero when first_iter=1.  Checks the one-clock
// latency of out_valid.
module tb_vn_array;
  import ldpc_pkg::*;
  localparam int PAR = 8;
  logic clk = 1'b0, in_valid = 1'b0, first_iter = 1'b0, out_valid;
  llr_t  [PAR-1:0] llr;
  msg_t  [CORE_ROWS-1:0][PAR-1:0] c2v;
  vmsg_t [CORE_ROWS-1:0][PAR-1:0] v2c;
  int checks = 0, failures = 0;

  vn_array #(.PAR(PAR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val(msg_t m);
    return m[2] ? -int'(m[1:0]) : int'(m[1:0]);
  endfunction

  initial begin
    llr = '0; c2v = '0;
    for (int t = 0; t < 300; t++) begin
      int tot, o;
      @(negedge clk);
      in_valid   = 1'($urandom_range(0, 1));
      first_iter = ($urandom_range(0, 4) == 0);
      for (int k = 0; k < PAR; k++) begin
        llr[k] = llr_t'($urandom);
        for (int i = 0; i < CORE_ROWS; i++) c2v[i][k] = msg_t'($urandom);
      end
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL out_valid"); end
      for (int k = 0; k < PAR; k++) begin
        tot = int'(llr[k]);
        if (!first_iter) for (int i = 0; i < CORE_ROWS; i++) tot += val(c2v[i][k]);
        for (int i = 0; i < CORE_ROWS; i++) begin
          o = tot - (first_iter ? 0 : val(c2v[i][k]));
          o = (o > 3) ? 3 : (o < -3) ? -3 : o;
          checks++;
          if (val(v2c[i][k].msg) != o || (o == 0 && v2c[i][k].msg[2]) || v2c[i][k].hd != (tot < 0)) begin
            failures++;
            $display("FAIL k=%0d i=%0d llr=%0d tot=%0d exp %0d got %0d hd %0d", k, i, llr[k], tot, o, val(v2c[i][k].msg), v2c[i][k].hd);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
