// tb_cn_array: random messages and hard decisions against the min-sum rule
// worked out directly here (for each input, the sign product and the smallest
// magnitude of the five other inputs), plus the parity of the six hard decisions
// OR-ed over the word.  Magnitude ties are made frequent on purpose.
module tb_cn_array;
  import ldpc_pkg::*;
  localparam int PAR = 8;
  logic clk = 1'b0, in_valid = 1'b0, out_valid, pc_fail;
  vmsg_t [CORE_COLS-1:0][PAR-1:0] v2c;
  msg_t  [CORE_COLS-1:0][PAR-1:0] c2v;
  int checks = 0, failures = 0;
  int n_fail = 0, n_pass = 0;

  cn_array #(.PAR(PAR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v2c = '0;
    for (int t = 0; t < 300; t++) begin
      bit anyfail;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < PAR; k++)
        for (int j = 0; j < CORE_COLS; j++) begin
          v2c[j][k].msg = {1'($urandom), 2'($urandom_range(1, 3))};
          if ($urandom_range(0, 5) == 0) v2c[j][k].msg[1:0] = 2'd0;
          // mostly even parity so both outcomes of pc_fail occur
          v2c[j][k].hd = (t % 2 == 0) ? 1'b0 : 1'($urandom);
        end
      @(negedge clk);
      anyfail = 0;
      for (int k = 0; k < PAR; k++) begin
        bit par;
        par = 0;
        for (int j = 0; j < CORE_COLS; j++) begin
          int mag; bit sg;
          par ^= v2c[j][k].hd;
          mag = 3; sg = 0;
          for (int o = 0; o < CORE_COLS; o++) if (o != j) begin
            sg ^= v2c[o][k].msg[2];
            if (int'(v2c[o][k].msg[1:0]) < mag) mag = int'(v2c[o][k].msg[1:0]);
          end
          checks++;
          if (c2v[j][k] !== {sg, 2'(mag)}) begin
            failures++; $display("FAIL t=%0d k=%0d j=%0d got %b exp %b", t, k, j, c2v[j][k], {sg, 2'(mag)});
          end
        end
        anyfail |= par;
      end
      checks += 2;
      if (out_valid !== in_valid) begin failures++; $display("FAIL out_valid"); end
      if (pc_fail !== (in_valid && anyfail)) begin failures++; $display("FAIL pc_fail t=%0d", t); end
      if (in_valid && anyfail) n_fail++;
      if (in_valid && !anyfail) n_pass++;
    end
    checks++;
    if (n_fail == 0 || n_pass == 0) begin failures++; $display("FAIL parity outcomes not both seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
