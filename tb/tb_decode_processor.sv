// tb_decode_processor: drives the Decode Processor the way the controller does
// (J back-to-back VNP steps, three clocks of drain, K CNP steps, three clocks of
// drain) for three iterations per frame and, after each iteration, reads the
// decoded-frame buffer.  The hard decisions and the OR of the parity results of
// each CNP phase are compared with the reference model stopped after the same
// number of iterations.  Frames: a noiseless random codeword (parity holds) and
// pure-noise frames (parity fails).
module tb_decode_processor;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;
  localparam int P = 4, N = 2, PAR = R_DIM * P, J = CORE_COLS * N, K = CORE_ROWS * N;
  localparam int NW = 1, JW = $clog2(J), NC = J * PAR;
  logic clk = 1'b0, rst = 1'b1;
  logic vnp_issue = 1'b0, first_iter = 1'b0, cnp_issue = 1'b0;
  logic [2:0] vn_j = '0;
  logic [NW-1:0] vn_n = '0, cn_m = '0;
  logic [1:0] cn_i = '0;
  logic pc_valid, pc_fail;
  logic ld_en = 1'b0, fr_re = 1'b0;
  logic [JW-1:0] ld_addr = '0, fr_addr = '0;
  llr_t [PAR-1:0] ld_data;
  logic [PAR-1:0] fr_data;
  int checks = 0, failures = 0;
  int pc_count;
  bit pc_any;

  decode_processor #(.P(P), .N(N)) dut (.*);

  always #5 clk = ~clk;

  always @(negedge clk) if (pc_valid) begin
    pc_count++;
    pc_any |= pc_fail;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ldpc_ref #(P, N) rm;
    bit x[], hd[];
    int llr[];
    int r_it;
    bit r_conv;
    rm = new();
    ld_data = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int f = 0; f < 3; f++) begin
      rm.rand_codeword(x);
      llr = new[NC];
      for (int c = 0; c < NC; c++)
        llr[c] = (f == 0) ? (x[c] ? -5 : 5) : int'($urandom_range(0, 15)) - 8;
      for (int w = 0; w < J; w++) begin
        @(negedge clk);
        ld_en = 1'b1; ld_addr = JW'(w);
        for (int k = 0; k < PAR; k++) ld_data[k] = llr_t'(llr[w * PAR + k]);
      end
      @(negedge clk);
      ld_en = 1'b0;
      for (int it = 1; it <= 3; it++) begin
        first_iter = (it == 1);
        for (int s = 0; s < J; s++) begin
          vnp_issue = 1'b1; vn_j = 3'(s / N); vn_n = NW'(s % N);
          @(negedge clk);
        end
        vnp_issue = 1'b0;
        repeat (3) @(negedge clk);
        pc_count = 0; pc_any = 0;
        for (int s = 0; s < K; s++) begin
          cnp_issue = 1'b1; cn_i = 2'(s / N); cn_m = NW'(s % N);
          @(negedge clk);
        end
        cnp_issue = 1'b0;
        repeat (3) @(negedge clk);
        rm.decode(llr, it, hd, r_it, r_conv);
        checks += 2;
        if (pc_count != K) begin failures++; $display("FAIL %0d parity results in a CNP phase", pc_count); end
        if (pc_any != !r_conv) begin failures++; $display("FAIL frame %0d iteration %0d parity %0d, reference converged %0d", f, it, pc_any, r_conv); end
        // read the frame buffer
        for (int w = 0; w < J; w++) begin
          bit ok;
          fr_re = 1'b1; fr_addr = JW'(w);
          @(negedge clk);           // one clock of read latency
          ok = 1;
          for (int k = 0; k < PAR; k++) if (fr_data[k] != hd[w * PAR + k]) ok = 0;
          checks++;
          if (!ok) begin failures++; $display("FAIL frame %0d iteration %0d word %0d", f, it, w); end
        end
        fr_re = 1'b0;
        if (r_conv) break;   // the reference stops here
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
