// ldpc_tb_body.svh: end-to-end test of ldpc_decoder, included by the testbench
// modules after they set the localparams P, N and NFRAMES; the including module
// instantiates the decoder on the signals declared here.
//
// Each frame is a codeword (all-zero or random, from the reference model's GF(2)
// elimination) sent as 4-bit LLRs with a chosen amount of noise, loaded word by
// word, decoded, and read back from the frame stream.  Against the reference
// model it checks the decoded bits, the iteration count, the converged flag, the
// exact clock count J+K+6 per iteration, and J / K clocks of vnp_active /
// cnp_active per iteration.  It counts how often each stopping mechanism was
// seen (parity satisfied after one iteration, after several, and the iteration
// limit) and fails if one never happened.  The including module calls
// run_frames() and then prints the result line.

  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int PAR  = R_DIM * P;
  localparam int J    = CORE_COLS * N;
  localparam int K    = CORE_ROWS * N;
  localparam int NC   = PAR * J;
  localparam int MAXI = 10;
  localparam int NIT  = J + K + 6;
  localparam int WD   = NFRAMES * (3 * J + MAXI * NIT + 40) + 200;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic load = 1'b0;
  logic start = 1'b0;
  llr_t [PAR-1:0] llr_in;
  logic busy, dec_ready, converged, frame_valid, vnp_active, cnp_active;
  logic [$clog2(MAXI + 1)-1:0] iter_count;
  logic [((J > 1) ? $clog2(J) : 1)-1:0] frame_addr;
  logic [PAR-1:0] frame_data;

  int checks = 0, failures = 0;
  int n_iter1 = 0, n_multi = 0, n_limit = 0, n_nonzero = 0;
  int run_cycles, vnp_cycles, cnp_cycles, words_seen;
  logic [PAR-1:0] got [J];

  always #5 clk = ~clk;

  initial begin
    llr_in = '0;
    repeat (WD) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (busy && !dec_ready) run_cycles++;
    if (vnp_active) vnp_cycles++;
    if (cnp_active) cnp_cycles++;
    if (frame_valid) begin
      got[frame_addr] = frame_data;
      words_seen++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int clamp_llr(int v);
    return (v > 7) ? 7 : (v < -8) ? -8 : v;
  endfunction

  task automatic run_frames();
    ldpc_ref #(P, N) ref_m;
    bit x[], hd[], dec[];
    int llr[];
    int r_iter, amp, w;
    bit r_conv, hd_ok;

    ref_m = new();
    check(ref_m.build_errors == 0, "reference H is not (3,6)-regular");
    repeat (4) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);

    for (int f = 0; f < NFRAMES; f++) begin
      // frame 0: all-zero codeword, no noise; 1: random codeword, no noise;
      // then random codewords with growing noise; last: noise only.
      if (f == 0) x = new[NC];
      else        ref_m.rand_codeword(x);
      check(ref_m.syndrome_ok(x), "generated word is not a codeword");
      amp = 4;
      w   = (f < 2) ? 0 : (f == NFRAMES - 1) ? 16 : 2 + (f % 4);
      llr = new[NC];
      for (int c = 0; c < NC; c++) begin
        int nz;
        nz = (w == 0) ? 0 : int'($urandom_range(0, 2 * w)) - w + int'($urandom_range(0, 2 * w)) - w;
        llr[c] = clamp_llr((x[c] ? -amp : amp) + nz);
      end
      ref_m.decode(llr, MAXI, hd, r_iter, r_conv);

      // load J words
      for (int wd = 0; wd < J; wd++) begin
        load = 1'b1;
        for (int k = 0; k < PAR; k++) llr_in[k] = llr_t'(llr[wd * PAR + k]);
        @(negedge clk);
      end
      load = 1'b0;
      run_cycles = 0; vnp_cycles = 0; cnp_cycles = 0; words_seen = 0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!dec_ready) @(negedge clk);
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);

      dec = new[NC];
      for (int wd = 0; wd < J; wd++)
        for (int k = 0; k < PAR; k++) dec[wd * PAR + k] = got[wd][k];
      hd_ok = 1;
      for (int c = 0; c < NC; c++) if (dec[c] != hd[c]) hd_ok = 0;

      $display("frame %0d: noise %0d, ref iterations %0d converged %0d | dut iterations %0d converged %0d, %0d clocks",
               f, w, r_iter, r_conv, iter_count, converged, run_cycles);
      check(words_seen == J, "frame stream length");
      check(hd_ok, "decoded bits differ from the reference model");
      check(int'(iter_count) == r_iter, "iteration count");
      check(converged == r_conv, "converged flag");
      check(run_cycles == r_iter * NIT, "clocks per iteration (J+K+6)");
      check(vnp_cycles == r_iter * J, "VNP active clocks per iteration (J)");
      check(cnp_cycles == r_iter * K, "CNP active clocks per iteration (K)");
      if (converged) check(ref_m.syndrome_ok(dec), "converged output is not a codeword");
      if (f < 2) begin
        bit same;
        same = 1;
        for (int c = 0; c < NC; c++) if (dec[c] != x[c]) same = 0;
        check(same, "noiseless codeword not returned");
        check(iter_count == 1, "noiseless codeword needs one iteration");
      end
      if (converged && iter_count == 1) n_iter1++;
      if (converged && iter_count > 1) n_multi++;
      if (!converged) n_limit++;
      if (f == 1 && hd_ok) n_nonzero++;
    end

    $display("mechanisms: stop after 1 iteration %0d, early stop after several %0d, iteration limit %0d, non-zero codeword %0d",
             n_iter1, n_multi, n_limit, n_nonzero);
    check(n_iter1 > 0, "parity stop after one iteration never happened");
    check(n_multi > 0, "early stop after several iterations never happened");
    check(n_limit > 0, "iteration limit never reached");
    check(n_nonzero > 0, "non-zero codeword never decoded");
  endtask
