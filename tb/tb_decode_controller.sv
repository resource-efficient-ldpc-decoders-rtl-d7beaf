// tb_decode_controller: the controller against a stand-in for the processor that
// returns pc_valid three clocks after each CNP step, with pc_fail raised in
// chosen steps.  Each run fixes the first iteration whose checks all hold (or
// none) and where a failing parity result appears within the phase (first or last
// step, the last one testing the same-clock stop decision).  Checked: the step
// order (j,n) and (i,m), first_iter only in iteration 1, J+3 / K+3 clocks per
// phase, the stop rule, iteration count, converged flag, the J-word frame read
// and stream, dec_ready, that Start is ignored while busy, and the load address
// sequence with wrap-around.
module tb_decode_controller;
  import ldpc_pkg::*;
  localparam int N = 2, MAX_ITER = 4, J = CORE_COLS * N, K = CORE_ROWS * N;
  localparam int NW = 1, JW = $clog2(J), IW = $clog2(MAX_ITER + 1);
  logic clk = 1'b0, rst = 1'b1, load = 1'b0, start = 1'b0;
  logic ld_en, vnp_issue, first_iter, cnp_issue, pc_valid, pc_fail, fr_re;
  logic [JW-1:0] ld_addr, fr_addr, frame_addr;
  logic [2:0] vn_j;
  logic [NW-1:0] vn_n, cn_m;
  logic [1:0] cn_i;
  logic busy, vnp_active, cnp_active, dec_ready, converged, frame_valid;
  logic [IW-1:0] iter_count;
  int checks = 0, failures = 0;

  // processor stand-in
  logic [2:0] cnp_pipe;
  int pass_iter, fail_step, cnp_step, cur_iter;
  always_ff @(posedge clk) cnp_pipe <= rst ? '0 : {cnp_pipe[1:0], cnp_issue};
  assign pc_valid = cnp_pipe[2];
  always @(posedge clk) if (pc_valid) cnp_step <= cnp_step + 1;
  assign pc_fail  = pc_valid && (cur_iter + 1 < pass_iter) && (cnp_step == fail_step);

  decode_controller #(.N(N), .MAX_ITER(MAX_ITER)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // monitors
  int vn_s, cn_s, phase_len, frames_words;
  logic prev_vnp_phase, prev_cnp_phase;
  always @(negedge clk) begin
    if (!rst) begin
      if (vnp_issue) begin
        check(int'(vn_j) == vn_s / N && int'(vn_n) == vn_s % N, "VNP step order");
        check(first_iter == (cur_iter == 0), "first_iter");
        vn_s++;
      end
      if (cnp_issue) begin
        check(int'(cn_i) == cn_s / N && int'(cn_m) == cn_s % N, "CNP step order");
        cn_s++;
      end
      if (frame_valid) begin
        check(int'(frame_addr) == frames_words, "frame word order");
        frames_words++;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one decode; returns when the controller is idle again
  task automatic run(input int pass_at, input int fstep);
    int cyc, iters;
    pass_iter = pass_at; fail_step = fstep; cur_iter = 0; frames_words = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    iters = 0;
    while (!dec_ready) begin
      // one iteration: VNP phase then CNP phase
      vn_s = 0; cyc = 0;
      while (!cnp_issue) begin
        @(negedge clk); cyc++;
        if (cyc == 5) begin start = 1'b1; @(negedge clk); start = 1'b0; cyc++; end  // ignored
      end
      check(vn_s == J, "J VNP steps");
      check(cyc == J + 3, "VNP phase lasts J+3 clocks");
      cn_s = 0; cnp_step = 0; cyc = 0;
      while (!(vnp_issue || dec_ready)) begin @(negedge clk); cyc++; end
      check(cn_s == K, "K CNP steps");
      check(cyc == K + 3, "CNP phase lasts K+3 clocks");
      cur_iter++;
      iters++;
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    begin
      int expect_it;
      bit expect_conv;
      expect_it   = (pass_at <= MAX_ITER) ? pass_at : MAX_ITER;
      expect_conv = (pass_at <= MAX_ITER);
      check(iters == expect_it, "iterations run");
      if (iters != expect_it) $display("  pass_at %0d fail_step %0d: ran %0d, iter_count %0d", pass_at, fstep, iters, iter_count);
      check(int'(iter_count) == expect_it, "iter_count");
      check(converged == expect_conv, "converged flag");
      check(dec_ready, "dec_ready held");
      check(frames_words == J, "J frame words streamed");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    // load J+2 words: addresses 0..J-1 then wrap to 0, 1
    for (int w = 0; w < J + 2; w++) begin
      load = 1'b1;
      #1;
      check(ld_en && int'(ld_addr) == w % J, "load address sequence");
      @(negedge clk);
    end
    load = 1'b0;
    run(1, -1);              // all checks hold at once
    run(3, K - 1);           // failing result in the last CNP step until iteration 3
    run(2, 0);               // failing result in the first step until iteration 2
    run(MAX_ITER + 1, K - 1);  // never passes: iteration limit
    load = 1'b1;
    #1;
    check(ld_en && ld_addr == '0, "load address restarts after start");
    @(negedge clk);
    load = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
