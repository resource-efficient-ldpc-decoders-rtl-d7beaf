// tb_msg_ram: random writes and reads against an array model; checks the one
// clock read latency, that a read of the word being written returns the old
// value, and that re=0 holds rdata.
module tb_msg_ram;
  localparam int W = 8, DEPTH = 6, AW = 3;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  msg_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp, held;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we    = 1'($urandom_range(0, 1));
      re    = 1'($urandom_range(0, 1));
      waddr = AW'($urandom_range(0, DEPTH - 1));
      raddr = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      wdata = W'($urandom);
      exp   = model[raddr];          // old contents on a collision
      held  = rdata;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (re ? (rdata !== exp) : (rdata !== held)) begin
        failures++;
        $display("FAIL t=%0d re=%0d raddr=%0d got %h exp %h", t, re, raddr, rdata, re ? exp : held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
