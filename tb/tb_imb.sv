// tb_imb: loads a frame of random LLR words and reads them back in random order,
// checking the two-clock read latency.
module tb_imb;
  import ldpc_pkg::*;
  localparam int P = 4, N = 2, PAR = R_DIM * P, J = CORE_COLS * N, JW = $clog2(J);
  logic clk = 1'b0, ld_en = 1'b0, rd_en = 1'b0;
  logic [JW-1:0] ld_addr = '0, rd_addr = '0;
  llr_t [PAR-1:0] ld_data, rd_data;
  llr_t [PAR-1:0] model [J];
  int checks = 0, failures = 0;

  imb #(.P(P), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_data = '0;
    for (int w = 0; w < J; w++) begin
      @(negedge clk);
      ld_en = 1'b1; ld_addr = JW'(w);
      for (int k = 0; k < PAR; k++) ld_data[k] = llr_t'($urandom);
      model[w] = ld_data;
    end
    @(negedge clk);
    ld_en = 1'b0;
    for (int t = 0, prev = -1; t < 100; t++) begin
      int a;
      do a = $urandom_range(0, J - 1); while (a == prev);
      prev = a;
      rd_en = 1'b1; rd_addr = JW'(a);
      @(negedge clk);
      rd_en = 1'b0; rd_addr = JW'($urandom_range(0, J - 1));
      checks++;
      if (rd_data === model[a]) begin
        failures++; $display("FAIL data already there after one clock, word %0d", a);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++; $display("FAIL word %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
