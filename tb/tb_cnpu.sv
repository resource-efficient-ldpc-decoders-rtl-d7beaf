// tb_cnpu: writes random variable-to-check entries (message + hard decision)
// through the VNP port, one block column per clock for all three layers, then
// reads every block row back-to-back through the CNP port with the PMMB's tables.
// The entry expected at each (check, core column) comes from the reference
// model's edge list, built independently of the unit's routing.  Checks the
// two-clock read latency.
module tb_cnpu;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;
  localparam int P = 4, N = 2, PAR = R_DIM * P, NW = 1;
  localparam int BLK = R_DIM * P;
  logic clk = 1'b0, rd_en = 1'b0, wr_en = 1'b0;
  logic [2:0] wr_j = '0;
  logic [NW-1:0] wr_n = '0, a_m = '0, b_m = '0;
  logic [1:0] rd_layer = '0, b_layer = '0;
  vmsg_t [CORE_ROWS-1:0][PAR-1:0] wr_v2c;
  vmsg_t [CORE_COLS-1:0][PAR-1:0] rd_v2c;
  prow_t [CORE_COLS-1:0][R_DIM-1:0] rd_tab, b_tab;
  logic [CORE_COLS-1:0][NW-1:0] rd_addr, b_addr;
  int checks = 0, failures = 0;

  cnpu #(.P(P), .N(N)) dut (.*);
  pmmb #(.N(N)) u_tables (.a_layer(rd_layer), .a_m, .a_tab(rd_tab), .a_addr(rd_addr),
                          .b_layer, .b_m, .b_tab, .b_addr);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ldpc_ref #(P, N) rm;
    int ev[];
    int exp_all[];
    rm = new();
    ev = new[rm.NE];
    exp_all = new[CORE_ROWS * N * CORE_COLS * PAR];
    wr_v2c = '0;
    // VNP writes: block column n of core column j, column order
    for (int j = 0; j < CORE_COLS; j++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_j = 3'(j); wr_n = NW'(n);
        for (int rp = 0; rp < BLK; rp++) begin
          int c;
          c = (j * N + n) * BLK + rp;
          for (int k = 0; k < 3; k++) begin
            int e;
            e = rm.col_e[c * 3 + k];
            ev[e] = $urandom_range(0, 15);
            wr_v2c[rm.e_row[e] / (N * BLK)][rp] = vmsg_t'(ev[e]);
          end
        end
      end
    @(negedge clk);
    wr_en = 1'b0;
    // CNP reads, back to back
    for (int s = 0; s <= CORE_ROWS * N; s++) begin
      if (s < CORE_ROWS * N) begin
        int i, m;
        i = s / N; m = s % N;
        rd_en = 1'b1; rd_layer = 2'(i); a_m = NW'(m);
        for (int aq = 0; aq < BLK; aq++) begin
          int h;
          h = (i * N + m) * BLK + aq;
          for (int k = 0; k < 6; k++) begin
            int e;
            e = rm.row_e[h * 6 + k];
            exp_all[(s * CORE_COLS + rm.e_col[e] / (N * BLK)) * PAR + aq] = ev[e];
          end
        end
      end else begin
        rd_en = 1'b0;
      end
      @(negedge clk);
      if (s >= 1)
        for (int j = 0; j < CORE_COLS; j++)
          for (int k = 0; k < PAR; k++) begin
            checks++;
            if (int'(rd_v2c[j][k]) != exp_all[((s - 1) * CORE_COLS + j) * PAR + k]) begin
              failures++;
              $display("FAIL issue %0d column %0d check %0d got %0d exp %0d", s - 1, j, k, rd_v2c[j][k],
                       exp_all[((s - 1) * CORE_COLS + j) * PAR + k]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
