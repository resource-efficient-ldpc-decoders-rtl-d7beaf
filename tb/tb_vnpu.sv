// tb_vnpu: writes random check-to-variable messages through the CNP port, one
// block row per clock in check order with the PMMB's tables, then reads every
// block column back-to-back through the VNP port.  The expected message of
// each (layer, variable) comes from the reference model's edge list, built
// independently of the unit's routing.  Checks the two-clock read latency.
module tb_vnpu;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;
  localparam int P = 4, N = 2, PAR = R_DIM * P, NW = 1;
  localparam int BLK = R_DIM * P;          // variables (or checks) per block
  logic clk = 1'b0, rd_en = 1'b0, wr_en = 1'b0;
  logic [2:0] rd_j = '0;
  logic [NW-1:0] rd_n = '0, b_m = '0, a_m = '0;
  logic [1:0] wr_layer = '0, a_layer = '0;
  msg_t [CORE_ROWS-1:0][PAR-1:0] rd_c2v;
  prow_t [CORE_COLS-1:0][R_DIM-1:0] wr_tab, a_tab;
  logic [CORE_COLS-1:0][NW-1:0] wr_addr, a_addr;
  msg_t [CORE_COLS-1:0][PAR-1:0] wr_c2v;
  int checks = 0, failures = 0;

  vnpu #(.P(P), .N(N)) dut (.*);
  pmmb #(.N(N)) u_tables (.a_layer, .a_m, .a_tab, .a_addr,
                          .b_layer(wr_layer), .b_m, .b_tab(wr_tab), .b_addr(wr_addr));

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
    exp_all = new[CORE_COLS * N * CORE_ROWS * PAR];
    wr_c2v = '0;
    // CNP writes: block row m of layer i, in check order
    for (int i = 0; i < CORE_ROWS; i++)
      for (int m = 0; m < N; m++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_layer = 2'(i); b_m = NW'(m);
        for (int a = 0; a < R_DIM; a++)
          for (int q = 0; q < P; q++) begin
            int h;
            h = ((i * N + m) * R_DIM + a) * P + q;
            for (int k = 0; k < 6; k++) begin
              int e, j;
              e = rm.row_e[h * 6 + k];
              j = rm.e_col[e] / (N * BLK);
              ev[e] = $urandom_range(0, 7);
              wr_c2v[j][a * P + q] = msg_t'(ev[e]);
            end
          end
      end
    @(negedge clk);
    wr_en = 1'b0;
    // VNP reads, back to back; the words of issue s are visible two clocks
    // later, i.e. at the end of loop pass s+1.
    for (int s = 0; s <= CORE_COLS * N; s++) begin
      if (s < CORE_COLS * N) begin
        int j, n;
        j = s / N; n = s % N;
        rd_en = 1'b1; rd_j = 3'(j); rd_n = NW'(n);
        for (int rp = 0; rp < BLK; rp++) begin
          int c;
          c = (j * N + n) * BLK + rp;
          for (int k = 0; k < 3; k++) begin
            int e;
            e = rm.col_e[c * 3 + k];
            exp_all[(s * CORE_ROWS + rm.e_row[e] / (N * BLK)) * PAR + rp] = ev[e];
          end
        end
      end else begin
        rd_en = 1'b0;
      end
      @(negedge clk);
      if (s >= 1)
        for (int i = 0; i < CORE_ROWS; i++)
          for (int k = 0; k < PAR; k++) begin
            checks++;
            if (int'(rd_c2v[i][k]) != exp_all[((s - 1) * CORE_ROWS + i) * PAR + k]) begin
              failures++;
              $display("FAIL issue %0d layer %0d var %0d got %0d exp %0d", s - 1, i, k, rd_c2v[i][k],
                       exp_all[((s - 1) * CORE_ROWS + i) * PAR + k]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
