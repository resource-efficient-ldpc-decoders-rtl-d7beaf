// tb_pmmb: every (layer, block row) on both ports, against tables typed from the
// construction (Permuted matrices R_0..R_2, x = (i + j) mod 3, Level-2 shifts).
module tb_pmmb;
  import ldpc_pkg::*;
  localparam int N = 4;
  logic [1:0] a_layer, b_layer;
  logic [1:0] a_m, b_m;
  prow_t [CORE_COLS-1:0][R_DIM-1:0] a_tab, b_tab;
  logic [CORE_COLS-1:0][1:0] a_addr, b_addr;
  int checks = 0, failures = 0;

  int rcol [3][6] = '{'{0, 2, 4, 5, 3, 1}, '{1, 3, 0, 5, 4, 2}, '{2, 4, 1, 5, 3, 0}};
  int rshf [3][6] = '{'{1, 3, 5, 6, 4, 2}, '{2, 4, 1, 6, 5, 3}, '{1, 5, 4, 3, 6, 2}};
  int lsh  [3][6] = '{'{0, 1, 2, 3, 0, 1}, '{0, 2, 1, 3, 1, 0}, '{0, 3, 1, 2, 2, 3}};

  pmmb #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int i, input int m, input prow_t [CORE_COLS-1:0][R_DIM-1:0] tab,
                     input logic [CORE_COLS-1:0][1:0] addr);
    for (int j = 0; j < 6; j++) begin
      int x;
      x = (i + j) % 3;
      checks++;
      if (int'(addr[j]) != (m + lsh[i][j]) % N) begin
        failures++; $display("FAIL addr i=%0d m=%0d j=%0d got %0d", i, m, j, addr[j]);
      end
      for (int a = 0; a < 6; a++) begin
        checks++;
        if (int'(tab[j][a].col) != rcol[x][a] || int'(tab[j][a].shift) != rshf[x][a]) begin
          failures++; $display("FAIL tab i=%0d j=%0d a=%0d", i, j, a);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 3; i++)
      for (int m = 0; m < N; m++) begin
        a_layer = 2'(i); a_m = 2'(m);
        b_layer = 2'((i + 1) % 3); b_m = 2'((m + 3) % N);
        #1;
        chk(i, m, a_tab, a_addr);
        chk((i + 1) % 3, (m + 3) % N, b_tab, b_addr);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
