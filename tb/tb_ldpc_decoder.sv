// tb_ldpc_decoder: end-to-end test of the decoder at a reduced size
// (P=4, N=2: 24 nodes in parallel, 288-bit frames, 12+6+6 = 24 clocks per
// iteration).  The test itself is in ldpc_tb_body.svh.
module tb_ldpc_decoder;
  localparam int P       = 4;
  localparam int N       = 2;
  localparam int NFRAMES = 12;

  `include "ldpc_tb_body.svh"

  initial begin
    run_frames();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ldpc_decoder #(.P(P), .N(N), .MAX_ITER(MAXI)) u_dut (
    .clk, .rst, .load, .start, .llr_in,
    .busy, .dec_ready, .converged, .iter_count,
    .frame_valid, .frame_addr, .frame_data, .vnp_active, .cnp_active);
endmodule
