// tb_ldpc_full: end-to-end test of the decoder at its default size (P=16, N=4:
// 96 nodes in parallel, 2304-bit frames, 42 clocks per iteration).  The test
// itself is in ldpc_tb_body.svh.
module tb_ldpc_full;
  localparam int P       = 16;
  localparam int N       = 4;
  localparam int NFRAMES = 8;

  `include "ldpc_tb_body.svh"

  initial begin
    run_frames();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ldpc_decoder u_dut (
    .clk, .rst, .load, .start, .llr_in,
    .busy, .dec_ready, .converged, .iter_count,
    .frame_valid, .frame_addr, .frame_data, .vnp_active, .cnp_active);
endmodule
