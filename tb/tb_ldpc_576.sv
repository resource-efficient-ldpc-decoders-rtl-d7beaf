// tb_ldpc_576: end-to-end test of the decoder configured for the shortest
// rate-1/2 WiMax frame (P=16, N=1: 96 nodes in parallel, 576-bit frames,
// 6+3+6 = 15 clocks per iteration).  Only the parameter N differs from the
// 2304-bit build.  The test itself is in ldpc_tb_body.svh.
module tb_ldpc_576;
  localparam int P       = 16;
  localparam int N       = 1;
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
