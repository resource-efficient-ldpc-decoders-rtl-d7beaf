// decode_controller: the Decode Controller (DC).
//
// Answers the external Load and Start controls and sequences the Decode
// Processor.  States:
//   IDLE : while load=1 one intrinsic word per clock is written to the IMB, at
//          addresses 0, 1, ... J-1 (the count restarts at 0 after J words and on
//          Start).  start=1 begins decoding.
//   VNP  : J steps, one per clock, over (core column j, block column n); the
//          phase lasts J+3 clocks so that the last B_C write lands before CNP
//          reads.  vnp_active is high for the J issue clocks.
//   CNP  : K = CORE_ROWS*N steps over (layer i, block row m), K+3 clocks.  The
//          parity results of the block rows are OR-ed together; in the last clock
//          of the phase the controller either stops (all checks satisfied, or
//          MAX_ITER iterations done) or starts the next VNP.
//   OUT  : streams the decoded frame, J words of PAR bits, on frame_* (one clock
//          after the buffer read), then returns to IDLE.
// One iteration therefore takes J + K + 6 clocks.  dec_ready (Decoded Data Ready)
// rises when decoding ends and stays high until the next start; iter_count holds
// the number of iterations run and converged whether all checks held.  The
// interface timing is this design's choice.
module decode_controller
  import ldpc_pkg::*;
#(
  parameter int N        = 4,
  parameter int MAX_ITER = 10,
  localparam int J   = CORE_COLS * N,
  localparam int K   = CORE_ROWS * N,
  localparam int NW  = (N > 1) ? $clog2(N) : 1,
  localparam int JW  = (J > 1) ? $clog2(J) : 1,
  localparam int IW  = $clog2(MAX_ITER + 1),
  localparam int CW  = $clog2(J + 3)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load,
  input  logic             start,
  // to the Decode Processor
  output logic             ld_en,
  output logic [JW-1:0]    ld_addr,
  output logic             vnp_issue,
  output logic [2:0]       vn_j,
  output logic [NW-1:0]    vn_n,
  output logic             first_iter,
  output logic             cnp_issue,
  output logic [1:0]       cn_i,
  output logic [NW-1:0]    cn_m,
  input  logic             pc_valid,
  input  logic             pc_fail,
  output logic             fr_re,
  output logic [JW-1:0]    fr_addr,
  // status
  output logic             busy,
  output logic             vnp_active,
  output logic             cnp_active,
  output logic             dec_ready,
  output logic             converged,
  output logic [IW-1:0]    iter_count,
  output logic             frame_valid,
  output logic [JW-1:0]    frame_addr
);

  typedef enum logic [1:0] { S_IDLE, S_VNP, S_CNP, S_OUT } state_t;

  state_t         state;
  logic [CW-1:0]  cyc;
  logic           err;
  logic           fail_now;

  assign busy       = (state != S_IDLE);
  assign vnp_issue  = (state == S_VNP) && (int'(cyc) < J);
  assign cnp_issue  = (state == S_CNP) && (int'(cyc) < K);
  assign vnp_active = vnp_issue;
  assign cnp_active = cnp_issue;
  assign first_iter = (iter_count == '0);
  assign ld_en      = (state == S_IDLE) && load && !start;
  assign fr_re      = (state == S_OUT);
  assign fail_now   = err || (pc_valid && pc_fail);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      cyc         <= '0;
      err         <= 1'b0;
      ld_addr     <= '0;
      vn_j        <= '0;
      vn_n        <= '0;
      cn_i        <= '0;
      cn_m        <= '0;
      fr_addr     <= '0;
      iter_count  <= '0;
      dec_ready   <= 1'b0;
      converged   <= 1'b0;
      frame_valid <= 1'b0;
      frame_addr  <= '0;
    end else begin
      frame_valid <= fr_re;
      frame_addr  <= fr_addr;

      // step counters advance with every issue
      if (vnp_issue) begin
        if (int'(vn_n) == N - 1) begin
          vn_n <= '0;
          vn_j <= vn_j + 3'd1;
        end else begin
          vn_n <= vn_n + NW'(1);
        end
      end
      if (cnp_issue) begin
        if (int'(cn_m) == N - 1) begin
          cn_m <= '0;
          cn_i <= cn_i + 2'd1;
        end else begin
          cn_m <= cn_m + NW'(1);
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state      <= S_VNP;
            cyc        <= '0;
            err        <= 1'b0;
            iter_count <= '0;
            dec_ready  <= 1'b0;
            converged  <= 1'b0;
            vn_j       <= '0;
            vn_n       <= '0;
            ld_addr    <= '0;
          end else if (ld_en) begin
            ld_addr <= (int'(ld_addr) == J - 1) ? '0 : ld_addr + JW'(1);
          end
        end
        S_VNP: begin
          if (int'(cyc) == J + 2) begin
            state <= S_CNP;
            cyc   <= '0;
            cn_i  <= '0;
            cn_m  <= '0;
            err   <= 1'b0;
          end else begin
            cyc <= cyc + CW'(1);
          end
        end
        S_CNP: begin
          if (pc_valid && pc_fail) err <= 1'b1;
          if (int'(cyc) == K + 2) begin
            iter_count <= iter_count + IW'(1);
            cyc        <= '0;
            if (!fail_now || int'(iter_count) + 1 >= MAX_ITER) begin
              state     <= S_OUT;
              converged <= !fail_now;
              dec_ready <= 1'b1;
              fr_addr   <= '0;
            end else begin
              state <= S_VNP;
              vn_j  <= '0;
              vn_n  <= '0;
            end
          end else begin
            cyc <= cyc + CW'(1);
          end
        end
        S_OUT: begin
          if (int'(fr_addr) == J - 1) begin
            state   <= S_IDLE;
            fr_addr <= '0;
          end else begin
            fr_addr <= fr_addr + JW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst) begin
      assert (!(vnp_issue && cnp_issue)) else $error("VNP and CNP active together");
      assert (int'(iter_count) <= MAX_ITER) else $error("iteration count above limit");
    end
  end

endmodule
