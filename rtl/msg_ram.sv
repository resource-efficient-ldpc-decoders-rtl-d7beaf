// msg_ram: block RAM with one write port and one registered read port.
//
// Used for every message store of the decoder (B_V, B_C), for the intrinsic
// message store and for the decoded-frame buffer, the way an FPGA block RAM in
// simple dual-port mode would be.  A write with we=1 updates word waddr at the
// clock edge; a read with re=1 presents word raddr on rdata after the same edge
// (one clock of latency).  A read of the word being written returns the old
// contents.  The contents are not reset: the controller writes each word before
// it reads it.
module msg_ram #(
  parameter int W     = 8,
  parameter int DEPTH = 4,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (we) assert (int'(waddr) < DEPTH) else $error("msg_ram: write address %0d out of range", waddr);
    if (re) assert (int'(raddr) < DEPTH) else $error("msg_ram: read address %0d out of range", raddr);
  end

endmodule
