// sdp_ram: simple dual-port block RAM, one write port and one read port on
// the same clock.
//
// Inference template for an FPGA block RAM: the write happens at the clock
// edge when we is high; the read data is registered and appears one clock
// after raddr.  A read and a write of the same address in the same clock
// return the old word (read-first).  The contents are not reset; the
// accumulators that use it never read a word before writing it in the same
// acquisition.
module sdp_ram #(
  parameter int DEPTH = 24576,
  parameter int W     = 64,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
