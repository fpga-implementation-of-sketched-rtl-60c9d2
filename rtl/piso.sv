// piso: parallel-in serial-out time-stamp serializer.
//
// The sensor firmware decodes the time stamps of two 128-pixel rows
// (N = 256 pixels) in one batch.  This block takes such a batch in one clock
// and hands it on one time stamp per clock, element 0 first, so that the
// sketch processing elements see a continuous pixel stream (192 x 128 clocks
// per frame in the paper).
//
// Handshake: load is accepted when ready is high.  ready is high when the
// register is empty and also during the last output clock of a batch, so a
// producer that loads whenever ready is high gets a gap-free stream.
// Timing: valid/x show the head of the register; the first time stamp of a
// batch appears in the clock after load.
module piso
  import sketch_pkg::*;
#(
  parameter int N   = 2 * SENSOR_COLS,
  parameter int TSW = TS_BITS,
  localparam int CW = $clog2(N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [0:N-1][TSW-1:0] batch,
  output logic                  ready,
  output logic                  valid,
  output logic [TSW-1:0]        x
);

  logic [0:N-1][TSW-1:0] sreg;
  logic [CW-1:0]         left;     // time stamps still to send

  assign ready = (left <= CW'(1));
  assign valid = (left != '0);
  assign x     = sreg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0;
      sreg <= '0;
    end else if (load && ready) begin
      sreg <= batch;
      left <= CW'(N);
    end else if (valid) begin
      sreg <= {sreg[1:N-1], TSW'(0)};
      left <= left - CW'(1);
    end
  end

endmodule
