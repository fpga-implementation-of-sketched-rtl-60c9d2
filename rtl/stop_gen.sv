// stop_gen: the periodic STOP (laser trigger) signal with a programmable delay.
//
// The FPGA sends the laser driver a 4.54 MHz trigger that also serves as
// the TDC STOP reference, and the firmware can delay it in 10 ns steps to
// emulate a target further away (15 steps, 150 ns, in the paper's distance
// sweep).  The clock frequency is not given; 200 MHz is assumed here because
// streaming 192 x 128 pixels at one per clock at about 6,500 frames/s needs
// at least 160 MHz.  At 200 MHz a period is DIV = 44 clocks (4.545 MHz) and a
// 10 ns step is STEP = 2 clocks.  A free-running phase counter counts
// 0..DIV-1; stop is high for HIGH clocks starting delay*STEP clocks after
// phase 0, i.e. the whole waveform is shifted by the delay.
//
// Interface: delay is in 10 ns steps and delay*STEP must stay below DIV.
// period_start marks phase 0 of the undelayed reference.
// Timing: stop is registered; a new delay takes effect at once on the
// shifted waveform.
module stop_gen #(
  parameter int DIV  = 44,
  parameter int STEP = 2,
  parameter int HIGH = DIV / 2,
  parameter int DLW  = 5,
  localparam int PW  = $clog2(DIV) + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [DLW-1:0] delay,        // 10 ns steps
  output logic           stop,
  output logic           period_start
);

  logic [PW-1:0] phase;
  logic [PW-1:0] dclk;      // delay in clocks
  logic [PW-1:0] shifted;   // (phase - dclk) mod DIV

  always_comb begin
    dclk = PW'(delay) * PW'(STEP);
    if (phase >= dclk) shifted = phase - dclk;
    else               shifted = phase + PW'(DIV) - dclk;
    period_start = (phase == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      stop  <= 1'b0;
    end else begin
      phase <= (phase == PW'(DIV - 1)) ? '0 : phase + PW'(1);
      stop  <= (shifted < PW'(HIGH));
    end
  end

endmodule
