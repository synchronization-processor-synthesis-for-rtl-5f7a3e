// Clock gate for the encapsulated IP.
//
// gclk pulses high in exactly the clock cycles in which en is high. en is
// captured by a latch that is transparent while clk is low and holds while
// clk is high, and gclk is clk AND the latched enable; en may therefore
// change anywhere in the cycle after the rising edge without cutting a pulse
// short or making a glitch. This is the usual latch-based clock-gating cell.
// The latch is intended (it is the gating cell's own latch), so a latch
// warning from a lint or synthesis tool on en_lat stands.
//
// The paper has the SP drive the IP's clock with its enable signal through a
// gate joining enable and clock; the latch-based form is this design's
// choice. On an FPGA a vendor clock-enable buffer would take its place.
module sp_clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);

  logic en_lat;

  always_latch begin
    if (!clk) en_lat = en;
  end

  assign gclk = clk & en_lat;

endmodule
