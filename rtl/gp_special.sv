// gp_special: the GP-Special peripheral: 16 LEDs and 16 switches.
//
// The paper's GP-Special module drives 16 LEDs and reads 16 switches for lab
// exercises. Here the LED register is written with byte strobes (we, wstrb) and
// drives the leds pins directly; led_q reads it back. The switches pass a
// two-flop synchroniser and appear on sw_q two clocks after they change. The
// widths are the paper's; the synchroniser and register interface are this
// design's own choice. The GPIO block maps it onto the data bus.
module gp_special #(
  parameter int unsigned N_LED = 16,
  parameter int unsigned N_SW  = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             we,
  input  logic [N_LED-1:0] wdata,
  input  logic [1:0]       wstrb,
  input  logic [N_SW-1:0]  switches,
  output logic [N_LED-1:0] leds,
  output logic [N_LED-1:0] led_q,
  output logic [N_SW-1:0]  sw_q
);

  logic [N_SW-1:0] sw_meta;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      led_q   <= '0;
      sw_meta <= '0;
      sw_q    <= '0;
    end else begin
      sw_meta <= switches;
      sw_q    <= sw_meta;
      if (we)
        for (int i = 0; i < N_LED; i++)
          if (wstrb[(i / 8) % 2]) led_q[i] <= wdata[i];
    end
  end

  assign leds = led_q;

endmodule
