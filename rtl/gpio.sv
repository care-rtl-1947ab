// gpio: general-purpose inputs of the SoC and the external bootstrap
// trigger. The inputs pass a two-flop synchroniser; gpio_q is readable by the
// host. A rising edge on pin BOOT_PIN (pin 7, as in the paper) gives a
// one-clock boot_trig pulse that makes the CARE module run the bootstrap
// again. Latency from pin to pulse: three clocks. The paper names the GPIO
// block and the use of pin 7; the synchroniser and edge detection are this
// design's choices.
module gpio #(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned BOOT_PIN = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] gpio_i,
  output logic [WIDTH-1:0] gpio_q,
  output logic             boot_trig
);

  logic [WIDTH-1:0] s1;
  logic             prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; gpio_q <= '0; prev <= 1'b0; boot_trig <= 1'b0;
    end else begin
      s1        <= gpio_i;
      gpio_q    <= s1;
      prev      <= gpio_q[BOOT_PIN];
      boot_trig <= gpio_q[BOOT_PIN] && !prev;
    end
  end

endmodule
