// tb_gpio: drives random input patterns and checks the synchronised value
// two clocks later, and that every rising edge of pin 7, and nothing else,
// gives exactly one boot_trig pulse three clocks after the pin changed.
module tb_gpio;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] gpio_i, gpio_q;
  logic boot_trig;
  int checks = 0, failures = 0;
  gpio dut (.*);

  logic [31:0] hist [4];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pulses = 0, edges = 0;
    gpio_i = 0;
    foreach (hist[i]) hist[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // hist[k] = value driven k cycles ago (before this update)
      checks += 2;
      if (gpio_q !== hist[1]) begin failures++; $display("FAIL gpio_q %h exp %h", gpio_q, hist[1]); end
      if (boot_trig !== (hist[2][7] && !hist[3][7])) begin failures++; $display("FAIL trig at %0d", t); end
      if (boot_trig) pulses++;
      if (hist[2][7] && !hist[3][7]) edges++;
      for (int k = 3; k > 0; k--) hist[k] = hist[k-1];
      if ($urandom_range(0, 3) == 0) gpio_i = $urandom;
      hist[0] = gpio_i;
    end
    checks++;
    if (pulses == 0 || pulses != edges) failures++;
    $display("pin-7 rising edges %0d, trigger pulses %0d", edges, pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
