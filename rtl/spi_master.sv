// spi_master: byte-wide SPI master, mode 0 (SCLK idles low, MOSI changes on
// the falling edge, MISO is sampled on the rising edge), MSB first.
//
// A pulse on start with tx_data begins one 8-bit transfer; done pulses for
// one clock when the eighth bit has been shifted and rx_data holds the byte
// read from MISO. Chip select is not driven here: the flash controller owns
// it, so several bytes can form one SPI command. SCLK runs at
// clk / (2 * CLK_DIV); a transfer takes 16 * CLK_DIV clocks plus one.
// The paper names a dedicated SPI bus between ROM, flash and the CARE module
// but gives no mode, rate or framing: all of these are this design's choices.
module spi_master #(
  parameter int unsigned CLK_DIV = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] tx_data,
  output logic       busy,
  output logic       done,
  output logic [7:0] rx_data,
  output logic       sclk,
  output logic       mosi,
  input  logic       miso
);

  logic [7:0]  sr;
  logic [3:0]  edges;     // rising+falling edges still to make
  logic [$clog2(CLK_DIV+1)-1:0] div;
  logic        active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0; edges <= '0; div <= '0; active <= 1'b0;
      sclk <= 1'b0; mosi <= 1'b0; done <= 1'b0; rx_data <= '0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          sr     <= tx_data;
          mosi   <= tx_data[7];
          edges  <= 4'd15;
          div    <= '0;
          sclk   <= 1'b0;
        end
      end else if (div == $bits(div)'(CLK_DIV - 1)) begin
        div  <= '0;
        sclk <= ~sclk;
        if (!sclk) begin
          // rising edge: sample
          sr <= {sr[6:0], miso};
        end else begin
          // falling edge: present next bit
          mosi <= sr[7];
        end
        if (edges == 4'd0) begin
          active  <= 1'b0;
          done    <= 1'b1;
          rx_data <= sr;
        end else begin
          edges <= edges - 4'd1;
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  assign busy = active;

endmodule
