// pec_uart: serial port of the controller (TX, RX).
//
// Frame: one start bit (0), eight data bits LSB first, one stop bit (1);
// each bit lasts CLKS_PER_BIT cycles of the UART's clock. The UARTS
// instruction pulses start with the byte to send; tx_busy stays high until
// the stop bit has been sent, and the control unit holds a further UARTS
// until it falls. The receiver synchronises rx through two flip-flops,
// waits for a falling edge, checks the start bit half a bit later and then
// samples each bit in its middle; the last complete byte is kept in rx_data
// and read back by UARTS. The UART's clock is gated: the control unit keeps
// it running while tx_busy or rx_busy is high, while rx is low (a start bit
// may be arriving) and during a start. The UART, its TX/RX pins and its
// select signal are the original's; the frame, the bit timing and the
// exchange of bytes by UARTS are this design's choices.
module pec_uart #(
  parameter int unsigned CLKS_PER_BIT = 868  // 115200 baud at 100 MHz
) (
  input  logic       gclk,    // clock gated by Clkgatuart
  input  logic       rst,
  input  logic       start,   // UARTsel
  input  logic [7:0] tx_data,
  output logic       tx,
  output logic       tx_busy,
  input  logic       rx,
  output logic       rx_busy,
  output logic [7:0] rx_data,
  output logic       rx_done  // one-cycle pulse when a byte has arrived
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  // ---------------- transmitter ----------------
  logic [9:0]    tx_shift;
  logic [3:0]    tx_bits;
  logic [CW-1:0] tx_cnt;

  always_ff @(posedge gclk or posedge rst) begin
    if (rst) begin
      tx_shift <= '1;
      tx_bits  <= '0;
      tx_cnt   <= '0;
      tx_busy  <= 1'b0;
    end else if (!tx_busy) begin
      if (start) begin
        tx_shift <= {1'b1, tx_data, 1'b0};
        tx_bits  <= 4'd10;
        tx_cnt   <= CW'(CLKS_PER_BIT - 1);
        tx_busy  <= 1'b1;
      end
    end else if (tx_cnt != '0) begin
      tx_cnt <= tx_cnt - CW'(1);
    end else if (tx_bits == 4'd1) begin
      tx_busy  <= 1'b0;
      tx_bits  <= '0;
      tx_shift <= '1;
    end else begin
      tx_shift <= {1'b1, tx_shift[9:1]};
      tx_bits  <= tx_bits - 4'd1;
      tx_cnt   <= CW'(CLKS_PER_BIT - 1);
    end
  end

  assign tx = tx_shift[0];

  // ---------------- receiver ----------------
  logic [1:0]    rx_sync;
  logic [7:0]    rx_shift;
  logic [3:0]    rx_bits;
  logic [CW-1:0] rx_cnt;

  always_ff @(posedge gclk or posedge rst) begin
    if (rst) begin
      rx_sync  <= 2'b11;
      rx_shift <= '0;
      rx_bits  <= '0;
      rx_cnt   <= '0;
      rx_busy  <= 1'b0;
      rx_data  <= '0;
      rx_done  <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[0], rx};
      rx_done <= 1'b0;
      if (!rx_busy) begin
        if (!rx_sync[1]) begin
          rx_busy <= 1'b1;
          rx_bits <= 4'd0;
          rx_cnt  <= CW'(CLKS_PER_BIT / 2 - 1);
        end
      end else if (rx_cnt != '0) begin
        rx_cnt <= rx_cnt - CW'(1);
      end else begin
        rx_cnt <= CW'(CLKS_PER_BIT - 1);
        if (rx_bits == 4'd0) begin
          // middle of the start bit: a glitch if the line is high again
          if (rx_sync[1]) rx_busy <= 1'b0;
          else            rx_bits <= 4'd1;
        end else if (rx_bits <= 4'd8) begin
          rx_shift <= {rx_sync[1], rx_shift[7:1]};
          rx_bits  <= rx_bits + 4'd1;
        end else begin
          // stop bit: keep the byte only if the stop bit is 1
          rx_busy <= 1'b0;
          if (rx_sync[1]) begin
            rx_data <= rx_shift;
            rx_done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
