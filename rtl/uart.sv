// uart: memory-mapped serial port, 8 data bits, no parity, one stop bit,
// CLKS_PER_BIT clock cycles per bit (434 = 50 MHz / 115200 baud).
// Register map (word offsets from the UART base, selected by addr):
//   0  write: send wdata[7:0] (ignored while the transmitter is busy)
//      read : last received byte in [7:0]; reading clears rx_valid
//   1  read : status, bit 0 tx_busy, bit 1 rx_valid
// Reads return data on the clock edge after the request, like the data
// SRAM. The receiver synchronises rx through two flops, waits for a start
// bit, samples each bit in its middle and keeps the byte if the stop bit
// is high; a new byte overwrites an unread one. The register map, baud
// rate and framing are this design's choice: the source description only says a
// memory-mapped UART provides external I/O.
module uart #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        req,
  input  logic        we,
  input  logic        addr,     // word offset 0 or 1
  input  logic [7:0]  wdata,
  output logic [31:0] rdata,
  output logic        tx,
  input  logic        rx,
  output logic        tx_start,  // a byte was accepted for sending
  output logic        rx_done    // a byte was received
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  // transmitter
  logic [9:0]    tx_shift;
  logic [3:0]    tx_bits;
  logic [CW-1:0] tx_cnt;
  logic          tx_busy;

  assign tx_busy  = (tx_bits != 4'd0);
  assign tx       = tx_busy ? tx_shift[0] : 1'b1;
  assign tx_start = req && we && !addr && !tx_busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_shift <= '1; tx_bits <= '0; tx_cnt <= '0;
    end else if (tx_start) begin
      tx_shift <= {1'b1, wdata, 1'b0};
      tx_bits  <= 4'd10;
      tx_cnt   <= CW'(CLKS_PER_BIT - 1);
    end else if (tx_busy) begin
      if (tx_cnt == '0) begin
        tx_shift <= {1'b1, tx_shift[9:1]};
        tx_bits  <= tx_bits - 4'd1;
        tx_cnt   <= CW'(CLKS_PER_BIT - 1);
      end else begin
        tx_cnt <= tx_cnt - 1'b1;
      end
    end
  end

  // receiver
  logic [1:0]    rx_sync;
  logic          rx_s;
  logic          rx_active;
  logic [3:0]    rx_bits;
  logic [CW-1:0] rx_cnt;
  logic [8:0]    rx_shift;
  logic [7:0]    rx_data;
  logic          rx_valid;
  logic          rd_clear;

  assign rx_s     = rx_sync[1];
  assign rd_clear = req && !we && !addr;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_sync <= 2'b11; rx_active <= 1'b0; rx_bits <= '0; rx_cnt <= '0;
      rx_shift <= '0; rx_data <= '0; rx_valid <= 1'b0; rx_done <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[0], rx};
      rx_done <= 1'b0;
      if (rd_clear) rx_valid <= 1'b0;
      if (!rx_active) begin
        if (!rx_s) begin
          rx_active <= 1'b1;
          rx_bits   <= 4'd10;   // start, 8 data, stop
          rx_cnt    <= CW'(CLKS_PER_BIT / 2);
        end
      end else if (rx_cnt == '0) begin
        rx_cnt   <= CW'(CLKS_PER_BIT - 1);
        rx_bits  <= rx_bits - 4'd1;
        rx_shift <= {rx_s, rx_shift[8:1]};
        if (rx_bits == 4'd10 && rx_s) begin
          rx_active <= 1'b0;           // glitch, not a start bit
        end else if (rx_bits == 4'd1) begin
          rx_active <= 1'b0;
          if (rx_s) begin
            rx_data  <= rx_shift[8:1];
            rx_valid <= 1'b1;
            rx_done  <= 1'b1;
          end
        end
      end else begin
        rx_cnt <= rx_cnt - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst)        rdata <= '0;
    else if (req)   rdata <= addr ? {30'd0, rx_valid, tx_busy} : {24'd0, rx_data};
  end
endmodule
