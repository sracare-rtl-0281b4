// uart: 8N1 serial link between the prover and the remote verifier.
//
// Transmitter: a byte offered on tx_valid is taken when tx_ready is high and
// sent as start bit, 8 data bits LSB first, stop bit. Receiver: the line is
// synchronised through two flip-flops; a falling edge starts a frame, each
// bit is sampled in the middle of its period, and a byte with a good stop
// bit is presented for one cycle on rx_valid/rx_data (a bad stop bit drops
// the byte). There is no receive buffer: the consumer must take each byte in
// the cycle it is shown.
// Timing: CLKS_PER_BIT clocks per bit, 10 bits per byte in each direction.
// The design uses a UART for its proof-of-concept link and notes that any
// other link would do; framing and rate are this design's choice.
// Lint note: bit 0 of each shift register is shifted out and never read.
module uart #(
  parameter int unsigned CLKS_PER_BIT = 868
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       tx,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready,
  output logic       rx_valid,
  output logic [7:0] rx_data
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  // transmitter
  logic [9:0]    tx_sh;
  logic [3:0]    tx_bits;
  logic [CW-1:0] tx_cnt;
  assign tx_ready = (tx_bits == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx      <= 1'b1;
      tx_sh   <= '1;
      tx_bits <= '0;
      tx_cnt  <= '0;
    end else if (tx_bits == 4'd0) begin
      if (tx_valid) begin
        tx_sh   <= {1'b1, tx_data, 1'b0};
        tx_bits <= 4'd10;
        tx_cnt  <= '0;
        tx      <= 1'b0;
      end
    end else if (int'(tx_cnt) == CLKS_PER_BIT - 1) begin
      tx_cnt  <= '0;
      tx_sh   <= {1'b1, tx_sh[9:1]};
      tx_bits <= tx_bits - 4'd1;
      tx      <= (tx_bits == 4'd1) ? 1'b1 : tx_sh[1];
    end else begin
      tx_cnt <= tx_cnt + 1'b1;
    end
  end

  // receiver
  logic [1:0]    sync;
  logic          rx_busy;
  logic [3:0]    rx_bits;
  logic [CW-1:0] rx_cnt;
  logic [8:0]    rx_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync     <= 2'b11;
      rx_busy  <= 1'b0;
      rx_bits  <= '0;
      rx_cnt   <= '0;
      rx_sh    <= '0;
      rx_valid <= 1'b0;
      rx_data  <= '0;
    end else begin
      sync     <= {sync[0], rx};
      rx_valid <= 1'b0;
      if (!rx_busy) begin
        if (!sync[1]) begin
          rx_busy <= 1'b1;
          rx_bits <= '0;
          rx_cnt  <= CW'(CLKS_PER_BIT / 2);
        end
      end else if (int'(rx_cnt) == CLKS_PER_BIT - 1) begin
        rx_cnt <= '0;
        if (rx_bits == 4'd0 && sync[1]) begin
          rx_busy <= 1'b0;                   // glitch, not a start bit
        end else begin
          rx_sh   <= {sync[1], rx_sh[8:1]};
          rx_bits <= rx_bits + 4'd1;
          if (rx_bits == 4'd9) begin
            rx_busy <= 1'b0;
            if (sync[1]) begin
              rx_valid <= 1'b1;
              rx_data  <= rx_sh[8:1];
            end
          end
        end
      end else begin
        rx_cnt <= rx_cnt + 1'b1;
      end
    end
  end
endmodule
