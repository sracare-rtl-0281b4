// flash_ctrl: SPI NOR flash controller on the dedicated CARE-flash bus.
//
// Accepts one command at a time and turns it into standard SPI NOR
// transactions through its own spi_master:
//   FOP_READ     0x03 + 24-bit address, then cmd_len bytes streamed out on
//                rd_valid/rd_ready (the controller waits while rd_ready is
//                low, so a slow consumer such as the crypto-core sets the pace)
//   FOP_ERASE    0x06 write enable, 0x20 sector erase (4 KB) at cmd_addr,
//                then 0x05 status reads until the busy bit (WIP) clears
//   FOP_PROGRAM  cmd_len bytes taken on wr_valid/wr_ready, split at
//                PAGE_BYTES boundaries; each page is 0x06, 0x02 + address +
//                data, then WIP polling
// `done` pulses when the command has finished, including the flash's own
// program/erase time. cmd_len must be at least 1.
// Timing: each SPI byte costs 16*CLK_DIV+1 cycles; a read of n bytes costs
// about (n+4) of them plus the consumer's back-pressure. There is no read-ahead:
// the next data byte starts only once rd_data has been taken, which adds 2-3
// cycles a byte when the consumer takes it at once.
// The design only names the flash controller that the first-stage boot code
// sets up; the command set is the common SPI NOR one, chosen here.
// Lint notes: SYNCASYNCNET on rst_n comes from the disable iff of the
// assertion. Only bit 0 (WIP) of the status register is used.
module flash_ctrl
  import sracare_pkg::*;
#(
  parameter int unsigned CLK_DIV    = 1,
  parameter int unsigned PAGE_BYTES = 256
)(
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       cmd_valid,
  input  flash_op_e  cmd_op,
  input  faddr_t     cmd_addr,
  input  faddr_t     cmd_len,
  output logic       cmd_ready,
  output logic       done,
  // read data
  output logic       rd_valid,
  output logic [7:0] rd_data,
  input  logic       rd_ready,
  // program data
  input  logic       wr_valid,
  input  logic [7:0] wr_data,
  output logic       wr_ready,
  // SPI
  output logic       sclk,
  output logic       mosi,
  input  logic       miso,
  output logic       cs_n
);
  typedef enum logic [3:0] {
    S_IDLE, S_WREN, S_WREN_END, S_CMD, S_DATA, S_END, S_POLL, S_POLL_RD, S_POLL_END, S_DONE
  } state_e;
  state_e    state;
  flash_op_e op;
  faddr_t    addr;
  faddr_t      remaining;
  logic [1:0]  idx;
  logic        inflight;
  logic [7:0]  status;

  logic       s_start, s_busy, s_done;
  logic [7:0] s_tx, s_rx;

  spi_master #(.CLK_DIV(CLK_DIV)) u_spi (
    .clk, .rst_n, .start(s_start), .tx_byte(s_tx), .busy(s_busy), .done(s_done),
    .rx_byte(s_rx), .sclk, .mosi, .miso
  );

  logic [7:0] opcode;
  always_comb begin
    unique case (op)
      FOP_READ:    opcode = CMD_READ;
      FOP_PROGRAM: opcode = CMD_PP;
      default:     opcode = CMD_SE;
    endcase
  end

  logic page_end;
  assign page_end  = (((int'(addr) + 1) % PAGE_BYTES) == 0);
  assign cmd_ready = (state == S_IDLE);
  assign wr_ready  = (state == S_DATA) && (op == FOP_PROGRAM) && !inflight && !s_busy && wr_valid;

  always_comb begin
    s_start = 1'b0;
    s_tx    = 8'h00;
    if (!inflight && !s_busy) unique case (state)
      S_WREN:    begin s_start = 1'b1; s_tx = CMD_WREN; end
      S_CMD:     begin
        s_start = 1'b1;
        unique case (idx)
          2'd0: s_tx = opcode;
          2'd1: s_tx = addr[23:16];
          2'd2: s_tx = addr[15:8];
          default: s_tx = addr[7:0];
        endcase
      end
      S_DATA:    begin
        if (op == FOP_READ) begin s_start = !rd_valid; s_tx = 8'h00; end
        else                begin s_start = wr_valid;  s_tx = wr_data; end
      end
      S_POLL:    begin s_start = 1'b1; s_tx = CMD_RDSR; end
      S_POLL_RD: begin s_start = 1'b1; s_tx = 8'h00; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op        <= FOP_READ;
      addr      <= '0;
      remaining <= '0;
      idx       <= '0;
      inflight  <= 1'b0;
      status    <= '0;
      cs_n      <= 1'b1;
      rd_valid  <= 1'b0;
      rd_data   <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (s_start) inflight <= 1'b1;
      if (s_done)  inflight <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op        <= cmd_op;
          addr      <= cmd_addr;
          remaining <= cmd_len;
          idx       <= '0;
          cs_n      <= 1'b0;
          state     <= (cmd_op == FOP_READ) ? S_CMD : S_WREN;
        end
        S_WREN: if (s_done) begin cs_n <= 1'b1; state <= S_WREN_END; end
        S_WREN_END: begin cs_n <= 1'b0; idx <= '0; state <= S_CMD; end
        S_CMD: if (s_done) begin
          idx <= idx + 2'd1;
          if (idx == 2'd3) state <= (op == FOP_ERASE) ? S_END : S_DATA;
        end
        S_DATA: begin
          if (op == FOP_READ) begin
            if (s_done) begin rd_valid <= 1'b1; rd_data <= s_rx; end
            if (rd_valid && rd_ready) begin
              rd_valid  <= 1'b0;
              remaining <= remaining - 24'd1;
              addr      <= addr + 1'b1;
              if (remaining == 24'd1) state <= S_END;
            end
          end else if (s_done) begin
            remaining <= remaining - 24'd1;
            addr      <= addr + 1'b1;
            if (remaining == 24'd1 || page_end) state <= S_END;
          end
        end
        S_END: begin
          cs_n  <= 1'b1;
          state <= (op == FOP_READ) ? S_DONE : S_POLL_END;
          status <= 8'h01;     // force a first status read
        end
        S_POLL:    if (s_done) state <= S_POLL_RD;
        S_POLL_RD: if (s_done) begin status <= s_rx; cs_n <= 1'b1; state <= S_POLL_END; end
        S_POLL_END: begin
          if (status[0]) begin cs_n <= 1'b0; state <= S_POLL; end
          else if (op == FOP_PROGRAM && remaining != 24'd0) begin cs_n <= 1'b0; state <= S_WREN; end
          else state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid && !rd_ready |=> rd_valid && $stable(rd_data));
endmodule
