// uart_tx: serial transmitter, 8 data bits, no parity, one stop bit, LSB first.
//
// A `start` pulse while the transmitter is idle takes `data` and arms a frame. The frame
// begins at the next `baud_tick`: the start bit (0), then data[0] .. data[7], then the stop
// bit (1). Each bit lasts exactly one baud period. `busy` is high from the accepted start
// until the stop bit has ended. A start while busy is ignored.
// The 9600 baud rate follows the paper (the receiver opens its port at 9600). The frame format
// (8N1) and the start handshake are this design's choices.
//
// Interface: baud_tick (one pulse per bit time), start/data (byte request), tx (line, idle
// high), busy.
// Timing: the start bit begins one clock after the first baud_tick that follows the accepted
// start; a frame lasts 10 baud periods.
module uart_tx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       baud_tick,
  input  logic       start,
  input  logic [7:0] data,
  output logic       tx,
  output logic       busy
);
  import prng_pkg::*;

  uart_state_t state;
  logic [7:0]  shreg;
  logic [3:0]  nbit;    // bits already sent of start + data

  assign busy = (state != UART_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= UART_IDLE;
      shreg <= '0;
      nbit  <= '0;
      tx    <= 1'b1;
    end else begin
      unique case (state)
        UART_IDLE: if (start) begin
          shreg <= data;
          state <= UART_WAIT;
        end
        UART_WAIT: if (baud_tick) begin
          tx    <= 1'b0;           // start bit
          nbit  <= '0;
          state <= UART_DATA;
        end
        UART_DATA: if (baud_tick) begin
          if (nbit == 4'd8) begin
            tx    <= 1'b1;         // stop bit
            state <= UART_STOP;
          end else begin
            tx    <= shreg[0];
            shreg <= {1'b0, shreg[7:1]};
            nbit  <= nbit + 1'b1;
          end
        end
        UART_STOP: if (baud_tick) state <= UART_IDLE;
      endcase
    end
  end

  // The line is high whenever the transmitter is idle.
  a_idle_high: assert property (@(posedge clk) disable iff (!rst_n) (state == UART_IDLE) |-> tx);

endmodule
