// prng_pkg: types and default constants shared by the logistic-map PRNG modules.
//
// The PRNG works on 16-bit unsigned words: the logistic map x(n+1) = r*x(n)*(1-x(n)) is
// rescaled so that 1.0 corresponds to 65535, and every iterate and every averaged output is
// an integer in 0..65535. The clock frequencies below are the defaults of the board-level
// top. The 1 Hz update rate, the 500 Hz digit scan and the 9600 baud serial rate follow the
// paper; the 12 MHz system clock (the oscillator of the Cmod A7 board), the 100 Hz byte rate of
// the serial link and the XADC channel address are choices of this design.
package prng_pkg;

  typedef logic [15:0] word_t;   // one PRNG word (logistic iterate or averaged output)
  typedef logic [7:0]  byte_t;   // one serial byte

  // State of the serial transmitter.
  typedef enum logic [1:0] {
    UART_IDLE  = 2'd0,   // line high, waiting for a start request
    UART_WAIT  = 2'd1,   // request taken, waiting for the next baud tick to start the frame
    UART_DATA  = 2'd2,   // start bit and data bits being shifted out
    UART_STOP  = 2'd3    // stop bit on the line
  } uart_state_t;

  localparam int unsigned SYSCLK_HZ_DEF = 12_000_000; // Cmod A7 oscillator
  localparam int unsigned PRNG_HZ_DEF   = 1;          // clk1: PRNG / seed update rate
  localparam int unsigned SCAN_HZ_DEF   = 500;        // clk2: 7-segment digit scan rate
  localparam int unsigned BAUD_DEF      = 9600;       // clk3: serial bit rate
  localparam int unsigned BYTE_HZ_DEF   = 100;        // clk4/clk5: byte select and send rate

  localparam logic [7:0] R_COEF_DEF     = 8'd4;       // logistic-map coefficient r
  localparam logic [6:0] XADC_ADDR_DEF  = 7'h1C;      // XADC status register of VAUX12

endpackage
