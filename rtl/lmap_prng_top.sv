// lmap_prng_top: board-level top of the logistic-map PRNG with Gaussian-shaped output.
//
// The chip seeds a chaotic logistic map from a microphone, smooths the map's iterates with
// an exponentially weighted moving average (EWMA), and shows each averaged 16-bit value on a
// four-digit 7-segment display. It also streams the value to a PC over a serial line.
//   - clk1 (1 Hz) steps the PRNG and refreshes the seed from the latest ADC reading.
//   - xadc_seed reads the ADC channel through its DRP port; the ADC itself sits outside this
//     module and its DRP signals are ports.
//   - prng_core holds the seed while rstn is low and produces one new output every two clk1
//     ticks after release.
//   - the displayed number is refreshed from the PRNG output on every clk1 tick, and
//     drv_segment scans it onto the display at clk2 (500 Hz).
//   - uart_byte_split presents the low and then the high byte of the PRNG output on every
//     clk4 tick, uart_tx sends the byte on every clk5 tick at the clk3 baud rate (9600).
// The blocks, their connections and the rates of clk1, clk2 and clk3 follow the paper. The
// use of one system clock with tick enables, the reset synchronizer, the byte rate of clk4
// and clk5 (100 Hz, clk5 half a period after clk4) and r fixed at 4 are this design's
// choices.
// There are three reset inputs. rstn, the push button of the paper, holds the PRNG at the
// current seed and clears the displayed number. The seed register keeps sampling the ADC
// while the button is held, so releasing it starts a new sequence from the latest reading.
// rstn2 resets the serial path, as in the paper. sys_rstn resets the rest (the clock
// dividers, the ADC read-out and the display scan); on the FPGA these start from their
// configured initial values, and this reset stands in for that.
//
// Timing: all registers run on sysclk; the reset inputs are asynchronous and are synchronized
// here. After rstn rises, the first new PRNG value appears two clk1 ticks later.
// The raw ADC reading, the current iterate, the output-valid pulse, the byte phase and the
// transmitter's busy flag are produced by the blocks but have no pin on the board; they are
// left unconnected here and are visible to a testbench by hierarchical name.
module lmap_prng_top #(
  parameter int unsigned SYSCLK_HZ = prng_pkg::SYSCLK_HZ_DEF,
  parameter int unsigned PRNG_HZ   = prng_pkg::PRNG_HZ_DEF,
  parameter int unsigned SCAN_HZ   = prng_pkg::SCAN_HZ_DEF,
  parameter int unsigned BAUD      = prng_pkg::BAUD_DEF,
  parameter int unsigned BYTE_HZ   = prng_pkg::BYTE_HZ_DEF,
  parameter logic [7:0]  R_COEF    = prng_pkg::R_COEF_DEF,
  parameter logic [6:0]  XADC_ADDR = prng_pkg::XADC_ADDR_DEF
) (
  input  logic        sysclk,
  input  logic        sys_rstn,      // global reset: clock dividers, ADC read-out, display scan
  input  logic        rstn,          // push button, low = hold the PRNG at the current seed
  input  logic        rstn2,         // reset of the serial path
  // DRP of the on-chip ADC
  input  logic        xadc_eoc,
  input  logic        xadc_drdy,
  input  logic [15:0] xadc_do,
  output logic        xadc_den,
  output logic        xadc_dwe,
  output logic [6:0]  xadc_daddr,
  output logic [15:0] xadc_di,
  // 7-segment display
  output logic [6:0]  seg,
  output logic [3:0]  an,
  output logic        dp,
  // serial line to the PC
  output logic        uart_txd
);
  import prng_pkg::*;

  // ---- resets, each synchronized to sysclk
  logic sys_rst_n, prng_rst_n, ser_rst_n;

  reset_sync u_rs_sys  (.clk(sysclk), .arst_n(sys_rstn), .rst_n(sys_rst_n));
  reset_sync u_rs_prng (.clk(sysclk), .arst_n(rstn),     .rst_n(prng_rst_n));
  reset_sync u_rs_ser  (.clk(sysclk), .arst_n(rstn2),    .rst_n(ser_rst_n));

  // ---- clk1 .. clk5 (tick enables); clk4 fires half a byte period before clk5
  localparam int unsigned BYTE_DIV = SYSCLK_HZ / BYTE_HZ;
  logic tick_1hz, tick_scan, tick_baud, tick_proc, tick_send;

  clk_div #(.CLK_HZ(SYSCLK_HZ), .OUT_HZ(PRNG_HZ))
    u_clk1 (.clk(sysclk), .rst_n(sys_rst_n), .tick(tick_1hz));
  clk_div #(.CLK_HZ(SYSCLK_HZ), .OUT_HZ(SCAN_HZ))
    u_clk2 (.clk(sysclk), .rst_n(sys_rst_n), .tick(tick_scan));
  clk_div #(.CLK_HZ(SYSCLK_HZ), .OUT_HZ(BAUD))
    u_clk3 (.clk(sysclk), .rst_n(ser_rst_n), .tick(tick_baud));
  clk_div #(.CLK_HZ(SYSCLK_HZ), .OUT_HZ(BYTE_HZ), .PHASE(BYTE_DIV / 2))
    u_clk4 (.clk(sysclk), .rst_n(ser_rst_n), .tick(tick_proc));
  clk_div #(.CLK_HZ(SYSCLK_HZ), .OUT_HZ(BYTE_HZ))
    u_clk5 (.clk(sysclk), .rst_n(ser_rst_n), .tick(tick_send));

  // ---- seed from the ADC
  word_t adc_data, seed;

  xadc_seed #(.ADDR(XADC_ADDR)) u_seed (
    .clk      (sysclk),
    .rst_n    (sys_rst_n),
    .tick     (tick_1hz),
    .eoc      (xadc_eoc),
    .drdy     (xadc_drdy),
    .do_out   (xadc_do),
    .den      (xadc_den),
    .dwe      (xadc_dwe),
    .daddr    (xadc_daddr),
    .di       (xadc_di),
    .adc_data (adc_data),
    .seed     (seed)
  );

  // ---- PRNG: logistic map + EWMA
  word_t xt, disp;
  logic  prng_valid;

  prng_core #(.W(16)) u_prng (
    .clk   (sysclk),
    .rst_n (prng_rst_n),
    .tick  (tick_1hz),
    .seed  (seed),
    .r     (R_COEF),
    .xt    (xt),
    .avg   (disp),
    .valid (prng_valid)
  );

  // ---- display: the number shown is refreshed from the PRNG output on every clk1 tick
  word_t displayed_number_r;

  always_ff @(posedge sysclk) begin
    if (!prng_rst_n)   displayed_number_r <= '0;
    else if (tick_1hz) displayed_number_r <= disp;
  end

  drv_segment u_seg (
    .clk   (sysclk),
    .rst_n (sys_rst_n),
    .tick  (tick_scan),
    .value (displayed_number_r),
    .seg   (seg),
    .an    (an),
    .dp    (dp)
  );

  // ---- serial link: low byte, then high byte, of the PRNG output
  byte_t uart_tx_data;
  logic  odd, uart_busy;

  uart_byte_split u_split (
    .clk     (sysclk),
    .rst_n   (ser_rst_n),
    .tick    (tick_proc),
    .disp    (disp),
    .tx_data (uart_tx_data),
    .odd     (odd)
  );

  uart_tx u_uart (
    .clk       (sysclk),
    .rst_n     (ser_rst_n),
    .baud_tick (tick_baud),
    .start     (tick_send),
    .data      (uart_tx_data),
    .tx        (uart_txd),
    .busy      (uart_busy)
  );

endmodule
