# Logistic-map PRNG with a bell-shaped output, in SystemVerilog

This design generates pseudo-random 16-bit numbers whose distribution is roughly Gaussian.
It does this with two very small arithmetic units and no tables.

1. A chaotic source. The logistic map `x(n+1) = r * x(n) * (1 - x(n))` with `r = 4` is
   chaotic: tiny changes in the start value quickly lead to unrelated sequences. Its values
   spread over the whole range, but they are not Gaussian.
2. A smoother. An exponentially weighted moving average (EWMA) of the map's values,
   `avg = 0.8 * avg + 0.2 * x`, adds up many loosely correlated samples. By a central-limit
   argument the result clusters around the middle of the range, and its histogram is
   bell-shaped.

The seed comes from the outside world. The FPGA's on-chip ADC samples a microphone once a
second, and pressing a button restarts the generator from the latest reading. Each result is
shown as four hex digits on a 7-segment display. It is also sent to a PC over a 9600-baud
serial line, where the PC can build a histogram.

The RTL reproduces a published FPGA design: a student project on a Digilent Cmod A7 board.
The arithmetic of the two PRNG units is that design's, bit for bit. The glue around them
(clocking, resets, the ADC read sequence, the serial frame) is filled in here where the
original gives only the function; the differences are listed below.

## Block diagram

```
             sys_rstn        rstn (button)          rstn2
                |                 |                   |
   sysclk --> clk1 (1 Hz) ------+-------------+       |
              clk2 (500 Hz) --+ |             |       |
              clk3 (9600 Hz) -|-|------+      |       |
              clk4, clk5 (100 Hz)      |      |       |
                              | |      v      v       v
 ADC DRP <--> xadc_seed --seed--> prng_core (chaotic_lmap -> ewma_avg) --disp--+
                              |                                                |
                              |   displayed_number_r <--(clk1)-----------------+
                              v          |                                     |
                         drv_segment <---+            uart_byte_split <--------+
                          seg, an, dp                        | byte (clk4)
                                                          uart_tx (clk3 bits, clk5 start)
                                                             | uart_txd
```

| File | Role |
|---|---|
| `rtl/prng_pkg.sv` | word and byte types, UART state enum, default rates |
| `rtl/chaotic_lmap.sv` | one registered step of the 16-bit logistic map |
| `rtl/ewma_avg.sv` | EWMA register, loaded with the seed in reset |
| `rtl/prng_core.sv` | the map/average loop and its two-tick sequencing |
| `rtl/xadc_seed.sv` | DRP read of the microphone channel, seed register |
| `rtl/clk_div.sv` | tick generator, used five times (clk1 .. clk5) |
| `rtl/drv_segment.sv` | 4-digit multiplexed hex display driver |
| `rtl/uart_byte_split.sv` | low byte / high byte selection for the serial link |
| `rtl/uart_tx.sv` | 8N1 serial transmitter |
| `rtl/reset_sync.sv` | reset synchronizer |
| `rtl/lmap_prng_top.sv` | board-level top |

The ADC itself (the FPGA vendor's XADC block) is not part of the RTL. Its DRP signals are
ports of the top, and `tb/xadc_model.sv` is a behavioural stand-in for simulation.

## The arithmetic

### The map on 16-bit integers

The map is rescaled so that 1.0 is 65535, and everything stays an integer:

```
xtnext = ( r * xt * (65535 - xt) + 32767 ) / 65535        (32-bit product, r = 4)
```

The `+ 32767` rounds to the nearest integer instead of truncating. With `r = 4` the product
peaks at `4 * 32767 * 32768 = 4 294 836 224`, just under 2^32, so the 32-bit intermediate
never wraps and the quotient never exceeds 65535. The map has two fixed points that matter:

* 0 maps to 0 for ever. This is why a zero ADC reading is turned into a seed of 1.
* 65535 maps to 0 and then stays there.

For `r` above 4 the product wraps modulo 2^32, as in the original. Only `r = 4` is used.

### The average

```
avg = floor( (40 * avg + 10 * x) / 50 )                    i.e. floor((4*avg + x) / 5)
```

The weights 40/10/50 are parameters of `ewma_avg`. The sample weight is 1/5. The original
text calls the smoothing constant "40/50", but its equation and code both give 40/50 to the
old average, and that is what is built. Reset loads the seed into `avg`, so the first value
shown after a restart is the seed itself.

### Reference trace

From seed `0x0BB8` the published simulation prints these values, and `prng_core` reproduces
them:

| step | x | avg |
|---|---|---|
| 0 (seed) | 0BB8 | 0BB8 |
| 1 | 2CBB | 1252 |
| 2 | 93A9 | 2C30 |
| 3 | F9F5 | 5557 |
| 4 | 1796 | 48FD |
| 5 | 55A7 | 4B85 |

### Short cycles: a property of the 16-bit map

A map on 65536 integer states must end in a cycle, and the rounded logistic map ends in
short ones. Over 1000 outputs, the workload test measures:

| seed | lead-in | cycle length | mean of avg | std. dev. | 10-bin histogram over 0..65535 |
|---|---|---|---|---|---|
| 6000 | 19 | 155 | 35351 | 6500 | 0 1 42 47 184 426 294 6 0 0 |
| 3000 (0x0BB8) | 19 | 11 | 20694 | 4772 | 1 1 532 273 188 4 1 0 0 0 |
| 1 | 3 | 71 | 33780 | 6802 | 7 1 27 86 252 418 195 14 0 0 |

The averaged output is bell-shaped from seeds such as 6000 and 1. From 0x0BB8 it locks into
an 11-step loop. This follows from the original arithmetic and is kept unchanged. The
floating-point prototype that motivated the design does not have these cycles. A user who
needs long sequences must change the arithmetic, for example with wider words, and the
result will then no longer match the published design.

## How an update is sequenced

This part is the least obvious. In the original, the map's output register (`pee`) and the
iterate register (`xnext`) are clocked on the same 1 Hz edge, with `xnext <= pee`. That loop
holds two registers, so each new iterate needs two edges. Which value comes out first also
depends on what `pee` held when the button was released.

`prng_core` makes the two-edge behaviour explicit with a phase bit:

* Tick A (phase 0): `chaotic_lmap` computes `pee <= f(xt)`.
* Tick B (phase 1): `xt <= pee` and, on the same edge, `avg <= EWMA(avg, pee)`. `valid`
  pulses one clock later.

So there is one new output every two clk1 ticks, i.e. every 2 s on the board. Every iterate
is averaged exactly once, which is the sequence of the published trace above. While `rstn`
is held low, `xt` and `avg` both follow the seed. The first new value appears two ticks
after release, whatever the loop held before.

The original EWMA updates on a rising edge of its own data input. Here it is an ordinary
enabled register, updated on tick B.

## Seeding from the microphone (`xadc_seed`)

The ADC converts continuously and pulses `eoc` after each conversion. On each `eoc`,
`xadc_seed` sends a one-cycle DRP read (`den = 1`, `dwe = 0`, `daddr = 0x1C`) and stores
`do_out` when `drdy` arrives. An `eoc` during an open read is ignored, and an assertion
checks that `den` is never high on two consecutive cycles. On every clk1 tick, the latest
reading becomes the seed, with 0 replaced by 1.

The whole 16-bit result register is used. Its four low bits are below the ADC's 12-bit
resolution, which is harmless for a seed. Address 0x1C is the VAUX12 result register, the
auxiliary input wired to analog pin 16 of the Cmod A7. The original only names the
constant `PIN16_ADDR`. Change the `XADC_ADDR` parameter for another channel.

## Display (`drv_segment`)

`displayed_number_r` in the top copies the PRNG output on each clk1 tick. `drv_segment`
shows it as four hex digits, lighting one digit per clk2 tick (500 Hz, so 125 Hz per digit).
`an[0]` is the least significant digit, and `seg[0..6]` are segments a..g. All outputs are
active low (`ACTIVE_LOW = 1`) and registered. The polarity and pin order are choices to
adapt to the display you wire up; the original does not give them.

## Serial link (`uart_byte_split`, `uart_tx`)

Two 100 Hz ticks drive the link. They are offset by half a period, and clk4 comes first.

* On clk4, `uart_byte_split` copies the PRNG output into `disp_r`, toggles `odd`, and
  presents the low byte of the previous copy (`odd = 0`) or its high byte (`odd = 1`).
  After `rstn2` the low byte comes first, so the PC reads each byte pair as a
  little-endian 16-bit number.
* On clk5, `uart_tx` sends the presented byte as 8N1 at 9600 baud (clk3). A frame takes
  1.04 ms of the 10 ms slot.

Two properties come from the original and are kept:

* `disp_r` is refreshed on every clk4 tick. A word that changes between its two bytes is
  received torn: the low byte of the old value with the high byte of the new one. This
  happens at most once per PRNG update.
* The first word after `rstn2` carries a low byte of 0 (the reset value of `disp_r`).

The same word is sent about 100 times per update. The receiving script therefore keeps a
value only when it differs from the previous one.

## Clocks and resets

Everything runs on `sysclk` (12 MHz on the Cmod A7). The five "clocks" of the original are
`clk_div` instances that each give a one-cycle enable pulse:

| Instance | Rate | Drives |
|---|---|---|
| clk1 | 1 Hz | seed update, PRNG ticks, display register |
| clk2 | 500 Hz | digit scan |
| clk3 | 9600 Hz | UART bit time |
| clk4 | 100 Hz, half a period early | byte selection |
| clk5 | 100 Hz | byte send |

The 1 Hz, 500 Hz and 9600 rates are the original's. The original says only that three
clocks serve the UART (bit rate, byte selection, transmission), so the 100 Hz byte rate is
a choice here. Enables instead of derived clocks keep the design in one clock domain.

There are three asynchronous, active-low reset inputs, each synchronized with
`reset_sync`:

* `rstn`: the user's button. It holds the PRNG at the current seed and clears the display
  register.
* `rstn2`: resets the serial path, as in the original.
* `sys_rstn`: resets the dividers, the ADC read-out and the display scan. The original relies
  on FPGA power-up values for these. They must keep running while `rstn` is held, or the
  seed could never change.

## Departures from the published design

* The two-register loop is sequenced with a phase bit (one output per two ticks, each
  iterate averaged once). It is not left to depend on register contents at reset release.
* The EWMA updates as an enabled synchronous register instead of on an edge of its data
  input. Its seed load is synchronous instead of asynchronous.
* Derived clocks are replaced by enable ticks on one clock. The `sys_rstn` input is added.
* Values the original does not give were chosen here: the system clock (12 MHz, the board's
  oscillator), the byte rate (100 Hz), the frame format (8N1), the ADC address (0x1C), the
  DRP read sequence, the display polarity and digit order.
* The original top register `disp_r` is declared with an 8-bit reset constant. Here it is
  16 bits wide and cleared to 0.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares against values computed
independently in the testbench, has a watchdog, and ends with a `TB_RESULT` line.

| Testbench | What it checks |
|---|---|
| `tb_chaotic_lmap` | the published trace, end points, fixed point, 300 random inputs at r = 3 and 4, latency, hold |
| `tb_ewma_avg` | seed load, published trace, 300 random updates, latency, hold |
| `tb_prng_core` | published trace, 250 outputs from two seeds, two ticks per output, quiet between ticks |
| `tb_xadc_seed` | DRP address/handshake, every capture, zero-to-one seed, reset value |
| `tb_clk_div` | first tick, period, phase offset |
| `tb_drv_segment` | one digit lit at a time, glyph of each nibble, all digits scanned |
| `tb_uart_byte_split` | byte order, source copy, hold between ticks |
| `tb_uart_tx` | decoded bytes, start/stop bits, 10-bit frame length, request ignored while busy |
| `tb_prng_workload` | 1000 outputs from seeds 6000, 0x0BB8 and 1; prints statistics and cycle lengths |
| `tb_lmap_prng_top` | whole chip at a 96 kHz system clock; 50 outputs, two reseeds |
| `tb_lmap_prng_top_full` | the same checks with every parameter at its default (12 MHz), 5 outputs |

The top-level tests check the PRNG against the model, two ticks per output, the display
register and decoded segments, and every decoded serial byte. They also count each
mechanism: ADC reads, seed taken from the ADC, zero reading replaced, button releases,
display refresh, each digit scanned, low and high bytes sent. A mechanism that never
occurred counts as a failure. The full-size run simulates about 14 s of chip time, which
takes roughly a minute and a half.

None of this has been run on an FPGA. The ADC is a model, so the DRP timing has not been
checked against the real block.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/prng_pkg.sv tb/tb_prng_core.sv --top-module tb_prng_core -Mdir obj
./obj/Vtb_prng_core
```

Replace `tb_prng_core` with any testbench name. The package must be listed first; Verilator
finds the remaining modules in `rtl/` and `tb/` by name.

## Changing it

* Rates: the top's parameters `SYSCLK_HZ`, `PRNG_HZ`, `SCAN_HZ`, `BAUD`, `BYTE_HZ`. Each divider
  rounds `SYSCLK_HZ / rate` down.
* Map coefficient: `R_COEF` (8 bits). Values above 4 wrap the product.
* Smoothing: `A_OLD`, `A_NEW`, `A_DEN` of `ewma_avg`. `A_OLD * 65535` plus
  `A_NEW * 65535` must stay below 2^32.
* Word width: `W` of `chaotic_lmap` and `prng_core`. The product is `2*W` bits wide. The
  serial and display paths assume 16 bits.
