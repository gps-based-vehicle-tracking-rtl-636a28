# A single-chip mobile unit for GPS vehicle tracking

A tracking unit rides in a vehicle. It listens to a GPS receiver and, every
time the receiver reports a fix, keeps the time, latitude, longitude, speed
and date in a small on-chip memory. When the vehicle comes back within radio
range of its base station, the unit takes its turn on the shared channel,
sends the whole log, has the base station confirm the number of points, and
then switches itself off until the next ignition.

The system this RTL implements once used two microcontrollers joined through
a shared memory. Here both jobs are hardware processes on one chip:

* **Process 1** (`process1`) turns the GPS receiver's NMEA text into stored
  readings.
* **Process 2** (`process2`) runs the download protocol with the base station.
* A **bus controller** (`i2c_ctrl`, named after the I2C role it has in the
  original system) makes sure only one of them uses the memory at a time.
  Its interrupts hand the memory from one process to the other.
* A **memory controller** (`mem_ctrl`) and a 4096 x 8 **memory** (`sram`)
  hold the log.
* Two **serial links** (`uart_rx`, `uart_tx`, 9600 bps, 8N1) connect the GPS
  receiver and the radio transceiver.

```
                 +------------------------- vts_soc -------------------------+
 gps_rxd ------->| uart_rx --> process1 --write--+                           |
                 |               ^  |            +--> mem_ctrl --> sram      |
                 |   stop/clear  |  | stopped    |    (2:1 mux)   4096 x 8   |
                 |            i2c_ctrl ---sel----+                           |
                 |               |  ^            |                           |
                 |         grant v  | req/done   |                           |
 bs_rxd -------->| uart_rx --> process2 --read---+                           |
 bs_txd <--------| uart_tx <--   |                                           |
 power_hold <----|---------------+                                           |
                 +-----------------------------------------------------------+
```

## From NMEA text to a stored reading

The GPS receiver sends lines such as

```
$GPGGA,161229.487,3723.2475,N,12158.3416,W,1,07,1.0,9.0,M, , , ,0000*18
$GPGLL,3723.2475,N,12158.3416,W,161229.487,A*2C
$GPRMC,161229.487,A,3723.2475,N,12158.3416,W,0.13,309.62,120598 ,*10
```

Process 1 does not parse whole sentences. It matches letters one at a time,
as a flow chart would:

1. **Finding a sentence.** The detector waits for the letters `R`,`M`,`C` or
   `G`,`G`,`A` in consecutive bytes. It has five states: idle, `R`, `RM`,
   `G` and `GG`. A wrong letter does not simply restart the match. The same
   byte is tested again as a possible first letter, but only for the other
   sentence: after `R` or `RM` only `G` is retried, and after `G` or `GG`
   only `R`. So `RMGGA` and `GRMC` are found, but `RRMC` and `GGGA` are
   not. A completed name sets flag **C**, which means "correct data has been
   received". C stays set until the memory is emptied by a download.
2. **Selecting fields.** Commas are counted from the sentence name on, and
   field *k* is stored when bit *k* of a mask parameter is set.
   `RMC_FIELDS` defaults to fields 1, 3, 5, 7 and 9: time, latitude,
   longitude, speed and date. `GGA_FIELDS` defaults to none, because the RMC
   sentence already carries all five values.
3. **Writing.** The characters of a stored field go straight to memory, one
   byte per clock. The comma that closes a stored field is stored too when
   another stored field follows in the same sentence. Spaces are dropped. For
   the sample sentence the stored reading is therefore

   ```
   161229.487,3723.2475,12158.3416,0.13,120598        (43 bytes = 344 bits)
   ```

   The tracking unit's storage budget assumes exactly these 43 locations per
   reading. Readings are stored back to back. The date is always six digits,
   so the start of the next reading is known.
4. **Commit or discard.** `*` (start of the checksum), CR or LF ends the
   sentence and commits the reading: the point count rises and the reading's
   end becomes the new start. The partial reading is thrown away if any of
   these happens first:
   * a `$` arrives,
   * the memory would overflow (this also sets `full`),
   * the bus controller raises its interrupt.

   Throwing it away means the write pointer moves back to where the reading
   began. The memory therefore only ever holds whole readings, and `fill`
   and `points` always describe whole readings. The NMEA checksum is not
   verified.

Process 1 never stalls. It takes a byte every clock if offered one. The
three sample sentences as printed above are 186 bytes and are processed in
186 cycles. At 9600 bps the link delivers about one byte per 1040 clocks, so
there is ample slack.

## Handing the memory over: the bus controller

Only one process owns the memory. `i2c_ctrl` is a four-state machine:

| state      | owner | what happens |
|------------|-------|--------------|
| `BUS_P1`   | P1    | normal logging; `p2_req` moves to `BUS_STOP` |
| `BUS_STOP` | none  | interrupt `p1_stop` raised; wait for `p1_stopped` (P1 has dropped any partial reading and has no write in flight) |
| `BUS_P2`   | P2    | `sel = 1`, `p2_grant = 1`, P1 still held; `p2_done` moves to `BUS_CLEAR`, while dropping `p2_req` without `p2_done` returns to `BUS_P1` with the log intact |
| `BUS_CLEAR`| none  | one-cycle `p1_clear` (second interrupt): P1 resets its pointer, point count, full flag and C, then logs again from address 0 |

Assertions check two rules. The grant never comes before P1 has answered.
P1 never writes while it is stopped.

In the original system this role belonged to an I2C controller on a
two-wire serial bus. Here it is a parallel on-chip bus. The controller's
role is the same (arbitration and the two interrupts), but no two-wire
signalling is generated. This is what lets one byte per clock reach the
memory.

`mem_ctrl` is the multiplexer in front of the memory. With `sel = 0` the
write port of Process 1 drives it. With `sel = 1` the read port of Process 2
drives it, and read data returns one cycle later with `p2_rvalid`. An access
from the process that does not own the memory is refused and counted in
`dropped`. In the top level this count must stay zero, and an assertion
checks it.

## The download protocol (Process 2)

Bytes on the transceiver link (BS = base station, U = unit):

```
BS: f r e e                    (sent repeatedly by the base station)
U :          <ID_DELAY cycles> UNIT_ID
BS:                                    0x06 (acknowledge)
    -- no acknowledge within ACK_TIMEOUT: UNIT_ID once more; still none: back to waiting for "free"
U : [bus request, P1 interrupted]  byte[0] ... byte[fill-1]  points[15:8] points[7:0]
BS: 0x06  -> download confirmed: memory emptied, power_hold = 0, process finished
    0x15  -> count mismatch: the whole download (bytes and count) is sent again
    none within ACK_TIMEOUT -> memory released with the log kept, back to waiting for "free"
```

`ID_DELAY` is the unit's priority. Many units may hear the same "free", and
each waits a different time before answering. `power_hold` drives the
diode side of the unit's ignition/relay power circuit. It is high from
reset and falls when the download is confirmed. With the ignition off this
removes the unit's power, and the next ignition resets it. The timer counts
from the moment the ID or count byte is handed to the transmitter, so
`ACK_TIMEOUT` has to be longer than two byte times, one for the unit's byte
and one for the reply (about 20,800 clocks at the defaults).

## Serial links and clock

Both links are 8 data bits, no parity, one stop bit, LSB first.
`CLKS_PER_BIT = 1042` assumes a 10 MHz clock at 9600 bps. For another clock,
set `CLKS_PER_BIT = f_clk / baud`. The receiver synchronises the line through
two flip-flops and confirms the start bit half a bit later. It samples every
bit in its middle, and pulses `frame_err` instead of `valid` when the stop
bit is low. The transmitter uses a valid/ready handshake, and a frame takes
exactly `10 * CLKS_PER_BIT` cycles.

## Files and parameters

| file | contents |
|------|----------|
| `rtl/vts_pkg.sv` | ASCII constants, the reply codes `BS_ACK`/`BS_NAK`, `RMC_FIVE`, `bus_state_t` |
| `rtl/vts_soc.sv` | top level |
| `rtl/process1.sv`, `rtl/process2.sv` | the two processes |
| `rtl/i2c_ctrl.sv`, `rtl/mem_ctrl.sv`, `rtl/sram.sv` | memory sharing and storage |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | serial links |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_vts_soc_full.sv` | the whole unit at default parameters |
| `tb/tb_capacity.sv` | a full log of 95 readings at default parameters |

Parameters of `vts_soc`, with their defaults:

* `CLKS_PER_BIT` = 1042.
* `ADDR_W` = 12, i.e. 4096 bytes.
* `UNIT_ID` = 8'h01.
* `ID_DELAY` = 10,420 cycles.
* `ACK_TIMEOUT` = 1,000,000 cycles.
* `RMC_FIELDS` and `GGA_FIELDS`, as above.

Only the 12-bit address, the 8-bit data width and 9600 bps 8N1 come from the
original system. The other values are this design's choices.

Besides the serial lines and `power_hold`, the top level brings out status
and monitoring signals:

* `c_flag`, `points`, `fill`, `mem_full` and `bus_state`;
* one-cycle event pulses `ev_sentence`, `ev_discard`, `ev_id_retry`,
  `ev_abandon`, `ev_repeat`, `ev_done` and `ev_frame_err`.

Synthesised without mapping to a device, the top level is about 540
word-level cells and 290 flip-flops, plus the 32 Kbit memory, which is
inferred as a RAM.

## Capacity

* A reading is 43 bytes, so 4096 bytes hold 95 whole readings. A reading
  that does not fit is dropped whole, so the last 11 bytes stay unused.
* At one reading every 2 minutes that is 190 minutes, about 3 h 10 min,
  before the vehicle must return to download.
* At one reading every 3 minutes it is 4 h 45 min.
* With `GGA_FIELDS` also storing time, latitude and longitude, each sample
  sentence pair takes 31 + 43 = 74 bytes.

To get a larger log, widen `ADDR_W`. `fill` and `points` grow with it, and
the count sent to the base station is 16 bits.

## Departures from the original description, and choices it left open

* The I2C link between the processes and the memory is a parallel bus with
  the same arbitration and interrupts. There is no two-wire protocol. The
  original's own figures (one clock per byte of message) are only reachable
  this way.
* The original quotes 181 bytes (1448 bits) and 181 clock cycles for its
  three-sentence test message. The message as printed is 186 bytes, and it
  takes 186 cycles here.
* The original says the needed data are found in RMC and GGA, but it counts
  one 43-byte reading. Here GGA is recognised and sets C but stores nothing
  unless `GGA_FIELDS` is set. Hemisphere letters are not stored.
* These were not specified, so all of them are this design's choice:
  * the byte codes of acknowledge and mismatch, the width of the point
    count, and the timeouts;
  * the unit's behaviour when no answer follows the count;
  * dropping partial readings;
  * the checksum being ignored;
  * the 10 MHz clock.
* The power circuit (regulators, relay, transistor, diodes), the GPS
  receiver and the radio are outside the chip. Only the `power_hold` output
  and the serial lines represent them.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each also has a watchdog that counts a failure if the run hangs. To build
and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
          rtl/vts_pkg.sv tb/tb_vts_soc.sv --top-module tb_vts_soc -o sim
./obj_dir/sim +verilator+rand+reset+2
```

What each testbench covers:

* `tb_vts_soc` runs the whole unit at small sizes: 8 clocks per bit and a
  128-byte memory. It goes through every mechanism:
  * sentence detection and a discarded cut sentence;
  * ID retry and giving up;
  * the interrupt that stops Process 1 while the GPS keeps sending;
  * a repeated download and a confirmed download, which empties the memory
    and drops power;
  * memory-full.

  It counts each event and fails if one never happens.
* `tb_vts_soc_full` runs the top level untouched, at the default
  parameters. This is about 2.6 million cycles and a few seconds. The GPS
  model sends the sample message, and the base-station model receives and
  checks the 43-byte reading and the count.
* `tb_capacity` fills the log at the default parameters. It sends 96 RMC
  fixes, two minutes apart, over the 9600-bps link: 95 readings (4085 bytes)
  are stored and the 96th is dropped with `mem_full`. It then downloads all
  4085 bytes and checks them. This is about 90 million cycles and about a
  minute of simulation.
* The module testbenches check the following:
  * `tb_process1`: the detector's retry paths, stop and clear.
  * `tb_process2`: the protocol's exact delays and every branch.
  * `tb_i2c_ctrl`: the grant rule, checked in every cycle.
  * `tb_sram`: the full 4096-byte memory.
  * `tb_uart_rx` and `tb_uart_tx`: bit order, timing, framing errors and
    glitches.
