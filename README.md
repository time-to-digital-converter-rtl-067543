# TDC-based resonant compute-in-memory macro for INT8 CNNs

Most of a convolution's multiply-accumulate (MAC) work is spent moving weights,
not using them. This macro keeps the weights in place, in an 8T SRAM array.
It computes the 3×3 dot products of a convolution inside the array, as charge
on the read bitlines.

The usual cost of analog in-memory computing is the ADC that digitises the
analog sum. Here that ADC is replaced by a small time-to-digital converter
(TDC): a pulse travels down a chain of delay stages whose speed is set by the
analog MAC voltage. The number of stages the pulse survives is the digital
result. INT8 × INT8 products are built from 4-bit × 4-bit partial MACs over
two clock cycles, combined by shift and add. Results can be written straight
back into the array as the next layer's data. The write drivers recycle
bitline charge through a shared inductor, which saves write energy.

The RTL describes one macro: a main controller, a TDC clock generator, and
`NUM_BANKS_P` banks. Each bank holds a 256 × 256 array (8 KB), 64 capacitor
arrays, 64 TDCs and the write-back path. The default of two banks (16 KB) is
the configuration behind the published throughput figure.

The analog parts are modelled behaviourally, as integer millivolts and stage
counts:

- the bitcell read stack (inside the array model);
- the capacitor arrays;
- the pulse-shrinking delay line.

All other parts are synthesizable logic.

## Where the weights live

A bank has 256 rows and 256 columns of 8T cells. A 3×3 INT8 kernel takes nine
consecutive rows, one per kernel position, and eight columns, one per weight
bit:

- kernel slot `k` uses columns `8k .. 8k+7`;
- weight bit `b` is in column `8k+b`;
- a window of nine rows therefore holds 32 kernels side by side;
- a bank holds `floor(256/9) = 28` such windows (rows 252..255 are left over).

With two banks, 1,792 kernels (16,128 weight bytes) can be resident at once.
Weights are written once with ordinary row writes and then stay in place
("weight stationary"). A MAC command names the window base row and the number
of kernels, NoK. Slots `0..NoK-1` take part in the MAC. The others are
disconnected from the capacitor arrays and are not overwritten by the
write-back.

Banks can share an input or take different inputs:

- **Broadcast:** every bank gets the same 3×3 input patch, so more kernels
  are computed at once. This suits layers with many kernels.
- **Per-bank:** each bank gets its own patch, so different input tiles are
  computed at once. This suits layers with few kernels.

The choice is made per load (`OP_LOAD_IFM` with or without `broadcast`). Every
bank then runs the same MAC command on its own input buffer.

## From input nibble to bitline charge (`sram8t_array`, `rwl_drivers`, `input_buffer`)

An 8T cell adds a two-transistor read stack to a 6T latch. One transistor is
gated by the stored bit Q and the other by the read wordline (RWL). A pulse on
the RWL discharges the precharged read bitline (RBL) only when Q = 1. So one
cell multiplies an input bit by a weight bit, and the nine cells of a window
on one RBL add their discharges.

The input buffer of a bank splits each of the nine 8-bit inputs into a
low-nibble row and a high-nibble row. In the first MAC cycle the RWL drivers
apply the nine low nibbles to the nine RWLs of the window; in the second,
the high nibbles. A nibble is taken to be applied as binary-weighted pulses:
bit `j` removes `2^j` units of charge. Column `c` then reports

    rbl_dis[c] = Σ_i  x_i(nibble) · Q[row_i][c]        (units of one pulse)

For a conventional read, one RWL gets a single unit pulse, and a column
reads 1 when its RBL discharged.

## Capacitor array: bit weighting in the charge domain (`cap_array`)

The four RBLs of one weight nibble feed a binary-weighted capacitor array:

| RBL | weight bit | capacitor |
|-----|------------|-----------|
| 3   | most significant | 8C |
| 2   |                  | 4C |
| 1   |                  | 2C |
| 0   | least significant | 1C |

With 1C = 4 fF, each capacitor takes on a share of its RBL's discharge. When
the `col_mux` switch closes, charge sharing onto the 32 fF accumulation
capacitor produces a voltage V_mac. V_mac falls linearly with

    S = 8·d3 + 4·d2 + 2·d1 + d0 = Σ_i x_i · w_i     (4-bit × 4-bit, 0 … 2025)

Each 8-bit weight uses two arrays: array `2k` holds weight bits 3:0 and
array `2k+1` holds bits 7:4. That gives 64 arrays per bank. The model maps
S onto the TDC's input range of 200–800 mV:

    V_mac = 800 − floor(S · 600 / 2025)  mV     (800 mV while col_mux is open)

The linear transfer, and placing full scale exactly at 200 mV, are this
model's choices. The real circuit is neither linear nor calibrated to that
point.

## The pulse-shrinking TDC (`tdc_clkgen`, `tdc_delay_line`, `tdc`, `tdc_encoder`)

**Delay line.** A start pulse, TDC_CLK, enters a line of 15 delay elements.
In each element the rising edge is slowed by a transistor starved by V_mac,
while the falling edge passes quickly. The pulse therefore gets narrower at
every stage and dies out after some number of stages, `n`. A lower V_mac
(a larger MAC) kills the pulse sooner.

**Flip-flops.** Tap `k` clocks a D flip-flop whose D input is tied high
(`ff_en`). After the pulse has passed, flip-flops `0..n-1` hold 1 and the rest
hold 0, which is a thermometer code.

**Encoder.** A multiplexer tree finds `n` with one comparison per output bit:

    c3 = T7,  c2 = c3 ? T11 : T3,  c1 = T[8c3+4c2+1],  c0 = T[8c3+4c2+2c1]

It outputs the code `15 − n`. The code is 0 at the top of the input range
(small MAC) and 15 at the bottom (large MAC), so it rises with the MAC value.
With the ideal line of the model,

    n = floor((V_mac − 200) · 15 / 600),      code = 15 − n ≈ S · 15 / 2025

In other words, each nibble-by-nibble MAC of up to 2025 is quantised to
4 bits, with a step of about 135.

**Timing of one conversion (`tdc_clkgen`).** The main controller requests a
conversion one cycle ahead (`tdc_en_next`). The clock generator registers the
request on the rising edge. Then, within the cycle:

- `ff_rst = en & clk` clears the flip-flops during the high half;
- `tdc_clk = en & ~clk` launches a pulse half a period wide at the falling
  edge;
- the thermometer code settles in the low half and is sampled at the next
  rising edge.

Because `en` changes only at rising edges, neither gated signal can glitch.
The published circuit derives TDC_CLK from the system clock with a buffer
delay; here that delay is half a clock period.

## Building the INT8 result (`shift_add`, `readout`)

Kernel slot `k` has two TDCs: TDC `2k` for weight bits 3:0 (`lo`) and TDC
`2k+1` for bits 7:4 (`hi`). Over the two MAC cycles the shift-and-add unit
forms

    cycle 1 (input bits 3:0):  lo1 + (hi1 << 4)          held in a register
    cycle 2 (input bits 7:4):  + (lo2 << 4) + (hi2 << 8)
    mac_full  (0 … 4335, 13 bits)

The shifts are exactly the ones the nibble positions require.

The published result is described as 8 bits wide, but the combined sum does
not fit in 8 bits. This design keeps the full 13-bit sum (`result_full`, for
observation) and stores

    binary_out = min(mac_full >> 5, 255)

in the output buffer. This is the sum's top eight bits, saturated. This output
scaling is this design's choice; change `OUT_SHIFT` in `shift_add` to pick
other bits.

Because every partial was quantised to 4 bits, `binary_out` approximates
`Σ x_i w_i` scaled by 15/2025/32. It is not an exact integer dot product. The
testbenches compare against a reference model of this same quantisation, not
against exact arithmetic.

## Writing, and writing results back (`resonant_write_driver`, `output_buffer`, `column_decoder`)

Each column's write driver chooses its data through a multiplexer:

- the row data `D_in` for an ordinary write;
- the bank's output buffer (`Binary_out`) for a write-back.

A write takes four phases, one clock cycle each:

| phase      | signal | what happens |
|------------|--------|--------------|
| RECYCLE_DN | `vsr`  | the bitline that must fall is connected to the shared inductor at V_ref = VDD/2, which takes its charge |
| DRIVE      | `vdn`, write wordline | the pull-down completes the fall and the cell is written |
| RECYCLE_UP | `vsr`  | the inductor returns the stored energy to the bitline |
| PRECHARGE  | `blpc` | both bitlines are restored |

The inductor and the switches are analog, so they are not in the RTL. Their
per-bank controls appear at the top as `res_vsr`, `res_vdn` and `res_blpc`.
The order of the phases and one clock per phase are this design's choices.

The column decoder supplies the column enables:

- in a MAC, the NoK thermometer: slots `0..NoK-1` close their `col_mux`
  switches and are written back;
- in an ordinary write, a per-byte mask `wmask`.

## Command interface and timing (`main_control`, `tdc_cim_top`)

Commands arrive on a valid/ready handshake. A command is accepted on a rising
edge with `cmd_valid && cmd_ready`, and it must stay stable while it waits.
`cmd_ready` is high only when the controller is idle. Every command ends with
a one-cycle `rsp_valid`.

| command       | fields used                         | accept → `rsp_valid` |
|---------------|-------------------------------------|----------------------|
| `OP_LOAD_IFM` | `broadcast`, `bank`; `ifm` valid at accept | 1 cycle |
| `OP_READ`     | `bank`, `row`; `rdata` valid with `rsp_valid` | 2 cycles |
| `OP_WRITE`    | `bank`, `row`, `wmask`; `wdata` valid at accept | 5 cycles |
| `OP_MAC`      | `row` (window base), `nok`, `writeback`, `dst_row` | 3 cycles, 8 with write-back |

An `OP_MAC` command runs as follows:

1. **Cycle 1.** All banks apply their low input nibbles to the window and
   convert.
2. **Cycle 2.** All banks apply the high nibbles and convert. The results
   enter the output buffers at the end of this cycle and stay on
   `mac_result` until the next MAC.
3. **Write-back (if `writeback` is set).** The four-phase write puts the
   8-bit results of slots `0..NoK-1` into row `dst_row` of every bank,
   at the same columns as their kernels.

The clock is 0.5 GHz in the published macro. A MAC command is accepted every
4 cycles. At two banks × 32 kernels × 9 products, that is 1,152 operations
per 8 ns, or 144 GOPS at 0.5 GHz. Counting only the two compute cycles it is
288 GOPS, against 320 GOPS in the published comparison. The extra response
and idle cycles are a consequence of this controller's simple handshake.

Assertions check the following rules:

- a waiting command stays stable;
- the bank index is in range;
- a write-back finds results in the output buffer;
- the write driver is never restarted while busy;
- the output buffer is never loaded and cleared in the same cycle.

## Module hierarchy

    tdc_cim_top
    ├── main_control            command FSM, MAC phases, write-back sequencing
    ├── tdc_clkgen              TDC_CLK, ff_rst, ff_en from the system clock
    └── per bank (generate)
        ├── input_buffer        LSB/MSB nibble rows of one 3×3 patch
        └── cim_bank
            ├── rwl_drivers     single-row read or 9-row window
            ├── sram8t_array    256×256 cells, WWL write port, RBL discharge sums
            ├── column_decoder  NoK → col_mux / write columns; wmask for writes
            ├── cap_array ×64   V_mac from four RBLs          (behavioural)
            ├── readout         64 × tdc, 32 × shift_add, read sensing
            │   └── tdc         tdc_delay_line (behavioural) + 15 DFFs + tdc_encoder
            ├── output_buffer   32 × 8-bit results
            └── resonant_write_driver

`tdc_cim_pkg` holds the shared sizes (256 × 256, 9 rows, 32 kernels, 64
TDCs, 15 stages, 2 banks), the command struct `cmd_t` and the enumerations
for commands, MAC phases, RWL modes and write phases.

## Departures from the published design, and how far to trust it

- **Analog behaviour is idealised.** The bitline discharge, charge sharing
  and delay line are linear integer models. The published TDC has measured
  non-linearity, and its exact mapping from MAC value to voltage is not
  given. The digital structure around these models follows the publication.
- **8-bit output.** The combined result is 13 bits; it is reduced to 8 by a
  saturating shift, as described above.
- **Number of TDCs.** The text gives 64 TDCs per 256-column bank, two per
  kernel, and that is what is built. The block diagram's labels run only to
  32.
- **Conversion rate.** The TDC converts once per system clock cycle, which
  is 0.5 GS/s at 0.5 GHz. The published TDC is rated at 1 GS/s, but the
  clocking that would reach that rate is not described.
- **Input pulses.** Representing an input nibble as binary-weighted RWL
  pulses is an assumption.
- **Window placement.** The window may start at any row; row addresses wrap
  modulo 256 past the last row.
- **Controller details.** The command set, handshake, latencies and output
  scaling are this design's.
- **Not built:**
  - the inductor itself and the bitline switches, which are analog;
  - the offline SRAM-size selection algorithm, which is software.
- **Memory size.** Larger macros (the published study sweeps 8 KB to
  256 KB) are made by raising `NUM_BANKS_P`. The 4-bit bank field of a
  command addresses up to 16 banks. Only two banks have been simulated.
- **Kernel shapes.** Only 3×3 kernels map directly onto the nine read
  wordlines. Other layer shapes have to be cut into 9-row slices by whoever
  loads the weights.

## Simulating

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. `tb/tb_ref_pkg.sv`
holds the reference model (V_mac, TDC code, shift-and-add, output scaling),
written independently of the RTL.

Build and run one with Verilator 5:

    t=tb_tdc_cim_top
    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/tdc_cim_pkg.sv tb/tb_ref_pkg.sv tb/$t.sv --top-module $t -Mdir obj_$t
    ./obj_$t/V$t

`tb_tdc_cim_top` runs the whole macro at its default size (two 256 × 256
banks). It builds in about half a minute and simulates in under a second.
Over twelve rounds it does the following:

- writes random kernels through the write drivers and reads them back;
- loads input patches, both broadcast and per bank;
- runs MACs with full and partial NoK, with and without write-back;
- compares every 8-bit result with the reference model;
- checks that only the active slots were overwritten;
- checks the latency of every command;
- checks that each write uses exactly two energy-recycling cycles.

It counts each mechanism and fails if any never occurred: writes, reads,
both IFM modes, MACs, write-backs, partial NoK and a full-scale TDC code.

`tb_conv3x3_layer` runs one layer slice the way software would map it. It
uses an 8 × 8 input map, one input channel and 3 × 3 kernels, in two parts:

- **64 kernels, broadcast.** Every output position is one MAC. Its results
  are written back, so the whole output map ends up stored in the array,
  where it is read back and checked.
- **6 kernels, per bank.** Each MAC covers two output positions, one in each
  bank.
