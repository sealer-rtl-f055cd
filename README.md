# In-SRAM AES-128: encrypting memory blocks inside the SRAM subarrays that hold them

Memory encryption normally sits between the last-level cache and the memory
controller as a dedicated AES engine, and every block that leaves or enters
the chip waits for it. The design here does the encryption in the SRAM itself.
Each 256 x 256-bit subarray stores, side by side in the same rows, the AES
S-box, the data blocks, the expanded round keys and the scratch rows that
MixColumns needs. Activating two rows at once makes the sense amplifiers
produce the XOR of the two rows. A small byte-shift latch in the sense
amplifiers, together with the row decoder used as an S-box lookup, carries out
SubBytes and ShiftRows in a single fused pass. Six blocks per subarray, and
every subarray at once, are encrypted in lockstep: 192 blocks in 993 clock
cycles with the default 32 subarrays. Between encryptions the arrays are
ordinary SRAM.

The RTL follows the architecture of the Sealer paper (Zhang, Naghibijouybari,
Sadredini, "Sealer: In-SRAM AES for High-Performance and Low-Overhead Memory
Encryption"). It was written from that description and is not the authors'
code. Where the paper leaves a detail open, the choice made here is stated
below and in the header comment of each file.

## Layout of a subarray

A subarray is 256 rows by 256 columns. Columns 0..239 form six **tiles** of 40
columns each. Columns 240..255 are spare storage that the cipher never touches.

```
            tile t (40 columns)
  lane:     0          1     2     3     4
  cols:     0..7       8..15 16..23 24..31 32..39
  row 0     S[0]       ---- data block slot 0, state row 0 ----
  row 1     S[1]       ---- data block slot 0, state row 1 ----
  ...
  row 203   S[203]     ---- data block slot 50, state row 3 ---
  row 204   S[204]     ---- round key 0, row 0 ---------------
  ...
  row 247   S[247]     ---- round key 10, row 3 --------------
  row 248   S[248]     2*B, state row 0   (MixColumns scratch)
  ...
  row 251   S[251]     2*B, state row 3
  row 252   S[252]     I0, then T (column sums)
  row 253   S[253]     I1 / I2 / I3 (running XOR)
  row 254   S[254]     free
  row 255   S[255]     free
```

* **Lane 0** of every tile holds the S-box, one byte per row: row x holds
  S(x).
* **Lanes 1..4** hold one 4-byte AES state row, with state columns c = 0..3
  from left to right. A block in slot k fills rows 4k..4k+3, and row 4k+r
  holds state bytes r, r+4, r+8 and r+12 of the block (FIPS-197 byte order).
* **Round key** j, row r sits in row 204+4j+r of every tile.

In the RTL a row is a 256-bit vector with **column 0 in bit 255**, so a row
printed in hex reads left to right like the figures. Byte b is
`row[255-8*b -: 8]`, and tile t owns bytes 5t..5t+4. A 32-bit byte mask
enables byte b with bit `31-b`.

All six tiles see the same wordlines. A single row operation therefore acts on
the block in slot k of all six tiles, and on every subarray, since all of them
receive the same operation. Blocks in the same tile share bitlines and are
encrypted one slot at a time.

## Computing with bitlines

With two wordlines active, the BL sense amplifier of a column reads 1 only if
both cells hold 1 (AND), and the BLB amplifier reads 1 only if both hold 0
(NOR). A NOR gate on those two outputs gives the XOR (`sa_logic`).
`tile_array` models the bitcells and the two senses as the logic functions
they compute. An XOR is charged three clock cycles, against one for a read or
write. The rows stay active for three cycles and the result is latched in the
third.

Each column's latch sits behind a MUX that takes either the sensed value or
the latch 8 columns to its left. Lanes 1..4 can therefore shift one byte to
the right per cycle while lane 0 takes in a new byte.

## Fused SubBytes and ShiftRows

This is the step that is least obvious. It is driven per state row r, with
the data row and the key row still active:

1. **AddRoundKey.** The data row and key row are activated and their XOR is
   latched (3 cycles).
2. **Byte select.** The XOR sense still shows the four sums. A 4:1 MUX
   (index 3 = leftmost byte) picks one of them each cycle and pushes it into a
   two-entry FIFO (`sbox_input_fifo`). The byte pushed first is the one whose
   substitute must end up **rightmost** after ShiftRows. The order is
   `sel_j = 3 - ((3 - j + r) mod 4)` for j = 0..3: for r = 2 that is 2, 3, 0,
   1.
3. **Lookup and shift.** The FIFO head is the address of the tile's own 8:256
   decoder, whose wordline reaches only lane 0. Decoding the byte selects the
   S-box row that holds its substitute, and the BL sense of lane 0 latches
   that substitute. From the second lookup on, lanes 1..4 shift right by one
   byte in the same cycle.
4. After four lookups and one last shift, lanes 1..4 hold
   `ShiftRows(SubBytes(row))`.

The worked example in the paper (third state row; data `a1 46 f6 2e`, key
`cd 4b 42 cf`) looks like this cycle by cycle. The testbench `tb_sealer_tile`
checks each line:

| cycle        | FIFO push   | latch lanes 0 \| 1..4 |
|--------------|-------------|-----------------------|
| XOR (3 cyc.) | -           | `.. \| 6c 0d b4 e1`   |
| prefill      | sel 2 (0d)  | unchanged             |
| T1           | sel 3 (6c)  | `d7 \| 6c 0d b4 e1`   |
| T2           | sel 0 (e1)  | `50 \| d7 6c 0d b4`   |
| T3           | sel 1 (b4)  | `f8 \| 50 d7 6c 0d`   |
| T4           | -           | `8d \| f8 50 d7 6c`   |
| T5           | -           | `8d \| 8d f8 50 d7`   |

Two details are choices made in this design:

* **The MUX reads the sensed XOR, not the latch.** In the paper's example the
  byte b4 is selected with sel = 01 in T3, after the latch has already
  shifted once. That select value is only right for the unshifted sense
  output. Reading the latch would also lose a byte for state row 3.
* **A prefill cycle.** The paper loads two bytes into the FIFO in T1. With one
  MUX this takes a prefill cycle, so the fused stage costs 6 cycles per row.

After the fused stage the latch is written back to the data row. Except in
the last round, it is then written a second time, through a doubling write
path, into scratch row 248+r as 2·B. The paper describes the doubling as a
1-bit left shift. This design adds the conditional XOR with 0x1b that
GF(2^8) multiplication by 2 needs. The plain shift gives wrong ciphertexts:
the fault copy of `sa_logic` used in testing is exactly that shift.

## MixColumns with row XORs

Every state row holds one byte of each of the four columns. Row-wide XORs
therefore compute MixColumns for all four columns at once, using
`B'_r = T ⊕ 2B_r ⊕ 2B_(r+1) ⊕ B_r` with `T = B_0 ⊕ B_1 ⊕ B_2 ⊕ B_3`:

```
T:    X(B0,B1)->252   X(B2,B3)->253   X(252,253)->252
B'r:  X(2Br,252)->253 X(253,2B(r+1))->253 X(253,Br)->Br     r = 0..3
```

Each X is a 3-cycle XOR and each "->" a 1-cycle write. That makes 60 cycles
per round. Every B'_r needs only its own B_r and the stored doubles, so
overwriting B_r in place is safe.

## Schedule and timing

| phase                                | cycles                   |
|--------------------------------------|--------------------------|
| rounds 0..8, each row: XOR, fused, write, write 2·B | 9 × 4 × (3+6+1+1) = 396 |
| rounds 0..8 MixColumns               | 9 × 60 = 540             |
| round 9, each row: XOR, fused, write | 4 × (3+6+1) = 40         |
| final AddRoundKey (key 10), write    | 4 × (3+1) = 16           |
| done cycle                           | 1                        |
| **total (`ENC_CYCLES`)**             | **993**                  |

Round i's AddRoundKey and round i+1's SubBytes share one activation of the
data and key rows. The latency does not depend on the number of subarrays.
After reset the controller spends 256 cycles writing the S-box into every
tile. A key load takes 44 write cycles.

The published cycle breakdown for six blocks is a bar chart with no printed
totals. Its bar for this design reads as clearly longer than 993 cycles, so
the counting there must include costs that the text does not spell out.
Examples would be a separate SubBytes pass per round, or writes this schedule
avoids. The 993 here follows from the per-operation costs in the text: 3
cycles per XOR and 1 per read or write. That count, not the chart, is what
the testbenches check.

## Blocks and files

| file | role |
|------|------|
| `rtl/sealer_pkg.sv` | geometry, row map, `sa_mode_e`, `array_ctrl_t`, GF(2^8) helpers, S-box table built at elaboration, `ENC_CYCLES` |
| `rtl/row_decoder.sv` | 8:256 one-hot decoder (Decoder1, Decoder2, per-tile S-box decoder) |
| `rtl/tile_array.sv` | 256×40 bitcells of a tile, multi-row AND/NOR sensing, lane-masked writes, separate S-box-lane wordlines |
| `rtl/sa_logic.sv` | sense-amplifier latch row: XOR, read, lookup, byte shift, 2·B write path |
| `rtl/sbox_input_fifo.sv` | byte-select MUX and two-entry FIFO at the S-box decoder |
| `rtl/sealer_tile.sv` | one tile: array, S-box decoder, FIFO, SA logic, write-source mux |
| `rtl/sealer_subarray.sv` | Decoder1/Decoder2, six tiles, spare columns |
| `rtl/key_expand.sv` | AES-128 key schedule, one round key per step |
| `rtl/sealer_ctrl.sv` | command handling and the row-operation sequencer |
| `rtl/sealer_top.sv` | `NUM_SUBARRAYS` subarrays + controller + key expansion |

### Top-level interface (`sealer_top`)

One command at a time, on a valid/ready handshake. `cmd_ready` is low during
the S-box initialisation and while a command runs. A command must be held
until it is accepted; an assertion checks this.

| `cmd_op` | uses | effect |
|----------|------|--------|
| `CMD_WRITE` | `cmd_sub`, `cmd_row`, `cmd_wdata`, `cmd_bmask` | write one row of one subarray. S-box lanes are always masked off. `done` follows 2 cycles after acceptance. |
| `CMD_READ` | `cmd_sub`, `cmd_row` | `rd_valid` and `done` come 2 cycles after acceptance, with the row on `rd_data` |
| `CMD_KEY` | `cmd_key` | expand the key and store rounds 0..10 in every tile (44 cycles) |
| `CMD_ENC` | `cmd_slot` (0..50) | encrypt slot k of all tiles of all subarrays in place. `done` comes exactly `ENC_CYCLES` cycles after acceptance. |

The ciphertext is read back with `CMD_READ` from the same rows. The cipher key
is an input port. The on-chip random number generator that would supply it is
outside this design.

## What is not here

* **Decryption.** Decryption is named as a goal, but no inverse mapping is
  described: the tile layout has no room for an inverse S-box, and no
  InvMixColumns sequence is given. Only encryption is built.
* **Key expansion inside the array.** The round keys are computed by a small
  dedicated unit and then written into the array. Doing it with row
  operations is said to be possible but is not specified.
* **Cache or memory-controller integration.** The engine is a standalone
  block with a row-access port. Nothing maps cache lines or DRAM traffic onto
  slots.
* **Electrical behaviour.** The bitline sensing, the 163 ps access time and
  the energy figures are outside RTL. Cycle counts are what the RTL gives.
* **Size.** The default of 32 subarrays (256 KB of array) is set by the
  192-block batch. A "2 MB" configuration is also mentioned, which would be
  `NUM_SUBARRAYS = 256`.

## Verification

Each block has a self-checking testbench in `tb/`. Expected values come from
`tb/aes_ref_pkg.sv`, a separate software AES whose S-box is found by searching
for inverses rather than computed the way the RTL does it.

* `tb_row_decoder`, `tb_tile_array`, `tb_sa_logic` and `tb_sbox_input_fifo`
  test the primitives. The FIFO test also replays the example's select
  sequence.
* `tb_sealer_tile` replays the worked example (data block 50, round key 0) at
  each time step. It then runs AddRoundKey, the fused stage and the full
  MixColumns sequence on random blocks, and checks the 3-cycle XOR and
  6-cycle fused-stage costs.
* `tb_sealer_subarray` checks six tiles computing different results from one
  operation, the spare columns, the byte masks and subarray gating.
* `tb_key_expand` checks the FIPS-197 A.1 round keys and random keys.
* `tb_sealer_ctrl` compares the whole ordered list of XORs and writes of an
  encryption with the schedule above, for slots 0, 17 and 50. It also checks
  the FIFO traffic (160 pushes, each with its byte select, and 160 lookups), `ENC_CYCLES`, the S-box and
  key writes, and the host commands.
* `tb_sealer_top` (2 subarrays) and `tb_sealer_full` (the default 32
  subarrays, 192 blocks) run end to end. They cover plain SRAM use, loading
  two keys, encrypting slots 0 and 50, and comparing every block with the
  reference. They also check the FIPS-197 B and C.1 ciphertexts literally and
  that other slots, spare columns and S-box lanes survive. Each mechanism
  (S-box load, key rows, host read/write, AddRoundKey, lookups, shifts, 2·B
  writes, MixColumns, final round) is counted and must occur.

Simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sealer_pkg.sv tb/aes_ref_pkg.sv tb/tb_sealer_top.sv \
    --top-module tb_sealer_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. The full-size bench
takes a few minutes to compile and seconds to run. To change the size, set
`NUM_SUBARRAYS` on `sealer_top`. The row map and the cycle costs live in
`sealer_pkg`.
