# Triple DES engine with a virtual-I/O verification wrapper

This is a compact, iterative hardware implementation of the Data Encryption
Standard (DES) and of Triple DES (TDEA) in its encrypt–decrypt–encrypt form.
It is meant for FPGAs and is small: one DES round is built once and reused for
all sixteen rounds, so a DES block takes 16 clocks and a TDES block 51. The top
level does not use pins for the cipher. A virtual-I/O debug core drives the
top's inputs and samples its outputs over JTAG, so a person at an analyzer
can load keys and data by hand and read back the result. This is how the
design is checked on a real chip.

The SystemVerilog follows a published description of the design: a DES
flowchart, the port symbols of the DES and TDES cores, the TDES equations and
the schematic of the debug wrapper. That description leaves out everything
the DES standard already fixes (the tables) and most implementation detail
(timing, handshakes, encodings). Where it says nothing, the choices below are
this implementation's own, and each is marked as such.

## What is computed

DES maps a 64-bit block to a 64-bit block under a 64-bit key. Every eighth
key bit is a parity bit and is ignored, so 56 bits are used:

1. Initial permutation IP. The result is split into halves L0 and R0.
2. Sixteen rounds: `L(i) = R(i-1)`, `R(i) = L(i-1) xor F(R(i-1), K(i))`.
3. The halves are crossed, giving `R16,L16`, and the final permutation
   IP⁻¹ is applied.

`F` expands R to 48 bits, XORs in the 48-bit round key, passes eight 6-bit
groups through the S-boxes S1..S8 (4 bits each) and applies the permutation P.
The round keys K1..K16 come from the key schedule. Permuted choice 1 gives
the 28-bit halves C0 and D0. Each round rotates C and D left by 1 or 2
(1,1,2,2,2,2,2,2,1,2,2,2,2,2,2,1), and permuted choice 2 picks 48 bits from
the result. To decrypt, the same network runs with the keys in reverse order.

Triple DES, with keys K1, K2 and K3:

| operation | formula | pass 1 | pass 2 | pass 3 |
|---|---|---|---|---|
| encrypt | `O = E_K3(D_K2(E_K1(I)))` | E, K1 | D, K2 | E, K3 |
| decrypt | `O = D_K1(E_K2(D_K3(I)))` | D, K3 | E, K2 | D, K1 |

Loading `key3 = key1` gives two-key TDES (EDE2). Loading all three keys equal
gives plain DES.

All tables (IP, IP⁻¹, E, P, PC-1, PC-2, the rotation amounts, S1..S8) are the
standard's (FIPS 46-3). They live in `rtl/des_pkg.sv`.

## Bit numbering

Every cipher vector is declared ascending, `logic [0:63]`. This matches the
`(0:63)` port notation of the core symbols and the standard's numbering:
index 0 is the most significant bit, which the standard calls "bit 1". A hex
literal therefore reads as in the standard. `64'h0123456789ABCDEF` has bit 0
equal to 0 and bit 63 equal to 1. A table entry `t` at output position `i`
means `out[i] = in[t-1]`. Verilator flags the ascending ranges with
`ASCRANGE` style warnings. They are intentional.

## Hierarchy

```
tdes_chipscope_top          VIO bus unpacking, lddata/ldkey edge detect, key3 = key1
└── tdes_core               key registers, 3-pass sequencer (IDLE, PASS1..3)
    └── des_core  x3        one per pass, chained
        ├── des_initial_permutation   IP (combinational)
        ├── des_key_schedule          PC-1: 64-bit key -> C0,D0
        ├── des_key_transform         rotate C,D + PC-2 -> round key
        ├── des_f_function            E, key XOR, S1..S8, P
        └── des_final_permutation     IP^-1 (combinational)
des_pkg                      tables, permutation/rotation helpers, enums
```

## The DES core: one round per clock, keys in both directions

`des_core` holds three registers: the L/R pair (64 bits), the C/D key pair
(56 bits) and a 4-bit round counter. It also keeps the latched direction,
a busy flag and a ready flag.

- **Load.** `lddata` at a clock edge, while the core is not busy, writes
  `IP(data_in)` into L/R and `PC1(key_in)` into C/D. It also latches
  `function_select` (1 = encrypt, 0 = decrypt), raises `core_busy` and clears
  `des_out_rdy`. `lddata` has no effect while `core_busy` is high.
- **Rounds.** On each of the next 16 edges the core computes one round from
  the registers, with the round key coming from `des_key_transform`, and
  writes back L/R and C/D.
- **Finish.** On the 16th round edge the new pair `R16,L16` goes through
  IP⁻¹ into the `data_out` register. `core_busy` falls and `des_out_rdy`
  rises. `des_out_rdy` is a level: it stays high, and `data_out` stays
  unchanged, until the next load.

The hard part is decryption without storing 16 round keys. In encryption
round *i*, C/D is rotated left by `s(i)`, the round key is PC-2 of the rotated
value, and that value is written back. The sixteen rotations add up to 28, a
full turn, so the C/D value after round 16 equals C0/D0 again. Decryption
needs K16 first, and K16 is PC-2(C0,D0), which is exactly what the register
holds after the load. So in decryption round *r* (counting from 0), the round
key is PC-2 of the *incoming* C/D. The value written back is C/D rotated
*right* by `s(16-r)`, the amount of the encryption round being undone. One
register and one small combinational block thus serve both directions.
`des_key_transform` implements this. Its `round` input is the position within
the operation (0..15), not the key number.

Timing, with lddata sampled at edge 0:

| after edge | 0 | 1 … 15 | 16 |
|---|---|---|---|
| `core_busy` | 1 | 1 | 0 |
| `des_out_rdy` | 0 | 0 | 1 |
| `data_out` | old | old | result |

Reset is synchronous and active high. It clears all registers and both flags,
and it aborts an operation that is running. An assertion in the core checks
that `core_busy` and `des_out_rdy` are never high together.

## The TDES core: three chained DES cores

`tdes_core` contains three `des_core` instances, one for each pass, and a
four-state sequencer. The reason for three cores instead of reusing one is
that the published resource figures for TDES are about four times those for
DES (1206–1256 flip-flops against 266–281). That fits three DES datapaths
plus key registers better than one shared datapath.

- `ldkey` copies `key1_in`, `key2_in` and `key3_in` into key registers. Keys
  must be loaded at least one cycle before the `lddata` that uses them.
- `lddata` in state IDLE latches `function_select`, starts pass 1 on
  `data_in`, clears `out_ready` and enters PASS1. The pass-1 core takes its
  direction from `function_select` in that same cycle.
- In PASS1, once core 1 reports ready, the sequencer pulses core 2's `lddata`
  with core 1's held `data_out` as input, and enters PASS2. PASS2 starts
  core 3 the same way.
- In PASS3, when core 3 is ready, `out_ready` is set and the sequencer
  returns to IDLE. `data_out` is core 3's output register. It stays unchanged
  until a later operation reaches pass 3, and by then `out_ready` has
  already been cleared.

Latency: core 1 is ready after edge 16, core 2 loads at edge 17 and is ready
after 33, core 3 loads at 34 and is ready after 50, and `out_ready` is high
from edge 51. That is **51 clocks per block**, about three times a single
DES. An assertion checks that at most one core is busy at a time. `lddata`
during an operation is ignored. The cores are not overlapped as a pipeline:
only one block is in flight.

## On-chip verification wrapper

`tdes_chipscope_top` is the FPGA top for verification. On the chip a vendor
ICON core connects JTAG to a VIO (virtual I/O) core. The VIO core drives a
196-bit `sync_out` bus into the design and samples a 65-bit `sync_in` bus
from it, both synchronous to `clk`. Both cores are vendor IP and are not
part of this RTL. Their buses are the top's ports:

| bus bits | signal |
|---|---|
| `vio_sync_out[195:132]` | `data_in` |
| `vio_sync_out[131:68]` | `key1` |
| `vio_sync_out[67:4]` | `key2` |
| `vio_sync_out[3]` | `function_select` (1 encrypt) |
| `vio_sync_out[2]` | `lddata` |
| `vio_sync_out[1]` | `ldkey` |
| `vio_sync_out[0]` | `reset` |
| `vio_sync_in[64:1]` | `data_out` |
| `vio_sync_in[0]` | `out_ready` |

The bus widths come from the wrapper schematic. Its 196 bits hold data, two
keys and four control bits, and no third key. The wrapper therefore runs
two-key TDES with `key3 = key1`. The order of fields inside the buses is
not documented and is this design's choice. A person sets VIO outputs as
levels, so the wrapper passes `lddata` and `ldkey` to the core only as a
one-clock pulse on their rising edge. This adds one clock, so `out_ready`
rises 52 clocks after `lddata` goes high. A `lddata` held high starts one
block, not a stream of them. `reset` is passed through as a level.

## Where this differs from, or goes beyond, the source description

- **Not built.** The ICON and VIO debug cores, which are vendor IP. The
  triple-encrypt keying variants (EEE3, EEE2), which the description lists
  only as proposed modes. Its TDEA operations are EDE, and only EDE is built.
- **Own choices.** These were all left open by the source: one round per
  clock; level-type ready flags; synchronous active-high reset;
  `function_select` polarity; ignoring `lddata` while busy; three chained
  cores instead of one shared core; the VIO bus bit order; and the edge
  detectors in the wrapper.
- **Parity.** Key parity bits are dropped and never checked.
- **Pin counts.** The published bonded-IOB counts are 190 for DES and 302
  for TDES. The port lists given for the cores need 198 and 326 pins. The
  difference cannot be explained from the description, and the port lists
  were followed.
- **Flip-flop counts.** A generic synthesis of this RTL gives 191 flip-flops
  for `des_core` and 771 for `tdes_core`. The published figures are 266–281
  and 1206–1256. The original probably registered more, for example input
  or output buffers, but that is not described.
- **Speed.** The description states no clock rate or throughput, so none is
  claimed here.

Pins are the tightest resource on the devices named in the resource tables.
Even so, the TDES core with its 326 pins fits every one of them, including
the smallest (391 IOBs on the Spartan 3 xc3s1000). The verification top
needs only `clk` as a pin.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The expected values were computed outside
the RTL, with a software DES that was itself checked against a
cryptographic library on random vectors. They include the textbook
intermediates: IP(0123456789ABCDEF) = CC00CCFFF0AAF0AA, PC-1 of key
133457799BBCDFF1, K1 = 1B02EFFC7072, F(R0,K1) = 234AA9BB, and ciphertext
85E813540F0AB405. They also include the three-key TDES example 5468652071756663 →
A826FD8CE53B855F.

| testbench | checks |
|---|---|
| `tb_des_initial_permutation` | 16 reference vectors, each single bit maps to one bit |
| `tb_des_final_permutation` | 16 reference vectors, IP(IP⁻¹(x)) = x |
| `tb_des_key_schedule` | 16 keys, parity bits have no effect |
| `tb_des_key_transform` | all 16 rounds of two keys in both directions, round key and next C/D |
| `tb_des_f_function` | 32 reference values of F |
| `tb_des_core` | 16 encrypt/decrypt vectors and their inverses, 16-cycle latency, busy/ready, lddata ignored while busy, reset mid-run |
| `tb_tdes_core` | 3-key and 2-key vectors both ways, 51-cycle latency, keys taken only on ldkey, K1=K2=K3 equals DES |
| `tb_tdes_chipscope_top` | end to end through the VIO buses: 8 two-key blocks plus their inverses, a held `lddata`, `lddata` toggled mid-run, reset mid-run; counts each mechanism |

The design has no size parameters, so the end-to-end testbench runs the full
design. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/des_pkg.sv tb/tb_tdes_core.sv --top-module tb_tdes_core
./obj_dir/Vtb_tdes_core
```

Every testbench has a watchdog that fails the run if it hangs. All
testbenches use two-state logic and initialise everything they drive.

## Changing the design

- A different `function_select` polarity changes only the `des_op_e`
  encoding in `des_pkg`.
- To share one DES datapath across the three passes (about a third of the
  flip-flops, same 51-cycle order of latency), replace the generate loop in
  `tdes_core` with one `des_core`. Its input and key would be multiplexed by
  the sequencer state.
- Throughput can be tripled by letting the three cores work on three blocks
  at once. The sequencer would then need a per-core occupancy flag in place
  of its single state, and a busy output, which the published port list does
  not have.
