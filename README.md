# RC4 with post-KSA shuffling at 8 key-stream bytes per clock

This is synthesizable SystemVerilog for a hardware RC4 key-stream generator that delivers
eight key-stream bytes per clock. It is built from two ideas:

1. **Two RC4 steps per clock.** Each coprocessor advances its S-box from state `S(n-1)` to
   state `S(n+1)` in one clock. It performs both swaps, `S[i_n]<->S[j_n]` and
   `S[i_{n+1}]<->S[j_{n+1}]`, together, and emits both output bytes `Z_n` and `Z_{n+1}`.
2. **Several S-boxes from one key schedule.** After the normal key schedule (KSA), the first
   coprocessor shuffles its S-box 1024 more times without the key. This is the post-KSA random
   shuffling, or PKRS.
   - Snapshots of that S-box taken part-way through the shuffle seed three more coprocessors.
   - Each snapshot has been shuffled less than the next one.
   - All four then run RC4's output phase (PRGA) in lock-step, two bytes each per clock.

The four-coprocessor configuration is built by default. It is design "D7" of the original
paper ("Accelerating More Secure RC4: Implementation of Seven FPGA Designs in Stages up to
8 byte per clock"). Setting `NCOP` to 1 or 2 gives the paper's 2-byte and 4-byte designs D3
and D5. The paper's 1-byte-per-clock designs (D1, D2, D4 and D6) are not part of this RTL.

Apart from the extra shuffling, each stream is plain RC4 output. The first coprocessor's
stream (bytes 0 and 1 of every word) comes from the S-box left after the KSA plus 1024
key-less RC4 steps, restarted with `i = j = 0`. It differs from "drop-1024" RC4, because
`j` is reset before output starts. The other three streams start the same way from the
S-boxes taken after 256, 512 and 768 of those steps.

---

## 1. The double step

In ordinary RC4, each step is:

```
i = i + 1;  j = j + S[i] (+ K[i] in the KSA);  swap S[i], S[j];  Z = S[S[i] + S[j]]
```

To do two steps in one clock, every quantity of step n+1 has to be found from the bank
*before* step n's swap. Three things need care.

**Indices.**
- `i_n = i_{n-1} + 1` and `i_{n+1} = i_{n-1} + 2` come from two adders on one register.
- `j_n = j_{n-1} + S[i_n] + K[i_n]`.
- `j_{n+1} = j_n + S_n[i_{n+1}] + K[i_{n+1}]` needs `S_n[i_{n+1}]`, a byte of the bank
  *after* the first swap. That byte is `S[i_{n+1}]` unless the first swap moved it. This
  happens only when `i_{n+1} == j_n`, and then the byte is the old `S[i_n]`. So:

  ```
  j_{n+1} = j_n + K[i_{n+1}] + (i_{n+1} == j_n ? S[i_n] : S[i_{n+1}])
  ```

  Written from `j_{n-1}`, the equal case adds `2*S[i_n]`.
- In hardware, eight adders form both sums. A comparator selects between them (`jgen_ckp`).
  During PKRS and PRGA, multiplexers replace the key bytes with zero.
- The PRGA-only coprocessors use a four-adder version without the key inputs (`jgen_prga`).

**Data movement (the swap controller).** The storage block reads four bytes from the old
bank: `a = S[i_n]`, `b = S[j_n]`, `c = S[i_{n+1}]` and `d = S[j_{n+1}]`. Three comparisons
decide where each byte must go. Because `i_n != i_{n+1}` always, only seven of the eight
combinations can occur.

| row | i_{n+1}=j_n | i_n=j_{n+1} | j_{n+1}=j_n | writes (location <- byte)                      |
|-----|:-----------:|:-----------:|:-----------:|------------------------------------------------|
| 1   | 0 | 0 | 0 | i_n<-b, j_n<-a, i_{n+1}<-d, j_{n+1}<-c                   |
| 2   | 0 | 0 | 1 | i_n<-b, j_n<-c, i_{n+1}<-a                               |
| 3   | 0 | 1 | 0 | i_n<-c, j_n<-a, i_{n+1}<-b                               |
| 4   | 0 | 1 | 1 | i_n<-c, i_{n+1}<-a                                       |
| 5   | 1 | 0 | 0 | i_n<-b, j_n<-d, j_{n+1}<-a                               |
| 6   | 1 | 0 | 1 | i_n<-b, j_n<-a                                           |
| 7   | 1 | 1 | 0 | nothing changes (the two swaps cancel)                   |

- The write ports are a quad demultiplexer into a 256-byte register bank.
- Whenever two ports name the same location, only one of them is enabled, so no cell ever
  receives two values.
- Swaps where `i == j` are covered by the same rows.
- Row 1 is the common case. Rows 2, 3 and 5 need one index coincidence, about 1 in 256
  steps. Rows 4, 6 and 7 need two coincidences, about 1 in 65,536 steps.

**Output bytes.** RC4 defines `Z_n = S_n[S_n[i_n] + S_n[j_n]]`, but the bank never holds
`S_n`.
- The sum `t_n = S[i_n] + S[j_n]` is the same before and after the swap.
- The byte at `t_n` after the first swap is:
  - `S[i_n]` if `t_n == j_n`;
  - `S[j_n]` if `t_n == i_n`;
  - otherwise the old `S[t_n]`.
- `z_circuit2` computes this with two comparators and a three-way multiplexer, and
  registers `Z_n` at the clock edge that commits the double step.
- `Z_{n+1}` is ordinary RC4 on the *new* bank. The swap controller already knows
  `S_{n+1}[i_{n+1}]` and `S_{n+1}[j_{n+1}]`, so `t_{n+1}` is registered together with
  `Z_n`. One clock later the bank holds `S_{n+1}` and `S_{n+1}[t_{n+1}]` is read from it.
- Both bytes are therefore presented one clock after their double step.

The critical path is the j generator. It runs from the bank read of `S[i_n]`, through the
adders, the comparator and the multiplexer, to `j_{n+1}`, then through a second bank read
and the swap controller to the bank's write enables.

## 2. The schedule of a key

Coprocessor 1 (`ckp_unit2`, the "composite KSA-PRGA" unit) does all three phases with one
S-box and one datapath. Only the key multiplexers and the output circuit are switched.
Counting from the clock edge that samples `start`:

| phase     | clocks | what happens                                                     |
|-----------|-------:|------------------------------------------------------------------|
| INIT      | 1      | S1 = identity; i_{n-1} = 255, j_{n-1} = 0                        |
| KSA       | 128    | 128 double steps with key bytes = the 256 RC4 KSA swaps          |
| PKRS_INIT | 1      | i_{n-1} = j_{n-1} = 0; key bytes replaced by 0                   |
| PKRS      | 512    | 512 double steps without key = 1024 more RC4 swaps               |
| PRGA      | open   | i = j = 0 again; a double step and two output bytes every clock  |

The first PRGA step is committed at edge 642 (1 + 128 + 1 + 512). Its output pair is
registered at that edge and written into the FIFO at the next one. The first 64-bit word is
readable on `ks_data` 645 clocks after `start`. After that, one word follows every clock
for as long as the reader keeps up. Producing n bytes therefore takes `644 + n/8` clocks.

**S-box copies.** During PKRS, a comparator on the step counter pulses `copy_en[k]` for one
clock, and coprocessor k+1 loads the whole current S1 in that clock:

| S-box | copied after PKRS clock | = RC4 swaps after the KSA |
|-------|------------------------:|--------------------------:|
| S4    | 128                     | 256                       |
| S3    | 256                     | 512                       |
| S2    | 384                     | 768                       |
| S1    | (keeps going to 512)    | 1024                      |

The general rule is: S(k+1) is copied after `PKRS_CLKS*(NCOP-k)/NCOP` clocks.

**PRGA phase.**
- The stand-alone units (`prga_unit2`) receive `i_n` and `i_{n+1}` from coprocessor 1.
- Each unit keeps its own `j` register, cleared when the PRGA begins, and its own storage
  block, j generator, swap controller and output circuit.
- All units step on the same enable, so the four streams stay aligned word by word.

## 3. Output word, FIFO and flow control

Each clock in the PRGA produces one `16*NCOP`-bit word (64 bits by default). It is written
into `z_fifo`: 16 words deep, single clock, with a show-ahead read port.

| bits   | byte    | source             |
|--------|---------|--------------------|
| 7:0    | Z_n     | S1 (coprocessor 1) |
| 15:8   | Z_{n+1} | S1                 |
| 23:16  | Z_n     | S2                 |
| 31:24  | Z_{n+1} | S2                 |
| ...    | ...     | ...                |
| 63:56  | Z_{n+1} | S4                 |

Byte 0 is first in stream order.

**Stall.** When a completed pair is waiting and the FIFO is full, `stall` is high and every
coprocessor freezes: bank, indices and output registers all hold. When the reader frees a
place, the PRGA resumes without losing or repeating a byte. The KSA and PKRS phases never
stall.

**Restart.** A `start` pulse at any time, including during the PRGA, clears the FIFO and
begins a new schedule with the current K-box contents.

## 4. Interface

| port                                | dir | width      | meaning                                                  |
|-------------------------------------|-----|------------|----------------------------------------------------------|
| `clk`, `rst_n`                      | in  | 1          | rising-edge clock, asynchronous active-low reset         |
| `key_we`, `key_waddr`, `key_wdata`  | in  | 1, 8, 8    | write byte `key_wdata` into K-box location `key_waddr`   |
| `start`                             | in  | 1          | one-clock key request: run KSA, PKRS, then PRGA          |
| `ks_rd`                             | in  | 1          | pop the word on `ks_data` at this edge                   |
| `ks_data`                           | out | 16*NCOP    | oldest key-stream word (valid when `ks_empty` is low)    |
| `ks_empty`, `ks_count`              | out | 1, 5       | FIFO empty, words held                                   |
| `busy`                              | out | 1          | KSA or PKRS in progress                                  |
| `prga_en`                           | out | 1          | key-stream generation phase                              |
| `stall`                             | out | 1          | PRGA held this clock because the FIFO is full            |
| `swap_case`                         | out | NCOP x 3   | data-movement table row used by each coprocessor         |

**Loading the key.** The K-box is a 256-byte register array. The host writes all 256
locations with the key repeated: `K[p] = key[p mod len]`. A 16-byte key is written 16 times
over. Writes must not overlap a running KSA.

**Sequence.** Write the K-box, pulse `start`, wait for `ks_empty` to fall, then pop words
with `ks_rd`.

**Parameters.**

| parameter    | default | meaning                                            |
|--------------|---------|----------------------------------------------------|
| `NCOP`       | 4       | number of coprocessors; `2*NCOP` bytes per clock   |
| `KSA_CLKS`   | 128     | KSA double steps                                   |
| `PKRS_CLKS`  | 512     | PKRS double steps                                  |
| `FIFO_DEPTH` | 16      | FIFO depth in words                                |

Reducing `KSA_CLKS` or `PKRS_CLKS` changes the cipher. Those parameters only shorten unit
tests.

**Size.** A generic synthesis of the default configuration has about 10,400 flip-flops and
a 1,024-bit FIFO array:
- four 2,048-bit S-box banks;
- the 2,048-bit K-box;
- counters and index registers.

Each S-box bank is written through four data-dependent ports and read through five
256-to-1 byte multiplexers. Those multiplexers make up most of the logic.

## 5. Module map

```
rc4_d7_top
├── ckp_unit2                 coprocessor 1: KSA + PKRS + PRGA on S1
│   ├── ckp_ctrl              phase counter, copy comparators, enables
│   ├── kbox                  256-byte key array, two read ports
│   ├── storage_block2        S-box bank, quad read mux, quad write demux
│   ├── jgen_ckp              j_n, j_{n+1} with key and Eq.-(3) correction
│   ├── swap_controller       seven-row data-movement table
│   └── z_circuit2            Z_n from the old bank, Z_{n+1} from the new
├── prga_unit2 (x NCOP-1)     stand-alone PRGA on S2..S4
│   ├── storage_block2        (loaded from S1 by copy_en)
│   ├── jgen_prga
│   ├── swap_controller
│   └── z_circuit2
└── z_fifo                    key-stream FIFO, 16*NCOP bits wide
```

`rc4_pkg` holds the shared types: the S-box array, the write-port struct and the phase
enum.

## 6. Where this RTL departs from the original description

- **One clock edge.** The original reads the bank on one clock edge and writes it on the
  other. Here the bank is read combinationally and written at the rising edge, so each
  coprocessor completes a double step in one rising-edge clock. The `Z_{n+1}` byte is read
  one clock later from the updated bank. The clock counts still match the original cost
  table: 642 schedule clocks, plus 2, plus n/8.
- **Copy point of S2.** The original block diagram prints 364 for the S2 copy. Its text
  says 384, which is also the regular quarter step. 384 is used.
- **PKRS length.** One diagram prints a 1024 comparator for the end of PKRS. In the
  two-bytes-per-clock mode, 1024 swaps take 512 clocks, as the text says. 512 is used.
- **Byte order in the word.** The output labels of the block diagram give the pairs of S1,
  S2, S3 and S4 in that order, and that order is built. The original text also claims that
  the 4-S-box designs at one and at two bytes per clock produce identical streams. That
  would need the bytes interleaved across S-boxes (`Z_n` of S1..S4, then `Z_{n+1}` of
  S1..S4). To get that order, change the word assembly in `rc4_d7_top` and the two
  reference models in the testbenches.
- **Choices made here where the original is silent:**
  - the K-box write port and the requirement to fill all 256 bytes;
  - the `start` pulse and restart behaviour;
  - FIFO depth, show-ahead read and the full-FIFO stall;
  - reset values (identity S-boxes, zero indices);
  - the output returned when `t_n == i_n == j_n` (`S[i_n]`; no byte moved).
- **Host side not included.** The original system places a processor next to the
  coprocessors. It issues the key request, reads the FIFO over a 64-bit bus, XORs the key
  stream with data, and moves that data over RS-232 and UDP/Ethernet. None of that is here.
  The FIFO read port and the key write port are where such a host connects.
- **One-byte-per-clock designs not included.** The single-swap storage block, the 1-byte j
  generators and the 1024-clock PKRS of those designs are not included.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog if it hangs. The
reference is `tb/rc4_ref_pkg.sv`, a plain one-swap-at-a-time RC4 model: KSA, step and
output byte, K-box fill, random permutations.

| testbench              | what it checks                                                                            |
|------------------------|-------------------------------------------------------------------------------------------|
| `tb_swap_controller`   | random and forced index coincidences, all seven rows, against two sequential swaps        |
| `tb_storage_block2`    | four-port writes, reads, identity init, whole-array load                                  |
| `tb_jgen_ckp`          | `j_n`, `j_{n+1}` against two sequential RC4 j updates, with and without key               |
| `tb_jgen_prga`         | the same for the key-less generator                                                       |
| `tb_z_circuit2`        | `Z_n`, `Z_{n+1}` against reference PRGA steps, with hold cycles                           |
| `tb_kbox`              | write port and both read ports                                                            |
| `tb_ckp_ctrl`          | phase lengths, copy pulses at 128/256/384, restart (reduced sizes)                        |
| `tb_ckp_unit2`         | S1 after KSA and PKRS, copy timing, first pair in clock 644, stalls                       |
| `tb_prga_unit2`        | load from a random S-box, key stream against the reference, stalls                        |
| `tb_z_fifo`            | order, full/empty, simultaneous read/write, clear                                         |
| `tb_rc4_d7_top`        | defaults; see below                                                                       |
| `tb_rc4_workloads`     | 167,800 bytes each at `NCOP` = 1, 2 and 4; see below                                      |

`tb_rc4_d7_top` runs the default configuration end to end:
- four keys of lengths 16, 5, 256 and 1;
- restarts during the PRGA;
- a bursty reader that forces FIFO-full stalls;
- every 64-bit word compared with four reference streams;
- first word in clock 645, then one word per clock;
- counts of S-box copies, stalls, restarts and table rows 1, 2, 3 and 5.

`tb_rc4_workloads` produces one 1,342,400-bit stream (167,800 bytes) from a 16-byte key in
each of the 1-, 2- and 4-coprocessor configurations. It checks every word, and that the last
word arrives in clock `644 + n/(2*NCOP)`. That is the amount of data per key that the
original used for its statistical randomness tests.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
t=tb_rc4_d7_top
verilator --binary --timing --assert -Irtl -Itb rtl/rc4_pkg.sv tb/rc4_ref_pkg.sv \
          -y rtl -y tb tb/$t.sv --top-module $t -o sim
./obj_dir/sim
```

Replace `t` with any testbench name. Each testbench compiles in seconds and runs in
under a second. The longest is `tb_rc4_workloads`, at about 85,000 clocks.
