# CREAM: trading ECC protection for capacity on an ECC DIMM

An ECC DIMM carries nine x8 DRAM chips. Chips 0–7 hold data. Chip 8 holds
one SECDED check byte for every 64-bit data burst. That is 12.5% of the
module, and it is spent on protection that many workloads do not need.

CREAM (capacity- and reliability-adaptive memory) lets the controller choose,
region by region, between that protection and extra capacity. A
**boundary register** splits the physical line address space of an 8GB
module:

| physical line address     | region | what it holds |
|---------------------------|--------|---------------|
| `0 .. boundary-1`         | CREAM  | ordinary pages whose chip-8 space is no longer used for SECDED |
| `boundary .. 8GB-1`       | ECC    | conventional lockstep layout with SECDED |
| `8GB .. 8GB+extra-1`      | EXTRA  | extra pages built from the freed chip-8 space |
| above that                | —      | rejected with an error |

The MSB of a physical line address therefore means "extra page". Where the
freed space is used fully, `extra = boundary >> 3`, and the module can grow
by up to 12.5% (9GB at the full boundary). If the boundary is moved, the
operating system must first move the pages it covers. That software is not
part of this RTL.

This repository gives synthesizable RTL for the part of the memory
controller that CREAM adds, and for the bridge chip on a registered DIMM.
It also gives a behavioural model of the DRAM chips, so the whole system can
be simulated.

## Four layouts for the freed space

The layout is a static input (`layout_e`). All four use the same boundary
and address map.

### Packed (`LAYOUT_PACKED`, no DIMM change)

An extra line is cut into eight 8-byte parts, one per burst. Part `i` of
extra line `REQ` is stored in chip 8 of the ordinary line

    ACC = ((REQ - 8GB) << 3) + i

so each group of eight CREAM-region lines hosts one extra line.

- **Reads:** reading an extra line takes eight ordinary accesses. The chip-8
  word of each access is shifted into a 64-byte shift register.
- **Writes:** a DIMM without rank subsetting writes all nine chips together,
  so every write becomes a read-modify-write.
  - A write to a CREAM line rereads the line to keep its chip-8 word: 2
    accesses.
  - A write to an extra line does a read-modify-write of each of its eight
    host lines: 16 accesses.

All translation is done in the controller. The bridge passes addresses
through.

### Packed with rank subsetting (`LAYOUT_PACKED_RS`)

The bridge chip gets one chip-select per chip. Chips 0–7 (the x64 subset)
and chip 8 (the x8 subset) can then be used on their own.

- The address MSB picks the subset.
- A CREAM line is one x64 access, in both directions.
- Each part of an extra line is one x8 access to chip 8 of host line
  `ACC` (same formula as above). An extra line is 8 accesses for reads and 8
  for writes.
- No read-modify-write is needed.
- The bridge does the translation, so the controller sends it the request
  address and the part number.

### Inter-bank wrap-around (`LAYOUT_INTER_WRAP`)

One DRAM row per bank holds one page. Across eight banks, one row number
covers pages 0–7 plus the space of one more page, page A, in chip 8 of each
bank.

Wrap-around rotates the pages so that each one spans two neighbouring banks
and skips one chip. Page group `k` (its bank `k` for pages 0–7, `k = 8` for
page A):

- leaves chip `8-k` idle;
- uses **bank k** on chips `0 .. 7-k`;
- uses **bank k-1** on chips `9-k .. 8`.

All accesses use the same row and column.

```
            chip: 0  1  2  3  4  5  6  7  8
 page 0 (k=0)     0  0  0  0  0  0  0  0  -
 page 1 (k=1)     1  1  1  1  1  1  1  -  0
 page 2 (k=2)     2  2  2  2  2  2  -  1  1
  ...
 page 7 (k=7)     7  -  6  6  6  6  6  6  6
 page A (k=8)     -  7  7  7  7  7  7  7  7
              (number = bank, - = chip not selected)
```

The 9 × 8 = 72 bank slices hold each row's nine pages with no overlap. Every
line, extra or not, is one access. The page groups behave as nine
independent banks. The bridge reports the group of each command on
`cmd_group`.

- **Lane mapping:** chips below the idle chip carry their own byte lane.
  Chips above it carry the lane one below (`cream_pkg::wrap_lane`). The
  controller steers the data bus.
- **Row number:** a CREAM line uses its conventional row. Extra page `x`
  uses row `x`.

### Parity (`LAYOUT_PARITY`)

This layout keeps error *detection* but not correction. Each 64-bit burst
gets one even-parity bit, which makes one byte per line. Chip 8 of each bank
holds two things:

1. **Parity rows.** The parity of pages in bank `i` is kept in bank
   `(i+4) mod 8`, so a data access and its parity access usually go to
   different banks. One chip-8 row holds the parity of eight pages.
2. **Extra pages.** Each extra page is packed across eight consecutive
   chip-8 rows, with 16 lines per row and 8 columns per line.

For `R` CREAM rows per bank, this design takes:

- `E = floor(7R/65)` extra pages per bank. This is the most whose own
  parity still fits.
- `P = ceil((R+E)/8)` parity rows.
- Extra pages start at row `P`.

The extra capacity is `8·E` pages. At the full boundary this is 10.7% of the
module.

Slot arithmetic (a "slot" is one page's parity):

| what                                  | bank                | row            | column                   |
|---------------------------------------|---------------------|----------------|--------------------------|
| parity of CREAM page in bank b, row r | (b+4) mod 8         | r >> 3         | (r mod 8)·16 + line>>3   |
| parity of extra page x                | (x mod 8 + 4) mod 8 | (R + x>>3) >> 3 | same, with slot R + x>>3 |
| line l, part i of extra page x        | x mod 8             | P + 8·(x>>3) + l>>4 | (l mod 16)·8 + i    |

Within a parity column word, the byte for line `l` is burst `l mod 8`.

Accesses per request:

| line            | read | write |
|-----------------|------|-------|
| CREAM line      | 2 (data + parity) | 3 (data + parity read-modify-write) |
| extra line      | 9    | 10    |

On a read, a parity mismatch gives `resp_err`.

### Summary of column accesses per request

| region / layout        | read | write |
|------------------------|------|-------|
| ECC region (any)       | 1    | 1     |
| Packed, CREAM line     | 1    | 2     |
| Packed, extra line     | 8    | 16    |
| Packed+RS, CREAM line  | 1    | 1     |
| Packed+RS, extra line  | 8    | 8     |
| Inter-wrap, any line   | 1    | 1     |
| Parity, CREAM line     | 2    | 3     |
| Parity, extra line     | 9    | 10    |

These counts are asserted by the end-to-end testbench.

## Geometry and address map

Everything is in `rtl/cream_pkg.sv`:

- 64-byte lines, sent as eight 64-bit bursts;
- nine x8 chips;
- 8 banks;
- an 8GB module, which is 2^27 lines (`NLINE_W = 27`). The physical line
  address is 28 bits with the extra-page MSB (`PA_W`).

A row is taken to be 8KB: 1KB per x8 chip, 128 lines (`COL_W = 7`). That
gives 2^17 rows per bank (`ROW_W = 17`).

A line address below 8GB is `{row, bank, column}`. One page fills one row,
and consecutive pages go to consecutive banks.

**Byte lanes:** byte `8b + c` of a line is carried by chip `c` in burst `b`.
A chip's 64-bit column word holds its eight bursts, with burst `b` in bits
`[8b +: 8]`.

**Boundary:** it counts whole rows across all eight banks, so it moves in
steps of 1024 lines (64KB). Its low 10 bits are ignored, and it is capped at
8GB. This keeps each group of eight pages in one layout.

## Blocks

| file | role |
|------|------|
| `cream_pkg.sv` | geometry, types (`access_t`, `chip_cmd_t`, ...), the address-map functions and the Hsiao column table |
| `secded_encoder.sv` | (72,64) Hsiao SECDED check byte of one burst (combinational) |
| `secded_decoder.sv` | syndrome, single-bit correction (data or check bit), double-bit detection |
| `line_parity_gen.sv` | one even-parity bit per burst, eight per line |
| `line_shift_reg.sv` | 64-byte register that collects chip-8 words, and stages words kept across a read-modify-write |
| `region_decoder.sv` | classifies an address as ECC / CREAM / EXTRA / out of range; computes capacity, `R`, `E`, `P` |
| `cream_mc.sv` | controller extension: boundary register, access sequencing per layout, lane steering, SECDED/parity check, response |
| `cream_bridge.sv` | bridge-chip translation: per-chip chip-select, bank, row, column; one clock of delay |
| `cream_top.sv` | controller + bridge; the DIMM connects to its ports |

## Interfaces and timing

**Requests.** `cream_top` takes one cache-line request at a time:

- `req_valid`/`req_ready` handshake, with `req_we`, `req_addr` (a physical
  *line* address) and `req_wdata` (512 bits);
- exactly one `resp_valid` pulse per request, with `resp_rdata`, `resp_err`
  and `resp_corrected`.

`resp_err` covers an uncorrectable SECDED error, a parity mismatch, or an
address beyond `capacity`. An out-of-range request is answered without any
DRAM access.

In the correction-free layouts (packed, packed+RS, wrap-around), CREAM and
extra lines are not checked.

**Boundary.** `cfg_we` with `cfg_boundary` writes the boundary register. The
write is taken only while the controller is idle, which `cfg_ready` shows.
The register resets to 0, so after reset the whole module is SECDED and the
capacity is 8GB. `capacity` always shows the current size in lines.

**DIMM side.**

- For each column access, the controller pulses `acc_valid` with an
  `access_t`: write flag, kind (whole line / chip-8 part / parity word),
  part number and address.
- The bridge registers its translation. `dimm_cmd_valid` and `dimm_cmd`
  appear one clock later. `dimm_cmd` carries nine chip-selects and a
  bank, row and column for each chip.
- `dimm_wdata` (nine 64-bit chip words) is held for the whole access.
- The DIMM answers with a one-clock `dimm_done`, with `dimm_rdata` on
  reads.
- One access is in flight at a time. A request therefore takes about
  (accesses × (DRAM latency + 2)) + 3 clocks.

The DRAM command protocol (activate, precharge, timing) is not modelled. The
row travels with each access. Reordering and scheduling belong to the host
controller this logic plugs into.

## Choices made in this design, and departures

- **Packed extra-line writes:** done as eight read-modify-writes of the host
  lines, which is 16 accesses. A plain eight-write sequence on an
  all-chips-together DIMM would overwrite chips 0–7 of the host lines.
- **Bridge pins:** each of the nine chips gets its own bank, row and column
  field. This is a wider interface than a minimal pin count, where the
  chips share the row and column and only the bank bits differ. It keeps
  the mapping visible at the ports. Only two distinct banks occur in any
  one command.
- **SECDED code:** Hsiao odd-weight columns. Data bit `i` gets, in order,
  the 56 weight-3 bytes and then the first eight weight-5 bytes, in
  increasing numeric order. Any SECDED code would do.
- **Parity placement:** the exact slot arithmetic, the placement of
  extra-page parity (slots after the CREAM pages), `E`, `P`, the parity
  polarity (even) and the 16-lines-per-row packing of parity-layout extra
  pages are this design's choices.
- **Sizes:** the 8KB row and the 64KB boundary step are assumptions.
- **Not implemented:**
  - a queue;
  - out-of-order scheduling;
  - refresh;
  - operating-system support for moving pages when the boundary changes.

## Testbenches and simulation

Each block has a self-checking testbench in `tb/`:

- `tb_secded_encoder`, `tb_secded_decoder`, `tb_line_parity_gen`,
  `tb_line_shift_reg`, `tb_region_decoder`: compare against independently
  written reference functions, over exhaustive single and double errors and
  random data.
- `tb_cream_bridge`:
  - holds the wrap-around table above literally, and checks that the nine
    page groups of a row use each of the 72 bank slices exactly once;
  - checks the rank-subset host lines, the parity bank `(i+4) mod 8`, and
    the one-clock delay.
- `tb_cream_mc`: a responder checks the access sequence and data steering
  of every layout.
- `tb_cream_top`: the end-to-end test, at full default size (8GB). It runs
  random reads and writes in all four layouts against a reference memory,
  using the DIMM model `tb/ecc_dimm_model.sv`. It injects single- and
  double-bit errors, changes the boundary, and counts each mechanism.

- `tb_workload_kv`: a key-value-store workload in the style of memcached.
  - Each key owns a 256-byte item, placed by hashing.
  - Requests are 90% GET and 10% SET, with a hot set of keys.
  - It runs in every layout with the whole module in the CREAM layout.
  - Two footprints: one spread over the full extended capacity, which must
    be served completely, and one spread over 10GB, where the items beyond
    the capacity must be refused.
  - It prints accesses per request, the model's row-hit rate and clocks per
    request. With one access in flight, no scheduler and a fixed-latency
    DRAM model, these numbers show the relative cost of the layouts. They
    do not predict system performance.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Run one with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cream_pkg.sv tb/tb_cream_top.sv --top-module tb_cream_top
./obj_dir/Vtb_cream_top +verilator+rand+reset+2
```

Verilator finds the other modules through `-I`. Only the package has to be
named first. The same command, with another testbench name, runs any block
test. `-Wno-fatal` keeps the unused-signal lint warnings from stopping the
build. The full end-to-end run builds and finishes in well under a minute,
and prints how often each mechanism happened.

Every register that is read is reset, and every testbench variable that is
read is initialised, so the tests pass with random initial state
(`+verilator+rand+reset+2`).
