# Califorms: byte-granular memory blacklisting in the cache hierarchy

Many memory-safety bugs are overflows *inside* an object: a write runs off the end of
an array in a struct and lands on the function pointer next to it. Califorms catches
these by blacklisting individual bytes. The compiler puts a few unused bytes
("security bytes") between fields, or reuses the padding that alignment already leaves
there. The allocator marks those bytes with a new instruction, `CFORM`. From then on
the hardware raises a privileged exception on any load or store that touches a
marked byte.

The hardware cost is small because of where the marks are kept:

* **In the L1 data cache**, every line carries one extra bit per byte (8 bytes per
  64-byte line). A hit checks the accessed bytes against these bits in parallel with
  the tag compare. Loads return 0 for security bytes, so their location cannot be
  probed through speculative reads.
* **In the L2 and beyond, and in DRAM**, a line carries a single extra bit,
  *califormed*. The positions of its security bytes are written into the security
  bytes themselves, using a compact format described below. The conversion happens
  only on the L1-L2 path, once when a line is spilled and once when it is filled.

This repository holds the RTL of the core-side part of that scheme:

* the L1 data cache with its metadata array and hit-path checker;
* the spill and fill converters between the two line formats;
* the CFORM logic;
* a memory queue that stops loads and stores from picking up data across an in-flight
  CFORM;
* the exception-mask register.

The core, the L2/L3 caches and DRAM are not included. The L2 port is a plain port,
and the testbenches drive it from a behavioural line memory.

## Block map

```
 core ops ──► cform_lsq ──► l1_dcache ───────────────────────────► L2 port (16B flits + cf bit)
 (load,       (marks ops     ├─ sram_sp x3: tag, metadata (64b/line), data (512b/line)
  store,       behind a      ├─ califorms_checker  (hit path: touched security bytes?)
  CFORM)       CFORM)        ├─ cform_unit         (CFORM truth table, misuse exception)
                             ├─ spill_unit ─┐ four find_index stages + one for the sentinel
                             └─ fill_unit  ─┘ (bitvector <-> sentinel)
 califorms_top = cform_lsq + l1_dcache + exception-mask register
```

All shared types are in `rtl/califorms_pkg.sv`:

* `mem_req_t`: op, 48-bit address, size, store data, and the CFORM operands R2 and R3.
* `mem_rsp_t`: load data, violation and faulting address.
* `l2_req_t` and `l2_rsp_t`: L2-side beats.
* header field positions.

## The sentinel line format (L2 and beyond)

This is the part of the design that takes the most care.

A line with no security bytes is stored unchanged and its califormed bit is 0. For
any other line, the first bytes are turned into a header that describes where the
security bytes are. The trick is that the data those header bytes held is moved into
security bytes, which have no data of their own. So no storage is added beyond the
one bit.

### Header

Bytes 0..3 of the line, read as one little-endian 32-bit word `h`:

| bits      | field    | used when         |
|-----------|----------|-------------------|
| `[1:0]`   | count code: `00` = 1, `01` = 2, `10` = 3, `11` = 4 or more security bytes | always |
| `[7:2]`   | Addr0, offset of the 1st security byte | always |
| `[13:8]`  | Addr1, offset of the 2nd | count ≥ 2 |
| `[19:14]` | Addr2, offset of the 3rd | count ≥ 3 |
| `[25:20]` | Addr3, offset of the 4th | count ≥ 4 |
| `[31:26]` | sentinel | count ≥ 4 |

* **Header length.** The header occupies H = min(n, 4) bytes, where n is the number of
  security bytes. Bytes from H upward keep their own data, except for the relocations
  below. Header bits the count does not use are written as 0.
* **Offset width.** Six bits are enough for an offset inside a 64-byte line. That is
  why each security byte costs exactly one 6-bit field, and why the 2-bit code fits in
  byte 0 next to Addr0.
* **The sentinel.** With five or more security bytes, the header has no room for more
  addresses. Every security byte after the fourth is overwritten with a *sentinel*: a
  6-bit value that the low 6 bits of no normal byte in the line share. Such a value
  always exists. With n ≥ 4 there are at most 60 normal bytes, but 64 six-bit values.
  The spill unit takes the lowest unused value. The fill unit recognises the 5th and
  later security bytes as the bytes from 4..63 whose low 6 bits equal the sentinel
  (upper two bits zero). The sentinel is looked for only when the code is `11`.

### Relocating the header bytes (spill)

Bytes 0..H-1 are about to be overwritten by the header. The data they hold must go
into security-byte slots among the first four security bytes (Addr0..Addr_{H-1}).

* Some of those slots may lie inside the header itself (for example, security byte 1).
  They cannot receive data.
* Some header bytes may themselves be security bytes. They have no data to move.

Rule: the normal bytes among 0..H-1 are copied, in ascending order, into the Addr slots
that are ≥ H, in ascending order. The two counts always match. Every security byte
inside the header is one header byte with nothing to move, and also one Addr slot that
cannot be used.

Example with security bytes at {1, 5, 6, 7}: H = 4 and the code is `11`. The normal
header bytes are 0, 2 and 3. The usable slots are 5, 6 and 7. So byte 0 goes to 5,
byte 2 to 6 and byte 3 to 7. The header then records Addr = 1, 5, 6, 7, and the
sentinel is the first value free among the normal bytes.

Example with security bytes at {5, 20, 21, 40, 41}: bytes 0, 1, 2 and 3 move to 5, 20,
21 and 40. Byte 41 is overwritten with the sentinel.

### Restoring a line (fill)

1. A califormed bit of 0 means the line is taken as is, with no security bytes.
2. Otherwise the count code gives H, and Addr0..Addr_{H-1} mark their bytes as
   security bytes.
3. If the code is `11`, every byte from 4 up whose low 6 bits equal the sentinel is
   also marked.
4. The normal header bytes get their data back from the Addr slots ≥ H, by the same
   ascending pairing as the spill.
5. Every security byte is then written as 0.

The L1 therefore only ever holds zeros in security bytes.

### Hardware shape

Both converters are single combinational blocks that handle one whole line.

* **Spill** (`spill_unit`):
  * A chain of four `find_index` blocks finds the first four security bytes. Each block
    reports the lowest set bit and passes on a mask that clears it.
  * A fifth `find_index` searches the 64-bit "used values" vector for its first zero.
  * A 64-way mux network writes the header and relocates the data.
* **Fill** (`fill_unit`) is the mirror image. It decodes the four header fields and
  compares 60 bytes against the sentinel.

Inside the L1, each converter sits between registers on the miss path. The spill unit
reads the victim from the arrays into a write-back buffer. The fill unit goes from the
flit buffer into the array write. Neither is on the hit path.

## L1 data cache (`l1_dcache`)

* **Organisation.** 32 KB, direct-mapped, 64-byte lines (512 sets), 48-bit addresses,
  33-bit tags. There are three single-port synchronous SRAMs: tag, metadata (64
  bits/line) and data (512 bits/line). Valid and dirty bits are flops, cleared by reset.
* **Hit path.** Four cycles from acceptance to response, one per stage: address decode;
  tag and metadata read; tag compare, data access and `califorms_checker`; aligner.
  The checker forms the set of bytes the access touches (1, 2, 4 or 8 bytes, naturally
  aligned). It ANDs that set with the metadata, and reports a violation and the lowest
  offending address.
* **Loads** return 8 bytes at `rdata[63:0]`. Security bytes read as 0.
* **Stores** write only normal bytes. If any touched byte is a security byte, the
  violation is reported.
* **CFORM** is handled like a store. It allocates on a miss and marks the line dirty.
  It applies the truth table of `cform_unit`. For every byte where R3 (the allow mask)
  is 1, the byte becomes a security byte if R2 is 1 and a normal byte if R2 is 0.
  Setting a byte that is already a security byte, or clearing one that is not, is
  misuse. Misuse raises the violation and leaves the line completely unchanged. Every
  byte whose state does change has its data zeroed.
* **Misses.** A dirty victim goes through `spill_unit` and leaves as four 16-byte write
  beats with its califormed bit. The new line arrives as four 16-byte read beats, goes
  through `fill_unit`, is written into the arrays, and the hit path is replayed. The
  cache is blocking, and flits travel in order 0..3.
* **Assertions** cover the L2 request handshake (payload held while valid and not
  ready), aligned accesses, and no unexpected L2 response beats.

## CFORM-aware memory queue (`cform_lsq`)

An 8-entry in-order queue sits in front of the L1. A CFORM may be waiting in the queue
when a younger load or store to the same bytes arrives. The two match if they are on
the same line and the access touches a byte the CFORM sets (R2 AND R3). In that case
the younger operation must not run as if the bytes were still normal. On enqueue it is
compared with every older CFORM in the queue. If it matches, it is marked. The top
then turns a marked operation into a violation, and a marked load returns 0.

## Exceptions and the mask register (`califorms_top`)

Each response carries:

* `violation`: a security byte was touched, a CFORM was misused, or the operation was
  marked;
* `fault_addr`;
* `rsp_exc`, the exception actually raised: `rsp_exc = violation & ~excmask`.

`excmask` is a one-bit register written through `excmask_we`/`excmask_wdata`. A
privileged store sets it around copy routines that legitimately move whole objects,
padding included.

## Where this RTL departs from, or fills in, the source description

* **Header relocation.** This is the ascending pairing above. The rule as usually
  stated ("byte j goes to the j-th security location") loses a byte when a security
  byte inside the header comes after a normal one. On every line where that rule is
  lossless, the pairing gives the same result.
* **Sentinel.** The sentinel is chosen from the normal bytes only. Counting the
  security bytes too could leave no free value.
* **Fill metadata.** The metadata of bytes 0..3 comes from the Addr fields, not from
  the count code alone.
* **Zeroing.** All security bytes are zeroed on fill, not just the four named in the
  header. A CFORM zeroes the bytes it changes. A faulting CFORM changes nothing.
* **Faulting stores.** A store that touches a security byte still writes its normal
  bytes. The exception is reported with the response and nothing is held back. This
  lets a whitelisted copy, run with the mask set, move a whole object. A core that
  needs the store squashed must do so before it reaches the L1.
* **Constant timing.** A hit takes 4 cycles whether or not it violates. Fill and spill
  take the same number of cycles for califormed and plain lines.
* **Not modelled.** Associativity is 1; a simulated system with an 8-way L1 is not
  modelled. There is no critical-word-first delivery, and no pipelined spill.
* **Own choices.** The mask register is a single bit and the queue has 8 entries.
* **Outside the RTL.** The core, the L2/L3 caches and DRAM's spare ECC bits for the
  califormed bit are not built.

## Testbenches

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`. All of them compare the hardware against models
written separately in the testbench. `califorms_ref_pkg` holds loop-based encode and
decode functions for the sentinel format.

| testbench | what it does |
|---|---|
| `find_index_tb`, `cform_unit_tb`, `califorms_checker_tb`, `sram_sp_tb` | exhaustive or random unit checks |
| `spill_unit_tb`, `fill_unit_tb` | hand-built headers (1, 2, 3, 4+ security bytes, security bytes inside the header) and random lines; spill output against the reference encoder and decoded back without loss; fill output against the original line |
| `l1_dcache_tb` | 3000 random ops on 16 lines that share sets, checked against a byte shadow; 4-cycle hit latency; final L2 image against the reference encoder |
| `cform_lsq_tb` | queue order, back-pressure and CFORM marking |
| `califorms_top_tb` | end-to-end at default parameters. Requires each of these at least once: hit, miss, write-back, califormed write-back, write-back in the 4+ format, califormed fill, load violation, store violation, CFORM misuse, queue mark, masked exception, queue full |
| `struct_padding_tb` | struct layouts with 1-7 security bytes per field and an "array + function pointer" layout, straddling lines. Allocate, use fields, overflow the array (the first store past its end must fault at that byte), evict through the L2 and repeat, repeat with the mask set, free |

`l2_mem_model` is the behavioural stand-in for the L2 cache and everything beyond it.
It stores lines with their califormed bit and adds latency and random back-pressure.

## Simulating

With Verilator 5 (two-state, `--timing` for the testbench delays):

```sh
verilator --binary --timing -j 0 --top-module califorms_top_tb \
    rtl/califorms_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
    tb/califorms_ref_pkg.sv tb/l2_mem_model.sv tb/califorms_top_tb.sv
./obj_dir/Vcaliforms_top_tb
```

For another testbench, replace the top module and the last file. The unit testbenches
need only the package and the module under test. Everything runs at the default
parameters: 32 KB L1, 8-entry queue. Every testbench finishes in seconds.

## Changing it

* `CACHE_BYTES` (L1 size) and `LSQ_DEPTH` are parameters of `califorms_top`.
* The line size, address width and flit size are package constants.
* The header field positions are the `HDR_*` constants in the package. The spill and
  fill units use them. The testbench reference encoder spells the layout out on its
  own, so it must be changed together with them.
