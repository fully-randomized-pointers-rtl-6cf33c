# GreenFat: hardware decoding of Fully Randomized Pointers

Heap overflows and use-after-free bugs are exploitable because pointers are
predictable. If an attacker knows one heap pointer `p`, the distance `k` to
another object `q` follows from the allocator's layout, so `p + k` reaches
`q`. *Fully Randomized Pointers* (FRP) break this link. A heap pointer is no
longer a machine address. It is a 64-bit word made of a random object
identifier and a partly random offset. The object's real address lives only in
a table that the program cannot read. Two objects' pointers are unrelated
random numbers, so `k` is unknown, and guessing it takes on the order of 2^52
tries. Pointer arithmetic still works on the word as an ordinary integer, so
existing binaries need no recompilation. What this costs is a decode step on
every load and store.

This repository is RTL for that decode step: the *GreenFat unit*. It sits
between a core's address generation and its L1 data cache. For each access it
works out the machine address from the pointer and checks the access against
the object's bounds. It also faults accesses through pointers to freed or
non-existent objects. The pointer-to-object table is cached in a small 8-way
cache, and misses go out to the table in memory.

## 1. The pointer word

```
 63            48 47                24 23                     0
+----------------+--------------------+------------------------+
|          id (40 bits, random)       |   offset (24 bits)     |
+----------------+--------------------+------------------------+
 upper 16 bits != 0  => encoded pointer (FRP)
 upper 16 bits == 0  => plain x86-64 user address
```

- **id** is a fresh random value for each allocation, and is never reused
  while the table holds it. Its upper 16 bits are never all zero. That is how
  an FRP is told apart from a plain address, because user addresses on x86-64
  have their top 16 bits clear.
- **offset** is the byte position inside the object, shifted by a per-object
  random start value called *zero*. The allocator returns `{id, zero}` as the
  pointer to byte 0. Two rules limit *zero*:
  - Its low 12 bits equal the low 12 bits of the object's machine address.
    This keeps alignment and page-offset tests in programs working.
  - `zero + size` must fit in 24 bits.

  These rules leave about 12 random bits in the offset, on top of the 40 id
  bits.
- Pointer arithmetic is plain 64-bit integer arithmetic. A pointer moved far
  enough out of its object carries or borrows into the id field. That yields
  an id that almost certainly belongs to no object.
- Objects are limited to 2^24 bytes (16 MiB), the reach of the offset field.
  Objects larger than this are outside the scheme described here.

All widths are in `rtl/frp_pkg.sv`, together with the shared structs:

| Struct | Fields |
|---|---|
| `frp_t` | id, offset |
| `obj_meta_t` (one table entry) | zero (24 bits), base (48 bits), size (25 bits) |
| `access_req_t` | ptr, nbytes 1..64, write |
| `access_rsp_t` | addr, fault, zero_mask, encoded |
| `mgmt_req_t` | op, id, meta |

## 2. Decoding: pointer to machine address (`frp_translate`)

For an FRP `p` whose id is found in the table with entry `{zero, base, size}`:

```
rel  = p.offset - zero            (signed, 25 bits)
addr = base + rel                 (64-bit result)
```

This is the "map, subtract, add" step. `{id, zero}` is the object's own
encoded base pointer. The difference between the access pointer and that
pointer is the byte offset `rel`, which is added to the machine base. A plain
address (upper 16 bits zero) is passed through unchanged.

Worked example. A 10-byte object sits at machine address `0x0000564745119020`
and was given the pointer `0xb5da178f9e40d020`. The instruction
`movzwl 0x2(%rax,%rbx,2)` with `%rax = 0xb5da178f9e406fb0` and `%rbx = 12345`
produces this pointer:

```
ptr  = 0x2 + 0xb5da178f9e406fb0 + 2*12345 = 0xb5da178f9e40d024
id   = 0xb5da178f9e, offset = 0x40d024, zero = 0x40d020
rel  = 4
addr = 0x0000564745119020 + 4           = 0x0000564745119024
```

The access covers bytes 4..5 of the 10-byte object, so it is in bounds. The
end-to-end testbench replays this example.

## 3. Bounds check (`frp_bounds_check`)

An access of `n` bytes at `addr` is allowed when
`[addr, addr+n)` lies inside `[base, base+size)`. The comparison runs at 66
bits, so wrap-around at either end of the address space cannot fake a pass.
The block also returns a 64-bit mask with one bit per access byte, set for
every byte that falls outside the object.

The unit acts on a failed check in one of two ways:

- **Writes** fault with `FAULT_BOUNDS`. The write must not be performed.
- **Reads** do not fault. The out-of-bounds bytes are flagged in `zero_mask`,
  and the load must return zero in those bytes. Vectorised string routines
  routinely read past the end of a buffer and discard the extra bytes, so they
  keep working, while nothing outside the object leaks.

  Setting the parameter `OOB_READ_FAULT = 1` makes out-of-bounds reads fault
  like writes instead.

## 4. The GreenFat cache (`greenfat_cache`)

The cache maps id to `{zero, base, size}`.

| Property | Value |
|---|---|
| Entries | 4096 (parameter `ENTRIES`; 128, 512 and 1024 also work) |
| Associativity | 8 ways (`WAYS`), so 512 sets |
| Set index | id[8:0]. Ids are random, so sets fill evenly. |
| Tag | id[39:9], 31 bits |
| Line | tag 31 + zero 24 + base 48 + size 25 = 128 bits = 16 bytes |
| Replacement | true LRU: a 3-bit age per way, 0 = most recent |
| Victim on FILL | first invalid way, else the oldest way |
| Latency | 2 cycles, one operation per cycle |

Storage is RAM only, so it maps onto SRAM macros:

- One line RAM per way (8 × 512 × 128 bits = 64 KiB).
- One set-state RAM (512 × 32 bits: 8 valid bits and 8 ages per set).

After reset the cache spends 512 cycles writing the set-state RAM to
"all invalid". `ready` stays low until this is done.

Each operation takes the same two-stage path:

1. **Sampling edge.** The operation is sampled, and the set's eight lines and
   its state word are read.
2. **Stage 1.** The tags are compared, a victim is chosen and the new ages are
   computed.
3. **Next edge.** The state word, and for FILL or UPDATE the line, are written
   back. A lookup's result is registered.

When an operation reads a set in the same edge that the previous operation
writes it back, forwarding supplies the new value. Back-to-back operations on
one set therefore behave as if executed one after the other.

Operations (`cache_op_e`):

| Operation | Effect |
|---|---|
| `LOOKUP` | Returns hit, way and entry. A hit makes the way most recent. |
| `FILL` | Installs an id that is not cached. |
| `UPDATE` | Overwrites a known way. |
| `INVAL` | Clears a known way. |

An assertion checks that no id is ever cached in two ways, and that FILL is
only used for absent ids.

## 5. The unit pipeline, misses and replay (`greenfat_unit`)

`greenfat_unit` is the top level. It ties the cache, the decoder, the bounds
checker and the miss handler together.

### Normal flow

Accesses enter with a valid/ready handshake, one per cycle, and pass through
two pipeline registers:

| Stage | Work |
|---|---|
| p1 (cycle after acceptance) | The cache lookup for an encoded pointer is in flight. |
| p2 (second cycle) | The cache result is back. Decode and bounds check run combinationally. The response (`rsp_valid` with `rsp`) is driven in this cycle. |

A hit or a plain address therefore answers two cycles after it was accepted.
Responses come back in request order, as single-cycle pulses. The consumer
cannot stall them.

### Miss

When the access in p2 misses, the following happens:

1. The access is held as the missing access.
2. The access behind it in p1 (if any) is squashed, and `req_ready` drops.
3. `greenfat_miss_handler` sends the id on `map_req_*` and waits for
   `map_rsp_*`. The memory side is the table in DRAM, usually hit in the LLC.
4. If the table has the entry, it is written into the cache with FILL and the
   missing access is answered from it in the same cycle.
5. If the table does not have the id, the access gets `FAULT_UNMAPPED`. Absent
   ids are not cached, so every later access through a dangling pointer also
   goes to memory and faults.
6. The squashed access is then replayed through the cache. It gets a fresh
   lookup, which sees the fill. Normal flow resumes after that.

A miss costs the table latency plus about four cycles. Only one miss is
outstanding at a time, and the unit is blocking and in order. This is the
simplest scheme that keeps responses ordered. A core that wants to hide the
latency would need a non-blocking version; see section 9.

### Keeping the cache coherent with the table

Software updates the table on `malloc` and `free`. The allocator wrappers also
send the unit a management request on `mgmt_*`:

- **`MGMT_INSERT`**, after an allocation or a resize. If the id is cached, the
  entry is overwritten (UPDATE). If not, it is installed (FILL).
- **`MGMT_INVALIDATE`**, after a free. If the id is cached, the entry is
  removed (INVAL).

A management request waits until the access pipeline is empty and no miss is
pending. It then does a lookup and writes the way it found, which takes four
cycles in all. Two consequences follow:

- A fill that was already in flight for the same id always lands before the
  invalidation.
- A later access can never see a freed object's entry.

Software must update the table in memory before it sends the request, so that
a miss started afterwards reads the new value.

## 6. Plain addresses and the protected region

The heap holds the real objects, and the table holds their addresses. Both
must be unreachable except through an FRP. Otherwise a plain address could
simply name the target. The unit therefore takes a protected range
`[prot_lo, prot_hi)` as two inputs. Any plain-address access that overlaps the
range faults with `FAULT_PROTECTED`. Other plain addresses pass through
untouched, with the same two-cycle timing. Decoded FRP accesses are not
checked against this range: reaching the heap is their purpose.

## 7. Responses

| `fault` | Meaning | Required action |
|---|---|---|
| `FAULT_NONE` | Access may proceed at `addr`. | For reads, return 0 in bytes set in `zero_mask`. |
| `FAULT_UNMAPPED` | FRP whose id is in no live entry: use after free, or a forged or overflowed pointer. | Raise an exception. Do not access. |
| `FAULT_BOUNDS` | Out-of-bounds write (or read, with `OOB_READ_FAULT`). | Raise an exception. Do not access. |
| `FAULT_PROTECTED` | Plain address inside the protected range. | Raise an exception. Do not access. |

`encoded` tells the consumer whether the pointer was an FRP. `addr` is only
meaningful when `fault` is `FAULT_NONE`.

## 8. What the surrounding system must provide

- **Allocator wrappers.** They mint ids from a cryptographically strong random
  source. Each new id must be checked against the table, and ids with a zero
  upper 16 bits are rejected. The wrappers choose *zero* under the two rules
  in section 1, keep the table up to date and send the management requests.
- **Table lookup on the memory side.** It answers `map_req_id` with
  found/entry. How the table is organised in memory (hash table or other) is
  up to this agent. The unit only needs per-id answers.
- **The exception path** for faulted accesses, and the zeroing of flagged
  read bytes in the load data path.

## 9. Where this RTL makes its own choices

The pointer format, the decode rule, the bounds rule, the id-keyed cache
geometry and latency, and the handling of faults and read zeroing follow the
scheme as published. The following are design decisions of this
implementation:

- **Read-fault behaviour.** The published scheme describes both behaviours. In
  one place it zeroes out-of-bounds read bytes and aborts only on writes and
  use-after-free. In another it raises an exception on any invalid access. The
  default here is zeroing (`OOB_READ_FAULT = 0`). The exception is one
  parameter away.
- **Cache details.** The set index and tag split, the line layout, the choice
  of the first invalid way, the reset sweep and the cache operation set are
  this design's.
- **Interfaces.** All handshakes (access request/response, management, table
  request/response) are this design's.
- **Misses.** Miss handling is blocking and in order, with squash and replay
  of the one younger access. The published evaluation used an out-of-order
  core model, which can overlap such misses with other work. This unit cannot.
- **Plain addresses** go through the same two-cycle pipeline rather than
  bypassing it.
- **Protected region.** It is a single range given by two inputs. The
  published scheme only requires that the heap and the table be unreachable
  by plain addresses.
- **Access size.** It is limited to 1..64 bytes (one 512-bit vector access).

## 10. Not included

- The allocator wrappers and id generator. They are software around a random
  number source.
- The table in memory and its layout.
- The core, the L1 data cache, the LLC and DRAM.
- Handling of objects larger than 16 MiB.
- The optional extra randomisation of the page offset and alignment bits. It
  changes only what the allocator chooses; the decode hardware is the same.
- Multi-core coherence of the GreenFat caches. It was left as future work in
  the published scheme.

## 11. Files

| File | Contents |
|---|---|
| `rtl/frp_pkg.sv` | widths, structs, enums, `is_encoded` |
| `rtl/frp_translate.sv` | combinational decode |
| `rtl/frp_bounds_check.sv` | combinational bounds check and out-of-bounds byte mask |
| `rtl/greenfat_cache.sv` | the id → entry cache |
| `rtl/greenfat_miss_handler.sv` | table fetch after a miss |
| `rtl/greenfat_unit.sv` | top level |

Parameters of the top: `ENTRIES = 4096`, `WAYS = 8`, `OOB_READ_FAULT = 0`.

## 12. Verification and simulation

Each testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. Each also has a watchdog.

- **`tb_frp_translate`** checks the worked example and 20,000 random decodes
  against an independent reference.
- **`tb_frp_bounds_check`** checks edge cases (accesses one byte inside
  and one byte outside either bound, a 16 MiB object, wrap-around past
  address 0) and 20,000 random
  cases. It checks both the verdict and the byte mask.
- **`tb_greenfat_cache`** runs a 64-entry instance against a reference model
  of the ways and LRU ages. It checks:
  - hit, way, entry and the exact victim choice;
  - the 2-cycle latency;
  - the 8-cycle reset sweep (for 8 sets);
  - back-to-back operations on one set.
- **`tb_greenfat_miss_handler`** runs 500 misses with random memory delays and
  back-pressure.
- **`tb_greenfat_unit`** runs the unit end to end at full size. Around it, the
  testbench models:
  - an allocator with random ids, random *zero* and frees;
  - the table in memory, answering in 20–80 cycles;
  - a core issuing bursts of accesses: in bounds, past either end, writes out
    of bounds, use after free, forged ids, and plain addresses in and out of
    the protected range.

  Every response is compared with a reference decode. Hits must answer in two
  cycles. The testbench counts each mechanism and fails if one never occurs:
  hit, miss, fill, eviction, replay, stall, each fault kind, zeroed read
  bytes, plain pass-through, management update and invalidate, and the worked
  example.
- **`tb_frp_attacks`** runs three attack loops at full size, 10,000 attempts
  each:
  - overflow from `p` into an adjacent object;
  - underflow into the object below;
  - use after free, with the freed storage immediately reallocated to a new
    object.

  No attempt may reach the victim. Overflow and underflow writes fault on
  bounds. Reads come back fully zeroed, or fault as unmapped once the offset
  carries into the id. Use-after-free attempts all fault as unmapped.
- **`tb_greenfat_spec_objects`** uses the heap-object populations measured
  for ten SPEC CPU2006 programs. Each population is an object count (from 1
  up to 192,298) and a mean object size. For each program the testbench:
  - allocates that many objects at that size;
  - announces each object to the unit;
  - issues 20,000 checked 8-byte accesses;
  - frees all the objects.

  The 4096-, 1024-, 512- and 128-entry caches run side by side on the same
  stream. The testbench checks every response, and checks that a larger cache
  never misses more often than a smaller one. Two of the programs have mean
  object sizes above 16 MiB (186 MiB and 51 MiB). Their objects cannot be
  encoded, and they are reported as such.

  The access stream is synthetic: runs of consecutive words, with a preference
  for recently used objects. The printed miss rates therefore describe that
  stream, not the real programs. A typical result:

  | Program | Miss rate, 4096 entries | Miss rate, 128 entries |
  |---|---|---|
  | 8,901 objects | 1.5% | 2.9% |
  | 1,164 objects | 0% | 2.7% |
  | 1 to 40 objects | 0% | 0% |

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/frp_pkg.sv tb/tb_greenfat_unit.sv --top-module tb_greenfat_unit
./obj_dir/Vtb_greenfat_unit
```

Swap in any other `tb/*.sv` and its module name. The full-size tests finish
in about a second; `tb_greenfat_spec_objects` takes about 15 seconds. To try a smaller cache, override `ENTRIES` on the
`greenfat_unit` instance, for example 128 or 512. It must stay a power of two
times `WAYS`.
