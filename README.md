# GaloisCache: a cache skewed by a linear map over GF(2^n)

In a conventional set-associative cache, an attacker who shares the cache with
a victim can fill one set, let the victim run, and time its own lines again
(Prime+Probe). A miss tells the attacker which set the victim touched, and
that gives away address bits. GaloisCache stops this without partitioning the
cache and without a secret, re-keyed mapping. The layout is fixed and public.
It is built so that **every set of one security domain shares exactly one line
slot with every set of every other domain**. If the victim's fill evicts a
random way of one of its own sets, the evicted slot falls in a random set of
each other domain. An ordinary Prime+Probe then learns only that *some* line
was filled, not where.

This repository holds synthesizable SystemVerilog for the cache. It has the
skewing function, the per-way arrays, the domain register, pseudo-random
replacement and a blocking controller with write-back and refill. It also has
self-checking testbenches for every unit and for the whole cache, including
the two attacks discussed for the design: plain Prime+Probe and a two-domain
collusion attack.

The design follows the GaloisCache proposal by Constable and Unterluggauer
("Seeds of SEED: A Side-Channel Resilient Cache Skewed by a Linear Function
over a Galois Field", SEED 2021). That proposal defines the skewing function,
how it is built in hardware and the security argument. It does not describe
the rest of a cache controller. The controller parts here are ordinary choices
made for this RTL, and they are listed in the section on departures and
choices.

## 1. The skewing function

The cache has 2^N sets and 2^N ways, and up to 2^N security domains share it.
Set numbers, way numbers and domain IDs are all elements of GF(2^N). Bit i of
an N-bit value is the coefficient of x^i, so 6 = 0b110 is x^2 + x. Adding two
values is an XOR. Multiplying them is a carry-less product reduced modulo an
irreducible polynomial R of degree N.

A line of domain `t` whose address gives set index `s` may sit in way `w` only
at row

    Pi(t, s, w) = a*s + b*t*w + c     (mod R)

Here `a` and `b` are non-zero constants and `c` is any constant. Two facts make
the cache work:

* **Diagonalization.** Take two domains t ≠ t' and any sets s, s'. The equation
  Pi(t,s,w) = Pi(t',s',w) has exactly one solution:
  w = a(s'-s) · b^-1 · (t-t')^-1. Every non-zero field element has an inverse,
  so that solution always exists and is unique.
* **No self-overlap.** For fixed t and w, s → Pi(t,s,w) is a bijection. One
  domain's sets never collide with each other, so each domain can use the
  whole cache.

Way 0 is special: Pi(t,s,0) = a*s + c for every domain. All domains agree on
way 0. That is the one way in which set s of each domain meets set s of every
other domain.

### How it is computed

The way number `w` is a constant in each way's datapath, so `(b*t)*w` needs no
AND gates. `gf_const_mul` XORs copies of its input shifted by each position
where the constant has a one. The 2N-1 bit product is then reduced from its top
bit down: whenever bit i ≥ N is set, R shifted by i-N is XORed in. The whole
unit is an XOR tree of a few levels. `a*s` is another constant multiplier and
runs in parallel with all the per-way ones. `b*t` leaves the per-request path
entirely: `sdid_ctx` computes it once when the domain register is written and
keeps it in a register. `galois_index` produces all 2^N rows at once.

The reducing polynomials, selected by `galois_pkg::gf_poly(N)`:

| N | field     | R               | cache (sets x ways) |
|---|-----------|-----------------|---------------------|
| 2 | GF(4)     | x^2 + x + 1     | 4 x 4 (example)     |
| 3 | GF(8)     | x^3 + x + 1     | 8 x 8               |
| 4 | GF(16)    | x^4 + x + 1     | 16 x 16             |
| 5 | GF(32)    | x^5 + x^2 + 1   | 32 x 32             |
| 6 | GF(64)    | x^6 + x + 1     | 64 x 64 (default)   |
| 7 | GF(128)   | x^7 + x + 1     | 128 x 128           |

N = 3 to 7 come from the proposal. N = 2 is the only irreducible quadratic
over GF(2). It is used for the 4x4 example below. For any other N, pass
`POLY` explicitly.

### A 4x4 example

With a = b = 1, c = 0 in GF(4), write the elements as 0, 1, x (=2) and x+1
(=3). Each table below shows which set of the domain occupies each (row, way)
slot:

    domain 1              domain x              domain x+1
    way: 0  1  x  x+1     way: 0  1  x  x+1     way: 0  1  x  x+1
    row0 0  1  x  x+1     row0 0  x  x+1 1      row0 0  x+1 1  x
    row1 1  0  x+1 x      row1 1  x+1 x  0      row1 1  x   0  x+1
    row2 x  x+1 0  1      row2 x  0  1  x+1     row2 x  1  x+1 0
    row3 x+1 x  1  0      row3 x+1 1  0  x      row3 x+1 0  x  1

Domain 0 is the identity: row r holds set r in every way. Take any set in one
table and any set in another. They share exactly one column position.
`tb_galois_index` checks these four layouts cell by cell.

## 2. The cache around it

```
             set_sdid ──► sdid_ctx ──(t, b*t)──┐
                                               ▼
  req_addr ──(s = set bits)──────────────► galois_index ──row[0..2^N-1]──┐
                                                                          ▼
                    ┌──────────── way_bank 0 … way_bank 2^N-1 (one row address each)
                    ▼
        tag compare in every way ──► hit way / miss
                                         │
            lfsr_repl ──victim way───────┤
                                         ▼
                 write-back of dirty victim, refill, fill at row[victim]
```

* **Ways are separate banks.** Every way reads a different row, so each
  `way_bank` has its own address. A bank holds the tag array, the data array
  (512-bit lines) and valid/dirty flip-flops, which reset clears.
* **Address split.** Byte address = {rest, set index s (N bits), line offset
  (6 bits)}. The tag entry stores the full line address and the domain ID. A
  hit needs both to match. One domain never hits on another's copy of a line,
  so a shared line is held once per domain. Domains are assumed to share no
  writable memory. There is no coherence between per-domain copies.
* **Replacement** is pseudo-random and uniform over all ways. Empty slots get
  no preference, because choosing an empty slot first would make evictions
  depend on occupancy and weaken the argument above. The source is a 16-bit
  maximal LFSR (x^16+x^14+x^13+x^11+1) that steps every clock; its low N bits
  give the way.
* **Domain register.** `set_sdid_valid`/`set_sdid` load a new domain, for
  example on a context switch. Requests accepted from the next clock on use
  it. A request latches its domain when it is accepted, so a switch during a
  miss is harmless.

### Controller and timing

The controller is blocking, with one request at a time:

| state   | what happens |
|---------|--------------|
| IDLE    | `req_ready` = 1. An accepted request latches address, data and domain. Every way reads row Pi(t,s,w) in the same clock, because the skewing logic sits combinationally in front of the arrays. |
| LOOKUP  | Tags are compared in all ways. On a hit, the word is returned; a write merges its bytes into the line and sets dirty. On a miss, the LFSR names the victim way v and its entry is saved. |
| WB      | Only if the victim is valid and dirty: one line write on the memory port. |
| RF_REQ  | Line read request on the memory port. |
| RF_WAIT | On `mem_resp_valid` the line, with the write word merged in, is written into way v at row Pi(t,s,v), and the word is returned. |

* A hit raises `resp_valid` two clocks after the request is accepted, and the
  next request can be accepted on the clock after that.
* A miss takes two clocks plus one for each memory handshake, the memory
  latency, and the write-back if there is one.
* Every response reports `resp_hit`, `resp_way` and `resp_row`: where the line
  was found or placed. These outputs let a testbench check the placement
  against Pi.
* The memory port is valid/ready for requests (`mem_req_we` = 1 marks a
  write-back) plus a response strobe for reads. Writes get no response.

Assertions in `galois_cache` check three rules:

* a memory request stays stable until it is accepted;
* no read data arrives without an outstanding read;
* no line is found in two ways.

## 3. What the attack testbench demonstrates

`tb_galois_cache_attacks` runs the 4x4 GF(4) cache (N = 2) through both
attacks. It uses domains 0, 1, x and x+1. Replacement is random, so each
"prime" repeats its lines until one full pass hits.

* **Prime+Probe** (adversary 1, victim x).
  1. The adversary primes its set 0. Its four lines then sit at way w, row w.
  2. The victim fills one line of its set sv.
  3. The adversary probes its four lines again. It sees a miss exactly when
     the victim's random way is the single way where the two sets meet.

  For sv = 0 that way is way 0, at probability 1/4. For victim sets 1, x and
  x+1 the meeting way is x·sv: way x, x+1 and 1 respectively. The testbench
  checks each trial against this rule, and checks that the first probe to
  miss is the line that sat in the victim's way. The adversary learns that a
  fill happened, but not which set.

* **Collusion** (domains 1 and 0 against x).
  1. Domain 1 fills the whole cache.
  2. Domain 0 fills its sets 1, x and x+1, which are rows 1 to 3. Domain 1
     keeps one line per set, all in row 0 (set s at way s).
  3. The victim fills one line.
  4. Domain 1 probes its four survivors.

  A survivor misses only if the victim's slot was in row 0. The missing
  survivor's set v then reveals the victim's set as x·v. In the case where
  the victim touches its set 0 and the random way is 0, domain 1 records four
  misses in its set 0. Each case is checked, and both outcomes must occur.

The proposal's text states the sv = 1 / x / x+1 cases as "way 1 / x / x+1".
Its own formula and its figure of the attack give x / x+1 / 1, as above. This
RTL follows the formula.

## 4. Departures and choices

From the proposal:

* the square 2^N x 2^N geometry;
* Pi and its XOR-only construction;
* b*t precomputed into a register;
* a*s computed in parallel with the per-way products;
* random replacement;
* the polynomials of the table above;
* 64-byte lines;
* a = b = 1 as the worked case.

Chosen here, because the proposal says nothing about them:

* the default size N = 6 (the proposal lists 8x8 to 128x128 without picking
  one);
* c = 0;
* one current-domain register, rather than a per-request domain ID into a
  table of b*t values;
* the domain ID in the tag;
* write-back with write-allocate;
* a blocking controller with one outstanding request;
* the valid/ready handshakes;
* synchronous-read arrays;
* 64-bit CPU words with byte enables;
* the LFSR and its seed;
* asynchronous active-low reset.

Not built:

* Fields of odd characteristic (p > 2). The proposal allows them, but calls
  their arithmetic much harder in hardware and expects p = 2.
* "Stacking" several GaloisCaches to get more sets than ways. It is mentioned
  only as a possibility, with no selection scheme.
* Any per-domain copy coherence.
* Multiple request ports.

## 5. Files

| file | contents |
|------|----------|
| `rtl/galois_pkg.sv` | field polynomials (`gf_poly`), elaboration-time `gf_mul`, line/word sizes, default N |
| `rtl/gf_const_mul.sv` | constant multiplier in GF(2^N), XOR network |
| `rtl/galois_index.sv` | Pi for all ways |
| `rtl/sdid_ctx.sv` | domain register with precomputed b*t |
| `rtl/lfsr_repl.sv` | pseudo-random victim way |
| `rtl/way_bank.sv` | one way: tag/data arrays, valid/dirty |
| `rtl/galois_cache.sv` | top level: controller, tag compare, memory port |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_galois_cache_attacks` |

Parameters of `galois_cache`:

* `N` (6): field degree;
* `POLY` (`gf_poly(N)`): reducing polynomial;
* `A`, `B` (1): non-zero field constants;
* `C` (0): field constant;
* `ADDR_W` (32): address width;
* `LFSR_SEED`: non-zero starting value of the LFSR.

Size at the default: 64 ways x 64 rows x 512 bits = 2 Mbit of data, plus
64 x 64 tags of 32 bits (6-bit domain + 26-bit line address).

## 6. Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops, and a
watchdog ends a hung run as a failure. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/galois_pkg.sv \
    tb/tb_galois_cache.sv --top-module tb_galois_cache
./obj_dir/Vtb_galois_cache
```

Swap in any other testbench name. `-Irtl` lets Verilator find each module
in `rtl/<name>.sv`.

* `tb_galois_cache` runs the default 64x64 cache with no parameter changes.
  It issues 20000 random reads and writes from four domains, switches domains,
  issues back-to-back requests, and uses a memory model with random stalls
  and latency. It checks against its own model of every slot and a flat
  golden memory:
  * hit or miss and the hit way;
  * rows against Pi;
  * read data;
  * exactly one correct write-back per dirty victim;
  * hit latency.

  It also requires each of these to occur at least once: read hit, write hit,
  fill into an empty slot, clean eviction, write-back, domain switch, miss on
  a line held by another domain, request stall and memory stall. It runs in
  well under a second.
* `tb_galois_cache_abc` repeats the same test on an 8x8 cache over GF(8) with
  a = 3, b = 5, c = 6. This exercises every multiplier inside the cache.
* `tb_galois_index` compares the 4x4 layouts above. It checks GF(8) with
  a = 3, b = 5, c = 6 exhaustively, for diagonalization over all domain and
  set pairs and for bijectivity, and samples GF(64).
* `tb_gf_const_mul` checks all inputs for the N = 2 to 7 fields against a
  bit-serial reference.

To try another geometry, override `N` on `galois_cache` (and `POLY` if N is
outside 2 to 7). `WAYS = ROWS = 2^N`, so the tag compare and the arrays grow
as 4^N lines.
