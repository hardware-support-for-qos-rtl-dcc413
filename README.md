# Case-based retrieval unit for QoS-driven function allocation

In a reconfigurable system, one function (say an FIR equalizer) may exist in
several implementations: a bitstream for an FPGA, a DSP routine, a program for
a general-purpose processor. Each implementation has a different set of
quality-of-service features: bit width, output mode, sample rate, power, and
so on. An application asks for a function and states the features it wants.
The allocation layer must then find the implementation that fits those wishes
best.

This unit does that search in hardware. It treats it as the *retrieve* step of
case-based reasoning. Each implementation is a stored "case": a list of
(attribute, value) pairs. The request is a new "problem": a list of
(attribute, wanted value, weight) triples. The unit rates every implementation
of the wanted function type, and returns the ID and the similarity of the best
one.

The RTL follows a published design (a Virtex-II implementation with two block
RAMs and two 18x18 multipliers). The paper gives the data structures, the
algorithm's flow chart and a drawing of the data path. Cycle timing, fixed-point
formats, the NULL encoding, the host write ports and the handling of corner
cases are this implementation's own choices. They are listed in
[Where this RTL departs from, or adds to, the published design](#where-this-rtl-departs-from-or-adds-to-the-published-design).

## Similarity

For one attribute *i* with requested value `A_req` and case value `A_cb`:

    s_i = 1 - |A_req - A_cb| / (1 + d_max_i)

Here `d_max_i = upper_i - lower_i` is the largest distance that attribute can
have anywhere in the case base. It is fixed when the case base is built. So
`s_i` is 1 for an exact match and close to 0 at the largest distance. If an
implementation has no entry for a requested attribute, its `s_i` is 0. A
requirement that cannot be checked counts as not met.

The global similarity is the weighted sum `S = sum_i w_i * s_i`, where the
request's weights add up to 1. The best implementation is the first one whose
`S` is strictly larger than that of every implementation before it.

Division is avoided. The case base stores `R_i = 1 / (1 + d_max_i)` for every
attribute type, so the unit only multiplies: `s_i = 1 - |A_req - A_cb| * R_i`.

### Worked example

The request asks for an FIR equalizer (type 1) with three attributes: bitwidth
16, output mode 1 (stereo) and 40 kSamples/s. Each has weight 1/3.

| implementation | bitwidth (d_max 8) | output mode (d_max 2) | kS/s (d_max 36) | S |
|---|---|---|---|---|
| 1 FPGA    | 16 → 1     | 2 → 0.667 | 44 → 0.892 | 0.853 |
| 2 DSP     | 16 → 1     | 1 → 1     | 44 → 0.892 | **0.964** |
| 3 GP CPU  | 8 → 0.111  | 0 → 0.667 | 22 → 0.514 | 0.431 |

The unit returns ID 2 and `S_max = 0x7B62` (0.964). These values are checked in
`tb_retrieval_unit`, `tb_retrieval_ctrl` and `tb_retrieval_datapath`.

## Number formats

- **Words.** Every memory entry is one 16-bit word: IDs, attribute values,
  weights, reciprocals and list pointers alike.
- **Attribute values** are unsigned 16-bit integers.
- **Weights, reciprocals and similarities** are unsigned Q1.15, so
  `0x8000` = 1.0.
  - A weight of 1/3 is `10923` (0x2AAB).
  - A reciprocal is stored as `R = round(2^15 / (1 + d_max))`, so `d_max = 0`
    gives `0x8000`.
- **`s_i`.** The product `|A_req - A_cb| * R` is kept to its 15 fractional bits
  (truncated), and `s_i = 0x8000 - product`. If the product is 1.0 or more,
  `s_i` is clamped to 0. This happens when a request asks for a value outside
  the design-time bounds.
- **`S`.** Each term `(s_i * w_i) >> 15` is truncated and added into S. With
  weights that sum to `0x8000`, S never exceeds 1.0. If a request's weights add
  up to more than 1, S saturates at `0xFFFF` instead of wrapping.

## Memory layout

There are two memories. **Req-MEM** holds 32 words (64 bytes). **CB-MEM** holds
2304 words (4.5 kB).

Every structure is a linear list of 16-bit words. Each list is sorted by
ascending ID and ends with a NULL entry, which is the word `0`. So 0 is never a
valid ID. Pointers are plain word addresses in CB-MEM.

**Request** (Req-MEM, starting at `req_ptr_i`):

    function type ID
    attr ID, value, weight      -- one block per constraining attribute,
    attr ID, value, weight      -- ascending attr ID
    ...
    0

**Case base** (CB-MEM). There are three levels, plus a supplemental list:

    level 0 (at cb_root_ptr_i):   type ID, -> level-1 list   ... 0
    level 1 (one per type):       impl ID, -> level-2 list   ... 0
    level 2 (one per impl):       attr ID, value             ... 0
    supplemental (at supp_ptr_i): attr ID, lower, upper, R   ... 0

The lower and upper bounds are stored for completeness. The data path uses only
`R`. The lists may be placed anywhere, in any order; only the three start
pointers and the embedded pointers locate them.

The sizes match the worst case of the published table: 15 function types, 6
implementations each, 10 attributes per implementation, 10 attribute types,
and 10 attributes per request. That case base needs
31 + 15·13 + 90·21 + 41 = 2157 words, and the request needs 32 words. Both fit.
The paper's text also mentions 10 implementations per type. That would need
3537 words, which does not fit the 4.5 kB the same paper gives.

## How the controller walks the lists

`retrieval_ctrl` is a 27-state machine. It works through the steps of the
published flow chart:

1. Read the type ID from the request. Walk the level-0 list until it finds an
   equal ID. If it first meets a larger ID or the NULL entry, it stops with
   `type_found_o = 0`.
2. For each entry of that type's implementation list:
   - load the implementation ID into `Realis_ID`,
   - follow the entry's pointer to its attribute list,
   - clear S,
   - go back to the first requested attribute.
3. For each requested attribute:
   1. Load its ID, value and weight into `Type A_i`, `A_i` and `w_i`.
   2. **Supplemental search.** Walk the supplemental list for this attribute ID.
      If found, load `R` into the `(1+D_max)^-1` register.
   3. **Attribute search.** Walk the implementation's attribute list for the
      same ID. If found, load the value into `A_i_CB` and set *exist*.
   4. Run Diff → S_i → TEMP → S. If either search failed, *exist* is 0. The
      multiplexer then feeds 0 to the weight multiplier, and the term adds
      nothing.
4. At the request's NULL entry, compare S with S_max. If S is larger, keep S
   and `Realis_ID`.
5. At the implementation list's NULL entry, pulse `done_o`.

**Why sorting matters.** Both the request and the lists are sorted by ID. Each
search therefore stops as soon as it reaches an ID that is equal, larger or
NULL. The next requested attribute has a larger ID, so its search starts where
the previous one stopped, not at the top of the list. The cost of rating one
implementation is therefore linear in the lengths of its lists, not quadratic.

The two searches keep their positions differently:

- **Attribute list.** The position moves past an entry once it has been
  matched.
- **Supplemental list.** The position stays on a matched entry, and returns to
  `supp_ptr_i` for each new implementation.

Both the supplemental ID and the implementation's attribute ID arrive on the
CB-MEM read bus. Both go through the same `Type A_CB` register and the same
comparator. That comparator reports equal, less-than and NULL.

## Data path

`retrieval_datapath` follows the published data-path drawing:

- **Operand registers.**
  - From the Req-MEM bus: `Type A_i`, `A_i`, `w_i`.
  - From the CB-MEM bus: `Type A_CB`, `A_i_CB`, `(1+D_max)^-1`, and the
    implementation ID.
- **`local_similarity`.** Subtract, take the absolute value, and register it as
  Diff. Then multiply by R (multiplier 1), compute `1 - x`, and register it as
  S_i.
- **`similarity_accumulator`.** The *exist* multiplexer chooses S_i or 0. The
  result is multiplied by `w_i` (multiplier 2) into TEMP, and S += TEMP.
- **`best_select`.** Compares S > S_max. It holds `Realis_ID`, `ID_max` and
  `S_max`.

Every register loads only on its strobe from the controller. The strobes travel
as the `dp_ctrl_t` struct defined in `cbr_pkg`. The comparator results travel
back as `dp_stat_t`.

## Timing

Both memories return data one clock after the address. The controller drives
addresses combinationally from its state and pointers. It uses the data in the
next state. The cost of each step, in clock cycles:

| step | cycles |
|---|---|
| fetch the request type | 2 |
| each level-0 / level-1 entry visited | 2 (+1 to follow its pointer) |
| fetch one requested attribute (ID, value, weight) | 4 |
| each ID compared through the data-path comparator | 3 (read, latch, compare) |
| fetch the matched R or value | 1 |
| Diff and S_i (only if the attribute was found) | 2 |
| TEMP and S (always) | 2 |
| end of request list, best update | 3 |
| end of implementation list, done | 3 |

Examples:

- The worked example takes **206 busy cycles**: 2 + 3 + 3 × 66 + 3. This count
  is checked in `tb_retrieval_ctrl`.
- A missing type near the top of the list takes 9 cycles.
- A worst-case full-size request (10 attributes against 6 implementations of 10
  attributes) works out at about 1,200 cycles. That is roughly 16 µs at the
  75 MHz the published FPGA version reached.

The paper gives no cycle count of its own. It reports only a speed-up of about
8.5 over a soft-processor software version at the same clock.

## Interface (`retrieval_unit`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock; asynchronous active-low reset (memory contents are not reset) |
| `new_req_i` | in | 1 | one-cycle start pulse; ignored while `busy_o` |
| `req_ptr_i` | in | 5 | Req-MEM address of the request's type entry |
| `cb_root_ptr_i` | in | 12 | CB-MEM address of the level-0 list |
| `supp_ptr_i` | in | 12 | CB-MEM address of the supplemental list |
| `req_we_i`, `req_waddr_i`, `req_wdata_i` | in | 1/5/16 | Req-MEM write port |
| `cb_we_i`, `cb_waddr_i`, `cb_wdata_i` | in | 1/12/16 | CB-MEM write port |
| `busy_o` | out | 1 | from the cycle after `new_req_i` up to and including `done_o` |
| `done_o` | out | 1 | one-cycle pulse; results are valid from here until the next start |
| `type_found_o` | out | 1 | 0: the function type is not in the case base |
| `id_max_o` | out | 16 | best implementation ID; 0 if no implementation scored above 0 |
| `s_max_o` | out | 16 | its similarity, Q1.15 |

The pointer inputs are sampled at the start pulse: `req_ptr_i` and
`cb_root_ptr_i` when the pulse arrives, `supp_ptr_i` at the start of each
implementation. Hold them stable during a retrieval. Do not write the memories
while `busy_o` is high.

Parameters: `REQ_DEPTH` (default 32) and `CB_DEPTH` (default 2304). The address
widths follow from them. The list format and the 16-bit word are fixed in
`cbr_pkg`.

## Where this RTL departs from, or adds to, the published design

- **Comparator outputs.** The drawing shows only an equality comparator between
  `Type A_i` and `Type A_CB`. Searching a sorted list forward needs to know when
  the list has passed the wanted ID. So the comparator also reports less-than
  and NULL.
- **Missing supplemental entry.** A requested attribute with no entry in the
  supplemental list gets `s_i = 0`, just like an attribute the implementation
  lacks. The published flow chart does not cover this case.
- **Clamping and saturation.** `s_i` is clamped at 0, and S saturates at
  `0xFFFF`. The published formula has no lower clamp.
- **Ties.** Ties keep the first implementation, because the comparison is
  strict as in the flow chart. `ID_max = 0` is this design's way of saying that
  nothing scored above 0.
- **Host write ports.** The write ports of both memories are added, so a host
  can load them. The drawing shows only the read side.
- **Own choices.** The state machine, its cycle timing, the NULL = 0 encoding,
  the Q1.15 format, the rounding of R and the reset style are this design's.
- **Case base size.** It follows the 4.5 kB and 6-implementation figures, not
  the "10 implementations" in the paper's running text.
- **Not included.** Not part of this RTL, because the paper leaves them to
  software or to future work:
  - rejecting results below a threshold,
  - returning the n best implementations instead of one,
  - "bypass tokens" for repeated calls,
  - the feasibility check against system load.

## Files

| file | contents |
|---|---|
| `rtl/cbr_pkg.sv` | word type, NULL, Q1.15 one, control/status structs |
| `rtl/req_mem.sv`, `rtl/cb_mem.sv` | the two RAMs (synchronous read, one write port) |
| `rtl/local_similarity.sv` | Diff and s_i |
| `rtl/similarity_accumulator.sv` | exist multiplexer, weighting, S |
| `rtl/best_select.sv` | Realis_ID, S_max, ID_max |
| `rtl/retrieval_datapath.sv` | operand registers, ID comparator, the three units above |
| `rtl/retrieval_ctrl.sv` | the list-walking state machine |
| `rtl/retrieval_unit.sv` | top: controller, data path, both memories |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each also has
a watchdog. For example, the end-to-end test at full size:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/cbr_pkg.sv tb/tb_retrieval_unit.sv --top-module tb_retrieval_unit -o sim
    ./obj_dir/sim

`tb_retrieval_unit` runs the design at its default sizes. It generates its
case bases in SystemVerilog, and compares every result bit for bit with an
independent reference model written from the formulas above. It runs:

- the worked example and a tie,
- a missing type and a missing bound,
- an over-weighted request,
- four random case bases, the first filling the full 15 × 6 × 10 worst case,
  with 12 requests each.

It also counts how often each mechanism fires, and fails if one never does.
The mechanisms are: type miss, attribute found or missing, list skip,
supplemental skip, missing bound, s_i clamp, best updated or kept, and
saturation. It runs in well under a second.

The block testbenches (`tb_req_mem`, `tb_cb_mem`, `tb_local_similarity`,
`tb_similarity_accumulator`, `tb_best_select`, `tb_retrieval_datapath`,
`tb_retrieval_ctrl`) are built the same way, with their own top module.

## Trust and limits

- **What is checked.** The arithmetic matches the reference model on every
  request tried. The controller's cycle count matches a hand count of the
  documented timing.
- **What is not checked.**
  - Results have not been compared with the original authors' VHDL or
    floating-point model.
  - Malformed lists are not detected: a missing NULL entry, unsorted IDs, or a
    pointer outside the memory. With such lists the controller may walk through
    arbitrary memory.
  - Timing closure on any FPGA or ASIC has not been checked.
