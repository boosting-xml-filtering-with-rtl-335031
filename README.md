# A streaming XPath filter in hardware

Publish-subscribe systems receive a stream of XML documents and must decide,
for every document, which of many stored subscriptions (XPath path profiles
such as `a0//b0` or `a0/b0/c0`) it satisfies. A software filter walks a state
machine per parsing event and spends many instructions per tag. This design
does the filtering in logic instead. Every profile becomes its own small
circuit. All circuits watch the same character stream at once, one character
per clock. A single shared stack of open tags lets the circuits check
parent-child steps. There is no separate parser and no per-event software.

The RTL follows the architecture in *Boosting XML Filtering with a Scalable
FPGA-based Architecture* (Mitra, Vieira, Bakalov, Najjar, Tsotras). That
design generated VHDL per profile with a regex compiler. Here the profiles
are parameter tables of a fixed set of SystemVerilog modules. The last
sections list where this RTL departs from the original and what it leaves
out.

## Tags are two-symbol codes

Before anything reaches the hardware, a dictionary on the host replaces
every tag name, in documents and in profiles, with a code of exactly two
characters. For example, `<test.document>` becomes `<a1>`. An open tag is
then always 4 characters (`<a1>`) and a close tag 5 (`</a1>`). A tag code is
16 bits: the first symbol in bits [15:8], the second in [7:0]. The SystemVerilog
string literal `"a1"` gives exactly that value. The filter knows nothing
about the dictionary. It sees only these short tags, with text between them.
It ignores anything that is not a two-symbol tag, such as `<?xml …?>`,
longer names, or tags with attributes.

## How a profile becomes hardware

A profile is a chain of *steps*, one per tag. `a0//b0/c0` has three steps:
`a0`, then `b0` anywhere below it, then `c0` directly below that `b0`. Each
step is one `xpath_node`, which holds one bit of state:

* **active** means "an element that completes this step's prefix is
  open right now".
* The step **hits** in the clock where the final `>` of its open tag `<TAG>`
  arrives, if all of the following hold:
  * the previous step is active (the first step needs nothing);
  * for a parent-child (`/`) step only, the top of the tag stack equals the
    previous step's tag. The new tag has not been pushed yet, so the top of
    stack is the element that directly encloses it. A `/` first step instead
    needs an empty stack.
* A hit sets active. The step's close tag `</TAG>` clears it.

A profile matches in the clock where its last step hits.

Each step has two character-chain recognisers: one for `<TAG>` and one for
`</TAG>`. The close-tag recogniser does the job of the regular expression's
*negation* term. In `a0//b0`, the `b0` step can only hit while `a0` is
active, so `<b0>` counts only if it arrives before the `</a0>` that closes
the enclosing `a0`. That makes `//` mean "descendant" and not merely "later
in the stream". The `/` axis needs memory of nesting levels, and that is what
the stack provides.

Example, profile `a0/b0` with the document `<a0><x0><b0></b0></x0><b0>…`:

| character   | stack top before | `a0` step | `b0` step                                   |
|-------------|------------------|-----------|---------------------------------------------|
| `<a0>`      | empty            | hit → active | –                                        |
| `<x0>`      | a0               | active    | –                                           |
| `<b0>` (1st)| x0               | active    | tag seen, parent active, top is x0 ≠ a0: no hit |
| `</b0>`, `</x0>` | …           | active    | –                                           |
| `<b0>` (2nd)| a0               | active    | hit: **profile matches**                    |

Read `a0//b0`, the same document matches at the first `<b0>` already.

Two limitations come straight from this scheme, and the original design has
them too:

* If an element with the same tag as an active step is nested inside
  itself (`<a0><a0></a0>`), closing the inner one clears the step, although
  the outer element is still open.
* The `/` check compares tag *names* only. The element on top of the stack
  is not checked to be the one that activated the parent step. When no tag
  repeats along a path (which the testbenches generate), both readings agree
  with the plain XPath meaning.

## Sharing prefixes: the step tables

The profiles of one group are given as a forest of common-prefix trees, in
`xf_pkg::node_t` entries:

```systemverilog
'{tag: "a0", parent: ROOT,  axis: AXIS_DESC },   // 0   a0
'{tag: "b0", parent: 16'd0, axis: AXIS_CHILD},   // 1   a0/b0
'{tag: "c0", parent: 16'd1, axis: AXIS_CHILD},   // 2   a0/b0/c0
```

A second array, `LEAF`, holds each profile's last step. Profile *p* matches
when step `LEAF[p]` hits. Profiles that share a prefix point into the same
chain, so the prefix is built once. This is the common-prefix optimisation.
A table with no shared entries gives one independent circuit per profile.
The rules:

* A parent's index must be lower than its child's index (checked at
  elaboration).
* A stack-free group must contain no `/` step (also checked).
* Up to 65535 steps fit in a group.

To build a prefix forest, sort the profiles and merge equal leading steps.
That step runs on the host and is not part of the RTL.

The default tables in `xf_pkg` are example profiles of lengths 2 to 6. There
are 4 profiles with `/` steps (7 steps) and 12 with `//` steps only (20
steps). This matches the sixteen-profile organisation of the original
design, which does not list its actual profiles.

## Data path

```
 in_word[31:0] ─► stream_unpacker ─► char_decoder ─┬─► xpath_group (with stack) ─► prio_encoder ─► stk_idx[1:0]
 (valid/ready)    4 chars/word,      256 one-hot   │        ▲ tos                                 stk_valid, stk_multi
                  1 char/clock       lines         ├─► xpath_group (stack-free) ─► prio_encoder ─► nos_idx[3:0]
                                                   │        │                                     nos_valid, nos_multi
                                                   └─► tag_filter ─► tag_stack ─┘ (push/pop)      stack_overflow/underflow/depth
```

* **stream_unpacker** takes one 32-bit word per handshake and emits its
  bytes, `[7:0]` first, one per clock. It can take the next word in the clock
  the last byte leaves, so a host that never drops `in_valid` gets one
  character per clock. NUL bytes are padding: they use their clock slot but
  are not presented to the filter.
* **char_decoder** registers 256 lines, one high per character. A tag
  recogniser then needs one flip-flop and one AND gate per character of its
  tag, reading a single line, instead of an 8-bit comparator per character.
  The whole design is built around this saving.
* **tag_match** is that recogniser: a chain of 3 (open) or 4 (close) stage
  flip-flops that advance only on valid characters. Its `match` output is
  combinational in the clock of the final `>`, gated by `en`.
* **tag_filter** is a five-state machine on the registered character. In the
  clock of a complete tag's `>`, it raises `push` (open tag) or `pop` (close
  tag) with the tag code. This is the same clock as the steps' hits, so the
  stack changes on the next edge and a hit always sees the stack before its
  own tag is pushed.
* **tag_stack** is one stack per stream. The top is kept in a register, and
  the entries below it sit in a block-RAM-shaped array with registered read.
  The entry under the top is read ahead every clock. Tags are at least four
  characters apart, so a pop always finds it ready. The stack is 64 entries
  deep (`STACK_DEPTH`).
  * A push onto a full stack is dropped, and `stack_overflow` is set. The
    dropped pushes are counted and their pops are absorbed, so the stack is
    back in step once the document climbs out.
  * A pop of an empty stack sets `stack_underflow`.
  * Both flags stay set until reset.
* **xpath_group** builds one `xpath_node` per table entry. The stack group
  reads `tos`. The stack-free group does not.
* **prio_encoder** reports, per group, the lowest-numbered profile that
  matched in that clock (`idx`, `valid`). It also raises `multi` when other
  matches were masked in the same clock. The host turns these numbers back
  into subscriptions. It knows from the output's clock where in the document
  the match happened.

**Timing.** One character per clock, sustained. When the `>` that completes
a match leaves the unpacker in clock *t*, the encoder output shows it in
clock *t* + 2 (one clock in the decoder, one in the encoder). The stack
changes at the edge after the `>`. All flip-flops reset asynchronously on
`rst_n` low.

## Where this RTL departs from the original design

* **Profile tables instead of generated HDL.** The original compiled each
  profile through a modified PCRE regex compiler. Here the same structure
  comes from parameter tables. The regex compiler, the dictionary replacement
  and the prefix-discovery algorithm are host software and are not included.
* **What counts as "between" tags.** The published regular expression for
  `a0//b0` reads `<a0> [\w\s]+ [<\c\d> | </\c\d>]* <b0>`. Taken literally,
  it requires text right after `<a0>` and allows no text between later tags.
  Its stated intent is "starts with `<a0>` and includes `<b0>`". The steps
  here allow any characters between tags, including none.
* **Stack push/pop rule.** Open tags push and close tags pop, as the text
  says. A drawing of the original also brings the top of stack and the
  incoming tag together in an unlabelled symbol next to the push and pop
  lines. Nothing of that kind is built here: a close tag pops whatever is on
  top.
* **The parent-child check** compares the 16-bit stored code
  (`tos_match`). The original draws this check as a tag recogniser fed by the
  top of stack. Both do the same thing.
* **The character decoder** uses plain ASCII codes: `a` is line 0x61. The
  original's text gives 0x60 for `a`, which looks like a slip.
* **Choices the original leaves open, made here:**
  * byte order and handshake of the 32-bit input, and NUL padding;
  * stack depth, overflow and underflow handling, and the status outputs;
  * the encoders' priority order (lowest index wins), their registered
    outputs, and the `valid` and `multi` bits;
  * the pipeline registers, and the two-clock latency that follows from them.
* **Not built:** the 8-bit-comparator form of the tag recogniser. The
  original used it only as the unoptimised comparison point. Also not built:
  the board's host-link module and the host system. The top's ports are where
  the host link would connect.

## Sizes and capacity

With the defaults, the design holds 16 profiles: 4 on a 2-bit encoder and 12
on a 4-bit encoder. They use 27 steps and a 64-entry stack. Documents can be
any length, because nothing is buffered. Only nesting depth is bounded, by
the stack. The original design was evaluated with 16 to 1024 profiles of 2, 4
and 6 tags. Holding those means regenerating the tables and setting
`N_STK_NODES`/`N_NOS_NODES` and `N_STK_PROF`/`N_NOS_PROF`, as `tb_workload`
does for 1024 six-tag profiles. Logic grows
linearly, with two short recogniser chains and one flip-flop of state per
step. The stack does not grow.

## Files

| file | contents |
|---|---|
| `rtl/xf_pkg.sv` | tag and step types, character constants, default profile tables |
| `rtl/stream_unpacker.sv` | 32-bit words to one character per clock |
| `rtl/char_decoder.sv` | 8-bit to 256-line one-hot pre-decoder |
| `rtl/tag_match.sv` | recogniser for one open or close tag on the decoded lines |
| `rtl/tag_filter.sv` | tag extraction, push/pop generation |
| `rtl/tag_stack.sv` | the tag stack |
| `rtl/tos_match.sv` | top-of-stack equals parent tag |
| `rtl/xpath_node.sv` | one profile step |
| `rtl/xpath_group.sv` | one group of profiles built from a step table |
| `rtl/prio_encoder.sv` | per-group output encoder |
| `rtl/xml_filter_top.sv` | the whole filter |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/xf_tb_pkg.sv` | random document generator and XPath reference model |
| `tb/tb_workload.sv` | 1024-profile, 6-tag configuration, end to end |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Each has a watchdog. To run the whole filter end to end at its
default parameters, from the directory that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/xf_pkg.sv tb/xf_tb_pkg.sv tb/tb_xml_filter_top.sv \
  --top-module tb_xml_filter_top -o sim
./obj_dir/sim
```

For a single block, name its testbench instead; `-y` finds the modules it
uses. The two packages are listed first because they are imported, not
instantiated.

What the testbenches check:

* **Leaf blocks.** Each is compared against its own small model, over random
  streams biased towards the cases that matter: broken tags, idle clocks,
  full and empty stacks.
* **`tb_xpath_group`.** Runs 150 random well-formed documents through both
  default groups. Every clock it compares every profile's match line with
  the plain XPath meaning, computed by dynamic programming over the path of
  open elements. It requires every profile to match at least once, and
  requires some `/` steps to be rejected where their `//` reading would have
  matched.
* **`tb_xml_filter_top`.** Drives the whole filter through its 32-bit port,
  with and without gaps. It checks both encoders clock-exact at *t* + 2. It
  checks that a back-to-back stream moves one character per clock. It drives
  a document nested 70 deep to overflow the stack, then checks that the
  following documents still filter correctly and that a stray close tag
  raises underflow. It also counts stalls, padding, pushes, pops, matches in
  both groups, simultaneous matches and `/` rejections, and fails if any of
  them never happened.
* **`tb_workload`.** Builds the filter at the largest evaluated size: 1024
  six-tag profiles, 256 with `/` steps and 768 without, generated at
  elaboration as common-prefix tries (597 + 1791 steps). It checks both
  encoders against the same reference on random documents. The verilator
  build of this size takes a few minutes.

The documents are generated so that no tag repeats along a path. The two
limitations described above therefore never show, and the reference model
can use the plain XPath meaning.
