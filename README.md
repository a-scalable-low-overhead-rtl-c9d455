# Multi-RAM FSM overlay

A finite-state machine (FSM) overlay is a fixed piece of FPGA logic that can run *any* FSM up to a
given size, selected purely by what is written into its RAMs. Changing the controller then means
rewriting a few hundred RAM bits instead of re-running FPGA synthesis and place-and-route.

The classic memory-based FSM is one RAM addressed by {current state, inputs}. Refinements narrow the
address to the *effective inputs* of each state (the few inputs that can change its transition) and
store a short *transition index* in place of the full {next state, outputs} word. Those designs
still size the transition RAM by the *largest* effective-input count of any state, so a state with
one effective input has its table copied 2^(EImax-1) times. The Multi-RAM (M-RAM) overlay removes
that copying. It splits the transition RAM into several *state-transition elements* (STEs). Each STE
is sized for one effective-input count, and each FSM state goes to an STE that fits it.

This repository holds synthesizable SystemVerilog for the M-RAM overlay, a unit testbench for every
block, and an end-to-end testbench that maps FSMs onto the overlay and checks them cycle by cycle
against a software model.

## Datapath

```
              +-----------+      +---------------------------+
 state reg -->| state-map |--+-->| STE 0 .. STE N-1          |--+
   ^          |   RAM     |  |   |  (pseudo state, inputs)   |  |    +-------+    +-----------------+
   |          +-----------+  |   +---------------------------+  +--->|  STE  |--->| transition-code |--> out
   |                         +----------- ste_id -------------------->|  mux  |    |      RAM        |
   |                                                                  +-------+    +-----------------+
   +--------------------------------- next_state ----------------------------------------+
```

One clock cycle does the whole lookup:

1. **State register** (`mram_state_reg`) holds the current state.
2. **State-map RAM** (`mram_state_map_ram`) maps the state to `{ste_id, pseudo}`. `ste_id` names
   the STE that holds the state's transition function. `pseudo` is the slot (pseudo state) it
   occupies in that STE.
3. **Every STE** (`mram_ste`) looks up its own slot at the same time:
   * its **input-selection RAM** (`mram_input_sel_ram`) gives, for the pseudo state, the indices of
     the EI inputs that matter;
   * its **input multiplexers** (`mram_input_muxes`) pick those EI bits from the FSM inputs;
   * its **state-transition RAM** (`mram_state_trans_ram`), addressed by `{pseudo, eff}`, returns a
     transition index.
4. **STE mux** (`mram_ste_mux`) keeps the index from the STE named by `ste_id`.
5. **Transition-code RAM** (`mram_trans_code_ram`) turns the index into `{next_state, outputs}`.
   The outputs leave the overlay in the same cycle (Mealy outputs). The next state is loaded on
   the next rising edge.

All RAMs read combinationally and write synchronously, the way FPGA distributed (LUT) RAM works.
The critical path is therefore state register -> four RAM reads -> state register. That is the
price of the extra state-map indirection, paid for the area saved.

### Transition indices are global

In the single-RAM refinement (the "3-RAM"), a transition index only means something together with
the state: "transition 1 of state 3". Here the STEs are shared by unrelated states, so each index
names an entry in one FSM-wide list of unique transitions. Each unique transition is one
`{next state, outputs}` pair. The transition-code RAM holds that list once, addressed by the index
alone.

### Replication is still possible, just not forced

A state with fewer effective inputs than its STE can still live there. Its truth table is written
once for each combination of the spare inputs, and the spare input-selection slots may name any
input. This lets a mapper fill free slots in a wide STE when the narrow STEs are full. The
end-to-end testbench does this on purpose.

## RAM sizes

With `S` states, `T` unique transitions, `I` inputs, `O` outputs and STE *i* holding `S_i` pseudo
states of `EI_i` effective inputs (`clog2` = ceil(log2)):

| RAM | words | bits per word |
|---|---|---|
| state map | 2^clog2(S) | clog2(max S_i) + clog2(N_STE) |
| input selection, STE *i* | 2^clog2(S_i) | EI_i * clog2(I) |
| state transition, STE *i* | 2^(clog2(S_i)+EI_i) | clog2(T) |
| transition code | 2^clog2(T) | clog2(S) + O |

`mram_overlay` computes the total as the localparam `RAM_BITS`. Each width is at least one bit
(`mram_pkg::bits_for`). The only effect: an STE with a single pseudo state gets one address bit,
and so twice the words the formula gives.

## The default instance: the five-state example

The default parameters are the overlay for this five-state FSM. Inputs A-F are `in[0]..in[5]`.

* States 0-3 go to the next state when A is 1, and stay otherwise.
* State 4 goes to state 0 when B, C, D, E and F are all 1, and stays otherwise.

| parameter | default | meaning |
|---|---|---|
| `S_TOTAL` | 5 | states |
| `T_MAX` | 5 | unique transitions; transition *t* = "go to state *t*" |
| `I_TOTAL` | 6 | inputs |
| `O_TOTAL` | 1 | outputs (the example has none; see below) |
| `NUM_STE` | 2 | STEs |
| `STE_EI` | '{1, 5} | effective inputs per STE |
| `STE_STATES` | '{4, 2} | pseudo states per STE |

The mapping:

* States 0-3 are pseudo states 0-3 of STE 0 (EI = 1).
* State 4 is pseudo state 0 of STE 1 (EI = 5). Pseudo state 1 of STE 1 is left free.

Without outputs the table gives 306 RAM bits. A single-transition-RAM overlay sized by the largest
EI needs 424 bits for the same FSM. The output port cannot have zero width, so `O_TOTAL` defaults
to 1. That adds 8 bits, for a `RAM_BITS` of 314. The testbench checks that number, and synthesis
reports the same count of memory bits.

Real controllers need larger instances. Set the seven parameters to the limits you need. The
instance then runs any FSM within those limits whose states can be placed in the STEs.

## Loading an FSM

Configuration writes go through one synchronous port, one RAM word per clock with `cfg_we` high:

| `cfg_ram` (`mram_pkg::cfg_ram_e`) | `cfg_ste` | `cfg_addr` | `cfg_wdata` |
|---|---|---|---|
| `CFG_STATE_MAP` | - | state | `{ste_id, pseudo}` |
| `CFG_INPUT_SEL` | STE | pseudo state | input index of effective input *k* in bits `[k*IW +: IW]` |
| `CFG_STATE_TRANS` | STE | `{pseudo, eff}`, eff bit *k* = effective input *k* | transition index |
| `CFG_TRANS_CODE` | - | transition index | `{next_state, outputs}` |

Here `IW = clog2(I_TOTAL)`. Address and data are truncated to the width of the target RAM. An
assertion flags a per-STE write to a non-existent STE. A mapper works in four steps:

1. List the unique `{next state, outputs}` pairs and write them to the transition-code RAM.
2. Give every state a pseudo state in an STE with at least as many effective inputs as the state.
3. For each placed state, write its input indices to the STE's input-selection RAM. Then write its
   truth table to the STE's state-transition RAM, replicated over any spare inputs.
4. Write the state-to-`{STE, pseudo}` table to the state-map RAM.

Then pulse `rst`, which sets the state to 0, and hold `en` high. While `en` is low the state
register keeps its value, so an FSM can be held while its RAMs are rewritten. RAM contents are not
reset. An FSM has to be written in full before it runs.

## Testbenches

Each file in `tb/` is self-checking and ends by printing `TB_RESULT checks=N failures=M`.

* `tb_mram_overlay`: end-to-end test at the default parameters, and the main test. It holds a
  mapper written in SystemVerilog. First it loads the five-state example and checks one state
  step per clock and same-cycle outputs. Then it maps 40 random FSMs, each with random effective
  inputs, random truth tables and random placement. Some narrow states go into the wide STE by
  replication, and free RAM words are filled with junk. Each FSM runs 400 random-input cycles
  against a direct model, with random hold cycles. The test fails if either STE, replication,
  reconfiguration, hold or reset never occurred.
* `tb_mram_overlay_large`: the same kind of random-FSM test on a larger instance. It has 30
  states, 40 transitions, 9 inputs and 10 outputs, and three STEs: EI 1 x 16, EI 3 x 12 and
  EI 9 x 4 pseudo states. The STE index then has an unused code, and the STEs have different
  pseudo-state widths. It also checks `RAM_BITS` (14,800) against the table above, worked by hand.
* One unit testbench per block (`tb_mram_<block>`). Each checks the block's outputs against a
  shadow model, using the widths of the example's STEs.

Run a testbench with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl rtl/mram_pkg.sv tb/tb_mram_overlay.sv \
          --top-module tb_mram_overlay -Mdir obj && ./obj/Vtb_mram_overlay
```

Every testbench runs in well under a second.

## Where this RTL departs from, or adds to, the description it follows

* **Configuration port, enable, reset, word packings and address bit order** are this design's
  own choices. The architecture only says that an FSM is loaded by writing the RAMs.
* **One output bit by default**, where the example FSM has none (see above).
* **One-bit minimum width** for every index. This changes the RAM size only for an STE with a
  single pseudo state.
* **Out-of-range selects** give 0: an input index at or past `I_TOTAL`, or an STE index at or past
  `NUM_STE`.
* **STEs need EI >= 1.** A state with no effective inputs is placed in any STE by replication.
* **Not built:**
  * the block-RAM variant, which registers the RAM reads for a higher clock but multi-cycle outputs;
  * the glue logic proposed for running several FSMs at once on spare STEs, which is described
    only as a future direction;
  * the KISS-to-RAM-image mapper software (the testbench's mapper does the same job in simulation).
* **No timing or area claim is reproduced.** Clock rates and LUT counts depend on the FPGA flow.
