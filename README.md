# A single-clock 10:1 serializer for one HDMI data channel

An HDMI transmitter sends each 10-bit TMDS word of a colour channel as ten
serial bits. At a 165 MHz pixel clock that is 1.65 Gbit/s per channel. The
usual approach is a shift register loaded at the pixel rate, which needs a
pixel clock and a serial clock kept in phase. This design needs only the
serial clock. Each bit gets its own holding cell. A single "token"
circulates in a ring of ten flip-flops, one position per bit period, and
gates each cell's bit onto the output line in turn. The ring also tells
the rest of the channel when to take in new data: the load strobes are
taken from fixed ring positions, so no divided clock exists anywhere.

Two more ideas shape the output side:

* **Even/odd split.** The five even bits (D0, D2, .. D8) share one set of
  output lines and the five odd bits (D1, .. D9) share another. Each set
  has its own pre-drivers and output transistors, so each of them switches
  at most every other bit period. The pre-driver switching current then
  sits at the serial frequency and its multiples, whatever the data are.
* **Open-drain, wired multiplexing.** The selector cells only pull shared
  lines low. A weak pull-up at the input of each pre-driver makes every
  line a wired-AND, which is an active-low 5:1 multiplexer with no select
  logic. The output stage itself is also open-drain: Tx+ and Tx- sink
  current from the receiver's 3.3 V terminations through cascode devices
  biased at 2.8 V.

The RTL describes the logic of this transistor-level design at the level of
its flip-flops and gates. The output stage is a behavioural model.

## Block map

```
            d[9:0] ──────────────┬──────────────────────────┐
                                 │ d[9:8]                   │ d[7:0]
                          ┌──────┴──────┐                   │
               Sel2 ────► │ dc_hold_ff  │ hold_q[1:0]       │
        (load at Sel3↑)   └──────┬──────┘                   │
                                 └──────────► cell_d = {hold_q, d[7:0]}
                                                            │
                 ┌──────────────────────────────────────────┴───┐
     Sel8 ─────► │ 10 x dc_sel_cell  (bit i selected by Sel(i+1))│
 (load at Sel9↑) └──┬───────────────┬─────────────┬─────────────┬┘
                    │q_n even       │q_n odd      │nq_n even    │nq_n odd
              ┌─────┴────┐   ┌──────┴───┐  ┌──────┴───┐  ┌──────┴───┐
              │predriver │   │predriver │  │predriver │  │predriver │
              │  Even    │   │  Odd     │  │  nEven   │  │  nOdd    │
              └─────┬────┘   └─────┬────┘  └─────┬────┘  └─────┬────┘
                    └──── Tx+ ─────┘             └──── Tx- ────┘
                               dc_driver (bias) ──► tx_p, tx_n

 enable_i, disable_i ─► dc_reset ─ start ─► dc_sel_chain ─► Sel1..Sel10
                          ▲                                    │
                          └──────────── Sel10 ─────────────────┘
```

| Module | Role |
|---|---|
| `dc_pkg` | Word width `NBITS` = 10, bit period, output voltage levels |
| `dc_sel_chain` | Ring of 10 falling-edge flip-flops Sel1..Sel10, plus iSel1, a copy of Sel1 |
| `dc_reset` | Makes Start from Enable, Disable and the recirculated Sel10 |
| `dc_sel_cell` | Holds one bit; pulls `q_n` (bit 1) or `nq_n` (bit 0) low while its Sel is high |
| `dc_hold_ff` | Holds D8, D9 so the last two bits survive the next word's load |
| `dc_predriver` | Pull-up + wired-AND of five cell outputs, two buffer stages |
| `dc_driver` | Behavioural model of the open-drain differential output stage |
| `hdmi_data_channel` | Top: wires the above into one channel |

## The ring and the Start logic

`dc_sel_chain` is a plain shift register clocked on the falling edge of
`dclk`. Its input is Start. A one-period pulse on Start comes out as Sel1
in the next period, Sel2 in the one after, and so on to Sel10.
`dc_reset` feeds Sel10 back into Start. This feedback is combinational, so
Sel1 is high again in the period right after Sel10. The token therefore
goes round every 10 bit periods, which is exactly one pixel period.

Start has two sources:

1. **Enable kick.** `dc_reset` samples Disable and Enable on the rising
   edge of `dclk`. If that edge saw Enable = 1 and Disable = 0, Start goes
   high at the next falling edge for one period. Enable must be a single
   period wide, and an assertion checks this. If Enable stays high, more
   than one token enters the ring.
2. **Recirculation.** While the sampled Disable and Enable are both low,
   Start follows Sel10.

Disable blocks both sources. The token already in the ring runs out at
Sel10 and the ring is empty within 10 periods. Both output pins are then
released (standby).

**Power-on reset.** Nothing in the channel has a reset input. At power-up
the ring may hold any pattern, including several tokens. The recipe is:
hold Disable for at least 10 periods so the ring empties, then release it
and pulse Enable. A single token enters, and Sel1 goes high 1.5 clock
periods after the rising edge that saw Enable. The end-to-end test measures
13 clock periods from raising Disable to the first Sel1 of the restarted
ring. That is within the two pixel periods (20 clocks) the scheme is meant
to take. The same sequence stops and restarts a running channel.

`isel1` is a second flip-flop fed by Start, in parallel with Sel1. In the
transistor design it takes load off Sel1. Here it is only brought out as a
port.

## Loading words: two load points and the hold flip-flops

This is the least obvious part of the design. The SEL cells cannot all load
at once at the end of a round. The slow parallel bus would then have to
change within one bit period, and the load strobe would have to reach ten
cells at exactly the round boundary. Instead:

* SEL cells 1..8 (bits D0..D7) load from the bus at the falling edge where
  **Sel9 rises**. By then bits 0..7 of the current word have already gone
  out.
* At that same edge, SEL cells 9 and 10 must still hold bits 8 and 9 of the
  *current* word, which go out during Sel9 and Sel10. By this point the bus
  may already carry the next word. So cells 9 and 10 load from the two hold
  flip-flops rather than from the bus, and load them at the same Sel9 edge.
  A cell's output follows its new contents at once, so cell 9 drives during
  Sel9 the value it has just loaded.
* The hold flip-flops take D8 and D9 from the bus at the falling edge where
  **Sel3 rises**. This is in the round in which the word is sent, after its
  bits 0..7 were captured at the previous round's Sel9.

Cycle-by-cycle, for word k (one round = Sel1..Sel10 = 10 bit periods):

| Round | Sel period | Event |
|---|---|---|
| k-1 | Sel9 rises | cells 1..8 take d[7:0] of word k (cells 9, 10 take word k-1's held bits) |
| k | Sel1..Sel8 | bits 0..7 of word k go out |
| k | Sel3 rises | hold flip-flops take d[9:8] of word k |
| k | Sel9 rises | cells 9, 10 take the held bits of word k; cells 1..8 take word k+1 |
| k | Sel9, Sel10 | bits 8, 9 of word k go out |

So the source must hold word k on `d` from the Sel9 edge of round k-1 to
the Sel3 edge of round k. It may present word k+1 at any time after Sel3
rises and before Sel9 rises; the testbench uses the Sel4 period. A word
captured at a Sel9 edge starts going out two bit periods later. There is
no data-valid handshake and no pixel-clock output. The data source takes
its timing from the `sel` outputs, or equally from a pixel clock it knows
to be in phase with the ring.

One departure from the circuit sits here. The
transistor circuit uses Read/Show clock pairs derived from Sel9 (buffer
FD) and from Sel3 (buffer FDL). The RTL uses load enables on the common
falling edge instead. They are taken from Sel8 and Sel2, so that the load
happens at the edges where Sel9 and Sel3 rise.

## Even/odd lines, pre-drivers and driver

Cell i (bit Di, selected by Sel(i+1)) has two open-drain outputs. `q_n` is
low while it is selected and holds a 1; `nq_n` is low while it is selected
and holds a 0. The five `q_n` of the even cells are wired together as
**Even**, and their `nq_n` as **nEven**. The odd cells give **Odd** and
**nOdd** in the same way. In any even bit period exactly one of Even and
nEven is low, and both odd lines are released; odd periods are the
reverse.

`dc_predriver` models the pull-up and the wired connection as the AND of
its active-low inputs. Its two inverter stages keep the polarity.

`dc_driver` sinks current on Tx+ while Even or Odd is low, and on Tx- while
nEven or nOdd is low, provided the cascode bias is present. A 1 therefore
pulls Tx+ low and leaves Tx- high; a 0 does the reverse. With no token, or
with the bias removed, both pins float at the termination voltage. The
model reports logic levels (`tx_p`, `tx_n`: 1 = released) and single-ended
voltages in units of 0.1 mV (`vtx_p`, `vtx_n`): 3.2990 V released and
2.8019 V sinking. These are post-layout simulation values of the
transistor circuit, and their 0.497 V swing lies inside HDMI's 0.4-0.6 V
window.

## Top-level interface (`hdmi_data_channel`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `dclk` | in | 1 | serial clock (1.65 GHz for 1.65 Gbit/s); the ring moves on its falling edge |
| `disable_i` | in | 1 | stop the ring; sampled on the rising edge |
| `enable_i` | in | 1 | one-period pulse starts the ring; sampled on the rising edge |
| `bias` | in | 1 | the 2.8 V cascode bias is applied |
| `d` | in | NBITS | parallel word, D0 sent first |
| `tx_p`, `tx_n` | out | 1 | output pins, 1 = released (high), 0 = sinking |
| `vtx_p`, `vtx_n` | out | 16 | single-ended pin voltages, 0.1 mV per LSB |
| `start`, `isel1`, `sel` | out | 1, 1, NBITS | ring signals, for timing the data source and for observation |

Parameter `NBITS` (default 10) sets the word width, the ring length and the
number of cells. It must be even (for the even/odd split) and at least 6
(Sel3 must come before Sel(NBITS-1)). The load points become Sel(NBITS-1)
and Sel3. The end-to-end test has been run at 6, 8, 10 and 12 bits.

## What the RTL leaves out, and where it departs from the circuit

* **Clock splitter, FO4 buffer, FD and FDL.** These make complementary
  clock pairs and drive strength for clocked-CMOS latches. In RTL they are
  one clock edge, a wire and two load enables. They have no modules.
* **PLL and clock channel.** The serial clock comes from outside. The TMDS
  clock channel of an HDMI link is not part of this block.
* **Analog behaviour.** Rise and fall times (about 104 ps), the eye
  diagram, supply current and its spectrum, and the overlap/underlap
  timing of the two output devices are outside the model. The driver model
  has no delay.
* **Start circuit.** Only the behaviour of the start/stop circuit is known,
  not its transistors. `dc_reset` is one simple circuit with that
  behaviour: two rising-edge sampling flip-flops, a falling-edge kick
  flip-flop and an AND-OR gate. Recirculation uses the *sampled*
  Disable/Enable.
* **iSel1.** In the schematic it runs to the start circuit, but what it does
  there is not known. It is an output only.
* **Polarity choices.** Which pin a 1 pulls low, and which cell output (Q
  or nQ) carries the true bit, are this design's choices. Swapping the two
  pre-driver pairs at the driver inverts the line code.
* **Hold flip-flop edge.** D8/D9 are captured when Sel3 rises. The circuit
  may update on the falling edge of its Sel3-derived clock instead. Both
  lie inside the bus-valid window above.
* **Swing figure.** The source data give both 3.299 V / 2.8019 V levels
  (0.497 V swing) and a swing of 660 mV. The model uses the levels.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it
hangs.

| Testbench | What it checks |
|---|---|
| `tb_dc_sel_chain` | flush, a single pulse through all 10 stages, random Start against a model, recirculation with exactly one token and a 10-period round |
| `tb_dc_reset` | Enable kick timing (high from the falling edge after the sampling rising edge, for one period), Disable blocking, random stimulus against a reference |
| `tb_dc_sel_cell` | load and hold, `q_n`/`nq_n` gating, random |
| `tb_dc_hold_ff` | load and hold, random |
| `tb_dc_predriver` | all 32 input combinations |
| `tb_dc_driver` | all 16 gate combinations with and without bias, voltages, swing window |
| `tb_hdmi_data_channel` | whole channel at default size, starting from random power-up state. Power-on disable/enable. 117 random words decoded from Tx+/Tx- and compared bit-exact. 10-period round time. Even bits only on Even/nEven and odd bits only on Odd/nOdd. Hold flip-flops in use: the bus has already changed when bits 8/9 go out. Mid-stream disable and restart within 20 clocks. Bias-off standby. Each of these must occur at least once. |

To simulate one test with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ps/1ps -Irtl \
    rtl/dc_pkg.sv tb/tb_hdmi_data_channel.sv \
    --top-module tb_hdmi_data_channel -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`+verilator+rand+reset+2` starts every flip-flop at a random value, which is
the power-up condition the disable/enable sequence exists for. Add
`+verilator+seed+N` to try other power-up states. The same pattern works for
the other testbenches; each block testbench names its module, and Verilator
finds it in `rtl/` through `-Irtl`. The RTL carries no `timescale` of its
own, hence `--timescale`; the testbenches run in picoseconds with a 606 ps
clock (1.65 GHz). All seven build without warnings this way and run in well
under a second.
