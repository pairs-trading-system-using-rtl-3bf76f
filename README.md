# Pairs trading on an FPGA with a simulated-bifurcation path search

This design finds and opens statistical-arbitrage pair positions. Each new market price
(a best ask or best bid for one of N = 15 stocks) can start an optimisation. The optimisation
searches a *market graph* for the most profitable short/long stock pair, then sends the two
orders. Everything from the decoded market feed to the encoded orders is done in logic; the host
CPU only closes positions and sets parameters.

The core idea is to cast pair selection as a shortest-path problem. Each stock is a node. A
directed edge i → j gives the cost of swapping stock i for stock j:

    w_ij = s_ij · (ask_j − bid_i)

Here s_ij in [0, 1] is a daily similarity between the two stocks. A negative w_ij means that j is
cheap relative to i. A dummy node 0 is joined to every stock by zero-weight edges.

A pair position is a cycle 0 → i → … → j → 0. The stock leaving the dummy node (i) is the one
sold short; the stock entering it (j) is the one bought long. The cycle's total weight is the
position's evaluation value, and the most negative cycle through node 0 is the best pair.

The cycle search is a QUBO with one binary variable b_ij per directed edge: 16 × 15 = 240
variables, held in 256 spin slots. A ballistic simulated-bifurcation (bSB) engine solves it. One
search takes 1 652 clock cycles.

## Blocks and data flow

```
 feed ─► [stream_fifo] ─► price_buffer (P) ─► [fifo] ─► sbm_module ─► [fifo] ─► judge (O) ─► [fifo] ─► msg_gen ─► order
                                                          ▲   │                  │  ▲                    ▲
                                                          └───┼── O update ◄─────┘  └── close_pair ◄─ host  │
                                                              │                                      cpu_order ◄─ host
                                          sbm_module = sbm_pre ─► graph_mem (M) ─► sbm_core ─► sbm_verify
                                                       tabu_mem (T)     sb_init_gen + xorshift32 ─┘
```

Each block runs on its own and talks to the next one over a valid/ready channel through a small
FIFO (`stream_fifo`). No block waits for a block further down the line, so the search engine
never stalls on the judge or the order path.

| Module | Role |
|---|---|
| `pt_pkg` | Sizes, the Q12.20 number format, and channel payload structs |
| `stream_fifo` | Generic FIFO with a valid/ready handshake and a stability assertion |
| `price_buffer` | Price list P (ask and bid per stock). Merges feeds that arrive while the search engine is busy |
| `sbm_module` | Sequencer of the search engine (below) |
| `sbm_pre` | Computes the 210 edge weights w_ij into `graph_mem` |
| `graph_mem` | Market graph M, a 16 × 16 weight array. Dummy row and column, and the diagonal, are fixed at zero |
| `tabu_mem` | Tabu list T of pairs that are already open or pending |
| `xorshift32`, `sb_init_gen` | Random initial momenta for the next search, made while the current one runs |
| `sbm_core` | bSB engine |
| `sbm_verify` | Checks and decodes the spin map; compares the value with a threshold |
| `judge` | Open list O; accepts or rejects candidates |
| `msg_gen` | Turns a pair into two orders; forwards the host's closing orders |
| `pairs_trading_fpga` | Top level |

## Number format

All prices, weights, similarities, coefficients and SB states are signed 32-bit fixed point with
20 fraction bits (Q12.20, `fx_t`). The range is ±2048 and the step is about 1e-6.

Prices are expected to be normalised before they reach the design, for example divided by a
reference price per stock, so that the weights stay near ±0.1.

`fx_mul` rounds toward minus infinity by taking bits [51:20] of the 64-bit product.

The published system computes in 32-bit floating point. The fixed-point choice is this design's
own; see "Departures" below.

## Channel payloads

| Struct | Fields |
|---|---|
| `feed_t` | `stock` (1…15), `ask`, `bid`. One feed updates both prices of one stock |
| `price_list_t` | `ask[16]`, `bid[16]`. Index 0 is unused |
| `pair_t` | `short_stk`, `long_stk` |
| `open_info_t` | `pair`, `value` (cycle weight, `fx_t`), `hops` (stock-to-stock edges; 1 = direct pair) |
| `order_t` | `buy`, `stock`, `lots[15:0]`, `closing` |

## The QUBO and the gradient the core computes

Write R_i = Σ_j b_ij for the out-degree of node i and C_j = Σ_i b_ij for the in-degree of node j.
The energy to be minimised is

    H = m_c · Σ w_ij b_ij  +  m_p · P

The penalty P has five terms:

1. Σ_i R_i(R_i − 1): at most one outgoing edge per node.
2. Σ_j C_j(C_j − 1): at most one incoming edge per node.
3. Σ_i (R_i − C_i)²: flow is conserved.
4. Σ b_ij b_ji: no two-node loops.
5. Σ T_ij b_0j b_i0: a tabu pair may not be closed through the dummy node.

The core never stores the 256 × 256 coupling matrix. Per edge variable, it computes the gradient
of P from the row sums, column sums and a few bits:

    g_ij = 2(R_i − b_ij) + 2(C_j − b_ij) + 2(D_i − D_j) + 2 b_ji + tabu terms,   D = R − C

In the tabu terms, an edge 0 → j gets Σ_k T[j][k] · b_k0 and an edge i → 0 gets
Σ_k T[k][i] · b_0k. The tabu list is indexed `[short][long]`.

The force on spin x_ij is then

    F_ij = −(m_c · w_ij + m_p · g_ij)

Spins run on the continuous variable x in [−1, 1], with b = (x + 1)/2.

`mc` and `mp` are runtime inputs. They absorb every constant factor in the formulas above.

## bSB engine (`sbm_core`)

Each of the NSTEP = 50 steps applies the ballistic SB update to all 240 active spins:

    y ← y + dt · (−(a0 − a(t)) · x + F)
    x ← x + dt · y
    if |x| > 1:  x ← sign(x), y ← 0        (inelastic walls)

The parameters are dt = 0.65 and a0 = 1, and a(t) rises linearly from 0 to a0. The factor
k1 = dt · (a0 − a(t)) is kept in a register and decreased by dt/NSTEP after each step.

The datapath has 16 lanes, one per column of the spin matrix. Every step has three phases:

| Phase | Cycles | Work |
|---|---|---|
| SUM | 1 | Forms R, C and D and the two tabu sums from the sign bits of all x |
| Y | 16 | One row i per cycle. Reads row i of the weight memory and updates y for the 16 spins of the row |
| X | 16 | One row per cycle. Updates x, clamps at the walls, and latches the spin bits |

That is 33 cycles per step. A search is 1 + 50 · 33 + 1 = 1 652 cycles from `start` to `done`.

All 256 slots are processed, but the 16 diagonal slots are held at x = −1 (b = 0). The 240 real
edge variables are therefore the only ones that change.

The initial state is x = 0 and y uniform in (−0.5, 0.5). `sb_init_gen` draws 256 values from
`xorshift32` (one per cycle, arithmetic shift right by 12) into a buffer, which the core takes at
`start`. The refill, 256 cycles, is hidden behind the running search. A search that starts before
the refill is complete waits and counts a stall (`n_rng_stall`); in normal operation this never
happens.

## Verification (`sbm_verify`)

A spin map is accepted as a pair candidate only if all of the following hold:

- every node has at most one outgoing and one incoming edge
- out-degree equals in-degree at every node
- no two-node loop exists
- the dummy node has exactly one outgoing and one incoming edge
- walking from node 0 along the chosen edges returns to node 0
- the walk covers every chosen edge, so there is no second, split cycle
- the pair (short = first stock, long = last stock) is not in the tabu list

The structural checks take one cycle. The walk takes one cycle per edge. The total is at most
NODES + 3 cycles.

The walk adds up the weights from `graph_mem` and gives the cycle value. The candidate is
*effective* when `value < threshold`. A valid cycle may run through several stocks
(0 → i → k → j → 0); it still opens only the pair (i, j), and `hops` reports the path length.

## Search sequencing (`sbm_module`)

The module is a small state machine: IDLE → BEGIN → (PRE) → CORE → VERIFY → OUT → BEGIN…

- **BEGIN.** If an open-list update is waiting from the judge, the tabu list is overwritten with
  it. If a new price list is waiting, preprocessing runs (213 cycles: one weight per cycle over
  210 pairs, plus a 3-stage pipeline). Otherwise the previous market graph is reused.
- **CORE / VERIFY.** One SB search, then verification.
- **OUT.** An effective candidate goes into the tabu list at once, so the next search avoids it
  without waiting for the judge. It is then pushed to the judge, and the module goes straight
  back to BEGIN for another search.
- An ineffective result also goes back to BEGIN, with fresh random momenta. After `miss_limit`
  ineffective searches in a row, the module goes IDLE. It wakes on the next price list or
  open-list update.

Latency from a price change to a candidate is about 1 872 cycles: 213 preprocessing, 1 652 SB,
the walk, and handshakes. From a feed at the top-level input to the first order at the output it
is 1 877 cycles. That is 8.1 µs at 233 MHz; this RTL's clock rate has not been established.

## Positions: judge, tabu list and open list

The judge accepts a candidate when all of these hold:

- `enable` is high
- `n_open < p_max`
- the pair is not already in the open list O

Accepted pairs are added to O and passed to the message generator.

The host reports a closed position on `close_pair`. The judge clears it from O and, since the open
list has shrunk, sends a copy of O to the search engine. That copy becomes the new tabu list, so a
rejected candidate, or a closed position, can be found again. Several updates that pile up before
the search engine reads them are merged; the channel carries the whole map, so only the newest
matters.

`msg_gen` turns a pair into two orders, with lots from a table the host loads:

1. sell `L[short]` lots of the short stock
2. buy `L[long]` lots of the long stock

L_i is the lot count for a fixed trade amount, round(A / (S_i · p_i)), where S_i is stock i's
trading-unit size (S_i^min in the paper's L_i formula) and p_i its price. The host computes it.

Closing orders from the host are forwarded with `closing = 1`. New positions have priority.

## Top-level interface (`pairs_trading_fpga`)

| Group | Ports |
|---|---|
| Market feed in | `feed_valid/ready`, `feed` |
| Orders out | `order_valid/ready`, `order` |
| Host, closing | `close_valid/ready`, `close_pair`, `cpu_order_valid/ready`, `cpu_order` |
| Host, configuration | `sim_we/i/j/data` (similarity), `lot_we/idx/data`, `mc`, `mp`, `threshold`, `p_max`, `enable`, `miss_limit`, `seed_load/seed` |
| Status | `open_list`, `tabu_list`, `n_open`, event counters, `sbm_idle` |

| Parameter | Default | Meaning |
|---|---|---|
| `NSTEP` | 50 | SB steps per search |
| `DT` | 0.65 | SB time step |
| `FIFO_DEPTH` | 4 | Depth of the channel FIFOs |

The number of stocks is `pt_pkg::N_STOCKS` (15), which gives 16 nodes.

The Ethernet receiver and transmitter, the PCIe interface and the host software are not part of
this RTL. Their sides of the design are the ports above: decoded feeds in, order records out.

## Choosing m_c, m_p and the threshold

SB solution quality depends heavily on the two coefficients, and no values are published.

With the Q12.20 weights of normalised prices, `mc` = 50.0 and `mp` = 0.15 work well on test
markets that hold one clear profitable pair. The testbenches use these values, and the core test
finds the best cycle in every trial.

With many similar weak pairs, a float model of the same dynamics often ends in invalid spin maps.
That is where this design is weakest. Such searches are simply counted as misses and rerun with
fresh random momenta. Expect to tune `mc`, `mp` and the y0 amplitude (`sb_init_gen.Y0_SHIFT`)
for real markets.

## Departures from the published system

- **Arithmetic:** 32-bit fixed point instead of 32-bit floating point.
- **Core timing:** 33 cycles per SB step here, against 138 in the published core; its datapath is
  not described. So a search takes 1 652 cycles instead of about 6 900.
- **Preprocessing:** 213 cycles against a published 216.
- **Idle rule:** the module idles after `miss_limit` ineffective searches in a row. The published
  system only says that the engine idles when nothing happens for a while.
- **Not specified in the published description, chosen here:**
  - price-list merging
  - FIFO depths and the valid/ready handshakes
  - record formats for feeds and orders
  - the random initial state
  - the strict `<` comparison against the threshold
  - the judge's single `enable` input, which stands for its "other control signals"
- **Not built:** the Ethernet PHY/MAC, the feed decoder and order encoder, the PCIe interface,
  and the host's position management.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. To run one with Verilator 5:

```
verilator --binary --timing rtl/pt_pkg.sv $(ls rtl/*.sv | grep -v pt_pkg) tb/tb_sbm_core.sv --top-module tb_sbm_core
./obj_dir/Vtb_sbm_core
```

`tb_sbm_core` compares the engine bit for bit with a reference model written in the testbench.
It checks the cycle count, and that the best cycle is found and a tabu pair is avoided.

`tb_pairs_trading_fpga` runs the whole design at its default parameters. It checks:

- feed merging and preprocessing
- back-to-back searches and tabu registration
- rejection while disabled and rejection at `p_max`
- closing with the resulting tabu refresh
- idling, and forwarding of closing orders

It checks that each of these happened at least once, and that the feed-to-order latency is
1 865–1 895 cycles.
