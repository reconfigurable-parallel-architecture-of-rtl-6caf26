# A token-passing round-robin arbiter

Several devices want one shared bus. The arbiter gives the bus to one device at a
time, with no fixed priorities, so none of them starves. It does this with a
single **token**, which is the device's *turn*. Exactly one device holds the token at a
time. A device is connected to the bus when it holds the token **and** requests:
that is a *turn hit*. A device that requests without the token has a *turn miss*
and waits. The token moves on when the holder's connection ends, either because
the holder drops its request or because its time slice runs out. It goes to the
next device that is requesting, in circular order, wrapping from the last device
back to the first.

The RTL can be built for any number of devices (`N`). The reference
configuration has six (`req0..req5`, `gnt0..gnt5`). Results have been published
for 4, 6, 8, 10 and 12 devices on a Spartan-3 FPGA, where the critical path grew
only from 3.160 ns to 3.245 ns across that range. Those timing numbers are not
reproduced here.

## Structure

```
              req[N-1:0]
                  |
        +---------+-----------------------------+
        |                                       v
 +-------------+  next_token  +-----------+  token  +--------------+
 |  rr_update  |------------->| rr_state  |-------->|  rr_output   |---> gnt[N-1:0]
 | (increment/ |              | (token    |         | gnt = token  |
 |  search)    |<--token------| register, |         |       & req  |
 |             |<-slice_done--| slice     |         |              |
 +-------------+              | counter)  |<--+     +--------------+
        ^                     +-----------+   |            |
        |                                     +-- granted -+
        +-------------------- granted ---------------------+
```

| module | role |
|---|---|
| `rr_arbiter` | top level: `clk`, `rst`, `req[N-1:0]`, `gnt[N-1:0]`; wires the three blocks together and holds the protocol assertions |
| `rr_update` | combinational: works out where the token goes at the next edge |
| `rr_state` | the one-hot token register, plus the counter for the holder's time slice |
| `rr_output` | one AND gate per device, `gnt[i] = token[i] & req[i]`, plus `granted = |gnt` |

`granted` is the grant fed back into the update and state blocks. It tells them
whether the token holder is using its turn.

## How the token moves

At every rising clock edge, `rr_update` picks the next token like this:

1. **Holder keeps it.** The token stays if the holder is granted (it requests)
   and its slice has not ended.
2. **Hand-over.** Otherwise the logic looks at the other devices in the order
   `h+1, h+2, …, N-1, 0, …, h-1`, where `h` is the holder, and then at `h`
   itself. The first device in that order that requests gets the token. Devices
   that are not requesting are passed over in the same clock, so moving the
   token never takes more than one cycle. Wrapping from device `N-1` to device
   0 costs no extra cycle.
3. **Idle.** If nobody requests, the token stays where it is and no grant is
   given.

The holder comes last in the search. So a device whose slice has ended keeps
the bus only if no other device is waiting. In that case it starts a new slice
at once.

## Timing

The token is registered and the grant is combinational (`token & req`). When
requests are driven from the same clock, grants therefore change only after
rising edges. The exact timing rules:

* A device that requests while it already holds the token is granted in that
  same cycle.
* A device that requests without the token is granted in the cycle after the
  token reaches it.
* If the holder drops its request, its grant drops in the same cycle. The token
  moves at the next edge, so there is **one cycle with no grant** between a
  voluntary release and the next grant.
* If a slice runs out while another device is waiting, the hand-over costs
  **no cycle**: the holder is granted in the last cycle of its slice, and the
  next device is granted in the cycle after that.

Example with six devices and no slice limit. The token starts on device 0 after
reset:

| cycle | req (5..0) | token | gnt (5..0) | note |
|---|---|---|---|---|
| 0 | 000000 | 0 | 000000 | idle |
| 1 | 010100 | 0 | 000000 | devices 2 and 4 miss their turn; token moves to 2, skipping 1 |
| 2 | 010100 | 2 | 000100 | turn hit for device 2 |
| 3 | 010000 | 2 | 000000 | device 2 releases; token moves to 4 |
| 4 | 010001 | 4 | 010000 | device 4 granted; device 0 waits |
| 5 | 000001 | 4 | 000000 | device 4 releases; search wraps to 0 |
| 6 | 000001 | 0 | 000001 | device 0 granted |

**Wait bound.** Say no turn lasts more than `L` cycles. `L` is `SLICE_CYCLES`
if a slice is set, otherwise the longest time a device keeps its request while
granted. Then a waiting device is granted within `(N-1)·(L+1)+2` cycles.

## Time slice

`SLICE_CYCLES` sets the longest turn, counted in granted cycles. `rr_state`
counts how many cycles the holder has been granted. It raises `slice_done` in
the last granted cycle of the slice, and at that edge the update block passes
the token on. The count restarts whenever:

* the holder is not granted,
* the token moves, or
* a slice ends.

`SLICE_CYCLES = 0` is the default and means no limit. A holder then keeps the
bus for as long as it requests, and fairness depends on devices releasing the
bus once their work is done. With the default, no counter is built: the only
state is the `N` token flip-flops.

## Parameters and interface

| parameter | default | meaning |
|---|---|---|
| `N` | 6 | number of devices (2 or more; 4 to 12 are the published sizes) |
| `SLICE_CYCLES` | 0 | longest turn in cycles; 0 = no limit |

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst` | in | 1 | synchronous, active-high reset; puts the token on device 0 |
| `req` | in | N | `req[i]` is device `i`'s request |
| `gnt` | out | N | `gnt[i]` is device `i`'s grant; at most one bit set |

Three assertions in `rr_arbiter` are checked while reset is low:

* the token is always one-hot;
* at most one grant bit is set;
* a grant always goes to a requesting device.

## Where this design departs from the published one

* **Circular search, not a restart at device 1.** The published flow chart returns to an idle
  state after each grant and tests `r1`, then `r2`, and so on. Followed literally, that is a
  fixed-priority arbiter. The published text also asks for circular order that starts after
  the last holder. This RTL follows the text.
* **Skipping idle devices.** The text says the token goes to "the immediate next device". It
  also requires the arbiter to skip devices that are not requesting without losing cycles.
  The RTL skips them in one step, so the next requester gets the token directly.
* **Time-slice length.** No length is published. The default (no limit) matches the flow
  chart, where a device keeps its grant while it requests. It also matches the published
  register count, which leaves no room for a counter.
* **Reset value.** The published reset "clears all registers". A one-hot token cannot be
  all-zero, so reset puts the token on device 0. Grants are still all zero during reset,
  because every request is low then.
* **Registers.** The published synthesis of the six-device version used 7 one-bit registers
  and 6 latches. This RTL uses 6 flip-flops (the token) and no latches.
* **Pins.** The published pin diagram has separate pins `req0..req5` and `gnt0..gnt5`. Here
  they are the vectors `req` and `gnt`, so that `N` can change.
* **Lost cycle on release.** The grant is the AND of the token and the request, as
  published. So a device that releases the bus early leaves one cycle with no grant before
  the next device is granted (see Timing).

## Verification

The testbenches check themselves. Each prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_rr_output` | `rr_output`, exhaustively over all 64 request patterns and every token value |
| `tb_rr_update` | `rr_update`, over every holder, request pattern and slice state. The reference rotates the request vector and takes its lowest set bit |
| `tb_rr_state` | `rr_state`: reset value, loading of the token, and slice-end timing for `SLICE_CYCLES` = 3 and 0, both in directed cases and in 2000 random cycles |
| `tb_rr_arbiter` | the whole arbiter at N = 4, 6, 8, 10 and 12, with slices of 3, none, 3, 2 and none. Details below |
| `tb_rr_arbiter_full` | the default build (N = 6, no slice limit). Details below |

`tb_rr_arbiter` runs 3000 cycles of random device traffic per configuration.
Every cycle it compares the grants with `rr_arbiter_model`, a reference model
written separately from the RTL, and it also checks the wait bound. It counts,
and requires at least once, each of these events:

* turn hit and turn miss
* release by request and idle cycles
* reset during operation
* slice run-out
* wrap from the last device to the first
* skipping of idle devices
* re-grant of a lone requester
* a slice hand-over with no lost cycle

`tb_rr_arbiter_full` first holds reset with all requests low and checks that no
grant is given. It then runs 1000 cycles of random requests from all six devices
and checks every grant against the model. It also checks that every device is
served, that the wait bound holds, and that both a wrap and a skip happen.

The helper modules `rr_arbiter_model` and `rr_arbiter_harness` are used only by
the testbenches.

To run one with Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_rr_arbiter tb/tb_rr_arbiter.sv
./obj_dir/Vtb_rr_arbiter
```

## Changing it

* **More or fewer devices.** Set `N`. The search in `rr_update` is written as a loop over the
  devices, so it grows linearly with `N`.
* **A time-slice limit.** Set `SLICE_CYCLES`. The counter is sized automatically.
* **A fully registered grant.** The grant is combinational from the registered token. If a
  registered grant is needed, register `gnt` after `rr_output`. Every grant then comes one
  cycle later.
