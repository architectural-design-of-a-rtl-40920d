# A two-client, fixed-priority RAM arbiter

Two systems share one small RAM. Client1 is the important one: it may read or write at any moment, and it can do both in the same cycle. Client2 has lower priority. It asks for one operation at a time and waits for an acknowledge.

The arbiter sits between the two clients and a simple dual-port RAM, which has one read port and one write port. It grants each RAM port separately. This is the main idea of the design. Client1 never has to wait, and client2 still gets through whenever client1 leaves a port free:

| client1 is ...         | client2 may ...          |
|------------------------|--------------------------|
| idle                   | read or write            |
| only writing           | read                     |
| only reading           | write                    |
| reading and writing    | nothing: it waits        |

Because one read and one write can reach the RAM in the same cycle, the two can hit the same address. Call that an *address clash*. The RAM reads before it writes, so in a clash it would return the old word. The arbiter sees the clash and hands the reader the word being written instead. Every reader therefore sees the latest value.

The default size is a 16-word x 8-bit RAM, with a 4-bit address and 8-bit data. All sizes are parameters.

## Block structure

```
                 +------------------------------ ram_arbiter ---------------------------+
 client1 ------> | +-------------------------- arbiter ------------------+              |
 RD_EN_C1        | |  arbiter_fsm        request registers               |  RD_EN       |
 WR_EN_C1        | |  (rd/wr state,  --> RD_EN RD_ADDR WR_EN WR_ADDR  ---+------------> |  ram
 RD/WR_ADDR_C1   | |   reset count)      WR_DATA, client2 sequencers     |  ...         | (16 x 8)
 WR_DATA_C1      | |                                                     |              |
 client2 ------> | |  addr_clash_bypass  <-- RD_DATA --------------------+<------------ |
 REQUEST_C2 ...  | |  (TEMP_RD_DATA, ADDR_CLASH, registered option)      |              |
 <-- RDDATA_C1   | +-----------------------------------------------------+              |
 <-- DATAOUT_C2, ACK_C2, RST_DONE                                                       |
                 +--------------------------------------------------------------------------+
```

| file | role |
|------|------|
| `rtl/ram_arbiter_pkg.sv` | the state type `client_state_t` |
| `rtl/ram.sv` | simple dual-port RAM; clears itself after reset |
| `rtl/arbiter_fsm.sv` | the grant FSM: one state register per RAM port, plus the reset sequence |
| `rtl/addr_clash_bypass.sv` | clash detection and read-data forwarding |
| `rtl/arbiter.sv` | the FSM, the RAM request registers, client2 sequencing and the bypass |
| `rtl/ram_arbiter.sv` | top level: the arbiter wired to the RAM |

## Ports of the top level

| port | dir | width | meaning |
|------|-----|-------|---------|
| `CLOCK` | in | 1 | everything acts on the rising edge |
| `RST_N` | in | 1 | asynchronous active-low reset |
| `RST_DONE` | out | 1 | low while the RAM clears itself; high once requests are accepted |
| `RD_EN_C1`, `RD_ADDR_C1` | in | 1, AW | client1 read request |
| `WR_EN_C1`, `WR_ADDR_C1`, `WR_DATA_C1` | in | 1, AW, DW | client1 write request |
| `RDDATA_C1` | out | DW | read data |
| `REQUEST_C2` | in | 1 | client2 wants an access; hold it until `ACK_C2` |
| `RD_NOT_WRITE_C2` | in | 1 | 1 = read, 0 = write |
| `ADDR_C2`, `DATAIN_C2` | in | AW, DW | client2 address and write data; hold them until `ACK_C2` |
| `DATAOUT_C2` | out | DW | read data; valid while a read's `ACK_C2` is high |
| `ACK_C2` | out | 1 | one-cycle pulse, one per client2 access |

Parameters: `ADDR_WIDTH` (default 4), `DATA_WIDTH` (default 8), and `REGISTERED_DATA` (default 0; set it to 1 to register `RDDATA_C1`, see below).

## Reset and RST_DONE

After `RST_N` rises, the RAM writes zero into one word per cycle, starting at address 0. During these 2**ADDR_WIDTH cycles the FSM stays in `RESET`, `RST_DONE` is low, and every client input is ignored. This covers writes too: a write made before `RST_DONE` is lost, not delayed. At the 2**ADDR_WIDTH-th rising edge the FSM enters `IDLE` and `RST_DONE` goes high. The first request can be sampled at the next edge. Pulling `RST_N` low at any time starts the whole sequence again and clears the memory once more.

## The grant FSM

The FSM is two state registers of the same six-valued type: `RESET`, `IDLE`, `C1_READ`, `C2_READ`, `C1_WRITE` and `C2_WRITE`. `rd_state` owns the RAM read port and only takes the values `RESET`, `IDLE`, `C1_READ` and `C2_READ`. `wr_state` owns the write port and only takes `RESET`, `IDLE`, `C1_WRITE` and `C2_WRITE`. Outside `RESET`, each next state depends only on the current inputs:

```
rd_next = RD_EN_C1 ? C1_READ  : (REQUEST_C2 &&  RD_NOT_WRITE_C2) ? C2_READ  : IDLE
wr_next = WR_EN_C1 ? C1_WRITE : (REQUEST_C2 && !RD_NOT_WRITE_C2) ? C2_WRITE : IDLE
```

These two lines contain the whole transition list:
- idle to client1 and back;
- idle to client2 and back;
- client1 pre-empting client2 at once;
- client2 taking over as soon as client1 lets go.

Client2 has no timeout and no fairness guarantee. A client1 that never stops reading keeps client2 from ever reading.

## Timing of a request

The arbiter registers the granted request onto the RAM port at the same edge that updates the FSM. The RAM then acts one edge later.

*Client1.* A read sampled at edge *k* goes to the RAM after *k* and is read at *k+1*. `RDDATA_C1` is valid after *k+1*, so it arrives two edges after the request. With `REGISTERED_DATA = 1` it arrives after *k+2*. A write sampled at *k* is written at *k+1*. Client1 gets no acknowledge, because its latency is fixed. It may keep its enables high for many cycles, giving one access per cycle.

*Client2.* Client2 works by request and acknowledge. The arbiter latches `ADDR_C2`, and `DATAIN_C2` for a write, at the first edge where client2 holds the port. Call that edge *e*.
- **Write:** the access lasts two cycles. `ACK_C2` is high in the cycle after *e*, and the word is written at *e+1*. The write enable stays high into the next cycle, so the same word is written a second time. That is harmless.
- **Read:** the access lasts three cycles. The RAM reads at *e+1*. `ACK_C2` is high in the cycle after *e+1*, and `DATAOUT_C2` holds the word during that cycle. The third cycle is a gap.

While `REQUEST_C2` stays high, the accesses repeat back to back. Writes give an `ACK_C2` pulse every 2 cycles and reads every 3. A client that wants a single access drops `REQUEST_C2` in the cycle where it sees `ACK_C2`.

Once an access has started it finishes even if client1 takes the port. Its `ACK_C2` and read data still arrive at the usual time.

## Address clash bypass

`addr_clash_bypass` watches the request registers, which hold what the RAM is doing at the coming edge. When at that edge the read and write enables are both high and the addresses are equal, it does two things:
- sets `ADDR_CLASH`;
- copies the write data into `TEMP_RD_DATA`.

Both become visible in the same cycle as the RAM's stale `RD_DATA`. The outputs are then:

```
DATAOUT_C2 = ADDR_CLASH  ? TEMP_RD_DATA  : RD_DATA
RDDATA_C1  = ADDR_CLASH  ? TEMP_RD_DATA  : RD_DATA          (REGISTERED_DATA = 0)
RDDATA_C1  = ADDR_CLASHI ? TEMP_RD_DATA1 : TEMP_RD_DATA2    (REGISTERED_DATA = 1)
```

In registered mode, `TEMP_RD_DATA1`, `TEMP_RD_DATA2` and `ADDR_CLASHI` are the same three values delayed by one register stage. The net effect is write-first semantics for any pair of requests:
- client1 reading and writing the same address;
- client1 writing while client2 reads it;
- client2 writing while client1 reads it.

In every case the reader gets the new word. `RDDATA_C1` and `DATAOUT_C2` are fed from the same RAM read port. Each therefore shows whatever was read last, whoever asked for it. A client knows when its own data is there from the timing above.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `ram_tb` | clearing after reset; writes ignored while clearing; pattern and random traffic against a reference array; old word on a same-address read and write; `RD_DATA` held when not reading; the three RAM test cases with their data words (11100111 at 1101, then 10111001 at 1011 while reading 1101) |
| `arbiter_fsm_tb` | reset length of 2**ADDR_WIDTH cycles; random inputs against the priority rules; every state reached; pre-emption on both ports |
| `addr_clash_bypass_tb` | unregistered and registered instances against expected data; data delayed one cycle in registered mode |
| `arbiter_tb` | the RAM port, `ACK_C2` and read data cycle by cycle against a model, with a behavioural RAM |
| `ram_arbiter_tb` | default size, end to end: the demonstration scenarios with their data values, then 6000 cycles of random two-client traffic with a mid-run reset |
| `ram_arbiter_registered_tb` | the same, with `REGISTERED_DATA = 1` |
| `ram_arbiter_cases_tb` | default size: the 34 numbered arbiter test cases, each from a fresh reset, with a check of who got the RAM, what each client read and what ended in memory |

In the three end-to-end benches, `tb/ram_arbiter_scoreboard.sv` watches only the client ports. It keeps its own copy of the memory and checks every read against it. It also counts each mechanism and fails the test if one never occurred:
- reset sequences, including one in mid-traffic;
- inputs given before `RST_DONE`;
- client1 reads, writes and read+write;
- client2 reads and writes;
- client2 held off by client1;
- address clashes.

The scenarios replayed in `ram_arbiter_tb`:
- client1 writes 10100011 at 1010 and reads it back;
- client2 writes 11100011 at 1110, with `ACK_C2` every 2 cycles, then reads it back, with `ACK_C2` every 3 cycles;
- client1 reads and writes 1010 in one cycle and gets 10111011;
- client1 writes an address while client2 reads it, and the reverse;
- both clients read at once, then both write at once: client2 waits;
- client1 reads and writes while client2 asks: client2 gets nothing;
- inputs before `RST_DONE`;
- reset during traffic.

`ram_arbiter_cases_tb` walks the 34 numbered cases in order. "Same time" means both clients start on one clock edge; "different time" means 10 cycles (500 ns) apart. It covers each client alone, each client reading and writing, every read/write pairing across the two clients at the same and at different addresses, a reset at any time, and inputs before `RST_DONE`.

To run one with plain Verilator (from the folder holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/ram_arbiter_pkg.sv \
  rtl/ram.sv rtl/arbiter_fsm.sv rtl/addr_clash_bypass.sv rtl/arbiter.sv rtl/ram_arbiter.sv \
  tb/ram_arbiter_scoreboard.sv tb/ram_arbiter_tb.sv --top-module ram_arbiter_tb
./obj_dir/Vram_arbiter_tb
```

Every testbench runs in well under a second.

The RTL also carries concurrent assertions. They check the following:
- each state register stays within its own port's states;
- both registers leave `RESET` together;
- no RAM access happens before `RST_DONE`;
- each acknowledge lasts a single cycle;
- the RAM port enable is high while client1 holds that port and low while no one does.

## Where this RTL departs from the original description

- **Reset.** The original mixes an asynchronous reset with reset tests inside clocked processes, and leaves many registers without a reset value. Here every register resets asynchronously to zero.
- **FSM next-state logic.** The original next-state process is sensitive to the clock and infers latches, with some assignments crossing between the two state registers. Here it is written as the two combinational expressions above. They give the same next state in every reachable case.
- **Reset length.** The original RAM spends one extra cycle after clearing before it accepts requests, and its arbiter counter is loosely defined at its end. Here both the RAM and the arbiter take exactly 2**ADDR_WIDTH cycles, which is the stated reset time.
- **Read acknowledge rhythm.** The original text describes the read acknowledge as having twice the period of the write acknowledge. The original logic, kept here, gives 3 cycles against 2.
- **Port names.** The client port names follow the block diagrams: `RD_ADDR_C1`, `WR_ADDR_C1`, `WR_DATA_C1`, `RDDATA_C1` and `DATAOUT_C2`. Some listings spell a few of them differently.
- **Registered mode.** The registered mode registers only `RDDATA_C1`, as in the original. `DATAOUT_C2` stays unregistered.

## Changing the design

- **Size.** Change `ADDR_WIDTH` and `DATA_WIDTH` on `ram_arbiter`. The reset sequence scales with the depth.
- **More clients.** This needs a new FSM, because the grant rules are written for exactly one high-priority and one low-priority client. The request registers and the bypass can stay as they are.
- **A different RAM.** Any RAM with one registered read port and one write port, read-before-write, fits behind the arbiter. A RAM that is already write-first makes the bypass redundant but not wrong.
