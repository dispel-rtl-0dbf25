# Bus-level security policy enforcement for an AXI SoC

An SoC built from third-party IP blocks cannot trust those blocks: a processor
running user code may overwrite protected memory, a compromised crypto core may
stall or leak, and an untrusted UART or JTAG block on a shared bus can watch the
data wires while a key is written to the AES core. This RTL wraps the bus
interconnect in a ring of small pieces of enforcement logic. Each security
policy is written as a 3-tuple:

* **predicate**: a condition on observable bus signals, such as an address range
  or the slave number;
* **timing**: the operating mode in which the policy holds (`mode = 0` is user
  mode), or a cycle count;
* **action**: which signals to overwrite when the predicate and the timing
  condition both hold, such as `w_data = 0` or `r_data = 0`.

Each slice of the ring checks the policies that apply to its port. It either
passes the signals through unchanged or rewrites them, in the same cycle. The
interconnect and the IPs are not modified. Policies that concern a single IP and
need signals from inside it live in that IP's bus wrapper. The one built here
keeps the AES key from leaking out through the ciphertext.

The design follows the DiSPEL framework (Paria and Bhunia, "DiSPEL: Distributed
Security Policy Enforcement for Bus-based SoC"). In that framework a software
tool turns a list of policies into generated SystemVerilog. This RTL is a
hand-written, table-driven version of that generated logic. It is configured
for the reference SoC of the paper: one OpenRISC master and twelve slaves.

## Where the logic sits

```
 master IP ──► master_policy_port ──► ┌──────────────┐ ──► slave_policy_port ──► slave IP 0 (memory)
                                      │     bus      │ ──► slave_policy_port ──► [ip_leak_guard] AES
                                      │ interconnect │ ──► slave_policy_port ──► slave IP 2 (DES3)
                                      │  (unchanged) │ ...
                                      └──────────────┘ ──► slave_policy_port ──► slave IP 11 (UART)
          └──────────────────── security_policy_module ────────────────────┘
```

| file | what it is |
|---|---|
| `rtl/dispel_pkg.sv` | bus structs, rule type, default policy table, slave numbering |
| `rtl/master_policy_port.sv` | one per master: write-range policies |
| `rtl/slave_policy_port.sv` | one per slave: read masking, key hiding, cycle limit |
| `rtl/policy_cycle_limit.sv` | cycle-counting FSM used by the cycle-limit policy |
| `rtl/ip_leak_guard.sv` | AES wrapper policy: withhold words close to a key word |
| `rtl/security_policy_module.sv` | the ring: NM master ports, NS slave ports, one table |
| `rtl/dispel_top.sv` | ring plus AES guard, for 1 master and 12 slaves |

The top has four faces, each an array of bus ports:

* `mst_*`: the master IPs.
* `xm_*`: the interconnect's master ports.
* `xs_*`: the interconnect's slave ports.
* `slv_*`: the slave IPs.

The processor, the interconnect and the slave IPs are not in this RTL. You
connect your own. The testbenches use behavioural models of them.

### The bus

The bus is a subset of AXI4-Lite: one beat per transaction, with no IDs,
bursts or protection bits. A port is two packed structs, both defined in
`dispel_pkg`:

* `axi_req_t`: awaddr/awvalid, wdata/wstrb/wvalid, bready, araddr/arvalid
  and rready.
* `axi_rsp_t`: awready, wready, bresp/bvalid, arready and rdata/rresp/rvalid.

Address and data are 32 bits wide. `mode_i` is one bit shared by all ports, and
0 means user mode. The reset `rst_n` is asynchronous and active low.

## The policy table

All ports read the same parameter, `RULES`, which is a packed array of
`policy_rule_t` entries:

| field | meaning |
|---|---|
| `kind` | which predicate/action pair (below) |
| `ports` | bit *i* set = the predicate names master or slave *i* |
| `lo`, `hi` | inclusive address range |
| `mode_any`, `mode_val` | timing condition: any mode, or only `mode_i == mode_val` |
| `limit` | cycle limit (cycle-limit rules only) |

| kind | side | predicate | action |
|---|---|---|---|
| `RK_WRITE_MASK` | master *i* in `ports` | write address in range, mode matches | beat reaches the bus with `w_data = 0`, `w_valid = 0` |
| `RK_READ_MASK` | slave *i* in `ports` | read address in range, mode matches | `r_data = 0` to the master (`r_valid` passes) |
| `RK_WDATA_HIDE` | slave *i* **not** in `ports` | write address on the wires in range, mode matches | that slave sees `w_data = 0` |
| `RK_CYCLE_LIMIT` | slave *i* in `ports` | slave busy for more than `limit` cycles, mode matches | `r_data = 0` for that response |

The default table, `DEFAULT_RULES`, holds five policies. All of them apply in
user mode only:

| # | policy | rule |
|---|---|---|
| 0 | The processor may not write 0x0001dfa4..0x0001ffac of main memory | write mask, master 0 |
| 1 | The processor may not write 0x9300000c..0x93000010 (AES registers) | write mask, master 0 |
| 2 | Reads of 0x93000004..0x93000008 from slave 1 (AES) return 0 | read mask, slave 1 |
| 3 | Key writes to 0x93000014..0x93000028 are seen only by the crypto slaves 1-5 | hide, trusted = slaves 1-5 |
| 4 | A result from slave 2 (DES3) that takes more than 1000 cycles is discarded | cycle limit 1000, slave 2 |

The slave numbers follow the order of the reference SoC's block diagram:

| number | slave |
|---|---|
| 0 | memory |
| 1 | AES |
| 2 | DES3 |
| 3 | RSA |
| 4 | MD5 |
| 5 | SHA-256 |
| 6 | FIR |
| 7 | IIR |
| 8 | DFT |
| 9 | IDFT |
| 10 | JTAG |
| 11 | UART |

This numbering is a choice made for this RTL; see "Departures" below.

To enforce other policies, pass your own table to `dispel_top` or
`security_policy_module` and set `NR` to match. The rules are elaborated into
logic: for each port, only the rules that name that port produce comparators.
Each address rule costs two 32-bit comparators on each port it applies to. Each
cycle-limit rule costs one counter FSM on the slave it names.

## Master side: blocking a write without breaking the bus

`master_policy_port` is the subtle part. The policy is stated as "if `aw_addr`
is in range, then `w_data = 0` and `w_valid = 0`". In AXI, however, the address
(AW) and the data (W) travel on separate channels, and either may come first.
The port resolves this as follows:

* **Verdict.** The rules are evaluated on `awaddr` while AW is valid. The
  result is latched at the AW handshake. A W beat uses the live verdict if
  its AW is still being presented, and the latched one otherwise.
* **No address yet.** A W beat that arrives before any address is held
  (`wready` stays low) until its AW appears. Data can therefore never pass a
  check that has not yet been made. This is allowed by AXI, because the master
  must not make AW wait for W.
* **One write at a time.** A new AW is held while the previous write's W is
  still open, so a latched verdict always belongs to the right beat.
* **Blocked beat.** In the cycle the master offers the beat, the bus sees
  `w_valid = 0` and `w_data = 0`, and the port itself accepts the beat
  (`wready = 1`). The slave has already received the AW, though, and would
  wait for data forever. So in the following cycles the port sends the slave a
  **null beat**: `w_valid = 1`, `w_data = 0`, `w_strb = 0`. This beat writes no
  byte, and it lets the slave return its B response, which passes to the master
  as usual. The null beat is this design's own addition. The paper only states
  what the master's beat turns into.

Allowed writes cross the port in zero cycles. The testbench checks this against
a master and slave that are wired directly together.

## Slave side

`slave_policy_port` handles three kinds of rule.

**Read masking (Policy #2).** The read address is checked and latched at the AR
handshake. It is then applied to the R beat that answers that read: `r_data`
becomes 0, while `r_valid` and `r_resp` pass unchanged, so the master's read
still completes. To pair each verdict exactly with its response, each slave
port allows only one read in flight. A second AR waits.

**Key hiding (Policy #3).** On a shared bus, every slave sees the address and
data wires of a write, and only the addressed slave gets a valid signal. This
rule zeroes the `w_data` that an untrusted slave sees while the write-address
wires show an address in the key range. The check uses the address as it
appears on the wires, whether or not it is valid. The rule therefore relies on
the interconnect to keep showing the write address to every slave for the whole
write, as a shared bus does. With a crossbar that gives each slave only its own
traffic, the rule has nothing to do.

**Cycle limit (Policy #4).** `policy_cycle_limit` is a two-state FSM:

* **IDLE** waits for a request handshake (AR or AW) while the mode condition
  holds, then moves to COUNT.
* **COUNT** counts the cycles: the counter is 1 in the first cycle after the
  request and goes up by one each cycle. Once it exceeds `limit`, the FSM sets
  its flag and returns to IDLE.

The response handshake (R or B) also ends COUNT, and it clears the flag.
`flag_o` also includes a same-cycle term, which makes the rule exact. A
response handed over in cycle *d* after its request is discarded exactly when
*d* > `limit`. With the default limit of 1000, a result in cycle 1000 passes
and a result in cycle 1001 becomes 0. Only read data is rewritten. A late write
response passes, because the policy's action names only `r_data`.

## IP level: the AES key-leak guard

`ip_leak_guard` sits in the AES slave's bus wrapper, in front of the slave-side
port. It compares every 32-bit word the AES returns with each of the six 32-bit
words of its 192-bit key. The key is an input to the top (`aes_key_i`), which
stands for the key register inside the AES. If the word differs from any key
word in fewer than 8 bit positions, the bus receives 0 and `key_leak_o` is
raised. The guard is combinational. Any output register belongs to the wrapper.

## Timing summary

* Every rewrite is combinational. An allowed transaction crosses the ring in
  zero cycles.
* A blocked write costs the slave one extra W beat (the null beat).
* The ring can hold a transaction in three cases:
  * a W beat whose address has not yet appeared;
  * a second write on a master port while the first is still open;
  * a second read on a slave port while the first is still open.
* `rule_hit_o` has one bit per rule. A bit is high in every cycle in which
  that rule changed a value. This output is a status signal added by this
  design.

## Departures from the paper and points to know

* **Bus subset.** The paper's SoC uses AXI4 (and Wishbone inside the IP
  wrappers). This RTL uses an AXI4-Lite subset. Bursts and IDs would need the
  verdict latches to become per-ID queues.
* **Policy table instead of generated code.** The paper's tool emits one
  if-statement per policy. Here a parameter table drives generic comparators,
  which gives the same logic for each rule.
* **Memory example, end address.** The figure of the memory example labels the
  end of the protected range 0x0001dfac. The policy text gives 0x0001ffac,
  which is the value used here.
* **Write-mask action.** The policy table of the paper lists only
  `write_data = 0` for Policy #1. The prose and the waveforms also drop
  `w_valid`, and both are done here. The mode condition is checked for
  Policy #1 as well, even though the paper's code listing for it leaves the
  check out.
* **Policy #2 address.** The paper's code listing for Policy #2 compares the
  *write* address, while its predicate names the read address. The read address
  is used. Its waveform shows a read of 0x93000034 being masked, which lies
  outside the stated range 0x93000004..0x93000008. The range from the table is
  used.
* **Slave numbers.** The paper's numbers do not all agree with one map:
  * Policy #2 names slave 1 for the AES.
  * Policy #4 names slave 2, while its waveform caption says AES.
  * Policy #3 lets slaves "4 or 5" see the key, while its waveform shows the
    AES receiving the key.

  Here the AES is slave 1, Policy #4 guards slave 2 (DES3), and Policy #3
  trusts all five crypto slaves (1-5), a set that includes both 4 and 5 and
  the AES.
* **Not built.**
  * The processor, the interconnect, the memory and the crypto, DSP and I/O
    cores.
  * The policy sets of the synthesis study (10 to 30 bus-level policies, and 5
    to 10 IP-level policies per core), because the paper does not list them.
  * The design-time scoring and pruning of policies, and the assertions
    generated for policies that cannot be synthesized.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The behavioural models the testbenches use are:

* `axi_master_bfm.sv`: a master, with all three AW/W orderings;
* `axi_slave_model.sv`: a sparse memory with a read latency set at run time;
* `axi_xbar_model.sv`: a one-master shared-bus interconnect that decodes
  address bits [31:24].

| testbench | what it checks |
|---|---|
| `tb_policy_cycle_limit` | every operation length from 1 to 14 against limit 10; lengths 1000 and 1001 against the default limit |
| `tb_ip_leak_guard` | Hamming distances 0 to 9 from each key word; 3000 random words |
| `tb_master_policy_port` | range edges; both modes; three AW/W orderings; 300 random writes; the rewrite in the same cycle; zero added latency |
| `tb_slave_policy_port` | read masking on slave 1, including two reads offered back to back; limit 20 on slave 2 with latencies around it; key hiding on slave 11 |
| `tb_security_policy_module` | 2 masters and 3 slaves with a test table; each rule reaches exactly the ports it names; 400 random accesses against a reference model |
| `tb_dispel_top` | the full design at default parameters, end to end (below) |

`tb_dispel_top` runs the whole design at its default parameters:

* ordinary traffic to all 12 slaves;
* the protected memory write, in both modes;
* a write whose data comes before its address, to a protected and to an
  allowed location;
* Policies #1 to #4;
* the key-leak guard;
* a DES3 read of 1000 cycles, which passes, and one of 1500 cycles, which is
  discarded.

It counts every mechanism and fails if any of them never occurred.

`tb_policy_count` looks at the size of the policy table. It builds the same
SoC four times, with tables of 10, 20, 25 and 30 rules. These are the policy
counts for which the paper reports area, delay and power. The paper does not
list those policies, so the testbench makes them up from the four rule kinds:

* write masks on memory windows;
* read masks on crypto registers;
* data hiding with one trusted crypto core;
* cycle limits from 20 to 80 on the other cores.

For every rule it checks three things. The rule acts in user mode. An access
just outside the rule passes. The same access passes in the other mode. The
table and the sequence are generated in `tb/policy_count_harness.sv`.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dispel_pkg.sv tb/tb_dispel_top.sv --top-module tb_dispel_top -o sim
./obj_dir/sim
```

Replace `tb_dispel_top` with any testbench name in the command above. Each
testbench runs in well under a second.
