# Extended Page Modification Logging (EPML) in SystemVerilog

Page Modification Logging (PML) is a hardware feature of Intel VT-x. When it is
enabled, the processor writes the guest-physical page address (GPA) into a 4 KB
buffer each time a guest write sets an EPT dirty flag. It exists for the
hypervisor, for example to find the pages to resend during live migration. The
guest cannot reach it, but processes inside a virtual machine need the same
information: a checkpointer such as CRIU, or a concurrent garbage collector,
wants the pages a process has dirtied. Those processes also think in guest
*virtual* addresses (GVAs), not guest physical ones.

EPML is a small extension of PML that gives the guest kernel its own copy of
the mechanism. The hypervisor is not involved while it runs:

* **A second buffer, owned by the guest.** Next to the hypervisor's PML
  Address and PML Index, the VMCS gains a *Guest PML Address* and a *Guest PML
  Index*. They sit in the shadow VMCS, so the guest reads and writes them with
  plain `vmread` / `vmwrite` in non-root mode, with no VM exit.
* **The guest buffer receives GVAs.** The page walk already knows both
  addresses of the write. The processor stores the GPA page into the
  hypervisor buffer and the GVA page into the guest buffer.
* **Translated buffer address.** The guest knows only guest-physical addresses.
  A non-root `vmwrite` of the Guest PML Address is therefore translated to a
  host-physical address (HPA) by the EPT/TLB before it is stored. The logger
  can then write straight to host memory.
* **Full buffers go to their owners.** A full hypervisor buffer causes a VM
  exit, as with plain PML. A full guest buffer raises a *virtual self-IPI*
  through posted interrupts, on a vector the guest kernel reserved, again
  without a VM exit.

The guest kernel keeps one guest buffer per tracked process. When the process
is scheduled in, the kernel writes the buffer's address and index 511. When the
process is scheduled out, it writes index 512, which parks the buffer. Each
switch costs a few `vmwrite`s and a `vmread`, and there are no hypercalls.

EPML was proposed by S. Bitchebe and A. Tchana in *Out of Hypervisor (OoH):
When Nested Virtualization Becomes Practical*. Their processor changes are
given there as behaviour, not as circuits, and were evaluated in an emulator.

This RTL is the processor-side logic of that extension for one logical
processor. The page walker, EPT/TLB, memory system, VM-exit logic and
posted-interrupt delivery are existing processor parts. The RTL reaches them
through ports.

## Buffers, indices and what "full" means

Each buffer is one 4 KB page of 512 eight-byte entries. Its index is 16 bits
wide and names the next entry to fill, counting *down* from 511. Entry *i*
lives at `base[63:12] * 4096 + 8*i`. Logged values are page-aligned: the low
12 bits are cleared.

| index value | meaning |
|---|---|
| 0 … 511 | logging; the next entry goes to slot *index*, then index − 1 |
| 512 | parked by software: nothing is logged and no event is raised |
| 0xFFFF | reached after slot 0 was filled: buffer full, nothing more logged |

When slot 0 has been written, the buffer is full. The event goes out with that
same store (see below). Real Intel PML instead exits on the next *attempt* to
log with an out-of-range index. This design follows the description it was
built from: the full event is raised when the buffer fills, and writing 512
stops logging.

The hypervisor buffer also needs the enable-PML control, which is bit 17 of
the secondary processor-based controls. The guest buffer needs only an index
in range.

## Logging one dirtying write (`pml_logger`)

The page walker hands over one event per write that set a dirty flag. The
event carries `{gva, gpa}` on a valid/ready handshake. When the logger is idle
and not held, it accepts the event. In the accept cycle it:

1. decides which buffers log: the hypervisor buffer if PML is enabled and its
   index is in range, the guest buffer if its index is in range;
2. latches the store address and data for each buffer, decrements each index
   that logs (strobes into the field store), and remembers whether a store
   fills slot 0.

It then issues at most two 64-bit stores on a single valid/ready port, the
hypervisor entry first. `log_wr_t.guest` tells the memory side which buffer a
store belongs to.

With memory always ready, an event costs:

| buffers logging | cycles from accept to next accept |
|---|---|
| both | 3 |
| one | 2 |
| none | 1 |

While stores are in flight, `evt_ready` is low and the page walker stalls.
Because of that there is only ever one event in the logger, so there is no
reordering or buffering to reason about.

`hyp_full` / `guest_full` are combinational. They are high in the cycle of the
handshake of the store into slot 0. The full-event unit registers them on the
same edge on which the logger returns to idle, so `hold` is already high in the
logger's first idle cycle. A registered pulse would leave one idle cycle with
`hold` still low, and a write accepted in that cycle would meet a full buffer
and be lost. The end-to-end test would catch exactly that.

## Full events (`pml_full_events`)

* Hypervisor buffer full → `vmexit_req`, with `vmexit_reason` = 62 (the Intel
  "PML full" exit reason).
* Guest buffer full → `ipi_req`, with `ipi_vec` = the `ipi_vector` input
  sampled at the full pulse. This is the self-IPI request to the
  posted-interrupt logic.

Each request is a level that stays high until its `*_ack`. While either is
pending, `hold` keeps the logger from accepting events. A full buffer's owner
therefore drains it and resets the index before the next dirtying write is
logged, and no write is lost. The expected handler sequence is:

* hypervisor: read entries `index+1 … 511`, `vmwrite PML Index = 511`, ack;
* guest (the interrupt's bottom half): copy its buffer to the tracker's ring,
  `vmwrite Guest PML Index = 511`, ack.

## vmread / vmwrite (`vmx_pml_access`, `vmcs_pml_fields`)

`vmcs_pml_fields` holds the five values the logic uses:

| field | encoding | VMCS | width | reset |
|---|---|---|---|---|
| secondary controls, bit 17 = enable PML | 0x401E | ordinary | 1 bit kept | 0 |
| PML Address | 0x200E | ordinary | 64 | 0 |
| PML Index | 0x0812 | ordinary | 16 | 512 |
| Guest PML Address (new) | 0x2040 | shadow | 64 | 0 |
| Guest PML Index (new) | 0x0814 | shadow | 16 | 512 |

The first three encodings are Intel's. The two new ones are this design's
choice, so change them in `ooh_pkg` if your encoding map differs. A `vmwrite`
to an index in the same cycle as the logger's decrement of it wins.

`vmx_pml_access` runs one access at a time. It takes a valid/ready request
`{op, field, wdata, nonroot}` and gives a valid/ready response
`{status, rdata, exit_reason}`:

* **Root mode** (hypervisor): every field can be reached, and values are
  stored as given (HPAs).
* **Non-root mode** (guest): only the two shadow fields can be reached, and
  only if their bit in the VMREAD/VMWRITE bitmap is 0. The bits come in on
  `vmread_exit_bm` / `vmwrite_exit_bm`: bit 0 is the Guest PML Address, bit 1
  the Guest PML Index, and 1 means trap. Anything else returns `VMX_EXIT`
  with exit reason 23 (VMREAD) or 25 (VMWRITE).
* **Translated write**: a non-root `vmwrite` of the Guest PML Address sends
  the GPA out on `xlat_req_*`. It waits for `xlat_rsp_*` and stores
  `HPA page | GPA page offset`. A fault returns `VMX_EXIT` with exit reason 48
  (EPT violation) and leaves the field unchanged.
* An encoding not in the table returns `VMX_BAD_FIELD`.

A response is valid one cycle after the request is accepted. A translated
write is valid one cycle after the translation response.

## Module map

| file | role |
|---|---|
| `rtl/ooh_pkg.sv` | widths, field encodings, exit reasons, request/response structs, entry-address helpers |
| `rtl/vmcs_pml_fields.sv` | the five field registers, read mux, index decrement |
| `rtl/vmx_pml_access.sv` | vmread/vmwrite execution, shadow/bitmap checks, GPA→HPA on guest vmwrite |
| `rtl/pml_logger.sv` | two-level logger: stores, index decrements, full pulses, walker stall |
| `rtl/pml_full_events.sv` | PML-full VM exit request, guest self-IPI request, hold |
| `rtl/epml_unit.sv` | top: wires the four together; all external parts are ports |

Everything uses one clock and an active-low reset that is asserted
asynchronously and released synchronously by the surrounding design. Release
reset before any handshake. The modules carry concurrent assertions for the
handshake rules: a store or response stays stable until taken, and an ack
needs a pending request.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT` line.

* `tb_vmcs_pml_fields`: reset values, read-back, decrement through 0 to 0xFFFF,
  write-over-decrement priority.
* `tb_vmx_pml_access`: root and non-root access, bitmap traps, the translated
  write (value, one translation per write, none in root mode), translation
  fault, unknown field, latency, response held under back-pressure. The field
  store and the EPT are models in the testbench.
* `tb_pml_logger`: the stores of every event are compared with addresses
  worked out from the fields. Covered: both buffers, one buffer or none,
  parked and full indices, full pulses, hold, random memory back-pressure, and
  the 3/2/1-cycle costs.
* `tb_pml_full_events`: request/ack levels, exit reason, vector capture,
  both events pending at once.
* `tb_epml_unit`: end to end at full size. The hypervisor sets up PML, and the
  guest is refused its fields and then trapped by the bitmap. An untracked
  process runs, then tracked process A, untracked U, tracked B, then A again,
  each with its own guest buffer, with random memory back-pressure. It checks
  that the hypervisor saw every GPA page in order, and that each tracked
  process's ring holds exactly its GVA pages in order and nothing of U. Each
  mechanism is counted and must occur: guest-full IPI, PML-full exit,
  translated write, trap, walker stall, back-pressure, parked buffer.
* `tb_microbench`: the evaluation's micro-benchmark access pattern (one write
  per 4 KB page) for regions of 1, 10, 50, 100, 250, 500 and 1024 MB. That is
  up to 262,144 pages, about 1.6 M cycles. The hypervisor logs at the same
  time. Each GVA and GPA is checked, as is pages/512 self-IPIs and VM exits,
  and 3 cycles per page.

For each region the workload touches, the guest takes one self-IPI per 512
dirtied pages. For a 1 GB region that is 512 interrupts per pass. The logic
itself holds no per-page state, so the region size is limited only by the
64-bit addresses.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -y rtl rtl/ooh_pkg.sv tb/tb_epml_unit.sv \
          --top-module tb_epml_unit -Mdir obj && ./obj/Vtb_epml_unit
```

Replace `tb_epml_unit` with any other testbench name. Each one takes well
under a few seconds.

## What follows the source description and what does not

These follow the description: the two buffers and their fields; GVA to the
guest buffer and GPA to the hypervisor buffer from the same walk; 512 entries,
a 16-bit index counting down from 511, and 512 to stop logging; translation on
a non-root `vmwrite` of the Guest PML Address; a VM exit for a full hypervisor
buffer and a self-IPI for a full guest buffer; shadow-VMCS access governed by
the VMREAD/VMWRITE bitmaps.

These are this design's own choices, where the description is silent:

* the encodings of the two new fields; the reset values;
* raising "full" when slot 0 is written, not on the next attempt;
* one serialised store port with the hypervisor entry first, and stalling the
  walker while stores are in flight or a full event is pending;
* the level/ack handshakes; the vector as an input port;
* traps for non-shadow fields, an EPT-violation exit on a failed translation,
  and keeping the page offset of the written GPA;
* keeping only the enable-PML bit of the secondary controls.

Limits to be aware of:

* A `vmread` of an index is not ordered against log stores still waiting on
  memory. Software must see earlier stores before it reads the buffer. In a
  processor the memory-ordering rules give this; in the testbenches the
  drain waits until `mem_wr_valid` is low.
* The bitmaps are not looked up in memory; only the two bits that matter come
  in as ports.
* No VMCS is loaded or stored. The field registers stand for the processor's
  cached copy of the current VMCS and its shadow. VMCS switching (VMPTRLD,
  VMCS link pointer) is outside this logic.
* Only one dirtying write is logged at a time. A processor that retires
  several stores per cycle would need a queue in front of `evt_*`.
