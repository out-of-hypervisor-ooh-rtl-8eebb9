// tb_epml_unit: end-to-end test of the EPML logic at its full size (512-entry
// buffers, 16-bit indices, 64-bit addresses; the top has no parameters).
//
// The testbench plays every party around the processor:
//   - the hypervisor (root-mode vmwrite/vmread) sets up its PML buffer and
//     drains it on each PML-full VM exit, resetting the index to 511;
//   - the guest kernel (non-root vmwrite) gives each tracked process its own
//     guest-level buffer: on schedule-in it writes the buffer's guest
//     physical address (translated by the unit) and index 511, on
//     schedule-out index 512; its self-IPI handler copies the guest buffer to
//     a per-process ring and resets the index;
//   - the page walker reports one dirtying write per step, from tracked
//     process A, untracked process U or tracked process B;
//   - memory stores the log entries (random back-pressure), the EPT/TLB maps
//     guest physical to host physical by a fixed offset.
// At the end each party drains what is left. The checks: the hypervisor saw
// the GPA page of every dirtying write, in order; each tracked process's ring
// holds exactly the GVA pages that process wrote, in order, and nothing of U;
// the guest cannot reach the hypervisor's fields; entries land at the
// addresses the indices name. Each mechanism (guest-full self-IPI, PML-full
// VM exit, translated vmwrite, bitmap/field trap, walker stall, memory
// back-pressure, parked guest buffer) is counted and must occur.
`timescale 1ns/1ps
module tb_epml_unit;
  import ooh_pkg::*;

  localparam addr_t EPT_OFS   = 64'h0000_0004_0000_0000;  // HPA = GPA + EPT_OFS
  localparam addr_t HYP_BUF   = 64'h0000_0008_0000_0000;  // hypervisor buffer (HPA)
  localparam addr_t GBUF_A    = 64'h0000_0000_0010_0000;  // guest buffer of A (GPA)
  localparam addr_t GBUF_B    = 64'h0000_0000_0020_0000;  // guest buffer of B (GPA)
  localparam int    N_A1 = 700, N_U = 150, N_B = 600, N_A2 = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        vmx_req_valid = 0, vmx_req_ready, vmx_rsp_valid, vmx_rsp_ready = 1;
  vmx_req_t    vmx_req = '0;
  vmx_rsp_t    vmx_rsp;
  logic [1:0]  vmread_exit_bm = 0, vmwrite_exit_bm = 0;
  logic        xlat_req_valid, xlat_req_ready = 1, xlat_rsp_valid = 0, xlat_rsp_fault = 0;
  addr_t       xlat_req_gpa, xlat_rsp_hpa = 0;
  logic        evt_valid = 0, evt_ready;
  dirty_evt_t  evt = '0;
  logic        mem_wr_valid, mem_wr_ready = 1;
  log_wr_t     mem_wr;
  logic [7:0]  ipi_vector = 8'hEC, ipi_vec;
  logic        vmexit_req, ipi_req, vmexit_ack = 0, ipi_ack = 0;
  logic [15:0] vmexit_reason;

  epml_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Mechanism counters.
  int n_guest_full = 0, n_hyp_full = 0, n_xlat = 0, n_trap = 0, n_stall = 0,
      n_backpressure = 0, n_parked = 0;

  // ---------------- memory and EPT/TLB ----------------
  addr_t mem [addr_t];
  always @(negedge clk) mem_wr_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && mem_wr_valid && mem_wr_ready) mem[mem_wr.hpa] = mem_wr.data;
    if (rst_n && mem_wr_valid && !mem_wr_ready) n_backpressure++;
    if (rst_n && evt_valid && !evt_ready) n_stall++;
  end

  initial begin
    forever begin
      @(posedge clk);
      if (xlat_req_valid && xlat_req_ready) begin
        addr_t g;
        g = xlat_req_gpa;
        n_xlat++;
        @(negedge clk); @(negedge clk);
        xlat_rsp_valid = 1; xlat_rsp_hpa = g + EPT_OFS; xlat_rsp_fault = 0;
        @(negedge clk);
        xlat_rsp_valid = 0;
      end
    end
  end

  // ---------------- vmread / vmwrite ----------------
  vmx_rsp_t last;
  task automatic vmx(input vmx_op_e op, input logic [15:0] f, input addr_t d, input logic nr);
    @(negedge clk);
    vmx_req_valid = 1; vmx_req.op = op; vmx_req.field = f; vmx_req.wdata = d; vmx_req.nonroot = nr;
    while (!vmx_req_ready) @(negedge clk);
    @(posedge clk); #1;
    vmx_req_valid = 0;
    while (!vmx_rsp_valid) begin @(posedge clk); #1; end
    last = vmx_rsp;
    @(posedge clk); #1;
  endtask

  // ---------------- reference logs ----------------
  addr_t exp_hyp [$];        // every GPA page, in order
  addr_t exp_ring [2][$];    // GVA pages per tracked process (0 = A, 1 = B)
  addr_t hyp_log [$];        // what the hypervisor drained
  addr_t ring [2][$];        // what the guest handler copied
  int    cur;                // tracked process on the vCPU, -1 none
  addr_t gbuf_hpa [2];

  // Guest side: read index, copy entries idx+1 .. 511, oldest (511) first.
  task automatic guest_drain(input int p);
    int idx;
    while (mem_wr_valid) begin @(posedge clk); #1; end  // earlier log stores land first
    vmx(VMX_OP_READ, FLD_GUEST_PML_INDEX, 0, 1);
    check("guest idx read ok", 64'(last.status), 64'(VMX_OK));
    idx = (last.rdata[15:0] >= 16'd512) ? -1 : int'(last.rdata[15:0]);
    if (last.rdata[15:0] == 16'd512) idx = 511;  // parked: nothing new since
    for (int e = 511; e > idx; e--) ring[p].push_back(mem[gbuf_hpa[p] + 64'(e) * 8]);
  endtask

  task automatic hyp_drain();
    int idx;
    while (mem_wr_valid) begin @(posedge clk); #1; end
    vmx(VMX_OP_READ, FLD_PML_INDEX, 0, 0);
    idx = (last.rdata[15:0] >= 16'd512) ? -1 : int'(last.rdata[15:0]);
    for (int e = 511; e > idx; e--) hyp_log.push_back(mem[HYP_BUF + 64'(e) * 8]);
    vmx(VMX_OP_WRITE, FLD_PML_INDEX, 64'd511, 0);
  endtask

  // Full events are taken between dirtying writes.
  task automatic service();
    if (vmexit_req) begin
      check("exit reason", 64'(vmexit_reason), 64'd62);
      n_hyp_full++;
      hyp_drain();
      @(negedge clk); vmexit_ack = 1; @(negedge clk); vmexit_ack = 0;
    end
    if (ipi_req) begin
      check("ipi vector", 64'(ipi_vec), 64'hEC);
      n_guest_full++;
      check("ipi only for tracked", cur >= 0, 1);
      if (cur >= 0) begin
        guest_drain(cur);
        vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);
      end
      @(negedge clk); ipi_ack = 1; @(negedge clk); ipi_ack = 0;
    end
  endtask

  task automatic sched_in(input int p, input addr_t gbuf_gpa);
    vmx(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, gbuf_gpa, 1);
    check("guest addr write ok", 64'(last.status), 64'(VMX_OK));
    vmx(VMX_OP_READ, FLD_GUEST_PML_ADDR, 0, 1);
    check("guest addr is HPA", last.rdata, gbuf_gpa + EPT_OFS);
    gbuf_hpa[p] = last.rdata;
    vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);
    cur = p;
  endtask

  task automatic sched_out();
    guest_drain(cur);
    vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd512, 1);
    cur = -1;
  endtask

  // One dirtying write by process p (0 A, 1 B, 2 U), step i.
  task automatic dirty(input int p, input int i);
    addr_t gva, gpa;
    gva = 64'h0000_7F00_0000_0000 + (64'(p) << 32) + 64'(i) * 4096 + 64'($urandom_range(0, 4095));
    gpa = 64'h0000_0000_4000_0000 + (64'(p) << 28) + 64'((i * 7919) % 65536) * 4096 + 64'($urandom_range(0, 4095));
    evt.gva = gva; evt.gpa = gpa;
    @(negedge clk);
    forever begin
      // A full event raised by an earlier write holds the walker: take it.
      if (vmexit_req || ipi_req) begin
        evt_valid = 0;
        service();
        @(negedge clk);
      end else begin
        evt_valid = 1;
        if (evt_ready) break;
        @(negedge clk);
      end
    end
    @(posedge clk); #1;
    evt_valid = 0;
    exp_hyp.push_back(page_of(gpa));
    if (p < 2) exp_ring[p].push_back(page_of(gva));
    else n_parked++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cur = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Hypervisor enables PML for the VM (root mode).
    vmx(VMX_OP_WRITE, FLD_PML_ADDR, HYP_BUF, 0);
    vmx(VMX_OP_WRITE, FLD_PML_INDEX, 64'd511, 0);
    vmx(VMX_OP_WRITE, FLD_SEC_CTLS, 64'(1) << SEC_CTL_ENABLE_PML, 0);
    check("pml enabled", 64'(last.status), 64'(VMX_OK));

    // The guest may not touch the hypervisor's fields.
    vmx(VMX_OP_WRITE, FLD_PML_INDEX, 64'd512, 1);
    if (last.status == VMX_EXIT && last.exit_reason == EXIT_VMWRITE) n_trap++;
    check("guest blocked from PML Index", 64'(last.status), 64'(VMX_EXIT));
    vmwrite_exit_bm = 2'b10;   // hypervisor forbids Guest PML Index writes for a while
    vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);
    if (last.status == VMX_EXIT) n_trap++;
    check("bitmap trap", 64'(last.exit_reason), 64'(EXIT_VMWRITE));
    vmwrite_exit_bm = 2'b00;

    // Untracked activity first: hypervisor logs only (guest index parked).
    for (int i = 0; i < 40; i++) dirty(2, i);
    // Tracked A runs, then untracked U, then tracked B, then A again.
    sched_in(0, GBUF_A);
    for (int i = 0; i < N_A1; i++) dirty(0, i);
    sched_out();
    for (int i = 40; i < 40 + N_U; i++) dirty(2, i);
    sched_in(1, GBUF_B);
    for (int i = 0; i < N_B; i++) dirty(1, i);
    sched_out();
    sched_in(0, GBUF_A);
    for (int i = N_A1; i < N_A1 + N_A2; i++) dirty(0, i);
    sched_out();
    service();
    hyp_drain();

    // Compare the logs.
    check("hyp log length", hyp_log.size(), exp_hyp.size());
    foreach (exp_hyp[i]) if (i < hyp_log.size()) check("hyp entry", hyp_log[i], exp_hyp[i]);
    for (int p = 0; p < 2; p++) begin
      check("ring length", ring[p].size(), exp_ring[p].size());
      foreach (exp_ring[p][i]) if (i < ring[p].size()) check("ring entry", ring[p][i], exp_ring[p][i]);
    end

    $display("mechanisms: guest_full_ipi=%0d pml_full_vmexit=%0d translated_vmwrite=%0d trap=%0d walker_stall_cycles=%0d mem_backpressure=%0d parked_guest_events=%0d",
             n_guest_full, n_hyp_full, n_xlat, n_trap, n_stall, n_backpressure, n_parked);
    check("guest full happened", n_guest_full >= 2, 1);
    check("hyp full happened", n_hyp_full >= 2, 1);
    check("translations", n_xlat, 3);
    check("traps happened", n_trap, 2);
    check("stall happened", n_stall > 0, 1);
    check("backpressure happened", n_backpressure > 0, 1);
    check("parked happened", n_parked > 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
