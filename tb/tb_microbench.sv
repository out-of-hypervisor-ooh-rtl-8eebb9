// tb_microbench: runs the dirty-page pattern of the evaluation
// micro-benchmark through the EPML logic at full size.
//
// The micro-benchmark allocates num_pg pinned 4 KB pages and writes one word
// into each page in turn; every first write to a page sets its dirty flag and
// is therefore one dirtying write for the logger. This testbench replays one
// pass of that loop for each memory size of the evaluation: 1 MB, 10 MB,
// 50 MB, 100 MB, 250 MB, 500 MB and 1 GB (256 to 262,144 pages). The
// hypervisor logs at the same time, as during a live migration.
//
// The guest kernel's role: schedule the tracked process in (translated
// vmwrite of its Guest PML Address, index 511), take each self-IPI by copying
// the 512 entries out and resetting the index, and drain the rest when the
// pass ends. The hypervisor drains its buffer on each PML-full VM exit.
// Checked per size: the guest saw every page's GVA exactly once and in order,
// the hypervisor every GPA in order, the number of self-IPIs and VM exits is
// pages / 512 (rounded down), and with memory always ready the logger costs
// 3 cycles per dirtied page (two stores and the accept).
`timescale 1ns/1ps
module tb_microbench;
  import ooh_pkg::*;

  localparam addr_t EPT_OFS = 64'h0000_0004_0000_0000;  // HPA = GPA + EPT_OFS
  localparam addr_t HYP_BUF = 64'h0000_0008_0000_0000;
  localparam addr_t GBUF    = 64'h0000_0000_0010_0000;  // guest buffer (GPA)
  localparam addr_t REGION  = 64'h0000_7F00_0000_0000;  // malloc'd region (GVA)
  localparam int    N_SIZES = 7;
  localparam int    SIZE_MB [N_SIZES] = '{1, 10, 50, 100, 250, 500, 1024};

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

  // Memory: only the two 4 KB buffers are ever written.
  addr_t mem [addr_t];
  longint cyc = 0, n_stores = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && mem_wr_valid && mem_wr_ready) begin
      mem[mem_wr.hpa] = mem_wr.data;
      n_stores++;
    end
  end

  // EPT/TLB responder.
  initial begin
    forever begin
      @(posedge clk);
      if (xlat_req_valid && xlat_req_ready) begin
        addr_t g;
        g = xlat_req_gpa;
        @(negedge clk);
        xlat_rsp_valid = 1; xlat_rsp_hpa = g + EPT_OFS;
        @(negedge clk);
        xlat_rsp_valid = 0;
      end
    end
  end

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

  // Page i of the region: its GVA, and the guest frame it is pinned to.
  function automatic addr_t gva_of(int i);
    return REGION + 64'(i) * 4096;
  endfunction
  function automatic addr_t gpa_of(int i);
    return 64'h0000_0000_4000_0000 + 64'((i * 40503) % 262144) * 4096;
  endfunction

  int    g_seen, h_seen, n_ipi, n_exit;
  addr_t gbuf_hpa;

  task automatic guest_drain();
    int idx;
    while (mem_wr_valid) begin @(posedge clk); #1; end
    vmx(VMX_OP_READ, FLD_GUEST_PML_INDEX, 0, 1);
    idx = (last.rdata[15:0] >= 16'd512) ? -1 : int'(last.rdata[15:0]);
    if (last.rdata[15:0] == 16'd512) idx = 511;
    for (int e = 511; e > idx; e--) begin
      check("guest entry", mem[gbuf_hpa + 64'(e) * 8], gva_of(g_seen));
      g_seen++;
    end
  endtask

  task automatic hyp_drain();
    int idx;
    while (mem_wr_valid) begin @(posedge clk); #1; end
    vmx(VMX_OP_READ, FLD_PML_INDEX, 0, 0);
    idx = (last.rdata[15:0] >= 16'd512) ? -1 : int'(last.rdata[15:0]);
    for (int e = 511; e > idx; e--) begin
      check("hyp entry", mem[HYP_BUF + 64'(e) * 8], gpa_of(h_seen));
      h_seen++;
    end
    vmx(VMX_OP_WRITE, FLD_PML_INDEX, 64'd511, 0);
  endtask

  longint handler_cycles;
  task automatic service();
    longint c0;
    c0 = cyc;
    if (vmexit_req) begin
      n_exit++;
      hyp_drain();
      @(negedge clk); vmexit_ack = 1; @(negedge clk); vmexit_ack = 0;
    end
    if (ipi_req) begin
      n_ipi++;
      guest_drain();
      vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);
      @(negedge clk); ipi_ack = 1; @(negedge clk); ipi_ack = 0;
    end
    handler_cycles += cyc - c0;
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    vmx(VMX_OP_WRITE, FLD_PML_ADDR, HYP_BUF, 0);
    vmx(VMX_OP_WRITE, FLD_SEC_CTLS, 64'(1) << SEC_CTL_ENABLE_PML, 0);

    for (int s = 0; s < N_SIZES; s++) begin
      int     pages;
      longint c_start, c_loop, st0;
      pages = SIZE_MB[s] * 256;
      g_seen = 0; h_seen = 0; n_ipi = 0; n_exit = 0; handler_cycles = 0;
      vmx(VMX_OP_WRITE, FLD_PML_INDEX, 64'd511, 0);
      // Tracker registers the process; the kernel schedules it in.
      vmx(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, GBUF, 1);
      vmx(VMX_OP_READ, FLD_GUEST_PML_ADDR, 0, 1);
      gbuf_hpa = last.rdata;
      check("buffer address translated", gbuf_hpa, GBUF + EPT_OFS);
      vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);

      st0 = n_stores;
      c_start = cyc;
      for (int i = 0; i < pages; i++) begin
        evt.gva = gva_of(i) + 64'(i % 512) * 8;  // region[(i*PAGE_SIZE)/8] = i
        evt.gpa = gpa_of(i);
        @(negedge clk);
        forever begin
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
      end
      while (mem_wr_valid || vmexit_req || ipi_req) begin
        if (vmexit_req || ipi_req) service();
        else begin @(posedge clk); #1; end
      end
      c_loop = cyc - c_start - handler_cycles;

      // Schedule out, then collect what is left.
      guest_drain();
      vmx(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd512, 1);
      hyp_drain();

      check("guest pages", g_seen, pages);
      check("hyp pages", h_seen, pages);
      check("self-IPIs", n_ipi, pages / 512);
      check("vm exits", n_exit, pages / 512);
      check("stores", n_stores - st0, 2 * pages);
      check("3 cycles per page", (c_loop >= 3 * pages - 2) && (c_loop <= 3 * pages + 8 * (pages / 512) + 8), 1);
      $display("size %0d MB: %0d pages, %0d self-IPIs, %0d VM exits, %0d logger cycles",
               SIZE_MB[s], pages, n_ipi, n_exit, c_loop);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
