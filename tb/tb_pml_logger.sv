// tb_pml_logger: self-checking test of the two-level logger.
// The testbench holds the PML fields itself (a reference register model that
// applies the logger's decrement strobes) and a memory sink that records
// every store. For each dirty event it works out, from the fields at the
// moment of acceptance, which stores must follow (GPA page to
// PML Address + 8*PML Index, GVA page to Guest PML Address + 8*Guest PML
// Index) and compares them with what the sink saw. Covered: both buffers,
// guest only, hypervisor only, neither (index 512, index 0xFFFF after full,
// PML disabled), full pulses at entry 0, the hold input, random memory
// back-pressure, and the cycle cost of an event (3, 2 and 1 cycles for two,
// one and no stores with memory always ready).
`timescale 1ns/1ps
module tb_pml_logger;
  import ooh_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       evt_valid = 0, evt_ready;
  dirty_evt_t evt = '0;
  logic       pml_en = 0;
  addr_t      pml_addr = 0, guest_pml_addr = 0;
  pml_idx_t   pml_idx = 16'd512, guest_pml_idx = 16'd512;
  logic       hyp_dec, guest_dec;
  logic       mem_wr_valid, mem_wr_ready = 1;
  log_wr_t    mem_wr;
  logic       hold = 0, hyp_full, guest_full;

  pml_logger dut (.*);

  // Reference fields follow the decrement strobes.
  always_ff @(posedge clk) begin
    if (hyp_dec)   pml_idx       <= pml_idx - 1'b1;
    if (guest_dec) guest_pml_idx <= guest_pml_idx - 1'b1;
  end

  // Memory sink with optional random back-pressure.
  bit      random_ready = 0;
  log_wr_t seen [$];
  int      hyp_full_n = 0, guest_full_n = 0;
  always @(negedge clk) mem_wr_ready = random_ready ? 1'($urandom_range(0, 1)) : 1'b1;
  always @(posedge clk) begin
    if (rst_n && mem_wr_valid && mem_wr_ready) seen.push_back(mem_wr);
    if (rst_n && hyp_full)   hyp_full_n++;
    if (rst_n && guest_full) guest_full_n++;
  end

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Send one event, compare its stores with the expected ones.
  int accept_cycle, cyc = 0;
  always @(posedge clk) cyc++;
  task automatic log_one(input addr_t gva, input addr_t gpa);
    log_wr_t exp [$];
    if (pml_en && pml_idx < 512)
      exp.push_back('{hpa: {pml_addr[63:12], 12'h0} + 64'(pml_idx) * 8, data: {gpa[63:12], 12'h0}, guest: 1'b0});
    if (guest_pml_idx < 512)
      exp.push_back('{hpa: {guest_pml_addr[63:12], 12'h0} + 64'(guest_pml_idx) * 8, data: {gva[63:12], 12'h0}, guest: 1'b1});
    @(negedge clk);
    evt_valid = 1; evt.gva = gva; evt.gpa = gpa;
    while (!evt_ready) @(negedge clk);
    @(posedge clk); accept_cycle = cyc; #1;
    evt_valid = 0;
    while (!evt_ready) begin @(posedge clk); #1; end
    check("store count", seen.size(), exp.size());
    foreach (exp[i]) if (i < seen.size()) begin
      check("store hpa",   seen[i].hpa,   exp[i].hpa);
      check("store data",  seen[i].data,  exp[i].data);
      check("store guest", 64'(seen[i].guest), 64'(exp[i].guest));
    end
    seen.delete();
    @(posedge clk); #1;  // full pulses are registered: let the counters see them
  endtask

  // Cycles between two back-to-back accepts, memory always ready.
  task automatic measure(output int cycles);
    int c0;
    @(negedge clk);
    evt_valid = 1; evt.gva = 64'h4000; evt.gpa = 64'h8000;
    while (!evt_ready) @(negedge clk);
    @(posedge clk); c0 = cyc; #1;
    while (!evt_ready) begin @(posedge clk); #1; end
    @(posedge clk); cycles = cyc - c0; #1;
    evt_valid = 0;
    @(negedge clk);
    while (!evt_ready) @(negedge clk);
    seen.delete();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Both buffers; guest buffer has 4 free entries left.
    pml_en = 1; pml_addr = 64'h0000_0002_0000_0000; pml_idx = 511;
    guest_pml_addr = 64'h0000_0001_0055_5000; guest_pml_idx = 3;
    for (int i = 0; i < 4; i++) log_one(64'h7FFF_0000_1000 + 64'(i) * 4096 + 64'h123, 64'h0030_0000 + 64'(i) * 4096);
    check("pml_idx after 4", 64'(pml_idx), 64'd507);
    check("guest idx wrapped", 64'(guest_pml_idx), 64'hFFFF);
    check("one guest full", guest_full_n, 1);
    check("no hyp full", hyp_full_n, 0);

    // Hold: no event accepted.
    hold = 1;
    @(negedge clk); evt_valid = 1;
    repeat (5) @(negedge clk);
    check("held not ready", 64'(evt_ready), 0);
    check("held no stores", seen.size(), 0);
    evt_valid = 0; hold = 0;

    // Guest buffer full (0xFFFF): only the hypervisor logs.
    log_one(64'h5000, 64'h6000);
    check("guest idx stays", 64'(guest_pml_idx), 64'hFFFF);
    // Guest parked at 512: same.
    guest_pml_idx = 512;
    log_one(64'h5000, 64'h7000);
    check("guest idx parked", 64'(guest_pml_idx), 64'd512);

    // PML disabled for the hypervisor: guest only.
    pml_en = 0; guest_pml_idx = 511;
    log_one(64'hABCD_E000, 64'h9000);
    check("hyp idx unchanged when off", 64'(pml_idx), 64'd505);
    check("guest idx dec", 64'(guest_pml_idx), 64'd510);

    // Throughput with memory always ready.
    pml_en = 1; guest_pml_idx = 511;
    measure(c); check("two stores: 3 cycles", c, 3);
    guest_pml_idx = 512;
    measure(c); check("one store: 2 cycles", c, 2);
    pml_en = 0;
    measure(c); check("no store: 1 cycle", c, 1);

    // Hypervisor buffer fills under random back-pressure.
    random_ready = 1;
    pml_en = 1; pml_idx = 2; guest_pml_idx = 100;
    for (int i = 0; i < 4; i++) log_one(64'(i) << 12, 64'(i + 16) << 12);
    check("one hyp full", hyp_full_n, 1);
    check("hyp idx after full", 64'(pml_idx), 64'hFFFF);
    check("guest idx 96", 64'(guest_pml_idx), 64'd96);
    check("guest full count", guest_full_n, 1);
    random_ready = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
