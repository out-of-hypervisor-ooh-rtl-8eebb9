// tb_pml_full_events: self-checking test of the buffer-full event unit.
// A full hypervisor buffer must raise a VM-exit request with reason 62 one
// cycle after the pulse and keep it until acknowledged; a full guest buffer
// must raise a self-IPI request carrying the vector present at the pulse,
// unaffected by later vector changes, until acknowledged. hold must be high
// exactly while either request is pending, including both at once.
`timescale 1ns/1ps
module tb_pml_full_events;
  import ooh_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        hyp_full = 0, guest_full = 0, vmexit_ack = 0, ipi_ack = 0;
  logic [7:0]  ipi_vector = 8'hEC, ipi_vec;
  logic        vmexit_req, ipi_req, hold;
  logic [15:0] vmexit_reason;

  pml_full_events dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle exit", 64'(vmexit_req), 0);
    check("idle ipi", 64'(ipi_req), 0);
    check("idle hold", 64'(hold), 0);

    // Hypervisor buffer full.
    hyp_full = 1; @(negedge clk); hyp_full = 0;
    check("exit raised", 64'(vmexit_req), 1);
    check("exit reason", 64'(vmexit_reason), 64'd62);
    check("hold on exit", 64'(hold), 1);
    repeat (3) @(negedge clk);
    check("exit held", 64'(vmexit_req), 1);
    vmexit_ack = 1; @(negedge clk); vmexit_ack = 0;
    check("exit cleared", 64'(vmexit_req), 0);
    check("hold cleared", 64'(hold), 0);

    // Guest buffer full.
    guest_full = 1; @(negedge clk); guest_full = 0;
    ipi_vector = 8'h31;
    check("ipi raised", 64'(ipi_req), 1);
    check("ipi vector", 64'(ipi_vec), 64'hEC);
    check("no exit for guest", 64'(vmexit_req), 0);
    check("hold on ipi", 64'(hold), 1);
    repeat (2) @(negedge clk);
    check("ipi vector kept", 64'(ipi_vec), 64'hEC);

    // Both at once; acknowledges separate.
    hyp_full = 1; @(negedge clk); hyp_full = 0;
    check("both pending", 64'({vmexit_req, ipi_req}), 64'b11);
    ipi_ack = 1; @(negedge clk); ipi_ack = 0;
    check("ipi cleared", 64'(ipi_req), 0);
    check("hold while exit", 64'(hold), 1);
    vmexit_ack = 1; @(negedge clk); vmexit_ack = 0;
    check("all cleared", 64'(hold), 0);

    // New vector on the next full.
    guest_full = 1; @(negedge clk); guest_full = 0;
    check("new vector", 64'(ipi_vec), 64'h31);
    ipi_ack = 1; @(negedge clk); ipi_ack = 0;
    check("final clear", 64'(ipi_req), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
