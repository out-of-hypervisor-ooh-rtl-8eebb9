// tb_vmcs_pml_fields: self-checking test of the PML field store.
// Checks reset values (indices parked at 512, PML off), writes and read-back
// of every field through both ports, index decrements down through 0 to the
// wrap value 0xFFFF, the vmwrite-over-decrement priority, and that an unknown
// encoding reads as unknown. Expected values come from a reference model of
// the registers kept in the testbench.
`timescale 1ns/1ps
module tb_vmcs_pml_fields;
  import ooh_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        wr_en = 0, hyp_dec = 0, guest_dec = 0;
  logic [15:0] wr_field = 0, rd_field = 0;
  addr_t       wr_data = 0, rd_data;
  logic        rd_known, pml_en;
  addr_t       pml_addr, guest_pml_addr;
  pml_idx_t    pml_idx, guest_pml_idx;

  vmcs_pml_fields dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic vmwrite(input logic [15:0] f, input addr_t d);
    @(negedge clk); wr_en = 1; wr_field = f; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  // Combinational read port: check the value shown for field f.
  task automatic check_rd(input string what, input logic [15:0] f, input logic [63:0] exp);
    rd_field = f; #1;
    check(what, rd_data, exp);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset pml_idx", 64'(pml_idx), 64'd512);
    check("reset guest_idx", 64'(guest_pml_idx), 64'd512);
    check("reset pml_en", 64'(pml_en), 0);

    vmwrite(FLD_PML_ADDR, 64'h0000_0001_2345_6000);
    vmwrite(FLD_GUEST_PML_ADDR, 64'h0000_0000_9ABC_D000);
    vmwrite(FLD_PML_INDEX, 64'd511);
    vmwrite(FLD_GUEST_PML_INDEX, 64'd511);
    vmwrite(FLD_SEC_CTLS, 64'h0002_0000);
    check("pml_addr", pml_addr, 64'h0000_0001_2345_6000);
    check("guest_pml_addr", guest_pml_addr, 64'h0000_0000_9ABC_D000);
    check("pml_en", 64'(pml_en), 1);
    check_rd("rd pml_addr", FLD_PML_ADDR, 64'h0000_0001_2345_6000);
    check_rd("rd guest_addr", FLD_GUEST_PML_ADDR, 64'h0000_0000_9ABC_D000);
    check_rd("rd pml_idx", FLD_PML_INDEX, 64'd511);
    check_rd("rd guest_idx", FLD_GUEST_PML_INDEX, 64'd511);
    check_rd("rd sec ctls", FLD_SEC_CTLS, 64'h0002_0000);
    check("rd known", 64'(rd_known), 1);
    rd_field = 16'h6C00; #1;
    check("unknown field", 64'(rd_known), 0);

    // Decrement each index independently.
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); hyp_dec = 1; guest_dec = (i < 2);
    end
    @(negedge clk); hyp_dec = 0; guest_dec = 0;
    check("pml_idx after 5 dec", 64'(pml_idx), 64'd506);
    check("guest_idx after 2 dec", 64'(guest_pml_idx), 64'd509);

    // Down to zero and past it.
    vmwrite(FLD_GUEST_PML_INDEX, 64'd1);
    @(negedge clk); guest_dec = 1;
    @(negedge clk); guest_dec = 1;
    @(negedge clk); guest_dec = 0;
    check("guest_idx wraps", 64'(guest_pml_idx), 64'hFFFF);

    // vmwrite wins over a decrement in the same cycle.
    @(negedge clk); wr_en = 1; wr_field = FLD_PML_INDEX; wr_data = 64'd511; hyp_dec = 1;
    @(negedge clk); wr_en = 0; hyp_dec = 0;
    check("write beats dec", 64'(pml_idx), 64'd511);

    // Park and disable.
    vmwrite(FLD_GUEST_PML_INDEX, 64'd512);
    vmwrite(FLD_SEC_CTLS, 64'h0);
    check("guest parked", 64'(guest_pml_idx), 64'd512);
    check("pml disabled", 64'(pml_en), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
