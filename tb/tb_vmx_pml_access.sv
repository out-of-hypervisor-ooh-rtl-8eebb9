// tb_vmx_pml_access: self-checking test of the vmread/vmwrite unit.
// The field store is a reference model kept in the testbench; the EPT/TLB is
// a responder that maps a GPA to GPA + 4 GiB after XLAT_LAT cycles and faults
// any GPA with bit 47 set. Covered: root-mode writes/reads, non-root access
// to shadow fields, bitmap traps for read and write, non-root access to an
// ordinary-VMCS field, the translated vmwrite of the Guest PML Address (value,
// one translation per write, none in root mode), a translation fault, an
// unknown field, response latency and response hold under back-pressure.
`timescale 1ns/1ps
module tb_vmx_pml_access;
  import ooh_pkg::*;

  localparam int XLAT_LAT = 3;
  localparam addr_t XLAT_OFS = 64'h0000_0001_0000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  vmx_req_t    req = '0;
  vmx_rsp_t    rsp;
  logic [1:0]  vmread_exit_bm = 0, vmwrite_exit_bm = 0;
  logic        xlat_req_valid, xlat_req_ready = 1, xlat_rsp_valid = 0, xlat_rsp_fault = 0;
  addr_t       xlat_req_gpa, xlat_rsp_hpa = 0;
  logic        fld_wr_en, fld_rd_known;
  logic [15:0] fld_wr_field, fld_rd_field;
  addr_t       fld_wr_data, fld_rd_data;

  vmx_pml_access dut (.*);

  // Reference field store.
  addr_t store [5];
  function automatic int slot(input logic [15:0] f);
    case (f)
      FLD_PML_ADDR:        return 0;
      FLD_PML_INDEX:       return 1;
      FLD_SEC_CTLS:        return 2;
      FLD_GUEST_PML_ADDR:  return 3;
      FLD_GUEST_PML_INDEX: return 4;
      default:             return -1;
    endcase
  endfunction
  always_comb begin
    fld_rd_known = slot(fld_rd_field) >= 0;
    fld_rd_data  = fld_rd_known ? store[slot(fld_rd_field)] : 64'hDEAD;
  end
  always_ff @(posedge clk) if (fld_wr_en && slot(fld_wr_field) >= 0) store[slot(fld_wr_field)] <= fld_wr_data;

  // Translation responder.
  int xlat_count = 0;
  initial begin
    forever begin
      @(posedge clk);
      if (xlat_req_valid && xlat_req_ready) begin
        addr_t g;
        g = xlat_req_gpa;
        xlat_count++;
        repeat (XLAT_LAT - 1) @(posedge clk);
        @(negedge clk);
        xlat_rsp_valid = 1;
        xlat_rsp_fault = g[47];
        xlat_rsp_hpa   = g + XLAT_OFS;
        @(negedge clk);
        xlat_rsp_valid = 0;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  vmx_rsp_t last;
  int       lat;
  task automatic access(input vmx_op_e op, input logic [15:0] f, input addr_t d, input logic nr);
    @(negedge clk);
    req_valid = 1; req.op = op; req.field = f; req.wdata = d; req.nonroot = nr;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1;
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(posedge clk); #1; lat++; end
    last = rsp;
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (store[i]) store[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Root mode: hypervisor sets up PML.
    access(VMX_OP_WRITE, FLD_PML_ADDR, 64'h0000_0002_0000_0000, 0);
    check("root wr status", 64'(last.status), 64'(VMX_OK));
    check("root wr latency", lat, 1);
    check("root wr stored", store[0], 64'h0000_0002_0000_0000);
    access(VMX_OP_WRITE, FLD_PML_INDEX, 64'd511, 0);
    access(VMX_OP_READ, FLD_PML_INDEX, 0, 0);
    check("root rd status", 64'(last.status), 64'(VMX_OK));
    check("root rd data", last.rdata, 64'd511);
    check("root rd latency", lat, 1);

    // Root write of the guest buffer address is not translated.
    access(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, 64'h0000_0000_7000_0000, 0);
    check("root guest addr untranslated", store[3], 64'h0000_0000_7000_0000);
    check("no xlat in root", xlat_count, 0);

    // Guest (non-root) access to the shadow fields.
    access(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd511, 1);
    check("nr wr idx status", 64'(last.status), 64'(VMX_OK));
    check("nr wr idx stored", store[4], 64'd511);
    access(VMX_OP_READ, FLD_GUEST_PML_INDEX, 0, 1);
    check("nr rd idx", last.rdata, 64'd511);

    // Translated vmwrite of the Guest PML Address.
    access(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, 64'h0000_0000_0012_3000, 1);
    check("nr wr addr status", 64'(last.status), 64'(VMX_OK));
    check("nr wr addr translated", store[3], 64'h0000_0001_0012_3000);
    check("one translation", xlat_count, 1);
    check("translated latency", lat >= XLAT_LAT + 2, 1);
    access(VMX_OP_READ, FLD_GUEST_PML_ADDR, 0, 1);
    check("nr rd addr shows HPA", last.rdata, 64'h0000_0001_0012_3000);

    // Translation fault: EPT-violation exit, field unchanged.
    access(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, 64'h0000_8000_0000_0000, 1);
    check("fault status", 64'(last.status), 64'(VMX_EXIT));
    check("fault reason", 64'(last.exit_reason), 64'(EXIT_EPT_VIOLATION));
    check("fault unchanged", store[3], 64'h0000_0001_0012_3000);
    check("two translations", xlat_count, 2);

    // Bitmap traps.
    vmwrite_exit_bm = 2'b10;
    access(VMX_OP_WRITE, FLD_GUEST_PML_INDEX, 64'd512, 1);
    check("bm wr trap status", 64'(last.status), 64'(VMX_EXIT));
    check("bm wr trap reason", 64'(last.exit_reason), 64'(EXIT_VMWRITE));
    check("bm wr trap unchanged", store[4], 64'd511);
    vmwrite_exit_bm = 2'b01;
    access(VMX_OP_WRITE, FLD_GUEST_PML_ADDR, 64'h1000, 1);
    check("bm addr trap no xlat", xlat_count, 2);
    check("bm addr trap", 64'(last.status), 64'(VMX_EXIT));
    vmwrite_exit_bm = 2'b00;
    vmread_exit_bm  = 2'b10;
    access(VMX_OP_READ, FLD_GUEST_PML_INDEX, 0, 1);
    check("bm rd trap reason", 64'(last.exit_reason), 64'(EXIT_VMREAD));
    vmread_exit_bm  = 2'b00;

    // Guest may not reach ordinary-VMCS fields.
    access(VMX_OP_READ, FLD_PML_ADDR, 0, 1);
    check("nr ordinary rd trap", 64'(last.status), 64'(VMX_EXIT));
    access(VMX_OP_WRITE, FLD_PML_INDEX, 64'd3, 1);
    check("nr ordinary wr trap", 64'(last.exit_reason), 64'(EXIT_VMWRITE));
    check("nr ordinary wr unchanged", store[1], 64'd511);

    // Unknown field.
    access(VMX_OP_READ, 16'h6C00, 0, 0);
    check("unknown field", 64'(last.status), 64'(VMX_BAD_FIELD));

    // Back-pressure on the response.
    rsp_ready = 0;
    @(negedge clk);
    req_valid = 1; req.op = VMX_OP_READ; req.field = FLD_GUEST_PML_ADDR; req.nonroot = 0;
    @(negedge clk); req_valid = 0;
    repeat (4) @(negedge clk);
    check("rsp held valid", 64'(rsp_valid), 1);
    check("rsp held data", rsp.rdata, 64'h0000_0001_0012_3000);
    check("busy while held", 64'(req_ready), 0);
    rsp_ready = 1;
    @(negedge clk);
    check("idle after take", 64'(req_ready), 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
