// epml_unit: Extended Page Modification Logging for one logical processor.
//
// Plain PML logs, for the hypervisor only, the guest physical page of every
// write that sets an EPT dirty flag. EPML lets a guest kernel track the pages
// one of its processes dirties without any hypervisor involvement:
//   - a second, guest-level PML buffer with its own address and index lives
//     in the shadow VMCS, which the guest reads and writes with vmread and
//     vmwrite in non-root mode (vmx_pml_access, vmcs_pml_fields);
//   - a guest vmwrite of the guest buffer address is translated from guest
//     physical to host physical on the way in (translation port);
//   - each dirtying write is logged twice, its GPA page to the hypervisor
//     buffer and its GVA page to the guest buffer (pml_logger);
//   - a full hypervisor buffer causes a VM exit, a full guest buffer a
//     virtual self-IPI to the guest (pml_full_events).
// The guest parks its buffer by writing 512 to the Guest PML Index when the
// tracked process is scheduled out, and points the Guest PML Address at that
// process's buffer and writes 511 when it is scheduled in.
//
// Parts of the processor this logic plugs into and does not contain are
// reached through ports: the page walker that reports dirtying writes
// (evt_*), the EPT/TLB translation (xlat_*), the memory system that takes
// log stores (mem_wr_*), the VMREAD/VMWRITE bitmap bits of the two shadow
// fields, the VM-exit logic (vmexit_*) and posted-interrupt delivery (ipi_*).
// All handshakes are valid/ready; timing is given in each submodule.
module epml_unit
  import ooh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // vmread / vmwrite on PML fields
  input  logic        vmx_req_valid,
  output logic        vmx_req_ready,
  input  vmx_req_t    vmx_req,
  output logic        vmx_rsp_valid,
  input  logic        vmx_rsp_ready,
  output vmx_rsp_t    vmx_rsp,
  input  logic [1:0]  vmread_exit_bm,
  input  logic [1:0]  vmwrite_exit_bm,
  // GPA -> HPA translation for the Guest PML Address
  output logic        xlat_req_valid,
  input  logic        xlat_req_ready,
  output addr_t       xlat_req_gpa,
  input  logic        xlat_rsp_valid,
  input  addr_t       xlat_rsp_hpa,
  input  logic        xlat_rsp_fault,
  // dirtying writes from the page walker
  input  logic        evt_valid,
  output logic        evt_ready,
  input  dirty_evt_t  evt,
  // log stores to host memory
  output logic        mem_wr_valid,
  input  logic        mem_wr_ready,
  output log_wr_t     mem_wr,
  // buffer-full events
  input  logic [7:0]  ipi_vector,
  output logic        vmexit_req,
  output logic [15:0] vmexit_reason,
  input  logic        vmexit_ack,
  output logic        ipi_req,
  output logic [7:0]  ipi_vec,
  input  logic        ipi_ack
);

  logic        fld_wr_en, fld_rd_known;
  logic [15:0] fld_wr_field, fld_rd_field;
  addr_t       fld_wr_data, fld_rd_data;
  logic        hyp_dec, guest_dec;
  logic        pml_en;
  addr_t       pml_addr, guest_pml_addr;
  pml_idx_t    pml_idx, guest_pml_idx;
  logic        hyp_full, guest_full, hold;

  vmx_pml_access u_access (
    .clk, .rst_n,
    .req_valid (vmx_req_valid), .req_ready (vmx_req_ready), .req (vmx_req),
    .rsp_valid (vmx_rsp_valid), .rsp_ready (vmx_rsp_ready), .rsp (vmx_rsp),
    .vmread_exit_bm, .vmwrite_exit_bm,
    .xlat_req_valid, .xlat_req_ready, .xlat_req_gpa,
    .xlat_rsp_valid, .xlat_rsp_hpa, .xlat_rsp_fault,
    .fld_wr_en, .fld_wr_field, .fld_wr_data,
    .fld_rd_field, .fld_rd_data, .fld_rd_known
  );

  vmcs_pml_fields u_fields (
    .clk, .rst_n,
    .wr_en (fld_wr_en), .wr_field (fld_wr_field), .wr_data (fld_wr_data),
    .rd_field (fld_rd_field), .rd_data (fld_rd_data), .rd_known (fld_rd_known),
    .hyp_dec, .guest_dec,
    .pml_en, .pml_addr, .pml_idx, .guest_pml_addr, .guest_pml_idx
  );

  pml_logger u_logger (
    .clk, .rst_n,
    .evt_valid, .evt_ready, .evt,
    .pml_en, .pml_addr, .pml_idx, .guest_pml_addr, .guest_pml_idx,
    .hyp_dec, .guest_dec,
    .mem_wr_valid, .mem_wr_ready, .mem_wr,
    .hold, .hyp_full, .guest_full
  );

  pml_full_events u_events (
    .clk, .rst_n,
    .hyp_full, .guest_full, .ipi_vector,
    .vmexit_req, .vmexit_reason, .vmexit_ack,
    .ipi_req, .ipi_vec, .ipi_ack,
    .hold
  );

endmodule
