// ooh_pkg: constants and types shared by the Extended PML (EPML) logic.
//
// Page Modification Logging (PML) lets the processor write the address of
// every page whose dirty flag it sets into a 4 KB buffer of 512 64-bit
// entries. A 16-bit index names the next free entry; it counts down from 511.
// EPML adds a second, guest-owned buffer that receives guest virtual
// addresses next to the hypervisor's buffer of guest physical addresses.
//
// Geometry (512 entries, 16-bit index, 64-bit address, start 511, "off"
// value 512) follows the description of PML and EPML. The VMCS field
// encodings of the two existing fields and the basic exit reasons are those
// of the Intel VMX architecture; the encodings of the two new EPML fields and
// the status codes of the access unit are this design's own choice.
package ooh_pkg;

  localparam int unsigned ADDR_W        = 64;   // PML Address field width
  localparam int unsigned PML_IDX_W     = 16;   // PML Index field width
  localparam int unsigned PML_ENTRIES   = 512;  // 4 KB / 8 B
  localparam int unsigned PAGE_SHIFT    = 12;   // 4 KB pages
  localparam int unsigned ENTRY_SHIFT   = 3;    // 8-byte log entries

  // Index value that parks a buffer: no logging, no full event.
  localparam logic [PML_IDX_W-1:0] PML_IDX_OFF = PML_IDX_W'(PML_ENTRIES);

  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [PML_IDX_W-1:0] pml_idx_t;

  // VMCS field encodings handled by the EPML logic.
  typedef enum logic [15:0] {
    FLD_PML_ADDR        = 16'h200E,  // existing: PML Address (64-bit control)
    FLD_PML_INDEX       = 16'h0812,  // existing: PML Index (16-bit guest state)
    FLD_SEC_CTLS        = 16'h401E,  // existing: secondary controls, bit 17 = enable PML
    FLD_GUEST_PML_ADDR  = 16'h2040,  // new: Guest PML Address (shadow VMCS)
    FLD_GUEST_PML_INDEX = 16'h0814   // new: Guest PML Index (shadow VMCS)
  } vmcs_field_e;

  localparam int unsigned SEC_CTL_ENABLE_PML = 17;

  // Basic exit reasons used here (Intel numbering).
  localparam logic [15:0] EXIT_VMREAD        = 16'd23;
  localparam logic [15:0] EXIT_VMWRITE       = 16'd25;
  localparam logic [15:0] EXIT_EPT_VIOLATION = 16'd48;
  localparam logic [15:0] EXIT_PML_FULL      = 16'd62;

  typedef enum logic [1:0] {
    VMX_OP_READ  = 2'd0,
    VMX_OP_WRITE = 2'd1
  } vmx_op_e;

  // Outcome of one vmread/vmwrite.
  typedef enum logic [1:0] {
    VMX_OK        = 2'd0,  // done
    VMX_EXIT      = 2'd1,  // access traps to the hypervisor, see exit_reason
    VMX_BAD_FIELD = 2'd2   // field not handled here (VMfailValid)
  } vmx_status_e;

  typedef struct packed {
    vmx_op_e     op;
    logic [15:0] field;
    addr_t       wdata;
    logic        nonroot;   // issued in VMX non-root mode (by the guest)
  } vmx_req_t;

  typedef struct packed {
    vmx_status_e status;
    addr_t       rdata;
    logic [15:0] exit_reason;
  } vmx_rsp_t;

  // One write instruction whose page walk set a dirty flag.
  typedef struct packed {
    addr_t gva;   // guest virtual address of the write
    addr_t gpa;   // guest physical address of the write
  } dirty_evt_t;

  // One 64-bit store into a PML buffer in host memory.
  typedef struct packed {
    addr_t hpa;    // host physical address of the log entry
    addr_t data;   // logged page address
    logic  guest;  // 1: guest-level buffer, 0: hypervisor-level buffer
  } log_wr_t;

  // Host physical address of entry idx of the buffer at base.
  function automatic addr_t pml_entry_addr(addr_t base, pml_idx_t idx);
    addr_t page;
    page = {base[ADDR_W-1:PAGE_SHIFT], {PAGE_SHIFT{1'b0}}};
    return page | (addr_t'(idx[8:0]) << ENTRY_SHIFT);
  endfunction

  // Page-aligned form of an address, as PML logs it.
  function automatic addr_t page_of(addr_t a);
    return {a[ADDR_W-1:PAGE_SHIFT], {PAGE_SHIFT{1'b0}}};
  endfunction

endpackage
