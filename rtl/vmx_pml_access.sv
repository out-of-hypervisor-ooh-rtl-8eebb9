// vmx_pml_access: executes vmread and vmwrite on the PML fields, in both VMX
// root mode (hypervisor) and VMX non-root mode (guest).
//
// In root mode every PML field is reachable. In non-root mode, VMCS shadowing
// lets the guest reach only the shadow-VMCS fields, and only those whose bit
// in the hypervisor's VMREAD/VMWRITE bitmaps is clear; any other access traps
// to the hypervisor (status VMX_EXIT with exit reason VMREAD or VMWRITE).
//
// The EPML change to the instruction set sits here: a non-root vmwrite to the
// Guest PML Address carries a guest physical address, which the unit first
// sends to the address-translation port (EPT or TLB, outside this logic).
// The host physical page that comes back, with the page offset of the
// original value, is what is written to the field, so the logger can store
// straight into host memory. A translation fault ends the vmwrite with an
// EPT-violation exit and leaves the field unchanged. Root-mode writes are
// taken as host physical addresses and stored as given.
//
// Interface: valid/ready request (vmx_req_t), valid/ready response
// (vmx_rsp_t), valid/ready translation request, translation response with
// fault flag, and the register-file ports of vmcs_pml_fields.
// vmread_exit_bm / vmwrite_exit_bm hold the bitmap bits of the two shadow
// fields: bit 0 Guest PML Address, bit 1 Guest PML Index; 1 means trap.
//
// Timing: a request is accepted when idle; its response is valid on the next
// cycle, or, for a translated vmwrite, the cycle after the translation
// response. One access is in flight at a time.
//
// The translation on vmwrite and the bitmap check follow the EPML
// description; the handshakes, the one-access-at-a-time structure and the
// exit on a translation fault are this design's choices.
module vmx_pml_access
  import ooh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // instruction request / response
  input  logic        req_valid,
  output logic        req_ready,
  input  vmx_req_t    req,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output vmx_rsp_t    rsp,
  // VMREAD/VMWRITE bitmap bits of the shadow fields
  input  logic [1:0]  vmread_exit_bm,
  input  logic [1:0]  vmwrite_exit_bm,
  // GPA -> HPA translation (EPT / TLB)
  output logic        xlat_req_valid,
  input  logic        xlat_req_ready,
  output addr_t       xlat_req_gpa,
  input  logic        xlat_rsp_valid,
  input  addr_t       xlat_rsp_hpa,
  input  logic        xlat_rsp_fault,
  // field store
  output logic        fld_wr_en,
  output logic [15:0] fld_wr_field,
  output addr_t       fld_wr_data,
  output logic [15:0] fld_rd_field,
  input  addr_t       fld_rd_data,
  input  logic        fld_rd_known
);

  typedef enum logic [1:0] {S_IDLE, S_XREQ, S_XWAIT, S_RESP} state_e;
  state_e   state;
  vmx_req_t held;

  // Decode of the incoming request.
  logic is_shadow, shadow_sel, trap, translate;
  always_comb begin
    is_shadow  = (req.field == FLD_GUEST_PML_ADDR) || (req.field == FLD_GUEST_PML_INDEX);
    shadow_sel = (req.field == FLD_GUEST_PML_INDEX);
    trap       = req.nonroot &&
                 (!is_shadow ||
                  (req.op == VMX_OP_READ  && vmread_exit_bm[shadow_sel]) ||
                  (req.op == VMX_OP_WRITE && vmwrite_exit_bm[shadow_sel]));
    translate  = req.nonroot && req.op == VMX_OP_WRITE && req.field == FLD_GUEST_PML_ADDR;
  end

  assign req_ready      = (state == S_IDLE);
  assign rsp_valid      = (state == S_RESP);
  assign xlat_req_valid = (state == S_XREQ);
  assign xlat_req_gpa   = held.wdata;
  assign fld_rd_field   = req.field;

  logic accept;
  assign accept = req_valid && req_ready;

  // Field writes: immediate ones on accept, translated ones on the response.
  always_comb begin
    fld_wr_en    = 1'b0;
    fld_wr_field = req.field;
    fld_wr_data  = req.wdata;
    if (state == S_IDLE) begin
      fld_wr_en = accept && fld_rd_known && !trap && !translate && req.op == VMX_OP_WRITE;
    end else if (state == S_XWAIT) begin
      fld_wr_field = held.field;
      fld_wr_data  = page_of(xlat_rsp_hpa) | (held.wdata & addr_t'((1 << PAGE_SHIFT) - 1));
      fld_wr_en    = xlat_rsp_valid && !xlat_rsp_fault;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      held  <= '0;
      rsp   <= '0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          held <= req;
          rsp  <= '0;
          if (!fld_rd_known) begin
            rsp.status <= VMX_BAD_FIELD;
            state      <= S_RESP;
          end else if (trap) begin
            rsp.status      <= VMX_EXIT;
            rsp.exit_reason <= (req.op == VMX_OP_READ) ? EXIT_VMREAD : EXIT_VMWRITE;
            state           <= S_RESP;
          end else if (translate) begin
            state <= S_XREQ;
          end else begin
            rsp.status <= VMX_OK;
            if (req.op == VMX_OP_READ) rsp.rdata <= fld_rd_data;
            state <= S_RESP;
          end
        end
        S_XREQ: if (xlat_req_ready) state <= S_XWAIT;
        S_XWAIT: if (xlat_rsp_valid) begin
          if (xlat_rsp_fault) begin
            rsp.status      <= VMX_EXIT;
            rsp.exit_reason <= EXIT_EPT_VIOLATION;
          end else begin
            rsp.status <= VMX_OK;
          end
          state <= S_RESP;
        end
        S_RESP: if (rsp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response, once offered, is held until taken.
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));

endmodule
