// vmcs_pml_fields: the processor-side copy of the VMCS fields that PML and
// Extended PML use.
//
// Two levels of logging share this store. The ordinary VMCS, owned by the
// hypervisor, holds the enable-PML control bit, the PML Address (base of the
// hypervisor-level buffer, GPAs are logged there) and the PML Index. The
// shadow VMCS, which the guest reaches with vmread/vmwrite in non-root mode,
// holds the two fields EPML adds: Guest PML Address (base of the guest-level
// buffer, GVAs are logged there) and Guest PML Index.
//
// Interface: one write port (wr_en/wr_field/wr_data) from the vmread/vmwrite
// unit, one combinational read port (rd_field -> rd_data, rd_known), and one
// decrement strobe per index from the logger. The fields are also driven out
// directly to the logger.
//
// Timing: writes and decrements take effect at the next rising clock edge.
// A vmwrite to an index in the same cycle as a decrement of that index wins,
// because software resetting an index must not be undone by a log.
//
// Field widths and the start/off index values follow the PML description.
// Reset values (addresses 0, both indices parked at 512, PML disabled) and
// the write-over-decrement priority are this design's choices. Only bit 17
// (enable PML) of the secondary controls is kept; the other bits belong to
// parts of the processor outside this logic and read back as 0.
module vmcs_pml_fields
  import ooh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // write port
  input  logic        wr_en,
  input  logic [15:0] wr_field,
  input  addr_t       wr_data,
  // read port
  input  logic [15:0] rd_field,
  output addr_t       rd_data,
  output logic        rd_known,
  // index decrements from the logger
  input  logic        hyp_dec,
  input  logic        guest_dec,
  // field values
  output logic        pml_en,
  output addr_t       pml_addr,
  output pml_idx_t    pml_idx,
  output addr_t       guest_pml_addr,
  output pml_idx_t    guest_pml_idx
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pml_en         <= 1'b0;
      pml_addr       <= '0;
      pml_idx        <= PML_IDX_OFF;
      guest_pml_addr <= '0;
      guest_pml_idx  <= PML_IDX_OFF;
    end else begin
      if (wr_en && wr_field == FLD_SEC_CTLS)
        pml_en <= wr_data[SEC_CTL_ENABLE_PML];
      if (wr_en && wr_field == FLD_PML_ADDR)
        pml_addr <= wr_data;
      if (wr_en && wr_field == FLD_GUEST_PML_ADDR)
        guest_pml_addr <= wr_data;

      if (wr_en && wr_field == FLD_PML_INDEX)
        pml_idx <= wr_data[PML_IDX_W-1:0];
      else if (hyp_dec)
        pml_idx <= pml_idx - 1'b1;

      if (wr_en && wr_field == FLD_GUEST_PML_INDEX)
        guest_pml_idx <= wr_data[PML_IDX_W-1:0];
      else if (guest_dec)
        guest_pml_idx <= guest_pml_idx - 1'b1;
    end
  end

  always_comb begin
    rd_known = 1'b1;
    rd_data  = '0;
    case (rd_field)
      FLD_SEC_CTLS:        rd_data[SEC_CTL_ENABLE_PML] = pml_en;
      FLD_PML_ADDR:        rd_data = pml_addr;
      FLD_PML_INDEX:       rd_data = addr_t'(pml_idx);
      FLD_GUEST_PML_ADDR:  rd_data = guest_pml_addr;
      FLD_GUEST_PML_INDEX: rd_data = addr_t'(guest_pml_idx);
      default:             rd_known = 1'b0;
    endcase
  end

endmodule
