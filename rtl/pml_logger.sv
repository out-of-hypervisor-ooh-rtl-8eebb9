// pml_logger: the two-level page-modification logger of Extended PML.
//
// For every write whose page walk set a dirty flag, the page walker hands
// over one event carrying the guest virtual and guest physical address of
// the write. The logger stores:
//   - the page of the GPA into the hypervisor-level buffer (PML Address),
//     when PML is enabled and the PML Index is in 0..511;
//   - the page of the GVA into the guest-level buffer (Guest PML Address),
//     when the Guest PML Index is in 0..511.
// Each store goes to base + 8 * index, after which that index is decremented.
// An index outside 0..511 parks its buffer: 512 is what software writes to
// stop logging, and 0xFFFF is what an index becomes after entry 0 is used.
// When entry 0 of a buffer has been stored, the buffer is full and the
// logger pulses hyp_full or guest_full, in the cycle of that store's
// handshake.
//
// Interface: valid/ready dirty-event input (dirty_evt_t), valid/ready memory
// write output (log_wr_t, one 64-bit store), field values and decrement
// strobes to vmcs_pml_fields, the two full pulses, and hold, which the
// full-event unit raises while a full event waits to be taken; no event is
// accepted while hold is high.
//
// Timing: an event is accepted only when the logger is idle, so the page
// walker stalls while the previous event's stores are in flight. An event
// that logs to both buffers takes two store cycles (hypervisor entry first,
// then guest entry), one that logs to a single buffer takes one, and one
// that logs nowhere completes in the accept cycle. Indices are decremented
// when the event is accepted.
//
// Logging the GVA to the guest buffer and the GPA to the hypervisor buffer
// from the same walk, with independent indices, follows the EPML
// description. Raising the full event when entry 0 is written, the single
// serialised store port, the store order and the hold input are this
// design's choices.
module pml_logger
  import ooh_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // dirty events from the page walker
  input  logic       evt_valid,
  output logic       evt_ready,
  input  dirty_evt_t evt,
  // field values
  input  logic       pml_en,
  input  addr_t      pml_addr,
  input  pml_idx_t   pml_idx,
  input  addr_t      guest_pml_addr,
  input  pml_idx_t   guest_pml_idx,
  output logic       hyp_dec,
  output logic       guest_dec,
  // stores into host memory
  output logic       mem_wr_valid,
  input  logic       mem_wr_ready,
  output log_wr_t    mem_wr,
  // full events
  input  logic       hold,
  output logic       hyp_full,
  output logic       guest_full
);

  typedef enum logic [1:0] {S_IDLE, S_WR_HYP, S_WR_GUEST} state_e;
  state_e  state;
  log_wr_t hyp_wr, guest_wr;
  logic    hyp_last, guest_last, guest_pending;

  logic hyp_go, guest_go, accept;
  always_comb begin
    hyp_go   = pml_en && (pml_idx < PML_IDX_W'(PML_ENTRIES));
    guest_go = guest_pml_idx < PML_IDX_W'(PML_ENTRIES);
  end

  assign evt_ready = (state == S_IDLE) && !hold;
  assign accept    = evt_valid && evt_ready;
  assign hyp_dec   = accept && hyp_go;
  assign guest_dec = accept && guest_go;

  assign mem_wr_valid = (state != S_IDLE);
  assign mem_wr       = (state == S_WR_GUEST) ? guest_wr : hyp_wr;

  // Full pulses leave with the handshake of the store into entry 0, so the
  // full-event unit raises hold on the same edge the logger goes idle and no
  // event can slip in between.
  assign hyp_full   = (state == S_WR_HYP)   && mem_wr_ready && hyp_last;
  assign guest_full = (state == S_WR_GUEST) && mem_wr_ready && guest_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      hyp_wr        <= '0;
      guest_wr      <= '0;
      hyp_last      <= 1'b0;
      guest_last    <= 1'b0;
      guest_pending <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          hyp_wr        <= '{hpa: pml_entry_addr(pml_addr, pml_idx),
                             data: page_of(evt.gpa), guest: 1'b0};
          guest_wr      <= '{hpa: pml_entry_addr(guest_pml_addr, guest_pml_idx),
                             data: page_of(evt.gva), guest: 1'b1};
          hyp_last      <= (pml_idx == '0);
          guest_last    <= (guest_pml_idx == '0);
          guest_pending <= guest_go;
          if (hyp_go)        state <= S_WR_HYP;
          else if (guest_go) state <= S_WR_GUEST;
        end
        S_WR_HYP:   if (mem_wr_ready) state <= guest_pending ? S_WR_GUEST : S_IDLE;
        S_WR_GUEST: if (mem_wr_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A store, once offered, is held until memory takes it.
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr));

endmodule
