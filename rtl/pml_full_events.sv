// pml_full_events: turns "buffer full" into the event each buffer's owner
// handles.
//
// A full hypervisor-level buffer ends guest execution with a VM exit (basic
// exit reason 62, PML full), so the hypervisor can drain the buffer and reset
// the PML Index, exactly as with plain PML. A full guest-level buffer does
// not leave the guest: through the posted-interrupt machinery the processor
// raises a virtual self-IPI on a vector the guest kernel reserved, whose
// handler copies the buffer out and resets the Guest PML Index.
//
// Each request is a level held from the full pulse until its acknowledge:
// vmexit_ack when the core takes the exit, ipi_ack when the posted-interrupt
// logic has taken the interrupt. While either is pending, hold is high and
// the logger accepts no further dirty events, so no write slips past a full
// buffer unlogged.
//
// Interface: hyp_full / guest_full one-cycle pulses in; ipi_vector (the
// reserved vector, 8 bits) in; vmexit_req/vmexit_reason/vmexit_ack and
// ipi_req/ipi_vec/ipi_ack out to the core; hold to the logger.
//
// Timing: a request rises on the clock edge after the pulse and falls on the
// edge after its acknowledge. The vector is sampled with the guest pulse.
//
// VM exit for the hypervisor buffer and self-IPI for the guest buffer follow
// the description; the level/acknowledge handshake, holding the logger, and
// taking the vector from an input are this design's choices.
module pml_full_events
  import ooh_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hyp_full,
  input  logic        guest_full,
  input  logic [7:0]  ipi_vector,
  output logic        vmexit_req,
  output logic [15:0] vmexit_reason,
  input  logic        vmexit_ack,
  output logic        ipi_req,
  output logic [7:0]  ipi_vec,
  input  logic        ipi_ack,
  output logic        hold
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmexit_req <= 1'b0;
      ipi_req    <= 1'b0;
      ipi_vec    <= '0;
    end else begin
      if (hyp_full)        vmexit_req <= 1'b1;
      else if (vmexit_ack) vmexit_req <= 1'b0;
      if (guest_full) begin
        ipi_req <= 1'b1;
        ipi_vec <= ipi_vector;
      end else if (ipi_ack) begin
        ipi_req <= 1'b0;
      end
    end
  end

  assign vmexit_reason = vmexit_req ? EXIT_PML_FULL : 16'd0;
  assign hold          = vmexit_req || ipi_req;

  // Acknowledges only answer a pending request.
  a_exit_ack: assert property (@(posedge clk) disable iff (!rst_n) vmexit_ack |-> vmexit_req);
  a_ipi_ack:  assert property (@(posedge clk) disable iff (!rst_n) ipi_ack |-> ipi_req);

endmodule
