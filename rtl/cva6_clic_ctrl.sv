// cva6_clic_ctrl -- the core-side CLIC controller: decides whether, and to which
// privilege level, the interrupt offered by the vCLIC is taken.
//
// Rules, for an offered request with privilege p, level l, v and vsid, while
// the hart runs at privilege priv_i with virtualisation mode virt_i:
//   M interrupt           taken to M if the hart is below M or mstatus.MIE is
//                         set, and l > max(mil, mintthresh).
//   HS interrupt (S, v=0) taken to HS if the hart is not in M and is below HS
//                         (any V=1 mode, or U) or in HS with mstatus.SIE, and
//                         l > max(sil, sintthresh).
//   VS interrupt of the running guest (v=1, vsid = hstatus.VGEIN, V=1)
//                         taken to VS if the guest is in VU or in VS with
//                         vsstatus.SIE, and l > max(vsil, vsintthresh).
//   VS interrupt of another guest (v=1 and vsid != VGEIN, or V=0)
//                         traps to HS only if hgeie[vsid] is set, under the
//                         same enable as an HS interrupt. The hypervisor sets
//                         hgeie for the guests that rank above the running one,
//                         so the core leaves the running guest only for a
//                         guest of higher priority.
// The request goes to the pipeline (irq_o) with its target, cause id, level
// and, for a hardware-vectored (SHV) line, the table entry xtvt + 8 * id. When
// the pipeline commits the trap (trap_taken_i) or software claims the line
// through xnxti (nxti_claim_i), irq_ready_o tells the vCLIC. A kill from the
// vCLIC withdraws the request in the same cycle and is passed on.
// Purely combinational.
//
// The three rules and the inputs (intthresh, intlevel, mstatus, vgein, hgeie)
// are the paper's; the paper says only that a trap to the hypervisor for
// another guest happens "if and only if the target VM has higher priority".
// Using hgeie as the hypervisor's record of which guests those are, and the
// enables and level tests above, are this design's choices.
module cva6_clic_ctrl
  import vclic_pkg::*;
#(
  parameter int unsigned NumVsid = 64
) (
  // from / to the vCLIC
  input  logic               irq_valid_i,
  input  irq_req_t           irq_i,
  input  logic               irq_kill_i,
  output logic               irq_ready_o,
  // hart state
  input  priv_e              priv_i,
  input  logic               virt_i,
  input  logic               mie_i,
  input  logic               sie_i,
  input  logic               vs_sie_i,
  // CLIC CSRs
  input  logic [7:0]         mil_i, sil_i, vsil_i,
  input  logic [7:0]         mintthresh_i, sintthresh_i, vsintthresh_i,
  input  logic [5:0]         vgein_i,
  input  logic [NumVsid-1:0] hgeie_i,
  input  logic [63:0]        mtvt_i, stvt_i, vstvt_i,
  input  logic               nxti_claim_i,
  // to / from the pipeline
  output logic               irq_o,
  output trap_tgt_e          irq_tgt_o,
  output logic [9:0]         irq_id_o,
  output logic [7:0]         irq_level_o,
  output logic               irq_shv_o,
  output logic [63:0]        irq_vector_o,
  output logic               irq_kill_o,
  input  logic               trap_taken_i
);

  function automatic logic [7:0] max8(input logic [7:0] a, input logic [7:0] b);
    return (a > b) ? a : b;
  endfunction

  logic hs_enabled, own_guest, guest_enabled;
  trap_tgt_e tgt;

  // HS is interruptible from any guest mode, from U, and from HS with SIE
  assign hs_enabled    = (priv_i != PRIV_M) && (virt_i || (priv_i == PRIV_U) || sie_i);
  assign own_guest     = virt_i && (irq_i.vsid == vgein_i);
  assign guest_enabled = (priv_i == PRIV_U) || vs_sie_i;

  always_comb begin
    tgt = TGT_NONE;
    if (irq_valid_i && !irq_kill_i) begin
      if (irq_i.priv == PRIV_M) begin
        if (((priv_i != PRIV_M) || mie_i) && (irq_i.level > max8(mil_i, mintthresh_i)))
          tgt = TGT_M;
      end else if (!irq_i.v) begin
        if (hs_enabled && (irq_i.level > max8(sil_i, sintthresh_i)))
          tgt = TGT_HS;
      end else if (own_guest) begin
        if (guest_enabled && (irq_i.level > max8(vsil_i, vsintthresh_i)))
          tgt = TGT_VS;
      end else begin
        if (hs_enabled && (32'(irq_i.vsid) < NumVsid) && hgeie_i[irq_i.vsid])
          tgt = TGT_HS;
      end
    end
  end

  logic [63:0] tvt;
  always_comb begin
    unique case (tgt)
      TGT_M:   tvt = mtvt_i;
      TGT_HS:  tvt = stvt_i;
      TGT_VS:  tvt = vstvt_i;
      default: tvt = '0;
    endcase
  end

  assign irq_o        = (tgt != TGT_NONE);
  assign irq_tgt_o    = tgt;
  assign irq_id_o     = irq_i.id;
  assign irq_level_o  = irq_i.level;
  // a guest interrupt redirected to the hypervisor is not vectored through
  // the hypervisor's table: the hypervisor finds its cause in software
  assign irq_shv_o    = irq_i.shv && !(irq_i.v && (tgt == TGT_HS));
  assign irq_vector_o = tvt + (64'(irq_i.id) << 3);
  assign irq_kill_o   = irq_kill_i;
  assign irq_ready_o  = (irq_o && trap_taken_i) || nxti_claim_i;

endmodule
