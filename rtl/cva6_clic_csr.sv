// cva6_clic_csr -- the CLIC and vCLIC control and status registers of the core.
//
// This is the part of the core's CSR file that the CLIC, and its virtualisation
// extension, add. Per privilege target (M, HS and VS) it keeps:
//   xtvt         base of the selective-hardware-vectoring (SHV) trap table
//   xintthresh   interrupt level threshold (nesting control)
//   xil / xpil   level of the handler now running / level it interrupted;
//                xpil is readable and writable as xcause[23:16] so that a
//                preemptible handler can save and restore it around nesting
//   xnxti        read-to-claim access for tail-chaining
// and, for the hypervisor, hstatus.VGEIN (the VSID of the guest now running)
// and hgeie (one enable bit per guest for guest interrupts that trap to HS).
// vsie and vsip are hardwired to zero: in CLIC mode the controller's own
// enable and pending bits replace them.
// VSINTTHRESH, VSTVT and VSNXTI are the CSRs the paper adds; their S-mode
// counterparts are redirected to them while the hart runs a guest (V = 1),
// as the RISC-V hypervisor extension does for its other VS CSRs.
//
// Events: on trap_i (the pipeline has taken an interrupt trap to trap_tgt_i)
// the target's level moves to xpil and the new level becomes xil. On xret_i
// (mret / sret from HS / sret from VS) xil returns to xpil. An access to xnxti
// claims the offered interrupt if it belongs to that target, is not
// hardware-vectored and its level exceeds both xpil and xintthresh: the read
// returns xtvt + 8 * id, xil takes the interrupt's level and nxti_claim_o
// pulses (it becomes the vCLIC's ready). Otherwise the read returns 0.
//
// CSR port: csr_req_i with csr_we_i writes csr_wdata_i at the rising edge; a
// read returns csr_rdata_o in the same cycle. csr_err_o flags an address this
// block does not hold or an access the current privilege may not make.
//
// From the paper: the new CSRs (VSINTTHRESH, VSTVT, VSNXTI), the use of VGEIN as
// the running guest's VSID, and that the CLIC replaces vsie/vsip/vsideleg:
// vsie and vsip read as zero and ignore writes here, as do sie and sip while
// V = 1 (the core has no vsideleg to hold). Own choices: CSR numbers of the VS
// CSRs, field layouts of the status CSRs, that only the xpil field of xcause lives here (the
// core keeps the rest of xcause) and the reset values (all zero).
module cva6_clic_csr
  import vclic_pkg::*;
#(
  parameter int unsigned NumVsid = 64
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // current privilege from the pipeline
  input  priv_e               priv_i,
  input  logic                virt_i,
  // CSR port
  input  logic                csr_req_i,
  input  logic                csr_we_i,
  input  logic [11:0]         csr_addr_i,
  input  logic [63:0]         csr_wdata_i,
  output logic [63:0]         csr_rdata_o,
  output logic                csr_err_o,
  // request offered by the vCLIC (for xnxti)
  input  logic                irq_valid_i,
  input  irq_req_t            irq_i,
  output logic                nxti_claim_o,
  // trap entry / return from the pipeline
  input  logic                trap_i,
  input  trap_tgt_e           trap_tgt_i,
  input  logic [7:0]          trap_level_i,
  input  logic                xret_i,
  input  trap_tgt_e           xret_tgt_i,
  // state seen by the core-side CLIC controller
  output logic [7:0]          mil_o, sil_o, vsil_o,
  output logic [7:0]          mintthresh_o, sintthresh_o, vsintthresh_o,
  output logic [5:0]          vgein_o,
  output logic [NumVsid-1:0]  hgeie_o,
  output logic [63:0]         mtvt_o, stvt_o, vstvt_o
);

  logic [7:0]         mil_q, sil_q, vsil_q, mpil_q, spil_q, vspil_q;
  logic [7:0]         mth_q, sth_q, vsth_q;
  logic [63:0]        mtvt_q, stvt_q, vstvt_q;
  logic [5:0]         vgein_q;
  logic [NumVsid-1:0] hgeie_q;

  // ------------------------------------------------- address redirection (V=1)
  logic [11:0] addr;
  always_comb begin
    addr = csr_addr_i;
    if (virt_i) begin
      unique case (csr_addr_i)
        CSR_STVT:       addr = CSR_VSTVT;
        CSR_SNXTI:      addr = CSR_VSNXTI;
        CSR_SINTTHRESH: addr = CSR_VSINTTHRESH;
        CSR_SINTSTATUS: addr = CSR_VSINTSTATUS;
        CSR_SCAUSE:     addr = CSR_VSCAUSE;
        CSR_SIE:        addr = CSR_VSIE;
        CSR_SIP:        addr = CSR_VSIP;
        default:        addr = csr_addr_i;
      endcase
    end
  end

  // privilege check: CSR[9:8] is the lowest privilege allowed (2'b10 = HS);
  // guests (V = 1) may not reach the hypervisor or the VS CSRs directly
  logic priv_ok;
  always_comb begin
    unique case (csr_addr_i[9:8])
      2'b11:   priv_ok = (priv_i == PRIV_M);
      2'b10,
      2'b01:   priv_ok = (priv_i != PRIV_U) && !(virt_i && csr_addr_i[9]);
      default: priv_ok = 1'b1;
    endcase
  end

  // ------------------------------------------------------------------ xnxti
  trap_tgt_e nxti_tgt;
  logic      nxti_hit;
  logic [7:0]  nxti_pil, nxti_th;
  logic [63:0] nxti_tvt;
  always_comb begin
    nxti_tgt = TGT_NONE;
    nxti_pil = '0;
    nxti_th  = '0;
    nxti_tvt = '0;
    unique case (addr)
      CSR_MNXTI:  begin nxti_tgt = TGT_M;  nxti_pil = mpil_q;  nxti_th = mth_q;  nxti_tvt = mtvt_q;  end
      CSR_SNXTI:  begin nxti_tgt = TGT_HS; nxti_pil = spil_q;  nxti_th = sth_q;  nxti_tvt = stvt_q;  end
      CSR_VSNXTI: begin nxti_tgt = TGT_VS; nxti_pil = vspil_q; nxti_th = vsth_q; nxti_tvt = vstvt_q; end
      default: ;
    endcase
    nxti_hit = 1'b0;
    if (irq_valid_i && !irq_i.shv && (irq_i.level > nxti_pil) && (irq_i.level > nxti_th)) begin
      unique case (nxti_tgt)
        TGT_M:   nxti_hit = (irq_i.priv == PRIV_M);
        TGT_HS:  nxti_hit = (irq_i.priv == PRIV_S) && !irq_i.v;
        TGT_VS:  nxti_hit = (irq_i.priv == PRIV_S) && irq_i.v && (irq_i.vsid == vgein_q);
        default: nxti_hit = 1'b0;
      endcase
    end
  end

  logic known;
  always_comb begin
    known = 1'b1;
    csr_rdata_o = '0;
    unique case (addr)
      CSR_MTVT:        csr_rdata_o = mtvt_q;
      CSR_STVT:        csr_rdata_o = stvt_q;
      CSR_VSTVT:       csr_rdata_o = vstvt_q;
      CSR_MINTTHRESH:  csr_rdata_o = 64'(mth_q);
      CSR_SINTTHRESH:  csr_rdata_o = 64'(sth_q);
      CSR_VSINTTHRESH: csr_rdata_o = 64'(vsth_q);
      CSR_MINTSTATUS:  csr_rdata_o = {32'd0, mil_q, 8'd0, sil_q, 8'd0};
      CSR_SINTSTATUS:  csr_rdata_o = {48'd0, sil_q, 8'd0};
      CSR_VSINTSTATUS: csr_rdata_o = {48'd0, vsil_q, 8'd0};
      CSR_MCAUSE:      csr_rdata_o = 64'(mpil_q) << CAUSE_PIL_LSB;
      CSR_SCAUSE:      csr_rdata_o = 64'(spil_q) << CAUSE_PIL_LSB;
      CSR_VSCAUSE:     csr_rdata_o = 64'(vspil_q) << CAUSE_PIL_LSB;
      CSR_HSTATUS:     csr_rdata_o = 64'(vgein_q) << HSTATUS_VGEIN_LSB;
      CSR_HGEIE:       csr_rdata_o = 64'(hgeie_q);
      CSR_VSIE, CSR_VSIP: csr_rdata_o = '0;
      CSR_MNXTI, CSR_SNXTI, CSR_VSNXTI:
                       csr_rdata_o = nxti_hit ? (nxti_tvt + (64'(irq_i.id) << 3)) : 64'd0;
      default:         known = 1'b0;
    endcase
    if (!csr_req_i || !priv_ok) csr_rdata_o = '0;
  end

  assign csr_err_o    = csr_req_i && (!known || !priv_ok);
  assign nxti_claim_o = csr_req_i && priv_ok && (nxti_tgt != TGT_NONE) && nxti_hit;

  // ---------------------------------------------------------------- updates
  logic wr;
  assign wr = csr_req_i && csr_we_i && priv_ok && known;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mil_q   <= '0;  sil_q   <= '0;  vsil_q   <= '0;
      mpil_q  <= '0;  spil_q  <= '0;  vspil_q  <= '0;
      mth_q   <= '0;  sth_q   <= '0;  vsth_q   <= '0;
      mtvt_q  <= '0;  stvt_q  <= '0;  vstvt_q  <= '0;
      vgein_q <= '0;
      hgeie_q <= '0;
    end else begin
      if (wr) begin
        unique case (addr)
          CSR_MTVT:        mtvt_q  <= {csr_wdata_i[63:6], 6'd0};
          CSR_STVT:        stvt_q  <= {csr_wdata_i[63:6], 6'd0};
          CSR_VSTVT:       vstvt_q <= {csr_wdata_i[63:6], 6'd0};
          CSR_MINTTHRESH:  mth_q   <= csr_wdata_i[7:0];
          CSR_SINTTHRESH:  sth_q   <= csr_wdata_i[7:0];
          CSR_VSINTTHRESH: vsth_q  <= csr_wdata_i[7:0];
          CSR_MCAUSE:      mpil_q  <= csr_wdata_i[CAUSE_PIL_LSB +: 8];
          CSR_SCAUSE:      spil_q  <= csr_wdata_i[CAUSE_PIL_LSB +: 8];
          CSR_VSCAUSE:     vspil_q <= csr_wdata_i[CAUSE_PIL_LSB +: 8];
          CSR_HSTATUS:     vgein_q <= csr_wdata_i[HSTATUS_VGEIN_LSB +: 6];
          CSR_HGEIE:       hgeie_q <= csr_wdata_i[NumVsid-1:0];
          default: ;
        endcase
      end
      if (nxti_claim_o) begin
        unique case (nxti_tgt)
          TGT_M:   mil_q  <= irq_i.level;
          TGT_HS:  sil_q  <= irq_i.level;
          TGT_VS:  vsil_q <= irq_i.level;
          default: ;
        endcase
      end
      if (trap_i) begin
        unique case (trap_tgt_i)
          TGT_M:   begin mpil_q  <= mil_q;  mil_q  <= trap_level_i; end
          TGT_HS:  begin spil_q  <= sil_q;  sil_q  <= trap_level_i; end
          TGT_VS:  begin vspil_q <= vsil_q; vsil_q <= trap_level_i; end
          default: ;
        endcase
      end
      if (xret_i) begin
        unique case (xret_tgt_i)
          TGT_M:   mil_q  <= mpil_q;
          TGT_HS:  sil_q  <= spil_q;
          TGT_VS:  vsil_q <= vspil_q;
          default: ;
        endcase
      end
    end
  end

  assign mil_o         = mil_q;
  assign sil_o         = sil_q;
  assign vsil_o        = vsil_q;
  assign mintthresh_o  = mth_q;
  assign sintthresh_o  = sth_q;
  assign vsintthresh_o = vsth_q;
  assign vgein_o       = vgein_q;
  assign hgeie_o       = hgeie_q;
  assign mtvt_o        = mtvt_q;
  assign stvt_o        = stvt_q;
  assign vstvt_o       = vstvt_q;

endmodule
