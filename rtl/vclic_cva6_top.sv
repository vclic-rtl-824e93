// vclic_cva6_top -- one core's interrupt subsystem: the vCLIC and the CLIC
// additions to the core (controller and CSRs), wired as in the vCLIC-CVA6
// interface.
//
//   irq_i --> vclic (gateway, register file, arbitration, handshake FSM)
//               |  valid, id, level, priv, v, vsid, shv, kill      ^ ready
//               v                                                   |
//             cva6_clic_ctrl  <-- intthresh, intlevel, vgein, hgeie, xtvt
//               |  irq, target, id, level, vector         ^         |
//               v                                         |   cva6_clic_csr
//             pipeline (outside this module, via ports) --+-- trap / xret
//
// The rest of the core stays outside: the pipeline that commits the trap
// (trap_taken_i) and executes xRET (xret_i), the privilege state (priv_i,
// virt_i) and the mstatus/vsstatus interrupt-enable bits. The vCLIC register
// port would be reached through the system bus (memory-mapped), the CSR port
// through the core's CSR instructions. irq_ready from the controller is both
// the trap acknowledgement and the xnxti claim.
//
// Timing: an interrupt line rising at edge t is offered to the core after edge
// t+2. irq_o follows combinationally when the controller accepts it. In the
// cycle the pipeline raises trap_taken_i the line is claimed and the target's
// interrupt level is updated at the next edge.
module vclic_cva6_top
  import vclic_pkg::*;
#(
  parameter int unsigned NumSrc      = 64,
  parameter int unsigned NumVsid     = 64,
  parameter int unsigned IntCtlBits  = 8,
  parameter int unsigned VsprioWidth = 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NumSrc-1:0] irq_i,
  // vCLIC configuration registers (memory mapped)
  input  logic              reg_req_i,
  input  logic              reg_we_i,
  input  logic [ADDR_W-1:0] reg_addr_i,
  input  logic [31:0]       reg_wdata_i,
  input  logic [3:0]        reg_be_i,
  output logic [31:0]       reg_rdata_o,
  output logic              reg_err_o,
  // core CSR port for the CLIC CSRs
  input  logic              csr_req_i,
  input  logic              csr_we_i,
  input  logic [11:0]       csr_addr_i,
  input  logic [63:0]       csr_wdata_i,
  output logic [63:0]       csr_rdata_o,
  output logic              csr_err_o,
  // hart state
  input  priv_e             priv_i,
  input  logic              virt_i,
  input  logic              mie_i,
  input  logic              sie_i,
  input  logic              vs_sie_i,
  // pipeline
  output logic              irq_o,
  output trap_tgt_e         irq_tgt_o,
  output logic [9:0]        irq_id_o,
  output logic [7:0]        irq_level_o,
  output logic              irq_shv_o,
  output logic [63:0]       irq_vector_o,
  output logic              irq_kill_o,
  input  logic              trap_taken_i,
  input  logic              xret_i,
  input  trap_tgt_e         xret_tgt_i
);

  logic       clic_valid, clic_ready, clic_kill, nxti_claim;
  irq_req_t   clic_req;
  logic [7:0] mil, sil, vsil, mth, sth, vsth;
  logic [5:0] vgein;
  logic [NumVsid-1:0] hgeie;
  logic [63:0] mtvt, stvt, vstvt;

  vclic #(
    .NumSrc(NumSrc), .NumVsid(NumVsid), .IntCtlBits(IntCtlBits), .VsprioWidth(VsprioWidth)
  ) i_vclic (
    .clk_i, .rst_ni, .irq_i,
    .reg_req_i, .reg_we_i, .reg_addr_i, .reg_wdata_i, .reg_be_i, .reg_rdata_o, .reg_err_o,
    .irq_valid_o (clic_valid),
    .irq_o       (clic_req),
    .irq_ready_i (clic_ready),
    .irq_kill_o  (clic_kill)
  );

  cva6_clic_csr #(.NumVsid(NumVsid)) i_csr (
    .clk_i, .rst_ni,
    .priv_i, .virt_i,
    .csr_req_i, .csr_we_i, .csr_addr_i, .csr_wdata_i, .csr_rdata_o, .csr_err_o,
    .irq_valid_i   (clic_valid),
    .irq_i         (clic_req),
    .nxti_claim_o  (nxti_claim),
    .trap_i        (trap_taken_i && irq_o),
    .trap_tgt_i    (irq_tgt_o),
    .trap_level_i  (irq_level_o),
    .xret_i,
    .xret_tgt_i,
    .mil_o (mil), .sil_o (sil), .vsil_o (vsil),
    .mintthresh_o (mth), .sintthresh_o (sth), .vsintthresh_o (vsth),
    .vgein_o (vgein), .hgeie_o (hgeie),
    .mtvt_o (mtvt), .stvt_o (stvt), .vstvt_o (vstvt)
  );

  cva6_clic_ctrl #(.NumVsid(NumVsid)) i_ctrl (
    .irq_valid_i  (clic_valid),
    .irq_i        (clic_req),
    .irq_kill_i   (clic_kill),
    .irq_ready_o  (clic_ready),
    .priv_i, .virt_i, .mie_i, .sie_i, .vs_sie_i,
    .mil_i (mil), .sil_i (sil), .vsil_i (vsil),
    .mintthresh_i (mth), .sintthresh_i (sth), .vsintthresh_i (vsth),
    .vgein_i (vgein), .hgeie_i (hgeie),
    .mtvt_i (mtvt), .stvt_i (stvt), .vstvt_i (vstvt),
    .nxti_claim_i (nxti_claim),
    .irq_o, .irq_tgt_o, .irq_id_o, .irq_level_o, .irq_shv_o, .irq_vector_o, .irq_kill_o,
    .trap_taken_i
  );

endmodule
