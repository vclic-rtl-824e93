// vclic -- the virtualised core-local interrupt controller: gateway, register
// file, arbitration tree and handshake FSM of one core.
//
// Wired interrupt lines enter the gateway, which keeps one pending bit per
// line. The register file holds each line's enable, attributes (trigger,
// privilege mode, selective hardware vectoring), level/priority (clicintctl),
// the virtualisation byte clicintv (v, vsid) and the per-guest priorities of
// the VSPRIO extension. The arbitration tree ranks every pending and enabled
// line and the handshake FSM offers the winner to the core over valid / ready
// / kill with its id, level, privilege, v and vsid. When the core accepts, the
// line is claimed, which clears an edge-triggered pending bit.
//
// Setting VsprioWidth to 0 gives the VSCLIC-only controller (no per-guest
// priority); the paper's "minimal configuration" has one priority bit.
//
// Interface: irq_i (NumSrc wired lines), the register port of clic_regfile, and
// the core-side handshake. Latency: a line that rises at clock edge t is pending
// after edge t+1 and offered (valid_o high) after edge t+2.
module vclic
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
  // configuration register port
  input  logic              reg_req_i,
  input  logic              reg_we_i,
  input  logic [ADDR_W-1:0] reg_addr_i,
  input  logic [31:0]       reg_wdata_i,
  input  logic [3:0]        reg_be_i,
  output logic [31:0]       reg_rdata_o,
  output logic              reg_err_o,
  // core side
  output logic              irq_valid_o,
  output irq_req_t          irq_o,
  input  logic              irq_ready_i,
  output logic              irq_kill_o
);

  localparam int unsigned VspW = (VsprioWidth > 0) ? VsprioWidth : 1;
  localparam int unsigned IdW  = $clog2(NumSrc);

  logic [NumSrc-1:0]            ip, ip_we, ip_wdata, trig_edge, trig_neg, ie, shv, v;
  priv_e [NumSrc-1:0]           priv;
  logic [NumSrc-1:0][7:0]       intctl;
  logic [NumSrc-1:0][5:0]       vsid;
  logic [NumVsid-1:0][VspW-1:0] vsprio;
  logic [3:0]                   nlbits;
  logic                         best_valid, claim;
  irq_req_t                     best;
  logic [9:0]                   claim_id;

  clic_gateway #(.NumSrc(NumSrc)) i_gateway (
    .clk_i, .rst_ni, .irq_i,
    .trig_edge_i (trig_edge),
    .trig_neg_i  (trig_neg),
    .ip_we_i     (ip_we),
    .ip_wdata_i  (ip_wdata),
    .claim_i     (claim),
    .claim_id_i  (claim_id[IdW-1:0]),
    .ip_o        (ip)
  );

  clic_regfile #(
    .NumSrc(NumSrc), .NumVsid(NumVsid), .IntCtlBits(IntCtlBits), .VsprioWidth(VsprioWidth)
  ) i_regfile (
    .clk_i, .rst_ni,
    .req_i       (reg_req_i),
    .we_i        (reg_we_i),
    .addr_i      (reg_addr_i),
    .wdata_i     (reg_wdata_i),
    .be_i        (reg_be_i),
    .rdata_o     (reg_rdata_o),
    .err_o       (reg_err_o),
    .ip_i        (ip),
    .ip_we_o     (ip_we),
    .ip_wdata_o  (ip_wdata),
    .trig_edge_o (trig_edge),
    .trig_neg_o  (trig_neg),
    .ie_o        (ie),
    .priv_o      (priv),
    .intctl_o    (intctl),
    .shv_o       (shv),
    .v_o         (v),
    .vsid_o      (vsid),
    .vsprio_o    (vsprio),
    .nlbits_o    (nlbits)
  );

  clic_arbiter #(.NumSrc(NumSrc), .NumVsid(NumVsid), .VsprioWidth(VsprioWidth)) i_arbiter (
    .ip_i     (ip),
    .ie_i     (ie),
    .priv_i   (priv),
    .intctl_i (intctl),
    .shv_i    (shv),
    .v_i      (v),
    .vsid_i   (vsid),
    .vsprio_i (vsprio),
    .nlbits_i (nlbits),
    .valid_o  (best_valid),
    .req_o    (best)
  );

  clic_handshake i_handshake (
    .clk_i, .rst_ni,
    .best_valid_i (best_valid),
    .best_i       (best),
    .valid_o      (irq_valid_o),
    .req_o        (irq_o),
    .ready_i      (irq_ready_i),
    .kill_o       (irq_kill_o),
    .claim_o      (claim),
    .claim_id_o   (claim_id)
  );

endmodule
