// clic_regfile -- memory-mapped configuration registers of the vCLIC, with the
// privilege-partitioned address decoding.
//
// What it holds (Fig. 2b "Register File"):
//   cfg      cliccfg: nlbits (level bits of clicintctl) and nmbits (mode bits)
//   ip/ie/attr/intctl per interrupt line (the vanilla CLIC registers; ip lives
//            in the gateway and is only read and written through here)
//   intv     clicintv[i], 1 byte per line: v (bit 0) delegates the line to a
//            virtual supervisor, vsid (bits 7:2) names the guest
//   vsprio   one priority value per guest (VSPRIO extension), NumVsid entries
//
// Which copy of the registers software sees is chosen by the address region it
// uses (see vclic_pkg): the M region sees every line, the S (hypervisor)
// region sees lines whose mode is S (delegated to a guest or not), and the
// region of guest k sees only the S-mode lines with v=1 and vsid=k. Lines a
// view does not own read as zero and ignore writes; so one set of physical
// registers serves every target, as the paper describes. clicintv and vsprio
// are reachable only from the M and S regions (they belong to the hypervisor);
// cliccfg is writable only from the M region. A guest cannot change a line's
// mode, and the S region cannot raise a line to M.
//
// Bus: a single-cycle register port. req_i with we_i writes the byte lanes set
// in be_i at the rising edge; a read returns rdata_o combinationally in the
// cycle of req_i. err_o flags an access to an unmapped region or offset.
//
// From the paper: the register set, the 1-byte clicintv with its v and vsid
// fields, per-guest vsprio, and access control by address range. Own choices:
// the address map, the bit positions of v and vsid, the bus protocol, and the
// reset values (all zero: every line level-triggered, disabled, mode M).
module clic_regfile
  import vclic_pkg::*;
#(
  parameter int unsigned NumSrc      = 64,
  parameter int unsigned NumVsid     = 64,
  parameter int unsigned IntCtlBits  = 8,
  parameter int unsigned VsprioWidth = 1,
  localparam int unsigned VspW       = (VsprioWidth > 0) ? VsprioWidth : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // register port
  input  logic                   req_i,
  input  logic                   we_i,
  input  logic [ADDR_W-1:0]      addr_i,
  input  logic [31:0]            wdata_i,
  input  logic [3:0]             be_i,
  output logic [31:0]            rdata_o,
  output logic                   err_o,
  // gateway
  input  logic [NumSrc-1:0]      ip_i,
  output logic [NumSrc-1:0]      ip_we_o,
  output logic [NumSrc-1:0]      ip_wdata_o,
  output logic [NumSrc-1:0]      trig_edge_o,
  output logic [NumSrc-1:0]      trig_neg_o,
  // to the arbitration
  output logic [NumSrc-1:0]      ie_o,
  output priv_e [NumSrc-1:0]     priv_o,
  output logic [NumSrc-1:0][7:0] intctl_o,
  output logic [NumSrc-1:0]      shv_o,
  output logic [NumSrc-1:0]      v_o,
  output logic [NumSrc-1:0][5:0] vsid_o,
  output logic [NumVsid-1:0][VspW-1:0] vsprio_o,
  output logic [3:0]             nlbits_o
);

  localparam int unsigned IdW = (NumSrc > 1) ? $clog2(NumSrc) : 1;
  localparam logic [7:0] CtlMask = 8'hFF << (8 - IntCtlBits);  // implemented bits

  // ---------------------------------------------------------------- state
  logic [3:0]                  nlbits_q;
  logic [1:0]                  nmbits_q;
  logic [NumSrc-1:0]           ie_q;
  logic [NumSrc-1:0]           shv_q, trig_edge_q, trig_neg_q, mode_m_q;
  logic [NumSrc-1:0][7:0]      ctl_q;
  logic [NumSrc-1:0]           v_q;
  logic [NumSrc-1:0][5:0]      vsid_q;
  logic [NumVsid-1:0][VspW-1:0] vsprio_q;

  // ------------------------------------------------------------- decoding
  logic [REGION_W-1:0]   region;
  logic [REGION_LSB-1:0] off;
  logic                  is_m, is_s, is_vs, region_ok;
  logic [REGION_W-1:0]   guest;

  assign region    = addr_i[ADDR_W-1:REGION_LSB];
  assign off       = {addr_i[REGION_LSB-1:2], 2'b00};
  assign is_m      = (region == REGION_M);
  assign is_s      = (region == REGION_S);
  assign is_vs     = (region >= REGION_VS) && (32'(region) < 32'(REGION_VS) + NumVsid);
  assign guest     = region - REGION_VS;
  assign region_ok = is_m | is_s | is_vs;

  // effective privilege of each line: nmbits = 0 makes every line M-mode
  priv_e [NumSrc-1:0] priv;
  always_comb begin
    for (int unsigned i = 0; i < NumSrc; i++)
      priv[i] = ((nmbits_q == 2'd0) || mode_m_q[i]) ? PRIV_M : PRIV_S;
  end

  // is line i visible in the region of this access?
  function automatic logic visible(input int unsigned i);
    if (is_m) return 1'b1;
    if (is_s) return priv[i] == PRIV_S;
    if (is_vs) return (priv[i] == PRIV_S) && v_q[i] && (32'(vsid_q[i]) == 32'(guest));
    return 1'b0;
  endfunction

  // which register word is addressed
  logic              sel_cfg, sel_int, sel_intv, sel_vsprio;
  logic [REGION_LSB-1:0] int_word, intv_word, vsp_word;
  assign int_word   = off - OFF_CLICINT;
  assign intv_word  = off - OFF_CLICINTV;
  assign vsp_word   = off - OFF_VSPRIO;
  assign sel_cfg    = (off == OFF_CLICCFG);
  assign sel_int    = (off >= OFF_CLICINT) && (32'(int_word[REGION_LSB-1:2]) < NumSrc);
  assign sel_intv   = (is_m | is_s) && (off >= OFF_CLICINTV) && (32'(intv_word) < NumSrc);
  assign sel_vsprio = (is_m | is_s) && (off >= OFF_VSPRIO)   && (32'(vsp_word) < NumVsid);

  assign err_o = req_i && (!region_ok || !(sel_cfg || sel_int || sel_intv || sel_vsprio));

  logic [IdW-1:0] line;
  assign line = int_word[IdW+1:2];

  // ----------------------------------------------------------------- reads
  always_comb begin
    rdata_o = '0;
    if (req_i && region_ok) begin
      if (sel_cfg) begin
        rdata_o[CFG_NLBITS_LSB +: 4] = nlbits_q;
        rdata_o[CFG_NMBITS_LSB +: 2] = nmbits_q;
      end else if (sel_int) begin
        if (visible(32'(line))) begin
          rdata_o[0]     = ip_i[line];
          rdata_o[8]     = ie_q[line];
          rdata_o[16]    = shv_q[line];
          rdata_o[17]    = trig_edge_q[line];
          rdata_o[18]    = trig_neg_q[line];
          rdata_o[23:22] = mode_m_q[line] ? 2'b11 : 2'b01;
          rdata_o[31:24] = ctl_q[line] | ~CtlMask;
        end
      end else if (sel_intv) begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (32'(intv_word) + b < NumSrc) begin
            rdata_o[8*b]       = v_q[32'(intv_word) + b];
            rdata_o[8*b+2 +: 6] = vsid_q[32'(intv_word) + b];
          end
        end
      end else if (sel_vsprio) begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (32'(vsp_word) + b < NumVsid)
            rdata_o[8*b +: VspW] = (VsprioWidth > 0) ? vsprio_q[32'(vsp_word) + b] : '0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- writes
  logic wr;
  assign wr = req_i && we_i && region_ok;

  always_comb begin
    ip_we_o    = '0;
    ip_wdata_o = '0;
    if (wr && sel_int && be_i[0] && visible(32'(line))) begin
      ip_we_o[line]    = 1'b1;
      ip_wdata_o[line] = wdata_i[0];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      nlbits_q    <= '0;
      nmbits_q    <= '0;
      ie_q        <= '0;
      shv_q       <= '0;
      trig_edge_q <= '0;
      trig_neg_q  <= '0;
      mode_m_q    <= '1;
      ctl_q       <= '0;
      v_q         <= '0;
      vsid_q      <= '0;
      vsprio_q    <= '0;
    end else if (wr) begin
      if (sel_cfg && is_m && be_i[0]) begin
        nlbits_q <= (wdata_i[CFG_NLBITS_LSB +: 4] > 4'd8) ? 4'd8 : wdata_i[CFG_NLBITS_LSB +: 4];
        nmbits_q <= (wdata_i[CFG_NMBITS_LSB +: 2] > 2'd1) ? 2'd1 : wdata_i[CFG_NMBITS_LSB +: 2];
      end
      if (sel_int && visible(32'(line))) begin
        if (be_i[1]) ie_q[line] <= wdata_i[8];
        if (be_i[2]) begin
          shv_q[line]       <= wdata_i[16];
          trig_edge_q[line] <= wdata_i[17];
          trig_neg_q[line]  <= wdata_i[18];
          // mode is WARL: M stays reserved to the M region, guests cannot touch it
          if (is_m)      mode_m_q[line] <= wdata_i[23];
        end
        if (be_i[3]) ctl_q[line] <= wdata_i[31:24] & CtlMask;
      end
      if (sel_intv) begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (be_i[b] && (32'(intv_word) + b < NumSrc)) begin
            // the hypervisor may only delegate lines it owns (S mode)
            if (is_m || (priv[32'(intv_word) + b] == PRIV_S)) begin
              v_q[32'(intv_word) + b]    <= wdata_i[8*b];
              vsid_q[32'(intv_word) + b] <= wdata_i[8*b+2 +: 6];
            end
          end
        end
      end
      if (sel_vsprio && VsprioWidth > 0) begin
        for (int unsigned b = 0; b < 4; b++) begin
          if (be_i[b] && (32'(vsp_word) + b < NumVsid))
            vsprio_q[32'(vsp_word) + b] <= wdata_i[8*b +: VspW];
        end
      end
    end
  end

  // ---------------------------------------------------------------- outputs
  assign ie_o        = ie_q;
  assign priv_o      = priv;
  assign shv_o       = shv_q;
  assign trig_edge_o = trig_edge_q;
  assign trig_neg_o  = trig_neg_q;
  assign v_o         = v_q;
  assign vsid_o      = vsid_q;
  assign vsprio_o    = (VsprioWidth > 0) ? vsprio_q : '0;
  assign nlbits_o    = nlbits_q;
  always_comb begin
    for (int unsigned i = 0; i < NumSrc; i++) intctl_o[i] = ctl_q[i] | ~CtlMask;
  end

  // elaboration-time checks of the parameters
  if (NumSrc < 2 || NumSrc > 1024) begin : g_bad_numsrc
    $error("NumSrc must be in 2..1024");
  end
  if (NumVsid < 1 || NumVsid > 64) begin : g_bad_numvsid
    $error("NumVsid must be in 1..64");
  end
  if (IntCtlBits < 1 || IntCtlBits > 8) begin : g_bad_ctlbits
    $error("IntCtlBits must be in 1..8");
  end
  if (VsprioWidth > 8) begin : g_bad_vsprio
    $error("VsprioWidth must be at most 8");
  end

endmodule
