// tb_cva6_clic_csr -- self-checking test of the CLIC/vCLIC CSRs of the core.
//
// Checks: vsie/vsip hardwired to zero (also as sie/sip of a guest); read/write
// of the trap-vector bases (64-byte aligned), thresholds,
// hstatus.VGEIN and hgeie; the S-to-VS redirection while V = 1; privilege
// checks (errors, read as zero); level bookkeeping on trap entry and xRET for
// each target (nesting two deep); and xnxti: returns xtvt + 8*id and claims
// only an interrupt of its own target, non-vectored, above xpil and the
// threshold, otherwise returns 0 without a claim.
module tb_cva6_clic_csr;
  import vclic_pkg::*;

  localparam int unsigned G = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  priv_e priv;
  logic virt, req, we, err, ivalid, claim, trap, xret;
  logic [11:0] addr;
  logic [63:0] wd, rd;
  irq_req_t r;
  trap_tgt_e ttgt, xtgt;
  logic [7:0] tlvl, mil, sil, vsil, mth, sth, vsth;
  logic [5:0] vgein;
  logic [G-1:0] hgeie;
  logic [63:0] mtvt, stvt, vstvt;
  int checks = 0, failures = 0;

  cva6_clic_csr dut (
    .clk_i(clk), .rst_ni(rst_n), .priv_i(priv), .virt_i(virt),
    .csr_req_i(req), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wd), .csr_rdata_o(rd), .csr_err_o(err),
    .irq_valid_i(ivalid), .irq_i(r), .nxti_claim_o(claim),
    .trap_i(trap), .trap_tgt_i(ttgt), .trap_level_i(tlvl), .xret_i(xret), .xret_tgt_i(xtgt),
    .mil_o(mil), .sil_o(sil), .vsil_o(vsil), .mintthresh_o(mth), .sintthresh_o(sth), .vsintthresh_o(vsth),
    .vgein_o(vgein), .hgeie_o(hgeie), .mtvt_o(mtvt), .stvt_o(stvt), .vstvt_o(vstvt)
  );

  always #5 clk = ~clk;

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic csrw(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); req = 1; we = 1; addr = a; wd = d;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic csrr(input logic [11:0] a, output logic [63:0] d, output logic e);
    @(negedge clk); req = 1; we = 0; addr = a;
    #1 d = rd; e = err;
    @(negedge clk); req = 0;
  endtask

  // xnxti access: read with side effect; returns data and whether it claimed
  task automatic nxti(input logic [11:0] a, output logic [63:0] d, output logic c);
    @(negedge clk); req = 1; we = 1; addr = a; wd = 0;
    #1 d = rd; c = claim;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic trap_to(input trap_tgt_e t, input int l);
    @(negedge clk); trap = 1; ttgt = t; tlvl = 8'(l);
    @(negedge clk); trap = 0;
  endtask

  task automatic ret_from(input trap_tgt_e t);
    @(negedge clk); xret = 1; xtgt = t;
    @(negedge clk); xret = 0;
  endtask

  logic [63:0] d;
  logic e, c;

  initial begin
    priv = PRIV_M; virt = 0; req = 0; we = 0; addr = 0; wd = 0; ivalid = 0; r = '0;
    trap = 0; xret = 0; ttgt = TGT_NONE; xtgt = TGT_NONE; tlvl = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // M writes
    csrw(CSR_MTVT, 64'h8000_00FF);
    csrr(CSR_MTVT, d, e); chk(d, 64'h8000_00C0, "mtvt aligned to 64 B");
    csrw(CSR_MINTTHRESH, 64'h1_23);
    chk(64'(mth), 64'h23, "mintthresh 8 bits");
    csrw(CSR_HSTATUS, 64'(6'd5) << HSTATUS_VGEIN_LSB);
    chk(64'(vgein), 5, "vgein");
    csrr(CSR_HSTATUS, d, e); chk(d, 64'h5000, "hstatus.VGEIN readback");
    csrw(CSR_HGEIE, 64'hF0F0_0000_0000_0011);
    chk(64'(hgeie), 64'hF0F0_0000_0000_0011, "hgeie");
    csrr(12'h7C0, d, e); chk(64'(e), 1, "unknown CSR is an error");

    // HS writes its own and the VS CSRs
    priv = PRIV_S;
    csrw(CSR_STVT, 64'h8000_1000);
    csrw(CSR_SINTTHRESH, 64'h11);
    csrw(CSR_VSTVT, 64'h4000_0000);
    csrw(CSR_VSINTTHRESH, 64'h22);
    chk(stvt, 64'h8000_1000, "stvt");
    chk(vstvt, 64'h4000_0000, "vstvt");
    chk(64'(sth), 64'h11, "sintthresh");
    chk(64'(vsth), 64'h22, "vsintthresh");
    csrr(CSR_MTVT, d, e); chk(64'(e), 1, "HS cannot read mtvt"); chk(d, 0, "denied read is zero");
    csrw(CSR_MINTTHRESH, 64'h77); chk(64'(mth), 64'h23, "HS cannot write mintthresh");
    csrw(CSR_VSIE, 64'h222);
    csrr(CSR_VSIE, d, e); chk(d, 0, "vsie hardwired to zero"); chk(64'(e), 0, "vsie exists");
    csrr(CSR_SIE, d, e); chk(64'(e), 1, "HS sie belongs to the core, not here");

    // guest (V=1): S CSRs are the VS copies, hypervisor CSRs are denied
    virt = 1;
    csrr(CSR_STVT, d, e); chk(d, 64'h4000_0000, "guest stvt is vstvt");
    csrr(CSR_SINTTHRESH, d, e); chk(d, 64'h22, "guest sintthresh is vsintthresh");
    csrw(CSR_SINTTHRESH, 64'h33);
    chk(64'(vsth), 64'h33, "guest writes vsintthresh");
    chk(64'(sth), 64'h11, "HS threshold untouched by guest");
    csrr(CSR_VSTVT, d, e); chk(64'(e), 1, "guest cannot name vstvt directly");
    csrr(CSR_HGEIE, d, e); chk(64'(e), 1, "guest cannot read hgeie");
    csrw(CSR_HSTATUS, 0); chk(64'(vgein), 5, "guest cannot write vgein");
    csrw(CSR_SIE, 64'hFFFF);
    csrr(CSR_SIE, d, e); chk(d, 0, "guest sie (vsie) hardwired to zero"); chk(64'(e), 0, "guest sie exists");
    csrr(CSR_SIP, d, e); chk(d, 0, "guest sip (vsip) hardwired to zero"); chk(64'(e), 0, "guest sip exists");
    virt = 0;
    priv = PRIV_U;
    csrr(CSR_STVT, d, e); chk(64'(e), 1, "U cannot read stvt");
    priv = PRIV_M;
    csrw(CSR_MINTTHRESH, 0); csrw(CSR_SINTTHRESH, 0); csrw(CSR_VSINTTHRESH, 0);

    // level bookkeeping with nesting
    trap_to(TGT_M, 8'h40);  chk(64'(mil), 8'h40, "mil after trap");
    trap_to(TGT_M, 8'h80);  chk(64'(mil), 8'h80, "mil nested");
    csrr(CSR_MINTSTATUS, d, e); chk(d, 64'h8000_0000, "mintstatus.mil");
    ret_from(TGT_M);        chk(64'(mil), 8'h40, "mil after mret");
    trap_to(TGT_HS, 8'h11); chk(64'(sil), 8'h11, "sil after trap");
    trap_to(TGT_VS, 8'h22); chk(64'(vsil), 8'h22, "vsil after trap");
    chk(64'(sil), 8'h11, "sil untouched by VS trap");
    priv = PRIV_S; virt = 1;
    csrr(CSR_SINTSTATUS, d, e); chk(d, 64'h2200, "guest sintstatus shows vsil");
    virt = 0;
    csrr(CSR_SINTSTATUS, d, e); chk(d, 64'h1100, "HS sintstatus shows sil");
    priv = PRIV_M;
    ret_from(TGT_VS);       chk(64'(vsil), 0, "vsil after sret from VS");
    ret_from(TGT_HS);       chk(64'(sil), 0, "sil after sret");

    // xnxti. vspil is now 0 (after the trap at level 0x22 it saved 0).
    priv = PRIV_S; virt = 1;
    ivalid = 1; r = '0; r.priv = PRIV_S; r.v = 1; r.vsid = 6'd5; r.level = 8'h50; r.id = 10'd9;
    nxti(CSR_SNXTI, d, c);
    chk(d, 64'h4000_0000 + 8*9, "vsnxti returns vstvt + 8*id");
    chk(64'(c), 1, "vsnxti claims");
    chk(64'(vsil), 8'h50, "vsnxti sets vsil");
    r.vsid = 6'd6;
    nxti(CSR_SNXTI, d, c);
    chk(d, 0, "other guest's interrupt: 0"); chk(64'(c), 0, "no claim for other guest");
    r.vsid = 6'd5; r.shv = 1;
    nxti(CSR_SNXTI, d, c);
    chk(d, 0, "vectored interrupt: 0"); chk(64'(c), 0, "no claim for vectored");
    r.shv = 0; csrw(CSR_SINTTHRESH, 64'h60);
    nxti(CSR_SNXTI, d, c);
    chk(d, 0, "below threshold: 0"); chk(64'(c), 0, "no claim below threshold");
    virt = 0;
    r.v = 0; r.level = 8'h70; r.id = 10'd3;
    nxti(CSR_SNXTI, d, c);
    chk(d, 64'h8000_1000 + 8*3, "snxti for HS"); chk(64'(c), 1, "snxti claims");
    chk(64'(sil), 8'h70, "snxti sets sil");
    priv = PRIV_M;
    nxti(CSR_MNXTI, d, c);
    chk(d, 0, "mnxti with S interrupt: 0"); chk(64'(c), 0, "mnxti no claim");
    r.priv = PRIV_M;
    nxti(CSR_MNXTI, d, c);
    chk(d, 64'h8000_00C0 + 8*3, "mnxti"); chk(64'(c), 1, "mnxti claims");
    trap_to(TGT_M, 8'h90);   // mpil <- 0x70
    r.level = 8'h70;
    nxti(CSR_MNXTI, d, c);
    chk(d, 0, "mnxti not above mpil"); chk(64'(c), 0, "mnxti no claim at mpil");
    ivalid = 0; r.level = 8'hFF;
    nxti(CSR_MNXTI, d, c);
    chk(d, 0, "mnxti with nothing offered");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
