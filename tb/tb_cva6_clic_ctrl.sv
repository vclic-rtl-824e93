// tb_cva6_clic_ctrl -- self-checking test of the core-side CLIC controller.
//
// Directed cases walk through the paper's three rules while a guest runs:
// (i) an interrupt of a higher privilege traps to that privilege, (ii) an
// interrupt of the running guest goes to the guest (VS), (iii) an interrupt of
// another guest traps to the hypervisor only when that guest is marked as
// higher priority (hgeie). They also check thresholds, nesting levels, the
// enables, kill and the SHV vector address. A random phase compares the trap
// target with a reference decision table written separately in the testbench.
module tb_cva6_clic_ctrl;
  import vclic_pkg::*;

  localparam int unsigned G = 64;

  logic valid, kill, ready, virt, mie, sie, vs_sie, nxti, irq, shv_o, kill_o, taken;
  irq_req_t r;
  priv_e priv;
  logic [7:0] mil, sil, vsil, mth, sth, vsth, lvl_o;
  logic [5:0] vgein;
  logic [G-1:0] hgeie;
  logic [63:0] mtvt, stvt, vstvt, vec;
  trap_tgt_e tgt;
  logic [9:0] id_o;
  int checks = 0, failures = 0;

  cva6_clic_ctrl dut (
    .irq_valid_i(valid), .irq_i(r), .irq_kill_i(kill), .irq_ready_o(ready),
    .priv_i(priv), .virt_i(virt), .mie_i(mie), .sie_i(sie), .vs_sie_i(vs_sie),
    .mil_i(mil), .sil_i(sil), .vsil_i(vsil), .mintthresh_i(mth), .sintthresh_i(sth), .vsintthresh_i(vsth),
    .vgein_i(vgein), .hgeie_i(hgeie), .mtvt_i(mtvt), .stvt_i(stvt), .vstvt_i(vstvt),
    .nxti_claim_i(nxti), .irq_o(irq), .irq_tgt_o(tgt), .irq_id_o(id_o), .irq_level_o(lvl_o),
    .irq_shv_o(shv_o), .irq_vector_o(vec), .irq_kill_o(kill_o), .trap_taken_i(taken)
  );

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // reference decision table
  function automatic trap_tgt_e ref_tgt();
    int l = r.level;
    bit below_hs = virt || priv == PRIV_U;
    if (!valid || kill) return TGT_NONE;
    if (r.priv == PRIV_M)
      return ((priv != PRIV_M || mie) && l > mil && l > mth) ? TGT_M : TGT_NONE;
    if (priv == PRIV_M) return TGT_NONE;
    if (!r.v)
      return ((below_hs || sie) && l > sil && l > sth) ? TGT_HS : TGT_NONE;
    if (virt && r.vsid == vgein)
      return ((priv == PRIV_U || vs_sie) && l > vsil && l > vsth) ? TGT_VS : TGT_NONE;
    return ((below_hs || sie) && hgeie[r.vsid]) ? TGT_HS : TGT_NONE;
  endfunction

  task automatic set_irq(input priv_e p, input bit v, input int vsid, input int lvl, input int id);
    r = '0; r.priv = p; r.v = v; r.vsid = 6'(vsid); r.level = 8'(lvl); r.id = 10'(id); valid = 1;
  endtask

  initial begin
    valid = 0; kill = 0; nxti = 0; taken = 0; r = '0;
    priv = PRIV_S; virt = 1; mie = 0; sie = 0; vs_sie = 1;
    mil = 0; sil = 0; vsil = 0; mth = 0; sth = 0; vsth = 0;
    vgein = 6'd3; hgeie = '0;
    mtvt = 64'h8000_0000; stvt = 64'h8000_1000; vstvt = 64'h4000_0000;
    #1 chk(64'(irq), 0, "nothing offered");

    // guest 3 runs in VS
    set_irq(PRIV_M, 0, 0, 10, 5);
    #1 chk(64'(tgt), 64'(TGT_M), "(i) M interrupt traps to M from a guest");
    set_irq(PRIV_S, 0, 0, 10, 6);
    #1 chk(64'(tgt), 64'(TGT_HS), "(i) HS interrupt traps to HS from a guest");
    set_irq(PRIV_S, 1, 3, 10, 7);
    #1 chk(64'(tgt), 64'(TGT_VS), "(ii) own guest's interrupt goes to VS");
    vs_sie = 0;
    #1 chk(64'(tgt), 64'(TGT_NONE), "(ii) masked by vsstatus.SIE");
    vs_sie = 1; vsth = 8'd10;
    #1 chk(64'(tgt), 64'(TGT_NONE), "(ii) below vsintthresh");
    vsth = 8'd9;
    #1 chk(64'(tgt), 64'(TGT_VS), "(ii) above vsintthresh");
    vsil = 8'd10;
    #1 chk(64'(tgt), 64'(TGT_NONE), "(ii) nesting: not above running level");
    vsil = 0; vsth = 0;
    set_irq(PRIV_S, 1, 4, 200, 8);
    #1 chk(64'(tgt), 64'(TGT_NONE), "(iii) other guest, lower priority: stays");
    hgeie[4] = 1'b1;
    #1 chk(64'(tgt), 64'(TGT_HS), "(iii) other guest, higher priority: traps to HS");
    // hypervisor running (V=0): guest interrupt needs SIE and hgeie
    virt = 0; sie = 0;
    #1 chk(64'(tgt), 64'(TGT_NONE), "HS with SIE clear");
    sie = 1;
    #1 chk(64'(tgt), 64'(TGT_HS), "HS with SIE set");
    // M mode: only M interrupts with MIE
    priv = PRIV_M;
    #1 chk(64'(tgt), 64'(TGT_NONE), "nothing below M preempts M");
    set_irq(PRIV_M, 0, 0, 10, 5);
    #1 chk(64'(tgt), 64'(TGT_NONE), "M interrupt masked by MIE");
    mie = 1;
    #1 chk(64'(tgt), 64'(TGT_M), "M interrupt with MIE");
    mth = 8'd10;
    #1 chk(64'(tgt), 64'(TGT_NONE), "M below mintthresh");
    mth = 0;
    // kill withdraws
    kill = 1;
    #1 chk(64'(irq), 0, "kill withdraws");
    chk(64'(kill_o), 1, "kill forwarded");
    kill = 0;
    // ready only when the pipeline takes it, or on nxti
    #1 chk(64'(ready), 0, "no ready before trap");
    taken = 1;
    #1 chk(64'(ready), 1, "ready on trap taken");
    taken = 0; nxti = 1;
    #1 chk(64'(ready), 1, "ready on nxti claim");
    nxti = 0;
    // SHV vector address: own guest, line 7
    priv = PRIV_S; virt = 1;
    set_irq(PRIV_S, 1, 3, 10, 7); r.shv = 1;
    #1 chk(64'(shv_o), 1, "shv");
    chk(vec, 64'h4000_0038, "VS vector = vstvt + 8*7");
    chk(64'(id_o), 7, "id out");
    chk(64'(lvl_o), 10, "level out");
    set_irq(PRIV_S, 1, 4, 10, 9); r.shv = 1;
    #1 chk(64'(tgt), 64'(TGT_HS), "guest 4 to HS");
    chk(64'(shv_o), 0, "redirected guest interrupt is not vectored");

    // random against the table
    for (int t = 0; t < 20000; t++) begin
      valid = ($urandom % 8) != 0; kill = ($urandom % 10) == 0;
      r = '0; r.priv = ($urandom % 3 == 0) ? PRIV_M : PRIV_S; r.v = 1'($urandom);
      r.vsid = 6'($urandom % 8); r.level = 8'($urandom); r.id = 10'($urandom); r.shv = 1'($urandom);
      case ($urandom % 3) 0: priv = PRIV_M; 1: priv = PRIV_S; default: priv = PRIV_U; endcase
      virt = (priv != PRIV_M) && 1'($urandom);
      mie = 1'($urandom); sie = 1'($urandom); vs_sie = 1'($urandom);
      mil = 8'($urandom); sil = 8'($urandom % 128); vsil = 8'($urandom % 128);
      mth = 8'($urandom % 64); sth = 8'($urandom % 64); vsth = 8'($urandom % 64);
      vgein = 6'($urandom % 8); hgeie = G'($urandom);
      #1 chk(64'(tgt), 64'(ref_tgt()), "random target");
      chk(64'(irq), 64'(ref_tgt() != TGT_NONE), "random irq");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
