// tb_clic_arbiter -- self-checking test of the arbitration tree.
//
// Two trees are tested side by side: one at the default sizes (64 lines, 64
// guests, 1 guest-priority bit) and one with a line count that is not a power
// of two (12 lines, 2 guest-priority bits). Random pending/enable/mode/level/
// delegation patterns are applied; a brute-force linear search over all lines,
// written from the ranking rule (mode, then guest priority, then clicintctl,
// then the higher line number), gives the expected winner. Directed cases check
// that M beats HS beats VS regardless of level, and that vsprio reorders guests.
module tb_clic_arbiter;
  import vclic_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ big tree
  localparam int unsigned N1 = 64, G1 = 64, W1 = 1;
  logic [N1-1:0] ip1, ie1, shv1, v1;
  priv_e [N1-1:0] pr1;
  logic [N1-1:0][7:0] ctl1;
  logic [N1-1:0][5:0] vs1;
  logic [G1-1:0][W1-1:0] vp1;
  logic [3:0] nl1;
  logic val1;
  irq_req_t r1;
  clic_arbiter dut1 (
    .ip_i(ip1), .ie_i(ie1), .priv_i(pr1), .intctl_i(ctl1), .shv_i(shv1), .v_i(v1),
    .vsid_i(vs1), .vsprio_i(vp1), .nlbits_i(nl1), .valid_o(val1), .req_o(r1)
  );

  // ------------------------------------------------------------ odd tree
  localparam int unsigned N2 = 12, G2 = 8, W2 = 2;
  logic [N2-1:0] ip2, ie2, shv2, v2;
  priv_e [N2-1:0] pr2;
  logic [N2-1:0][7:0] ctl2;
  logic [N2-1:0][5:0] vs2;
  logic [G2-1:0][W2-1:0] vp2;
  logic [3:0] nl2;
  logic val2;
  irq_req_t r2;
  clic_arbiter #(.NumSrc(N2), .NumVsid(G2), .VsprioWidth(W2)) dut2 (
    .ip_i(ip2), .ie_i(ie2), .priv_i(pr2), .intctl_i(ctl2), .shv_i(shv2), .v_i(v2),
    .vsid_i(vs2), .vsprio_i(vp2), .nlbits_i(nl2), .valid_o(val2), .req_o(r2)
  );

  // reference: rank of one line as an integer
  function automatic longint unsigned rank(input priv_e p, input logic v, input int gp, input logic [7:0] ctl);
    int r;
    r = (p == PRIV_M) ? 3 : (v ? 1 : 2);
    return longint'(r) * 65536 + longint'(gp) * 256 + longint'(ctl);
  endfunction

  task automatic check1(input string what);
    longint unsigned best = 0;
    int bid = -1;
    for (int i = 0; i < N1; i++) begin
      if (ip1[i] && ie1[i]) begin
        automatic int gp = (pr1[i] != PRIV_M && v1[i]) ? int'(vp1[vs1[i]]) : 0;
        automatic longint unsigned k = rank(pr1[i], v1[i], gp, ctl1[i]);
        if (bid < 0 || k >= best) begin best = k; bid = i; end
      end
    end
    #1;
    chk(32'(val1), 32'(bid >= 0), {what, " valid"});
    if (bid >= 0) begin
      chk(32'(r1.id), 32'(bid), {what, " id"});
      chk(32'(r1.level), 32'(ctl1[bid] | (8'hFF >> nl1)), {what, " level"});
      chk(32'(r1.priv), 32'(pr1[bid]), {what, " priv"});
      chk(32'(r1.vsid), 32'(vs1[bid]), {what, " vsid"});
    end
  endtask

  task automatic check2(input string what);
    longint unsigned best = 0;
    int bid = -1;
    for (int i = 0; i < N2; i++) begin
      if (ip2[i] && ie2[i]) begin
        automatic int gp = (pr2[i] != PRIV_M && v2[i] && vs2[i] < G2) ? int'(vp2[vs2[i]]) : 0;
        automatic longint unsigned k = rank(pr2[i], v2[i], gp, ctl2[i]);
        if (bid < 0 || k >= best) begin best = k; bid = i; end
      end
    end
    #1;
    chk(32'(val2), 32'(bid >= 0), {what, " valid (12 lines)"});
    if (bid >= 0) begin
      chk(32'(r2.id), 32'(bid), {what, " id (12 lines)"});
      chk(32'(r2.v), 32'(v2[bid] && pr2[bid] != PRIV_M), {what, " v (12 lines)"});
      chk(32'(r2.shv), 32'(shv2[bid]), {what, " shv (12 lines)"});
    end
  endtask

  initial begin
    // nothing pending
    ip1 = '0; ie1 = '1; shv1 = '0; v1 = '0; pr1 = '{default: PRIV_M}; ctl1 = '0; vs1 = '0; vp1 = '0; nl1 = 4'd8;
    ip2 = '0; ie2 = '1; shv2 = '0; v2 = '0; pr2 = '{default: PRIV_M}; ctl2 = '0; vs2 = '0; vp2 = '0; nl2 = 4'd8;
    check1("idle"); check2("idle");

    // directed: M low level beats HS high level beats VS highest level
    ip1 = '0; pr1 = '{default: PRIV_S};
    ip1[10] = 1; pr1[10] = PRIV_M; ctl1[10] = 8'h01;
    ip1[20] = 1; ctl1[20] = 8'hF0;
    ip1[30] = 1; v1[30] = 1; ctl1[30] = 8'hFF; vs1[30] = 6'd5; vp1[5] = 1'b1;
    check1("M over HS over VS");
    chk(32'(r1.id), 10, "directed M wins");
    ip1[10] = 0; check1("HS over VS"); chk(32'(r1.id), 20, "directed HS wins");
    ip1[20] = 0; check1("VS alone"); chk(32'(r1.id), 30, "directed VS wins");
    // guest priority beats the guests' own levels
    ip1[40] = 1; v1[40] = 1; ctl1[40] = 8'h10; vs1[40] = 6'd7; vp1[7] = 1'b0;
    check1("vsprio high guest"); chk(32'(r1.id), 30, "guest 5 (vsprio 1) wins");
    vp1[7] = 1'b1; vp1[5] = 1'b0;
    check1("vsprio swap"); chk(32'(r1.id), 40, "guest 7 wins after vsprio swap");
    // tie: same key -> higher id
    ip1 = '0; v1 = '0; ip1[3] = 1; ip1[33] = 1; ctl1[3] = 8'h55; ctl1[33] = 8'h55; pr1[3] = PRIV_S; pr1[33] = PRIV_S;
    check1("tie"); chk(32'(r1.id), 33, "tie goes to higher id");
    ie1[33] = 0; check1("disabled"); chk(32'(r1.id), 3, "disabled line ignored");
    // level masking with nlbits = 2
    nl1 = 4'd2; check1("nlbits"); chk(32'(r1.level), 32'h7F, "level 0x55 with nlbits=2 -> 0x7F");

    // random
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N1; i++) begin
        ip1[i] = ($urandom % 4) == 0; ie1[i] = ($urandom % 4) != 0; shv1[i] = 1'($urandom);
        v1[i] = 1'($urandom); pr1[i] = ($urandom % 3 == 0) ? PRIV_M : PRIV_S;
        ctl1[i] = ($urandom % 2) ? 8'($urandom % 4) * 8'h40 : 8'($urandom); vs1[i] = 6'($urandom);
      end
      vp1 = G1'($urandom) ^ (G1'($urandom) << 32);
      nl1 = 4'($urandom % 9);
      for (int i = 0; i < N2; i++) begin
        ip2[i] = ($urandom % 3) == 0; ie2[i] = 1'($urandom) | 1'($urandom); shv2[i] = 1'($urandom);
        v2[i] = 1'($urandom); pr2[i] = ($urandom % 4 == 0) ? PRIV_M : PRIV_S;
        ctl2[i] = 8'($urandom % 3) * 8'h40; vs2[i] = 6'($urandom % G2);
      end
      vp2 = 16'($urandom);
      nl2 = 4'($urandom % 9);
      check1("random"); check2("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
