// tb_clic_regfile -- self-checking test of the vCLIC register file and its
// privilege-partitioned decoding.
//
// Covers: cliccfg (M-only write, nlbits clamp), the per-line word
// {ctl, attr, ie, ip} with byte enables and unimplemented intctl bits reading
// one, the M/S/VS views (what each sees and may change), clicintv and vsprio
// (hypervisor only), software writes to ip, and the error flag. Expected values
// come from a small shadow model kept by the testbench.
module tb_clic_regfile;
  import vclic_pkg::*;

  localparam int unsigned N = 16, G = 8, CTLB = 6, VW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req, we, err;
  logic [ADDR_W-1:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0]  be;
  logic [N-1:0] ip, ip_we, ip_wd, trig_edge, trig_neg, ie, shv, v;
  priv_e [N-1:0] priv;
  logic [N-1:0][7:0] intctl;
  logic [N-1:0][5:0] vsid;
  logic [G-1:0][VW-1:0] vsprio;
  logic [3:0] nlbits;
  int checks = 0, failures = 0;

  clic_regfile #(.NumSrc(N), .NumVsid(G), .IntCtlBits(CTLB), .VsprioWidth(VW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .be_i(be), .rdata_o(rdata), .err_o(err), .ip_i(ip), .ip_we_o(ip_we), .ip_wdata_o(ip_wd),
    .trig_edge_o(trig_edge), .trig_neg_o(trig_neg), .ie_o(ie), .priv_o(priv), .intctl_o(intctl),
    .shv_o(shv), .v_o(v), .vsid_o(vsid), .vsprio_o(vsprio), .nlbits_o(nlbits)
  );

  always #5 clk = ~clk;

  function automatic logic [ADDR_W-1:0] a(input int region, input int off);
    return ADDR_W'((region << REGION_LSB) | off);
  endfunction

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [ADDR_W-1:0] ad, input logic [31:0] d, input logic [3:0] b = 4'hF);
    @(negedge clk);
    req = 1'b1; we = 1'b1; addr = ad; wdata = d; be = b;
    @(negedge clk);
    req = 1'b0; we = 1'b0;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] ad, output logic [31:0] d, output logic e);
    @(negedge clk);
    req = 1'b1; we = 1'b0; addr = ad; be = 4'hF;
    #1 d = rdata; e = err;
    @(negedge clk);
    req = 1'b0;
  endtask

  logic [31:0] d;
  logic e;

  initial begin
    req = 0; we = 0; addr = '0; wdata = '0; be = '0; ip = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // reset state: all lines M mode (nmbits = 0), disabled
    rd(a(0, 'h1000 + 4*2), d, e);
    chk(d, {8'h03, 8'hC0, 8'h00, 8'h00}, "reset line word (ctl low bits read 1, mode M)");
    chk(32'(e), 0, "no error on valid read");
    chk(32'(priv[2]), 32'(PRIV_M), "reset priv M");

    // cliccfg: written from M, nlbits clamped to 8, nmbits to 1
    wr(a(0, 0), 32'h0000_007E);     // nmbits=3 -> 1, nlbits=15 -> 8
    rd(a(0, 0), d, e);
    chk(d, 32'h0000_0030, "cliccfg clamp");
    chk(32'(nlbits), 8, "nlbits out");
    wr(a(0, 0), 32'h0000_0026);     // nmbits=1, nlbits=3
    wr(a(1, 0), 32'h0000_0000);     // S write ignored
    rd(a(1, 0), d, e);
    chk(d, 32'h0000_0026, "cliccfg S write ignored, S read ok");

    // M writes line 4: ctl=0xA4, attr mode S + edge + shv, ie=1
    wr(a(0, 'h1000 + 4*4), {8'hA4, 8'b0100_0011, 8'h01, 8'h00});
    chk(32'(ie[4]), 1, "ie out");
    chk(32'(intctl[4]), 32'hA7, "intctl out (low bits forced 1)");
    chk(32'(priv[4]), 32'(PRIV_S), "priv S");
    chk(32'(trig_edge[4]), 1, "edge out");
    chk(32'(shv[4]), 1, "shv out");
    // byte enable: only ctl byte
    wr(a(0, 'h1000 + 4*4), 32'h4000_0000, 4'b1000);
    chk(32'(intctl[4]), 32'h43, "ctl byte write");
    chk(32'(ie[4]), 1, "ie untouched by ctl byte write");

    // line 6 stays M mode: invisible from S
    wr(a(0, 'h1000 + 4*6), {8'hFF, 8'hC0, 8'h01, 8'h00});
    rd(a(1, 'h1000 + 4*6), d, e);
    chk(d, 0, "M line hidden from S");
    wr(a(1, 'h1000 + 4*6), 32'h0000_0000);
    chk(32'(ie[6]), 1, "M line not writable from S");
    // S sees line 4
    rd(a(1, 'h1000 + 4*4), d, e);
    chk(d, {8'h43, 8'b0100_0011, 8'h01, 8'h00}, "S line visible from S");
    // S cannot raise a line to M
    wr(a(1, 'h1000 + 4*4), {8'h43, 8'b1100_0011, 8'h01, 8'h00});
    chk(32'(priv[4]), 32'(PRIV_S), "S cannot set mode M");

    // delegate lines 4 and 5 to guest 3 (bytes 4,5 of clicintv), line 7 to guest 2
    wr(a(0, 'h1000 + 4*5), {8'h80, 8'b0100_0000, 8'h01, 8'h00});
    wr(a(0, 'h1000 + 4*7), {8'h80, 8'b0100_0000, 8'h01, 8'h00});
    wr(a(1, 'h5004), {8'h00, 8'h00, 8'b0000_1101, 8'b0000_1101}, 4'b0011);
    wr(a(1, 'h5004), {8'h00, 8'b0000_1001, 8'h00, 8'h00}, 4'b0100);  // line 6 is M: ignored from S
    wr(a(0, 'h5004), {8'b0000_1001, 8'h00, 8'h00, 8'h00}, 4'b1000);  // line 7 from M
    chk(32'(v[4]), 1, "v[4]");
    chk(32'(vsid[4]), 3, "vsid[4]");
    chk(32'(v[6]), 0, "intv of M line not writable from S");
    chk(32'(vsid[7]), 2, "vsid[7] written by M");
    rd(a(1, 'h5004), d, e);
    chk(d, 32'h090_00D0D, "clicintv readback");

    // guest 3 (region 5) sees lines 4 and 5 only
    rd(a(5, 'h1000 + 4*4), d, e);
    chk(d, {8'h43, 8'b0100_0011, 8'h01, 8'h00}, "guest 3 sees line 4");
    rd(a(5, 'h1000 + 4*7), d, e);
    chk(d, 0, "guest 3 does not see line 7");
    rd(a(4, 'h1000 + 4*7), d, e);
    chk(d[31:24], 8'h83, "guest 2 sees line 7");
    // guest writes ie/ctl but cannot change mode
    wr(a(5, 'h1000 + 4*5), {8'h20, 8'b1100_0000, 8'h00, 8'h00});
    chk(32'(ie[5]), 0, "guest clears ie");
    chk(32'(intctl[5]), 32'h23, "guest writes ctl");
    chk(32'(priv[5]), 32'(PRIV_S), "guest cannot change mode");
    wr(a(5, 'h1000 + 4*7), {8'h00, 8'h00, 8'h00, 8'h00});
    chk(32'(ie[7]), 1, "guest 3 cannot write guest 2 line");
    // guests cannot reach clicintv / vsprio
    rd(a(5, 'h5004), d, e);
    chk(32'(e), 1, "guest intv access is an error");
    chk(d, 0, "guest intv reads 0");
    wr(a(5, 'h5004), 32'h0, 4'hF);
    chk(32'(v[4]), 1, "guest cannot undelegate");

    // vsprio: 2 bits per guest, bytes
    wr(a(1, 'h6000), 32'h0302_0100);
    wr(a(1, 'h6004), 32'h0000_0003, 4'b0001);
    chk(32'(vsprio[3]), 3, "vsprio[3]");
    chk(32'(vsprio[4]), 3, "vsprio[4]");
    chk(32'(vsprio[1]), 1, "vsprio[1]");
    rd(a(0, 'h6000), d, e);
    chk(d, 32'h0302_0100, "vsprio readback");
    wr(a(4, 'h6000), 32'h0);
    chk(32'(vsprio[3]), 3, "guest cannot write vsprio");

    // software write of ip through the guest view and reading ip back
    @(negedge clk);
    req = 1'b1; we = 1'b1; addr = a(5, 'h1000 + 4*4); wdata = 32'h1; be = 4'b0001;
    #1 chk(32'(ip_we), 32'h10, "ip write enable");
    chk(32'(ip_wd), 32'h10, "ip write data");
    addr = a(4, 'h1000 + 4*4);
    #1 chk(32'(ip_we), 0, "ip write blocked for other guest");
    @(negedge clk);
    req = 1'b0; we = 1'b0;
    ip = 16'h0010;
    rd(a(5, 'h1000 + 4*4), d, e);
    chk(32'(d[0]), 1, "ip read");

    // errors: region beyond the guests, unmapped offset
    rd(a(2 + G, 'h1000), d, e);
    chk(32'(e), 1, "region beyond guests is an error");
    rd(a(0, 'h0800), d, e);
    chk(32'(e), 1, "unmapped offset is an error");
    rd(a(0, 'h1000 + 4*N), d, e);
    chk(32'(e), 1, "line beyond NumSrc is an error");

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
