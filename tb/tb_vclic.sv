// tb_vclic -- self-checking test of the complete vCLIC (gateway, register file,
// arbitration tree, handshake FSM) through its register port and core-side
// handshake, at the default sizes (64 lines, 64 guests, 1 vsprio bit).
//
// Checks: the latency from a line edge to valid (2 cycles); the offered fields;
// that accepting an edge-triggered line claims it (pending bit cleared); that a
// higher-ranked line arriving while one is offered causes a kill and is then
// offered; that the vsprio of the line's guest decides between two guests
// whatever their levels; that level-triggered lines stay pending until the
// source drops; and that the guest view of the register file only sees its
// own lines.
module tb_vclic;
  import vclic_pkg::*;

  localparam int unsigned N = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] irq;
  logic req, we, err, valid, ready, kill;
  logic [ADDR_W-1:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] be;
  irq_req_t r;
  int checks = 0, failures = 0;
  int kills = 0;

  vclic dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq),
    .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr), .reg_wdata_i(wdata), .reg_be_i(be),
    .reg_rdata_o(rdata), .reg_err_o(err),
    .irq_valid_o(valid), .irq_o(r), .irq_ready_i(ready), .irq_kill_o(kill)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && kill) kills++;

  function automatic logic [ADDR_W-1:0] a(input int region, input int off);
    return ADDR_W'((region << REGION_LSB) | off);
  endfunction

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h @%0t", what, got, exp, $time);
    end
  endtask

  task automatic wr(input logic [ADDR_W-1:0] ad, input logic [31:0] d, input logic [3:0] b = 4'hF);
    @(negedge clk); req = 1; we = 1; addr = ad; wdata = d; be = b;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] ad, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = ad; be = 4'hF;
    #1 d = rdata;
    @(negedge clk); req = 0;
  endtask

  // configure line i: mode S (attr[7:6]=01) or M, edge, ctl, enable
  task automatic cfg_line(input int i, input bit m, input bit edge_t, input int ctl);
    wr(a(0, 'h1000 + 4*i), {8'(ctl), m ? 2'b11 : 2'b01, 3'b000, 1'b0, edge_t, 1'b0, 8'h01, 8'h00});
  endtask

  task automatic delegate(input int i, input int vsid);
    wr(a(1, 'h5000 + (i & ~3)), 32'({6'(vsid), 2'b01}) << (8 * (i % 4)), 4'b0001 << (i % 4));
  endtask

  // accept the current offer at the next negedge
  task automatic accept();
    ready = 1;
    @(negedge clk);
    ready = 0;
  endtask

  logic [31:0] d;
  int lat;

  initial begin
    irq = '0; req = 0; we = 0; addr = '0; wdata = '0; be = '0; ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(a(0, 0), 32'h0000_0030);         // nmbits = 1, nlbits = 8

    cfg_line(5, 0, 1, 8'h40);           // HS, edge
    cfg_line(6, 1, 1, 8'h10);           // M, edge
    cfg_line(20, 0, 1, 8'hF0);          // guest 2
    cfg_line(21, 0, 1, 8'h10);          // guest 9
    cfg_line(30, 0, 0, 8'h80);          // HS, level
    delegate(20, 2);
    delegate(21, 9);

    // latency: edge on line 5 at a posedge -> valid two edges later
    @(negedge clk); irq[5] = 1;
    lat = 0;
    while (!valid) begin @(posedge clk); lat++; #1; end
    chk(32'(lat), 2, "line-to-valid latency (cycles)");
    chk(32'(r.id), 5, "offered id");
    chk(32'(r.level), 32'h40, "offered level");
    chk(32'(r.priv), 32'(PRIV_S), "offered priv");
    chk(32'(r.v), 0, "offered v");
    @(negedge clk); irq[5] = 0;
    accept();
    rd(a(0, 'h1000 + 4*5), d);
    chk(32'(d[0]), 0, "edge ip cleared by claim");
    chk(32'(valid), 0, "nothing more offered");

    // kill: guest line 21 offered, then M line 6 fires
    @(negedge clk); irq[21] = 1; @(negedge clk); irq[21] = 0;
    @(negedge clk);
    chk(32'(valid), 1, "guest line offered");
    chk(32'(r.id), 21, "guest line id");
    chk(32'(r.v), 1, "guest line v");
    chk(32'(r.vsid), 9, "guest line vsid");
    begin
      int k0;
      k0 = kills;
      irq[6] = 1; @(negedge clk); irq[6] = 0;
      @(negedge clk);
      chk(32'(kills - k0), 1, "one kill when M line overtakes");
    end
    @(negedge clk);
    chk(32'(r.id), 6, "M line offered after kill");
    accept();
    @(negedge clk);
    chk(32'(r.id), 21, "guest line offered again after M claim");
    accept();

    // vsprio: guest 2 line 20 (ctl F0) vs guest 9 line 21 (ctl 10)
    wr(a(1, 'h6008), 32'h0000_0100, 4'b0010);   // vsprio[9] = 1
    irq[20] = 1; irq[21] = 1; @(negedge clk); irq[20] = 0; irq[21] = 0;
    repeat (2) @(negedge clk);
    chk(32'(r.id), 21, "guest 9 (vsprio 1) beats guest 2 (vsprio 0) despite level");
    accept(); @(negedge clk);
    chk(32'(r.id), 20, "then guest 2");
    accept();
    wr(a(1, 'h6008), 32'h0, 4'b0010);            // vsprio[9] = 0
    wr(a(1, 'h6000), 32'h0001_0000, 4'b0100);    // vsprio[2] = 1
    irq[20] = 1; irq[21] = 1; @(negedge clk); irq[20] = 0; irq[21] = 0;
    repeat (2) @(negedge clk);
    chk(32'(r.id), 20, "guest 2 first after vsprio swap");
    accept(); @(negedge clk); accept();

    // level-triggered: stays pending while the line is high, even after a claim
    irq[30] = 1;
    repeat (3) @(negedge clk);
    chk(32'(r.id), 30, "level line offered");
    accept();
    @(negedge clk);
    chk(32'(valid), 1, "level line offered again while high");
    irq[30] = 0;
    repeat (2) @(negedge clk);
    chk(32'(valid), 0, "level line gone when source drops");

    // guest view: guest 2 (region 4) sees line 20, not 21
    rd(a(4, 'h1000 + 4*20), d); chk(d[31:24], 8'hF0, "guest 2 sees its line");
    rd(a(4, 'h1000 + 4*21), d); chk(d, 0, "guest 2 does not see guest 9 line");
    // guest sets its own pending bit by software
    wr(a(4, 'h1000 + 4*20), 32'h1, 4'b0001);
    @(negedge clk);
    chk(32'(r.id), 20, "software-set guest line offered");
    accept();

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
