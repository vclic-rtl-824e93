// tb_vclic_cva6_top -- end-to-end test of one core's interrupt subsystem at its
// default sizes (64 lines, 64 guests, 1 vsprio bit), with no parameter
// overrides.
//
// The testbench stands in for the rest of the core: a small hart model keeps
// the privilege (priv, V), takes every trap the controller requests in the
// same cycle (trap_taken), pushes the interrupted mode on a stack, clears the
// target's interrupt-enable bit as a RISC-V trap does, and restores both on
// xRET. The test plays a two-guest, mixed-criticality scenario: guest 1 (a
// general-purpose OS) and guest 2 (a real-time OS, higher vsprio) share the
// hart under a hypervisor. It counts how often each mechanism happened and
// fails any that never did:
//   direct injection to the running guest, nesting by level, the guest level
//   threshold, tail-chaining through vsnxti, kill of a stale offer, M and HS
//   traps, redirection of a higher-priority guest's interrupt to the hypervisor
//   and blocking of a lower-priority one, vsprio ordering, SHV vectoring,
//   level-triggered lines, and the hypervisor clearing a pending bit.
// It also checks the latency from an interrupt edge to the trap (2 cycles).
module tb_vclic_cva6_top;
  import vclic_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [63:0] irq_lines;
  logic req, we, rerr;
  logic [ADDR_W-1:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] be;
  logic csr_req, csr_we, csr_err;
  logic [11:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  priv_e priv;
  logic virt, mie, sie, vs_sie;
  logic irq, shv, kill, taken, xret;
  trap_tgt_e tgt, xret_tgt;
  logic [9:0] id;
  logic [7:0] level;
  logic [63:0] vector;
  logic pipe_en;

  vclic_cva6_top dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq_lines),
    .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr), .reg_wdata_i(wdata), .reg_be_i(be),
    .reg_rdata_o(rdata), .reg_err_o(rerr),
    .csr_req_i(csr_req), .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_err_o(csr_err),
    .priv_i(priv), .virt_i(virt), .mie_i(mie), .sie_i(sie), .vs_sie_i(vs_sie),
    .irq_o(irq), .irq_tgt_o(tgt), .irq_id_o(id), .irq_level_o(level), .irq_shv_o(shv),
    .irq_vector_o(vector), .irq_kill_o(kill), .trap_taken_i(taken), .xret_i(xret), .xret_tgt_i(xret_tgt)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h @%0t", what, got, exp, $time);
    end
  endtask

  // ------------------------------------------------------------ mechanisms
  typedef enum int {
    M_TRAP_M, M_TRAP_HS, M_TRAP_VS, M_REDIRECT, M_BLOCKED, M_NESTING, M_THRESHOLD,
    M_TAILCHAIN, M_KILL, M_SHV, M_VSPRIO, M_LEVEL_LINE, M_SW_CLEAR, M_COUNT
  } mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"trap to M", "trap to HS", "direct injection to VS",
    "guest interrupt redirected to HS", "lower-priority guest blocked", "nesting",
    "threshold masking", "tail-chaining (vsnxti)", "kill", "SHV vectoring", "vsprio ordering",
    "level-triggered line", "hypervisor clears pending bit"};

  // ------------------------------------------------------------ hart model
  typedef struct { priv_e p; logic v; trap_tgt_e t; } frame_t;
  typedef struct { trap_tgt_e t; int id; int lvl; logic shv; logic [63:0] vec; longint cyc; } trap_ev_t;
  frame_t   stack [$];
  trap_ev_t evq [$];
  longint   cyc = 0;

  assign taken = irq && pipe_en;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && kill) mech[M_KILL]++;
    if (rst_n && taken) begin
      trap_ev_t ev;
      ev.t = tgt; ev.id = int'(id); ev.lvl = int'(level); ev.shv = shv; ev.vec = vector; ev.cyc = cyc;
      evq.push_back(ev);
      stack.push_back('{p: priv, v: virt, t: tgt});
      if (stack.size() > 1 && stack[$-1].t == tgt) mech[M_NESTING]++;
      unique case (tgt)
        TGT_M:  begin priv <= PRIV_M; virt <= 1'b0; mie    <= 1'b0; mech[M_TRAP_M]++;  end
        TGT_HS: begin priv <= PRIV_S; virt <= 1'b0; sie    <= 1'b0; mech[M_TRAP_HS]++; end
        TGT_VS: begin priv <= PRIV_S; virt <= 1'b1; vs_sie <= 1'b0; mech[M_TRAP_VS]++; end
        default: ;
      endcase
      if (shv) mech[M_SHV]++;
    end
  end

  task automatic do_xret();
    frame_t f;
    @(negedge clk);
    f = stack[$];
    xret = 1; xret_tgt = f.t;
    @(posedge clk);
    void'(stack.pop_back());
    priv <= f.p; virt <= f.v;
    unique case (f.t)
      TGT_M:  mie    <= 1'b1;
      TGT_HS: sie    <= 1'b1;
      TGT_VS: vs_sie <= 1'b1;
      default: ;
    endcase
    @(negedge clk);
    xret = 0;
  endtask

  task automatic wait_trap(output trap_ev_t ev, input int max_cycles = 50);
    int n = 0;
    while (evq.size() == 0 && n < max_cycles) begin @(negedge clk); n++; end
    if (evq.size() == 0) begin
      failures++; checks++;
      $display("FAIL no trap within %0d cycles @%0t", max_cycles, $time);
      ev = '{t: TGT_NONE, id: -1, lvl: 0, shv: 0, vec: 0, cyc: 0};
    end else begin
      ev = evq.pop_front();
    end
  endtask

  task automatic expect_no_trap(input int n, input string what);
    repeat (n) @(negedge clk);
    chk(64'(evq.size()), 0, what);
  endtask

  // ------------------------------------------------------------ bus helpers
  function automatic logic [ADDR_W-1:0] a(input int region, input int off);
    return ADDR_W'((region << REGION_LSB) | off);
  endfunction

  task automatic wr(input logic [ADDR_W-1:0] ad, input logic [31:0] d, input logic [3:0] b = 4'hF);
    @(negedge clk); req = 1; we = 1; addr = ad; wdata = d; be = b;
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] ad, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = ad; be = 4'hF;
    #1 d = rdata;
    @(negedge clk); req = 0;
  endtask

  task automatic csrw(input logic [11:0] ad, input logic [63:0] d);
    @(negedge clk); csr_req = 1; csr_we = 1; csr_addr = ad; csr_wdata = d;
    #1 chk(64'(csr_err), 0, "csr write allowed");
    @(negedge clk); csr_req = 0; csr_we = 0;
  endtask

  task automatic csrr(input logic [11:0] ad, output logic [63:0] d, input logic side = 0);
    @(negedge clk); csr_req = 1; csr_we = side; csr_addr = ad; csr_wdata = 0;
    #1 d = csr_rdata;
    if (side && csr_rdata != 0) mech[M_TAILCHAIN]++;
    @(negedge clk); csr_req = 0; csr_we = 0;
  endtask

  // line i: M or S mode, edge or level, shv, level/priority byte
  task automatic cfg_line(input int i, input bit m, input bit edge_t, input bit shv_b, input int ctl);
    wr(a(0, 'h1000 + 4*i), {8'(ctl), m ? 2'b11 : 2'b01, 3'b000, 1'b0, edge_t, shv_b, 8'h01, 8'h00});
  endtask

  task automatic delegate(input int i, input int vsid);
    wr(a(1, 'h5000 + (i & ~3)), 32'({6'(vsid), 2'b01}) << (8 * (i % 4)), 4'b0001 << (i % 4));
  endtask

  task automatic pulse(input int i);
    @(negedge clk); irq_lines[i] = 1;
    @(negedge clk); irq_lines[i] = 0;
  endtask

  localparam logic [63:0] MTVT = 64'h8000_0000, STVT = 64'h8000_4000, VSTVT = 64'h4000_0000;

  trap_ev_t ev, ev2;
  logic [63:0] d64, saved_pil;
  logic [31:0] d32;
  longint t0;

  initial begin
    irq_lines = '0; req = 0; we = 0; addr = '0; wdata = '0; be = '0;
    csr_req = 0; csr_we = 0; csr_addr = '0; csr_wdata = '0;
    priv = PRIV_M; virt = 0; mie = 0; sie = 0; vs_sie = 0; xret = 0; xret_tgt = TGT_NONE;
    pipe_en = 1;
    foreach (mech[i]) mech[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------------------------------------------- machine-mode setup
    wr(a(0, 0), 32'h0000_0030);                   // nmbits = 1, nlbits = 8
    cfg_line(3,  1, 1, 1, 8'h80);                 // M timer, vectored
    cfg_line(10, 0, 1, 1, 8'h40);  delegate(10, 1);   // guest 1, vectored
    cfg_line(11, 0, 0, 0, 8'h40);  delegate(11, 2);   // guest 2, level-triggered device
    cfg_line(12, 0, 1, 0, 8'h20);  delegate(12, 1);
    cfg_line(13, 0, 1, 0, 8'hC0);  delegate(13, 1);
    cfg_line(14, 0, 1, 0, 8'h60);  delegate(14, 1);
    cfg_line(15, 0, 1, 0, 8'hFF);  delegate(15, 3);   // guest 3, not above guest 1
    cfg_line(20, 0, 1, 0, 8'h90);                     // hypervisor line
    wr(a(1, 'h6000), 32'h0001_0000, 4'b0100);         // vsprio[2] = 1 (critical guest)
    csrw(CSR_MTVT, MTVT);
    csrw(CSR_STVT, STVT);
    csrw(CSR_VSTVT, VSTVT);
    csrw(CSR_HGEIE, 64'h4);                           // guest 2 may preempt guest 1
    csrw(CSR_HSTATUS, 64'(6'd1) << HSTATUS_VGEIN_LSB);
    // enter guest 1
    priv = PRIV_S; virt = 1; mie = 1; sie = 1; vs_sie = 1;

    // ---------------------------------------------- 1. direct injection + latency
    @(negedge clk); irq_lines[10] = 1; t0 = cyc;
    @(negedge clk); irq_lines[10] = 0;
    wait_trap(ev);
    chk(64'(ev.t), 64'(TGT_VS), "line 10 goes straight to guest 1");
    chk(64'(ev.id), 10, "cause id 10");
    chk(64'(ev.cyc - t0), 2, "edge to trap latency: 2 cycles");
    chk(64'(ev.shv), 1, "line 10 vectored");
    chk(ev.vec, VSTVT + 8*10, "vector from vstvt");
    do_xret();

    // ---------------------------------------------- 2. nesting by level
    pulse(12);
    wait_trap(ev);
    chk(64'(ev.id), 12, "low-level guest interrupt");
    csrr(CSR_SCAUSE, saved_pil);                      // preemptible handler: save xpil,
    @(negedge clk); vs_sie = 1;                       // then re-enable
    pulse(13);
    wait_trap(ev2);
    chk(64'(ev2.t), 64'(TGT_VS), "nested trap in guest");
    chk(64'(ev2.id), 13, "higher level preempts");
    csrr(CSR_SINTSTATUS, d64);
    chk(d64[15:8], 8'hC0, "guest level = 0xC0 while nested");
    do_xret();
    csrr(CSR_SINTSTATUS, d64);
    chk(d64[15:8], 8'h20, "guest level back to 0x20");
    @(negedge clk); vs_sie = 0;
    csrw(CSR_SCAUSE, saved_pil);                      // restore xpil before returning
    do_xret();
    csrr(CSR_SINTSTATUS, d64);
    chk(d64[15:8], 8'h00, "guest level back to 0");

    // ---------------------------------------------- 3. threshold
    csrw(CSR_SINTTHRESH, 64'h50);                     // guest writes vsintthresh
    pulse(12);
    expect_no_trap(10, "below guest threshold: no trap");
    mech[M_THRESHOLD] += (evq.size() == 0);
    csrw(CSR_SINTTHRESH, 64'h00);
    wait_trap(ev);
    chk(64'(ev.id), 12, "taken once the threshold drops");
    do_xret();

    // ---------------------------------------------- 4. tail-chaining via vsnxti
    pulse(14);
    wait_trap(ev);
    chk(64'(ev.id), 14, "line 14 taken");
    pulse(12);                                        // arrives during the handler
    repeat (3) @(negedge clk);
    csrr(CSR_SNXTI, d64, 1'b1);                       // guest's snxti is vsnxti
    chk(d64, VSTVT + 8*12, "vsnxti returns the next handler entry");
    csrr(CSR_SINTSTATUS, d64);
    chk(d64[15:8], 8'h20, "vsnxti moved the guest level to 0x20");
    csrr(CSR_SNXTI, d64, 1'b1);
    chk(d64, 0, "nothing more to chain");
    chk(64'(evq.size()), 0, "chained interrupt did not trap");
    do_xret();

    // ---------------------------------------------- 5. kill and M trap
    @(negedge clk); vs_sie = 0;                       // guest masks interrupts
    pulse(12);
    repeat (3) @(negedge clk);
    begin
      int k0;
      k0 = mech[M_KILL];
      pulse(3);
      wait_trap(ev);
      chk(64'(mech[M_KILL] - k0), 1, "stale guest offer killed");
    end
    chk(64'(ev.t), 64'(TGT_M), "M interrupt preempts the guest");
    chk(64'(ev.id), 3, "cause id 3");
    chk(ev.vec, MTVT + 8*3, "vector from mtvt");
    do_xret();
    @(negedge clk); vs_sie = 1;
    wait_trap(ev);
    chk(64'(ev.id), 12, "guest interrupt taken after unmasking");
    do_xret();

    // ---------------------------------------------- 6. lower-priority guest blocked
    pulse(15);
    expect_no_trap(20, "guest 3 interrupt does not leave guest 1");
    mech[M_BLOCKED] += (evq.size() == 0);

    // ---------------------------------------------- 7. redirect to HS, switch, inject
    @(negedge clk); irq_lines[11] = 1;                // level-triggered device of guest 2
    wait_trap(ev);
    chk(64'(ev.t), 64'(TGT_HS), "guest 2 interrupt traps to the hypervisor");
    chk(64'(ev.id), 11, "cause id 11");
    chk(64'(ev.shv), 0, "redirected interrupt is not vectored");
    mech[M_REDIRECT]++;
    // hypervisor: drop guest 3's pending edge, switch to guest 2
    wr(a(1, 'h1000 + 4*15), 32'h0, 4'b0001);
    rd(a(1, 'h1000 + 4*15), d32);
    chk(64'(d32[0]), 0, "hypervisor cleared guest 3 pending bit");
    mech[M_SW_CLEAR] += (d32[0] == 0);
    csrw(CSR_HSTATUS, 64'(6'd2) << HSTATUS_VGEIN_LSB);
    do_xret();                                        // back to V=1, now guest 2
    wait_trap(ev);
    chk(64'(ev.t), 64'(TGT_VS), "guest 2 gets its interrupt directly");
    chk(64'(ev.id), 11, "still line 11 (level-triggered)");
    mech[M_LEVEL_LINE]++;
    @(negedge clk); irq_lines[11] = 0;                // handler silences the device
    do_xret();
    expect_no_trap(5, "level line quiet after the device drops");

    // ---------------------------------------------- 8. vsprio ordering
    @(negedge clk); irq_lines[11] = 1; irq_lines[13] = 1;
    @(negedge clk); irq_lines[13] = 0;
    wait_trap(ev);
    chk(64'(ev.id), 11, "guest 2 (vsprio 1, level 0x40) before guest 1 (vsprio 0, level 0xC0)");
    mech[M_VSPRIO] += (ev.id == 11);
    @(negedge clk); irq_lines[11] = 0;
    do_xret();
    expect_no_trap(10, "guest 1 line waits while guest 2 runs");
    // hypervisor line brings HS back, which switches to guest 1
    pulse(20);
    wait_trap(ev);
    chk(64'(ev.t), 64'(TGT_HS), "hypervisor line traps to HS");
    chk(64'(ev.id), 20, "cause id 20");
    csrw(CSR_HSTATUS, 64'(6'd1) << HSTATUS_VGEIN_LSB);
    do_xret();
    wait_trap(ev);
    chk(64'(ev.t), 64'(TGT_VS), "guest 1 line delivered after switching back");
    chk(64'(ev.id), 13, "line 13");
    do_xret();

    // ---------------------------------------------- report
    repeat (5) @(negedge clk);
    chk(64'(stack.size()), 0, "all handlers returned");
    for (int i = 0; i < M_COUNT; i++) begin
      $display("mechanism %-34s %0d", mech_name[i], mech[i]);
      checks++;
      if (mech[i] == 0) begin
        failures++;
        $display("FAIL mechanism never happened: %s", mech_name[i]);
      end
    end
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
