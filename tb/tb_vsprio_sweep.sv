// tb_vsprio_sweep -- the VSPRIO configurations of the published area study
// (0, 1, 2, 4 and 8 guest-priority bits), each run as a complete vCLIC with
// 64 lines and 64 guests.
//
// One vclic instance per width sits in a generate loop, and each has its own
// stimulus process. The process programs every line: mode S, edge-triggered,
// enabled, a random level. Most lines go to one of eight guests, and a few
// stay with the hypervisor. It gives each guest a random 8-bit vsprio value,
// of which the controller keeps the low VsprioWidth bits. Then, round after
// round, it fires a random set of lines and drains them. Every offer must be
// the line a reference ordering picks:
//   hypervisor lines first, then the highest vsprio, then the highest level,
//   then the highest line number.
// The testbench computes this ordering itself. Each accepted offer is claimed,
// and the next one is checked. The test also counts "priority inversions":
// offers where vsprio put a lower-level interrupt ahead of a higher-level
// one. It fails a width of 1 or more that never shows one, and a width of 0
// that does show one, because with no bits all guests must rank equally.
module tb_vsprio_sweep;
  import vclic_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned NW = 5;
  localparam int unsigned WIDTHS [NW] = '{0, 1, 2, 4, 8};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int done = 0;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d @%0t", what, got, exp, $time);
    end
  endtask

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int unsigned W = WIDTHS[w];

    logic [N-1:0] irq;
    logic req, we, err, valid, ready, kill;
    logic [ADDR_W-1:0] addr;
    logic [31:0] wdata, rdata;
    logic [3:0] be;
    irq_req_t r;

    vclic #(.VsprioWidth(W)) dut (
      .clk_i(clk), .rst_ni(rst_n), .irq_i(irq),
      .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr), .reg_wdata_i(wdata), .reg_be_i(be),
      .reg_rdata_o(rdata), .reg_err_o(err),
      .irq_valid_o(valid), .irq_o(r), .irq_ready_i(ready), .irq_kill_o(kill)
    );

    int unsigned ctl [N];
    bit          virt [N];
    int unsigned gid [N];
    int unsigned gprio [8];
    int          inversions = 0;

    task automatic wr(input int region, input int off, input logic [31:0] d, input logic [3:0] b);
      @(negedge clk); req = 1; we = 1; addr = ADDR_W'((region << REGION_LSB) | off); wdata = d; be = b;
      @(negedge clk); req = 0; we = 0;
    endtask

    // ordering key of the reference: {hypervisor line, vsprio, level, id}
    function automatic longint unsigned ref_key(input int i);
      int unsigned p = virt[i] ? gprio[gid[i]] : 0;
      return {1'b0, !virt[i], 8'(p), 8'(ctl[i]), 8'(i)};
    endfunction

    initial begin
      logic [N-1:0] pend;
      irq = '0; req = 0; we = 0; addr = '0; wdata = '0; be = '0; ready = 0;
      @(posedge rst_n);
      wr(0, 0, 32'h0000_0030, 4'hF);                          // nmbits = 1, nlbits = 8
      for (int i = 0; i < N; i++) begin
        ctl[i]  = $urandom % 256;
        virt[i] = ($urandom % 8) != 0;
        gid[i]  = $urandom % 8;
        wr(0, 'h1000 + 4*i, {8'(ctl[i]), 2'b01, 3'b000, 1'b0, 1'b1, 1'b0, 8'h01, 8'h00}, 4'hF);
        wr(1, 'h5000 + (i & ~3), 32'({6'(gid[i]), 1'b0, virt[i]}) << (8 * (i % 4)), 4'b0001 << (i % 4));
      end
      for (int g = 0; g < 8; g++) begin
        int unsigned v;
        v = $urandom % 256;
        gprio[g] = (W == 0) ? 0 : (v & ((1 << W) - 1));
        wr(1, 'h6000 + (g & ~3), 32'(v) << (8 * (g % 4)), 4'b0001 << (g % 4));
      end

      for (int round = 0; round < 12; round++) begin
        pend = {$urandom, $urandom};
        @(negedge clk); irq = pend;
        @(negedge clk); irq = '0;
        while (pend != 0) begin
          int best, top_lvl, n;
          best = -1; top_lvl = -1; n = 0;
          while (!valid && n < 20) begin @(negedge clk); n++; end
          for (int i = 0; i < N; i++)
            if (pend[i] && (best < 0 || ref_key(i) > ref_key(best))) best = i;
          for (int i = 0; i < N; i++)
            if (pend[i] && virt[i] && int'(ctl[i]) > top_lvl) top_lvl = int'(ctl[i]);
          chk(32'(valid), 1, $sformatf("W=%0d offer present", W));
          chk(32'(r.id), 32'(best), $sformatf("W=%0d offered line", W));
          if (!virt[best]) chk(32'(r.v), 0, $sformatf("W=%0d hypervisor line not virtual", W));
          else if (int'(ctl[best]) < top_lvl) inversions++;
          ready = 1;
          @(negedge clk);
          ready = 0;
          pend[best] = 1'b0;
        end
        repeat (3) @(negedge clk);
        chk(32'(valid), 0, $sformatf("W=%0d drained", W));
      end

      $display("VsprioWidth=%0d: %0d priority inversions by vsprio", W, inversions);
      checks++;
      if ((W == 0) != (inversions == 0)) begin
        failures++;
        $display("FAIL W=%0d: inversions %0d", W, inversions);
      end
      done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done == NW);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
