// tb_clic_gateway -- self-checking test of the interrupt gateway.
//
// A cycle-level reference model of every pending bit runs beside the gateway
// while random line activity, random trigger/polarity attributes, software
// writes and claims are applied. Directed checks first cover the cases one by
// one: level following (one cycle late), rising edge set, claim clear, software
// set/clear, falling-edge (negative) trigger and a claim meeting a new edge.
module tb_clic_gateway;

  localparam int unsigned N = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] irq, edge_t, neg, ip_we, ip_wd, ip;
  logic claim;
  logic [$clog2(N)-1:0] claim_id;
  int checks = 0, failures = 0;

  clic_gateway #(.NumSrc(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .trig_edge_i(edge_t), .trig_neg_i(neg),
    .ip_we_i(ip_we), .ip_wdata_i(ip_wd), .claim_i(claim), .claim_id_i(claim_id), .ip_o(ip)
  );

  always #5 clk = ~clk;

  // reference model
  logic [N-1:0] m_ip, m_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_ip <= '0; m_prev <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        automatic logic a = irq[i] ^ neg[i];
        if (!edge_t[i]) m_ip[i] <= a;
        else if (a && !m_prev[i]) m_ip[i] <= 1'b1;
        else if (ip_we[i]) m_ip[i] <= ip_wd[i];
        else if (claim && claim_id == i) m_ip[i] <= 1'b0;
        m_prev[i] <= a;
      end
    end
  end

  task automatic check(input logic [N-1:0] exp, input string what);
    checks++;
    if (ip !== exp) begin
      failures++;
      $display("FAIL %s: ip=%h expected %h", what, ip, exp);
    end
  endtask

  task automatic idle();
    ip_we = '0; ip_wd = '0; claim = 1'b0; claim_id = '0;
  endtask

  initial begin
    irq = '0; edge_t = '0; neg = '0; idle();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check('0, "after reset");

    // level: line 3 high -> ip[3] one cycle later, falls with the line
    irq[3] = 1'b1;
    @(negedge clk); check(16'h0008, "level follows");
    irq[3] = 1'b0;
    @(negedge clk); check(16'h0000, "level clears");

    // edge: line 5 edge-triggered, a one-cycle pulse sets ip that stays
    edge_t[5] = 1'b1;
    @(negedge clk);
    irq[5] = 1'b1; @(negedge clk); irq[5] = 1'b0;
    check(16'h0020, "edge sets");
    repeat (3) @(negedge clk);
    check(16'h0020, "edge holds");
    claim = 1'b1; claim_id = 5;
    @(negedge clk); idle();
    check(16'h0000, "claim clears edge ip");

    // claim does not touch a level-triggered line
    irq[3] = 1'b1; @(negedge clk);
    claim = 1'b1; claim_id = 3; @(negedge clk); idle();
    check(16'h0008, "claim ignored for level");
    irq[3] = 1'b0; @(negedge clk);

    // software set and clear of an edge-triggered line
    ip_we[5] = 1'b1; ip_wd[5] = 1'b1; @(negedge clk); idle();
    check(16'h0020, "software set");
    ip_we[5] = 1'b1; ip_wd[5] = 1'b0; @(negedge clk); idle();
    check(16'h0000, "software clear");
    // software write ignored on a level line
    ip_we[3] = 1'b1; ip_wd[3] = 1'b1; @(negedge clk); idle();
    check(16'h0000, "software write ignored for level");

    // negative edge: line 9 edge + negative, idle high, falling edge sets
    irq[9] = 1'b1; neg[9] = 1'b1; edge_t[9] = 1'b1;
    repeat (2) @(negedge clk);
    check(16'h0000, "negative idle");
    irq[9] = 1'b0; @(negedge clk);
    check(16'h0200, "falling edge sets");
    claim = 1'b1; claim_id = 9; @(negedge clk); idle();
    check(16'h0000, "claim clears negative edge");

    // claim in the same cycle as a new edge: the new edge wins
    irq[9] = 1'b1; @(negedge clk);
    irq[9] = 1'b0; ip_we[9] = 1'b1; ip_wd[9] = 1'b0; claim = 1'b1; claim_id = 9;
    @(negedge clk); idle();
    check(16'h0200, "new edge beats claim");

    // random phase against the model
    for (int c = 0; c < 2000; c++) begin
      if (c % 97 == 0) begin edge_t = N'($urandom); neg = N'($urandom); end
      irq   = N'($urandom) & N'($urandom);
      ip_we = N'($urandom) & N'($urandom) & N'($urandom);
      ip_wd = N'($urandom);
      claim = 1'($urandom);
      claim_id = $clog2(N)'($urandom);
      @(negedge clk);
      check(m_ip, "random vs model");
    end

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
