// tb_clic_handshake -- self-checking test of the vCLIC-core handshake FSM.
//
// Directed sequences check: an offer appears one cycle after a winner; the
// offered fields stay registered while the winner's fields change; ready gives
// a one-cycle claim with the offered id and one idle cycle before the next
// offer; a vanished or replaced winner gives a one-cycle kill with valid low;
// no claim in a kill cycle. A random phase then compares every
// cycle against a reference model of the two-state machine.
module tb_clic_handshake;
  import vclic_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bvalid, valid, ready, kill, claim;
  irq_req_t best, req;
  logic [9:0] claim_id;
  int checks = 0, failures = 0;

  clic_handshake dut (
    .clk_i(clk), .rst_ni(rst_n), .best_valid_i(bvalid), .best_i(best), .valid_o(valid),
    .req_o(req), .ready_i(ready), .kill_o(kill), .claim_o(claim), .claim_id_o(claim_id)
  );

  always #5 clk = ~clk;

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h @%0t", what, got, exp, $time);
    end
  endtask

  function automatic irq_req_t mk(input int id, input int lvl);
    irq_req_t r = '0;
    r.id = 10'(id); r.level = 8'(lvl); r.priv = PRIV_S; r.v = 1'b1; r.vsid = 6'(id % 64);
    return r;
  endfunction

  // reference model
  logic m_req;
  irq_req_t m_r;
  logic m_valid, m_kill, m_claim;
  always_comb begin
    m_valid = m_req && bvalid && best.id == m_r.id;
    m_kill  = m_req && !(bvalid && best.id == m_r.id);
    m_claim = m_valid && ready;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin m_req <= 0; m_r <= '0; end
    else if (!m_req) begin if (bvalid) begin m_req <= 1; m_r <= best; end end
    else if (m_kill || m_claim) m_req <= 0;
  end

  initial begin
    bvalid = 0; best = '0; ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(32'(valid), 0, "idle after reset");

    // a winner appears; offered after one edge
    bvalid = 1; best = mk(7, 100);
    #1 chk(32'(valid), 0, "not yet offered");
    @(negedge clk);
    chk(32'(valid), 1, "offered one cycle later");
    chk(32'(req.id), 7, "offered id");
    chk(32'(req.level), 100, "offered level");
    // same id with new level: offer holds the registered fields
    best = mk(7, 50);
    @(negedge clk);
    chk(32'(valid), 1, "offer held");
    chk(32'(req.level), 100, "offered fields registered");
    // accept
    ready = 1;
    #1 chk(32'(claim), 1, "claim on ready");
    chk(32'(claim_id), 7, "claim id");
    chk(32'(kill), 0, "no kill on accept");
    @(negedge clk); ready = 0;
    chk(32'(valid), 0, "idle cycle after claim");
    chk(32'(claim), 0, "claim one cycle");
    @(negedge clk);
    chk(32'(valid), 1, "next offer");
    // winner replaced before ready: kill
    best = mk(9, 200);
    #1 chk(32'(kill), 1, "kill on new winner");
    chk(32'(valid), 0, "valid low while killing");
    chk(32'(claim), 0, "no claim while killing");
    @(negedge clk);
    chk(32'(kill), 0, "kill one cycle");
    @(negedge clk);
    chk(32'(valid), 1, "new winner offered");
    chk(32'(req.id), 9, "new winner id");
    // winner vanishes: kill
    bvalid = 0;
    #1 chk(32'(kill), 1, "kill on vanish");
    @(negedge clk);
    chk(32'(valid), 0, "idle after vanish");

    // random against the model
    for (int t = 0; t < 3000; t++) begin
      if ($urandom % 4 == 0) bvalid = 1'($urandom);
      if ($urandom % 5 == 0) best = mk($urandom % 4, $urandom % 256);
      #1;
      ready = valid && ($urandom % 3 == 0);
      #1;
      chk(32'(valid), 32'(m_valid), "random valid");
      chk(32'(kill), 32'(m_kill), "random kill");
      chk(32'(claim), 32'(m_claim), "random claim");
      if (valid) chk(32'(req), 32'(m_r), "random fields");
      @(negedge clk);
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
