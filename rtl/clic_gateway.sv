// clic_gateway -- interrupt gateway of the vCLIC: one interrupt-pending (IP)
// bit per wired interrupt line.
//
// Each line is first brought to its active sense (XOR with the negative-polarity
// attribute bit). A level-triggered line copies that value into its IP bit every
// cycle; software cannot change it. An edge-triggered line sets its IP bit on an
// inactive-to-active transition; software may write the bit (the register
// file's "set IP" path), and the core's claim of the interrupt clears it.
//
// Interface: irq_i are the raw lines, assumed synchronous to clk_i. trig_edge_i
// and trig_neg_i come from clicintattr.trig. ip_we_i/ip_wdata_i is a software
// write. claim_i/claim_id_i is the one-cycle claim from the handshake FSM.
// Timing: ip_o is registered, so a line change appears on ip_o one cycle later.
//
// The gateway block is named in the paper; level/edge and polarity handling
// follow the RISC-V CLIC draft, and the priority of a claim over a new edge in
// the same cycle (the new edge wins) is this design's choice.
module clic_gateway #(
  parameter int unsigned NumSrc = 64
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [NumSrc-1:0]         irq_i,
  input  logic [NumSrc-1:0]         trig_edge_i,
  input  logic [NumSrc-1:0]         trig_neg_i,
  input  logic [NumSrc-1:0]         ip_we_i,
  input  logic [NumSrc-1:0]         ip_wdata_i,
  input  logic                      claim_i,
  input  logic [$clog2(NumSrc)-1:0] claim_id_i,
  output logic [NumSrc-1:0]         ip_o
);

  logic [NumSrc-1:0] active, active_q, ip_d, ip_q;

  assign active = irq_i ^ trig_neg_i;

  always_comb begin
    for (int unsigned i = 0; i < NumSrc; i++) begin
      if (!trig_edge_i[i]) begin
        ip_d[i] = active[i];
      end else begin
        ip_d[i] = ip_q[i];
        if (claim_i && (claim_id_i == i[$clog2(NumSrc)-1:0])) ip_d[i] = 1'b0;
        if (ip_we_i[i])                                       ip_d[i] = ip_wdata_i[i];
        if (active[i] && !active_q[i])                        ip_d[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ip_q     <= '0;
      active_q <= '0;
    end else begin
      ip_q     <= ip_d;
      active_q <= active;
    end
  end

  assign ip_o = ip_q;

endmodule
