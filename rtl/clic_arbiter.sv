// clic_arbiter -- the vCLIC arbitration tree: finds the highest-ranked pending
// and enabled interrupt line.
//
// Every line gets a sort key, compared as one unsigned number:
//     { pending & enabled, privilege rank, guest priority, clicintctl }
// The privilege rank puts M-mode lines above hypervisor (S-mode, v = 0) lines,
// and those above lines delegated to a virtual supervisor (S-mode, v = 1), so an
// interrupt of a higher privilege always wins, as the core's trap rules
// require. The guest priority is vsprio[vsid] of a delegated line (VSPRIO
// extension) and zero for all others; it ranks the guests' interrupts against
// each other before their own level and priority (clicintctl) are compared.
// The keys meet in a binary tree of two-input comparators of depth
// ceil(log2(NumSrc)); on equal keys the higher-numbered line wins.
//
// Outputs: valid_o and the request fields of the winner (id, level, priv, v,
// vsid, shv). level is clicintctl with the (8 - nlbits) low bits forced to one,
// as in the CLIC. The block is purely combinational.
//
// The binary tree and the three quantities it sorts by (privilege, level and
// priority, guest priority) are the paper's; the exact key order and the tie
// rule are this design's choices.
module clic_arbiter
  import vclic_pkg::*;
#(
  parameter int unsigned NumSrc      = 64,
  parameter int unsigned NumVsid     = 64,
  parameter int unsigned VsprioWidth = 1,
  localparam int unsigned VspW       = (VsprioWidth > 0) ? VsprioWidth : 1
) (
  input  logic [NumSrc-1:0]            ip_i,
  input  logic [NumSrc-1:0]            ie_i,
  input  priv_e [NumSrc-1:0]           priv_i,
  input  logic [NumSrc-1:0][7:0]       intctl_i,
  input  logic [NumSrc-1:0]            shv_i,
  input  logic [NumSrc-1:0]            v_i,
  input  logic [NumSrc-1:0][5:0]       vsid_i,
  input  logic [NumVsid-1:0][VspW-1:0] vsprio_i,
  input  logic [3:0]                   nlbits_i,
  output logic                         valid_o,
  output irq_req_t                     req_o
);

  localparam int unsigned Depth  = (NumSrc > 1) ? $clog2(NumSrc) : 1;
  localparam int unsigned Leaves = 1 << Depth;
  localparam int unsigned KeyW   = 1 + 2 + VspW + 8;

  typedef logic [KeyW-1:0]  key_t;
  typedef logic [Depth-1:0] idx_t;

  // node n of the heap-ordered tree: root 0, children 2n+1 and 2n+2
  key_t key [2*Leaves-1];
  idx_t idx [2*Leaves-1];

  // ------------------------------------------------------------------ leaves
  for (genvar l = 0; l < Leaves; l++) begin : g_leaf
    if (l < NumSrc) begin : g_src
      logic [1:0]      rank;
      logic [VspW-1:0] gprio;
      always_comb begin
        if (priv_i[l] == PRIV_M)  rank = 2'd3;
        else if (!v_i[l])         rank = 2'd2;
        else                      rank = 2'd1;
        gprio = '0;
        if ((VsprioWidth > 0) && (priv_i[l] != PRIV_M) && v_i[l] && (32'(vsid_i[l]) < NumVsid))
          gprio = vsprio_i[vsid_i[l]];
      end
      assign key[Leaves-1+l] = {ip_i[l] & ie_i[l], rank, gprio, intctl_i[l]};
    end else begin : g_pad
      assign key[Leaves-1+l] = '0;
    end
    assign idx[Leaves-1+l] = idx_t'(l);
  end

  // ------------------------------------------------------------------- nodes
  for (genvar n = 0; n < Leaves - 1; n++) begin : g_node
    logic right_wins;
    assign right_wins = (key[2*n+2] >= key[2*n+1]);
    assign key[n] = right_wins ? key[2*n+2] : key[2*n+1];
    assign idx[n] = right_wins ? idx[2*n+2] : idx[2*n+1];
  end

  // ----------------------------------------------------------------- outputs
  logic [Depth-1:0] win;
  // a padding leaf can only win with an all-zero key (valid_o = 0); point at line 0 then
  assign win     = (32'(idx[0]) < NumSrc) ? idx[0] : '0;
  assign valid_o = key[0][KeyW-1];

  always_comb begin
    req_o       = '0;
    req_o.id    = 10'(win);
    req_o.level = intctl_i[win] | (8'hFF >> nlbits_i);
    req_o.priv  = priv_i[win];
    req_o.v     = v_i[win] && (priv_i[win] != PRIV_M);
    req_o.vsid  = vsid_i[win];
    req_o.shv   = shv_i[win];
  end

endmodule
