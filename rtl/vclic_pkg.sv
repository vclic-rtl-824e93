// vclic_pkg -- shared types and constants of the virtualised CLIC (vCLIC) and of
// the CLIC logic on the core side.
//
// The privilege encoding follows the RISC-V privileged specification (M = 2'b11,
// S = 2'b01, U = 2'b00). A virtual-supervisor (VS) interrupt is an S-mode
// interrupt whose clicintv.v bit is set; its guest is named by clicintv.vsid.
// The memory map of the configuration space and the CSR numbers of the
// virtualised CSRs are this design's choices where the paper gives none; they
// are collected here so that the register file, the CSR block and the
// testbenches agree.
package vclic_pkg;

  // ---------------------------------------------------------------- privilege
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // Trap destination chosen by the core-side CLIC controller.
  typedef enum logic [1:0] {
    TGT_NONE = 2'd0,
    TGT_M    = 2'd1,
    TGT_HS   = 2'd2,
    TGT_VS   = 2'd3
  } trap_tgt_e;

  // ------------------------------------------------------- configuration space
  // Every privilege view of the registers is a 32 KiB region:
  //   region 0 -> M-mode view, region 1 -> S/HS-mode (hypervisor) view,
  //   region 2+k -> VS view of guest k (k = VSID).
  localparam int unsigned REGION_LSB = 15;
  localparam int unsigned REGION_W   = 7;
  localparam int unsigned ADDR_W     = REGION_LSB + REGION_W;  // 22-bit byte address

  localparam logic [REGION_W-1:0] REGION_M  = 7'd0;
  localparam logic [REGION_W-1:0] REGION_S  = 7'd1;
  localparam logic [REGION_W-1:0] REGION_VS = 7'd2;   // first guest region

  // Offsets inside a region (word aligned byte offsets).
  localparam logic [REGION_LSB-1:0] OFF_CLICCFG  = 15'h0000;  // cliccfg
  localparam logic [REGION_LSB-1:0] OFF_CLICINT  = 15'h1000;  // 4 B per line: {ctl, attr, ie, ip}
  localparam logic [REGION_LSB-1:0] OFF_CLICINTV = 15'h5000;  // 1 B per line: clicintv
  localparam logic [REGION_LSB-1:0] OFF_VSPRIO   = 15'h6000;  // 1 B per guest: vsprio

  // cliccfg fields (CLIC draft layout): nvbits [0], nlbits [4:1], nmbits [6:5]
  localparam int unsigned CFG_NLBITS_LSB = 1;
  localparam int unsigned CFG_NMBITS_LSB = 5;

  // clicintattr fields: shv [0], trig [2:1] (trig[0] edge, trig[1] negative), mode [7:6]
  // clicintv fields:    v [0], vsid [7:2]

  // ------------------------------------------------------------------- CSRs
  localparam logic [11:0] CSR_MTVT        = 12'h307;
  localparam logic [11:0] CSR_MNXTI       = 12'h345;
  localparam logic [11:0] CSR_MINTTHRESH  = 12'h347;
  localparam logic [11:0] CSR_MINTSTATUS  = 12'hFB1;
  localparam logic [11:0] CSR_STVT        = 12'h107;
  localparam logic [11:0] CSR_SNXTI       = 12'h145;
  localparam logic [11:0] CSR_SINTTHRESH  = 12'h147;
  localparam logic [11:0] CSR_SINTSTATUS  = 12'hDB1;
  localparam logic [11:0] CSR_VSTVT       = 12'h207;
  localparam logic [11:0] CSR_VSNXTI      = 12'h245;
  localparam logic [11:0] CSR_VSINTTHRESH = 12'h247;
  localparam logic [11:0] CSR_VSINTSTATUS = 12'h2B1;  // VS view of sintstatus
  localparam logic [11:0] CSR_SIE         = 12'h104;  // redirected to vsie while V=1
  localparam logic [11:0] CSR_SIP         = 12'h144;  // redirected to vsip while V=1
  localparam logic [11:0] CSR_VSIE        = 12'h204;  // hardwired to zero in CLIC mode
  localparam logic [11:0] CSR_VSIP        = 12'h244;  // hardwired to zero in CLIC mode
  localparam logic [11:0] CSR_MCAUSE      = 12'h342;  // only the xpil field [23:16]
  localparam logic [11:0] CSR_SCAUSE      = 12'h142;
  localparam logic [11:0] CSR_VSCAUSE     = 12'h242;
  localparam int unsigned CAUSE_PIL_LSB   = 16;
  localparam logic [11:0] CSR_HSTATUS     = 12'h600;
  localparam logic [11:0] CSR_HGEIE       = 12'h607;

  localparam int unsigned HSTATUS_VGEIN_LSB = 12;   // hstatus.VGEIN [17:12]

  // Request presented by the vCLIC to the core (Fig. 2b: id, level, priv, v, vsid).
  // shv is carried as well because the design keeps CLIC selective hardware vectoring.
  typedef struct packed {
    logic [9:0] id;
    logic [7:0] level;
    priv_e      priv;
    logic       v;
    logic [5:0] vsid;
    logic       shv;
  } irq_req_t;

endpackage
