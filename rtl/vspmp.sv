// vspmp: first-stage virtual SPMP, programmed by the guest OS in VS-mode.
//
// It checks guest accesses before the hypervisor's unified SPMP sees them:
// a VS-mode access is checked as a supervisor access, a VU-mode access as a
// user access, against the entries enabled in vspmpswitch (one bit per
// entry, so a guest context switch can be a single switch write). The
// entries live in spmp_core.
//
// CSRs (after the V = 1 redirection of 0x1xx to 0x2xx): vspmpcfg<i> at
// 0x2A0+i, vspmpaddr<i> at 0x2C0+i, vspmpswitch at 0x270. The guest reaches
// them at the ordinary spmp addresses; HS and M reach them directly, which
// lets a hypervisor save and restore a guest's entries. Read data is
// combinational; writes take effect at the next clock edge.
// The check is combinational: chk_ok_o is valid in the cycle chk_* is.
// Following the source proposal: the vSPMP exists, belongs to VS-mode and is
// the first stage for VS/VU. This design's choices: register addresses,
// NENTRIES = 16, reset to all entries off and disabled.
module vspmp
  import iprot_pkg::*;
#(
  parameter int unsigned NENTRIES = 16
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  csr_req_t                     csr_i,
  input  logic                         csr_ok_i,
  output csr_rsp_t                     rsp_o,
  input  logic [PAW-1:0]               chk_addr_i,
  input  acc_e                         chk_acc_i,
  input  mode_e                        chk_mode_i,   // MODE_VS or MODE_VU
  output logic                         chk_ok_o
);

  localparam int IW = $clog2(NENTRIES);

  initial assert (NENTRIES >= 2 && NENTRIES <= 32)
    else $error("vspmp: NENTRIES must be 2..32");

  logic [11:0]         ea;
  logic                is_cfg, is_addr, is_sw;
  logic [IW-1:0]       idx;
  logic [NENTRIES-1:0] switch_q;
  logic [XLEN-1:0]     rcfg, raddr;
  logic                wr;

  assign ea      = csr_eff_addr(csr_i.addr, csr_i.v);
  assign idx     = ea[IW-1:0];
  assign is_cfg  = (ea[11:5] == CSR_VSPMPCFG0[11:5])  && (int'(ea[4:0]) < NENTRIES);
  assign is_addr = (ea[11:5] == CSR_VSPMPADDR0[11:5]) && (int'(ea[4:0]) < NENTRIES);
  assign is_sw   = (ea == CSR_VSPMPSWITCH);
  assign wr      = csr_i.valid && csr_i.we && csr_ok_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)          switch_q <= '0;
    else if (wr && is_sw) switch_q <= csr_i.wdata[NENTRIES-1:0];
  end

  always_comb begin
    rsp_o.hit   = is_cfg | is_addr | is_sw;
    rsp_o.rdata = '0;
    if (is_cfg)  rsp_o.rdata = rcfg;
    if (is_addr) rsp_o.rdata = raddr;
    if (is_sw)   rsp_o.rdata = XLEN'(switch_q);
  end

  logic          hit_unused;
  logic [IW-1:0] idx_unused;

  spmp_core #(.NENTRIES(NENTRIES)) u_core (
    .clk_i, .rst_ni,
    .we_cfg_i   (wr && is_cfg),
    .we_addr_i  (wr && is_addr),
    .widx_i     (idx),
    .wdata_i    (csr_i.wdata),
    .ridx_i     (idx),
    .rcfg_o     (rcfg),
    .raddr_o    (raddr),
    .chk_addr_i,
    .chk_acc_i,
    .chk_user_i (chk_mode_i == MODE_VU),
    .chk_en_i   (switch_q),
    .chk_ok_o,
    .chk_hit_o  (hit_unused),
    .chk_idx_o  (idx_unused)
  );

endmodule
