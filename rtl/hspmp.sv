// hspmp: unified hypervisor SPMP. One entry array, owned by HS-mode, checks
// both the hypervisor side and the guests.
//
// With V = 0 it is the ordinary SPMP: HS-mode accesses are checked as
// supervisor accesses and U-mode accesses as user accesses, against the
// entries enabled in spmpswitch. With V = 1 it is the second stage: every
// guest access, VS or VU, is checked as if it came from a user-mode
// application, against the entries enabled in hspmpswitch instead. So the
// hypervisor splits the entries between itself and its guests at run time
// by the two switch registers, not at design time, and a VM switch only
// rewrites hspmpswitch (and the entries it needs).
//
// CSRs: spmpcfg<i> at 0x1A0+i, spmpaddr<i> at 0x1C0+i, spmpswitch at 0x170
// (all reached from HS or M with V = 0; with V = 1 these addresses go to the
// vSPMP instead) and hspmpswitch at 0x670. Read data is combinational;
// writes take effect at the next clock edge. The check is combinational.
// Following the source proposal: the single hypervisor-controlled SPMP,
// guests treated as user mode, hspmpswitch replacing spmpswitch while V = 1.
// This design's choices: addresses, NENTRIES = 16, reset values.
module hspmp
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
  input  mode_e                        chk_mode_i,   // MODE_HS, MODE_U, MODE_VS or MODE_VU
  output logic                         chk_ok_o
);

  localparam int IW = $clog2(NENTRIES);

  initial assert (NENTRIES >= 2 && NENTRIES <= 32)
    else $error("hspmp: NENTRIES must be 2..32");

  logic [11:0]         ea;
  logic                is_cfg, is_addr, is_sw, is_hsw;
  logic [IW-1:0]       idx;
  logic [NENTRIES-1:0] switch_q, hswitch_q;
  logic [XLEN-1:0]     rcfg, raddr;
  logic                wr, virt;

  assign ea      = csr_eff_addr(csr_i.addr, csr_i.v);
  assign idx     = ea[IW-1:0];
  assign is_cfg  = (ea[11:5] == CSR_SPMPCFG0[11:5])  && (int'(ea[4:0]) < NENTRIES);
  assign is_addr = (ea[11:5] == CSR_SPMPADDR0[11:5]) && (int'(ea[4:0]) < NENTRIES);
  assign is_sw   = (ea == CSR_SPMPSWITCH);
  assign is_hsw  = (ea == CSR_HSPMPSWITCH);
  assign wr      = csr_i.valid && csr_i.we && csr_ok_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      switch_q  <= '0;
      hswitch_q <= '0;
    end else if (wr) begin
      if (is_sw)  switch_q  <= csr_i.wdata[NENTRIES-1:0];
      if (is_hsw) hswitch_q <= csr_i.wdata[NENTRIES-1:0];
    end
  end

  always_comb begin
    rsp_o.hit   = is_cfg | is_addr | is_sw | is_hsw;
    rsp_o.rdata = '0;
    if (is_cfg)  rsp_o.rdata = rcfg;
    if (is_addr) rsp_o.rdata = raddr;
    if (is_sw)   rsp_o.rdata = XLEN'(switch_q);
    if (is_hsw)  rsp_o.rdata = XLEN'(hswitch_q);
  end

  assign virt = (chk_mode_i == MODE_VS) || (chk_mode_i == MODE_VU);

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
    .chk_user_i (chk_mode_i != MODE_HS),
    .chk_en_i   (virt ? hswitch_q : switch_q),
    .chk_ok_o,
    .chk_hit_o  (hit_unused),
    .chk_idx_o  (idx_unused)
  );

endmodule
