// wg_csr: WorldGuard initiator-side CSRs of one hart, with the hypervisor
// (Shwgd) and large-WID (Slwgd) extensions, and the WID selection that tags
// every access the hart makes.
//
// Registers (32-bit CSRs, NWORLDS = 128 worlds, WID width 7):
//   mlwid       WID of all accesses below M (HS, U and, by fallback, the guest)
//   mwiddeleg   WIDs 0-31 delegated to HS; mwiddelegh/h2/h3 hold WIDs 32-127
//   slwid       WID of U-mode accesses (V = 0)
//   hslwid      WID of VS-mode accesses
//   hwiddeleg   WIDs 0-31 delegated to VS; hwiddelegh/h2/h3 hold WIDs 32-127
//   vslwid      WID of VU-mode accesses; reached at the slwid address when V = 1
// M-mode accesses carry the fixed MWID, which needs no programming.
//
// Delegation rules: hwiddeleg can only hold WIDs that mwiddeleg delegates
// (its visible value is the stored value AND mwiddeleg, so taking a WID back
// from HS also takes it from VS). A write of an lwid register that names a
// WID the writer may not use leaves the register unchanged. When an lwid
// register names a WID that is no longer delegated, the access falls back to
// the WID of the level above (vslwid -> hslwid -> mlwid, slwid -> mlwid).
// The register set, names, widths and the V = 1 aliasing of slwid follow the
// source proposal; the reset values, the write-is-ignored rule, the fall-back
// rule and the CSR addresses are this design's choices.
//
// Interface: csr_i is one CSR access per cycle; rsp_o.hit says the address
// is one of these registers and rsp_o.rdata is its value, combinationally;
// writes (csr_i.we with a privilege check already passed by csr_ok_i) land at
// the next rising clock edge. mode_i gives the mode of the access being
// tagged and wid_o its WID, combinationally.
module wg_csr
  import iprot_pkg::*;
#(
  parameter int unsigned NWORLDS = 128,
  parameter int unsigned MWID    = 0
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  csr_req_t                     csr_i,
  input  logic                         csr_ok_i,
  output csr_rsp_t                     rsp_o,
  input  mode_e                        mode_i,
  output logic [$clog2(NWORLDS)-1:0]   wid_o,
  output logic [NWORLDS-1:0]           mwiddeleg_o,
  output logic [NWORLDS-1:0]           hwiddeleg_o
);

  localparam int WW    = $clog2(NWORLDS);
  localparam int NREGS = (NWORLDS + XLEN - 1) / XLEN;   // 32-bit deleg words
  localparam int DW    = NREGS * XLEN;

  initial begin
    assert (NWORLDS >= 2 && NWORLDS <= 128)
      else $error("wg_csr: NWORLDS must be 2..128");
    assert (MWID < NWORLDS) else $error("wg_csr: MWID out of range");
  end

  typedef logic [WW-1:0] wid_t;

  wid_t            mlwid_q, slwid_q, hslwid_q, vslwid_q;
  logic [DW-1:0]   mdeleg_q, hdeleg_q;
  logic [DW-1:0]   valid_mask, mdeleg, hdeleg;

  always_comb begin
    valid_mask = '0;
    for (int i = 0; i < DW; i++) valid_mask[i] = (i < NWORLDS);
  end

  assign mdeleg = mdeleg_q & valid_mask;
  assign hdeleg = hdeleg_q & mdeleg;

  assign mwiddeleg_o = mdeleg[NWORLDS-1:0];
  assign hwiddeleg_o = hdeleg[NWORLDS-1:0];

  // ------------------------------------------------------------ CSR decode
  logic [11:0] ea;
  logic        is_mlwid, is_slwid, is_hslwid, is_vslwid, is_mdeleg, is_hdeleg;
  logic [1:0]  dsel;

  assign ea        = csr_eff_addr(csr_i.addr, csr_i.v);
  assign dsel      = ea[1:0];
  assign is_mlwid  = (ea == CSR_MLWID);
  assign is_slwid  = (ea == CSR_SLWID);
  assign is_hslwid = (ea == CSR_HSLWID);
  assign is_vslwid = (ea == CSR_VSLWID);
  assign is_mdeleg = (ea[11:2] == CSR_MWIDDELEG[11:2]) && (int'(dsel) < NREGS);
  assign is_hdeleg = (ea[11:2] == CSR_HWIDDELEG[11:2]) && (int'(dsel) < NREGS);

  function automatic logic [XLEN-1:0] zext(input wid_t w);
    return XLEN'(w);
  endfunction

  always_comb begin
    rsp_o.hit   = is_mlwid | is_slwid | is_hslwid | is_vslwid | is_mdeleg | is_hdeleg;
    rsp_o.rdata = '0;
    if (is_mlwid)  rsp_o.rdata = zext(mlwid_q);
    if (is_slwid)  rsp_o.rdata = zext(slwid_q);
    if (is_hslwid) rsp_o.rdata = zext(hslwid_q);
    if (is_vslwid) rsp_o.rdata = zext(vslwid_q);
    if (is_mdeleg) rsp_o.rdata = mdeleg[dsel*XLEN +: XLEN];
    if (is_hdeleg) rsp_o.rdata = hdeleg[dsel*XLEN +: XLEN];
  end

  // ------------------------------------------------------------ writes
  logic  wr;
  wid_t  wval;
  logic  wval_in_range;

  assign wr            = csr_i.valid && csr_i.we && csr_ok_i;
  assign wval          = csr_i.wdata[WW-1:0];
  assign wval_in_range = (csr_i.wdata < XLEN'(NWORLDS));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mlwid_q  <= wid_t'(MWID);
      slwid_q  <= '0;
      hslwid_q <= '0;
      vslwid_q <= '0;
      mdeleg_q <= '0;
      hdeleg_q <= '0;
    end else if (wr) begin
      if (is_mlwid && wval_in_range)                   mlwid_q  <= wval;
      if (is_slwid && wval_in_range && mdeleg[wval])   slwid_q  <= wval;
      if (is_hslwid && wval_in_range && mdeleg[wval])  hslwid_q <= wval;
      if (is_vslwid && wval_in_range && hdeleg[wval])  vslwid_q <= wval;
      if (is_mdeleg) mdeleg_q[dsel*XLEN +: XLEN] <= csr_i.wdata;
      if (is_hdeleg) hdeleg_q[dsel*XLEN +: XLEN] <= csr_i.wdata & mdeleg[dsel*XLEN +: XLEN];
    end
  end

  // ------------------------------------------------------------ WID select
  wid_t vs_wid;
  assign vs_wid = mdeleg[hslwid_q] ? hslwid_q : mlwid_q;

  always_comb begin
    unique case (mode_i)
      MODE_M:  wid_o = wid_t'(MWID);
      MODE_HS: wid_o = mlwid_q;
      MODE_U:  wid_o = mdeleg[slwid_q] ? slwid_q : mlwid_q;
      MODE_VS: wid_o = vs_wid;
      MODE_VU: wid_o = hdeleg[vslwid_q] ? vslwid_q : vs_wid;
      default: wid_o = wid_t'(MWID);
    endcase
  end

endmodule
