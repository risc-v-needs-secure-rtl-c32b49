// initiator_protection: initiator-side protection of one RISC-V hart with
// the hypervisor extension and no MMU: the WorldGuard CSRs that tag each
// access with a world ID (WID), the guest's virtual SPMP and the
// hypervisor's unified SPMP.
//
// Access path (one request per cycle, valid/ready on both sides, one
// register stage, so a result leaves one cycle after it is accepted):
//   M-mode         no SPMP check, tagged with the hart's fixed M-mode WID
//   HS, U          unified hSPMP (entries enabled by spmpswitch)
//   VS, VU         vSPMP first, then the unified hSPMP as second stage, with
//                  the guest treated as user mode (entries enabled by
//                  hspmpswitch)
// The outgoing access carries its WID, its privilege level, and a fault
// flag with the stage that refused it (STAGE_VSPMP for a guest-level fault
// the guest OS handles, STAGE_HSPMP for one the hypervisor handles). The
// M-level PMP/ePMP and the bus follow outside this block, on out_*.
// Physical addresses are not translated: the guest-physical address is the
// host-physical address and only the permissions are checked twice.
//
// CSR port: one CSR instruction per cycle on csr_i; csr_hit_o says the
// address is one of the registers held here, csr_rdata_o is the read value
// and csr_illegal_o / csr_virtual_o the exception to raise, all in the same
// cycle; a permitted write lands at the next rising clock edge.
// The structure (vSPMP feeding a single hSPMP, M bypassing both, WIDs per
// mode) follows the source proposal; the single register stage, the
// handshake and the CSR map are this design's own.
module initiator_protection
  import iprot_pkg::*;
#(
  parameter int unsigned NWORLDS     = 128,
  parameter int unsigned MWID        = 0,
  parameter int unsigned HS_ENTRIES  = 16,
  parameter int unsigned VS_ENTRIES  = 16
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // CSR instructions of the hart
  input  csr_req_t                    csr_i,
  output logic                        csr_hit_o,
  output logic [XLEN-1:0]             csr_rdata_o,
  output logic                        csr_illegal_o,
  output logic                        csr_virtual_o,
  // memory accesses of the hart
  input  logic                        req_valid_i,
  output logic                        req_ready_o,
  input  logic [PAW-1:0]              req_addr_i,
  input  acc_e                        req_acc_i,
  input  priv_e                       req_priv_i,
  input  logic                        req_v_i,
  // towards the M-level PMP/ePMP and the bus
  output logic                        out_valid_o,
  input  logic                        out_ready_i,
  output logic [PAW-1:0]              out_addr_o,
  output acc_e                        out_acc_o,
  output priv_e                       out_priv_o,
  output logic [$clog2(NWORLDS)-1:0]  out_wid_o,
  output logic                        out_fault_o,
  output stage_e                      out_stage_o,
  // delegation state, for the resource-side configuration of the platform
  output logic [NWORLDS-1:0]          mwiddeleg_o,
  output logic [NWORLDS-1:0]          hwiddeleg_o
);

  localparam int WW = $clog2(NWORLDS);

  // ------------------------------------------------------------ CSRs
  logic     csr_ok, csr_virt;
  csr_rsp_t rsp_wg, rsp_vs, rsp_hs;

  assign csr_ok   = csr_priv_ok(csr_i.addr, csr_i.priv, csr_i.v);
  assign csr_virt = csr_virt_fault(csr_i.addr, csr_i.priv, csr_i.v);

  assign csr_hit_o     = csr_i.valid && (rsp_wg.hit || rsp_vs.hit || rsp_hs.hit);
  assign csr_rdata_o   = (rsp_wg.hit ? rsp_wg.rdata : '0)
                       | (rsp_vs.hit ? rsp_vs.rdata : '0)
                       | (rsp_hs.hit ? rsp_hs.rdata : '0);
  assign csr_virtual_o = csr_hit_o && csr_virt;
  assign csr_illegal_o = csr_hit_o && !csr_ok && !csr_virt;

  // ------------------------------------------------------------ checks
  mode_e      mode;
  logic       vs_ok, hs_ok, guest;
  logic [WW-1:0] wid;

  assign mode  = mode_of(req_priv_i, req_v_i);
  assign guest = (mode == MODE_VS) || (mode == MODE_VU);

  wg_csr #(.NWORLDS(NWORLDS), .MWID(MWID)) u_wg (
    .clk_i, .rst_ni,
    .csr_i, .csr_ok_i(csr_ok), .rsp_o(rsp_wg),
    .mode_i(mode), .wid_o(wid),
    .mwiddeleg_o, .hwiddeleg_o
  );

  vspmp #(.NENTRIES(VS_ENTRIES)) u_vspmp (
    .clk_i, .rst_ni,
    .csr_i, .csr_ok_i(csr_ok), .rsp_o(rsp_vs),
    .chk_addr_i(req_addr_i), .chk_acc_i(req_acc_i), .chk_mode_i(mode),
    .chk_ok_o(vs_ok)
  );

  hspmp #(.NENTRIES(HS_ENTRIES)) u_hspmp (
    .clk_i, .rst_ni,
    .csr_i, .csr_ok_i(csr_ok), .rsp_o(rsp_hs),
    .chk_addr_i(req_addr_i), .chk_acc_i(req_acc_i), .chk_mode_i(mode),
    .chk_ok_o(hs_ok)
  );

  stage_e stage;
  always_comb begin
    if (mode == MODE_M)      stage = STAGE_NONE;
    else if (guest && !vs_ok) stage = STAGE_VSPMP;
    else if (!hs_ok)         stage = STAGE_HSPMP;
    else                     stage = STAGE_NONE;
  end

  // ------------------------------------------------------------ register stage
  logic accept;
  assign req_ready_o = !out_valid_o || out_ready_i;
  assign accept      = req_valid_i && req_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      out_addr_o  <= '0;
      out_acc_o   <= ACC_R;
      out_priv_o  <= PRIV_M;
      out_wid_o   <= '0;
      out_fault_o <= 1'b0;
      out_stage_o <= STAGE_NONE;
    end else begin
      if (req_ready_o) out_valid_o <= req_valid_i;
      if (accept) begin
        out_addr_o  <= req_addr_i;
        out_acc_o   <= req_acc_i;
        out_priv_o  <= req_priv_i;
        out_wid_o   <= wid;
        out_fault_o <= (stage != STAGE_NONE);
        out_stage_o <= stage;
      end
    end
  end

  // A request that is offered must stay unchanged until it is taken; the
  // same holds for what this block offers downstream.
  property p_hold(logic v, logic r, logic [PAW-1:0] a);
    @(posedge clk_i) disable iff (!rst_ni) (v && !r) |=> (v && a == $past(a));
  endproperty
  a_req_hold: assert property (p_hold(req_valid_i, req_ready_o, req_addr_i));
  a_out_hold: assert property (p_hold(out_valid_o, out_ready_i, out_addr_o));

endmodule
