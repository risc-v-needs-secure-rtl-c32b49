// spmp_core: the entry array and access check shared by the virtual SPMP and
// the unified hypervisor SPMP.
//
// Each of NENTRIES entries holds a configuration byte (spmpcfg_t: R, W, X,
// address-match mode A, mode bit U) and a word address (physical address
// bits 33:2), programmed through a simple indexed write port. Address
// matching works as in the RISC-V PMP: TOR (from the previous entry's
// address up to this one), NA4 (one word) and NAPOT (naturally aligned
// power-of-two region coded by the trailing ones of the address).
//
// Check: among the entries whose bit is set in en_i and whose A is not OFF,
// the lowest-numbered one that matches the address decides. A user-mode
// access (user_i = 1) is allowed only by a matching user rule (U = 1) that
// grants the access type; a supervisor access only by a matching supervisor
// rule (U = 0). With no matching entry a supervisor access is allowed and a
// user access is refused. The check covers the addressed word, so it is
// exact for naturally aligned accesses of up to four bytes.
// The mode bit and the bit-wise entry enable follow the source proposal;
// the field layout and the no-match rule follow the usual SPMP/PMP
// conventions and are this design's choice (sstatus.SUM and shared-region
// encodings are not modelled). The check is purely combinational.
module spmp_core
  import iprot_pkg::*;
#(
  parameter int unsigned NENTRIES = 16
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // write port
  input  logic                         we_cfg_i,
  input  logic                         we_addr_i,
  input  logic [$clog2(NENTRIES)-1:0]  widx_i,
  input  logic [XLEN-1:0]              wdata_i,
  // read port
  input  logic [$clog2(NENTRIES)-1:0]  ridx_i,
  output logic [XLEN-1:0]              rcfg_o,
  output logic [XLEN-1:0]              raddr_o,
  // check
  input  logic [PAW-1:0]               chk_addr_i,
  input  acc_e                         chk_acc_i,
  input  logic                         chk_user_i,
  input  logic [NENTRIES-1:0]          chk_en_i,
  output logic                         chk_ok_o,
  output logic                         chk_hit_o,
  output logic [$clog2(NENTRIES)-1:0]  chk_idx_o
);

  localparam int IW = $clog2(NENTRIES);

  spmpcfg_t          cfg_q  [NENTRIES];
  logic [WAW-1:0]    addr_q [NENTRIES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NENTRIES; i++) begin
        cfg_q[i]  <= '0;
        addr_q[i] <= '0;
      end
    end else begin
      if (we_cfg_i) begin
        cfg_q[widx_i]      <= spmpcfg_t'(wdata_i[7:0]);
        cfg_q[widx_i].rsvd <= 2'b00;
      end
      if (we_addr_i) addr_q[widx_i] <= wdata_i[WAW-1:0];
    end
  end

  assign rcfg_o  = XLEN'(cfg_q[ridx_i]);
  assign raddr_o = XLEN'(addr_q[ridx_i]);

  // ------------------------------------------------------------ matching
  logic [WAW-1:0]      wa;
  logic [NENTRIES-1:0] match;

  assign wa = chk_addr_i[PAW-1:2];

  always_comb begin
    for (int i = 0; i < NENTRIES; i++) begin
      logic [WAW-1:0] lo, mask;
      lo   = (i == 0) ? '0 : addr_q[(i == 0) ? 0 : i - 1];
      mask = ~(addr_q[i] ^ (addr_q[i] + 1'b1));
      unique case (cfg_q[i].a)
        A_TOR:   match[i] = (wa >= lo) && (wa < addr_q[i]);
        A_NA4:   match[i] = (wa == addr_q[i]);
        A_NAPOT: match[i] = ((wa & mask) == (addr_q[i] & mask));
        default: match[i] = 1'b0;
      endcase
      match[i] = match[i] && chk_en_i[i];
    end
  end

  always_comb begin
    chk_hit_o = 1'b0;
    chk_idx_o = '0;
    for (int i = NENTRIES - 1; i >= 0; i--) begin
      if (match[i]) begin
        chk_hit_o = 1'b1;
        chk_idx_o = IW'(i);
      end
    end
  end

  logic perm;
  always_comb begin
    spmpcfg_t c;
    c = cfg_q[chk_idx_o];
    unique case (chk_acc_i)
      ACC_R:   perm = c.r;
      ACC_W:   perm = c.w;
      ACC_X:   perm = c.x;
      default: perm = 1'b0;
    endcase
    if (chk_hit_o) chk_ok_o = perm && (c.u == chk_user_i);
    else           chk_ok_o = !chk_user_i;
  end

endmodule
