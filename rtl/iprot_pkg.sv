// iprot_pkg: types and constants shared by the initiator-side protection
// blocks of one RISC-V hart (WorldGuard initiator CSRs, virtual SPMP and
// unified hypervisor SPMP).
//
// What follows the source proposal: the privilege modes M, HS, U, VS, VU; the
// SPMP "mode bit" that tells supervisor rules from user rules; the names of
// the WorldGuard CSRs and their 32-bit split of a 128-bit delegation vector.
// What is this design's own choice: the CSR addresses, the bit layout of an
// SPMP configuration byte (PMP-like), the CSR access privilege rule (taken
// from the usual RISC-V address-bit convention) and the request/response
// structs used between the blocks.
package iprot_pkg;

  localparam int XLEN = 32;                  // RV32: CSRs are 32 bits wide
  localparam int PAW  = 34;                  // RV32 physical address width
  localparam int WAW  = PAW - 2;             // word address held in spmpaddr

  // Privilege level as the hart encodes it; V (virtualisation) is separate.
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // Effective mode of an access: privilege level combined with V.
  typedef enum logic [2:0] {
    MODE_M  = 3'd0,
    MODE_HS = 3'd1,
    MODE_U  = 3'd2,
    MODE_VS = 3'd3,
    MODE_VU = 3'd4
  } mode_e;

  typedef enum logic [1:0] {
    ACC_R = 2'd0,
    ACC_W = 2'd1,
    ACC_X = 2'd2
  } acc_e;

  // Address-matching mode of an SPMP entry (same encoding as PMP).
  typedef enum logic [1:0] {
    A_OFF   = 2'd0,
    A_TOR   = 2'd1,
    A_NA4   = 2'd2,
    A_NAPOT = 2'd3
  } amatch_e;

  // SPMP configuration byte. u = 1 marks a user-mode rule, u = 0 a
  // supervisor-mode rule. Bits 6:5 are reserved and read as zero.
  typedef struct packed {
    logic       u;
    logic [1:0] rsvd;
    amatch_e    a;
    logic       x;
    logic       w;
    logic       r;
  } spmpcfg_t;

  // Which check stopped an access.
  typedef enum logic [1:0] {
    STAGE_NONE  = 2'd0,
    STAGE_VSPMP = 2'd1,
    STAGE_HSPMP = 2'd2
  } stage_e;

  // ---------------------------------------------------------------- CSRs
  // Addresses as seen with V = 0. With V = 1 an S-level address 0x1xx is
  // redirected to the matching VS-level address 0x2xx, the way the
  // hypervisor extension redirects supervisor CSRs.
  localparam logic [11:0] CSR_SPMPSWITCH   = 12'h170;
  localparam logic [11:0] CSR_SLWID        = 12'h190;
  localparam logic [11:0] CSR_SPMPCFG0     = 12'h1A0;  // +i, i < 32
  localparam logic [11:0] CSR_SPMPADDR0    = 12'h1C0;  // +i, i < 32
  localparam logic [11:0] CSR_VSPMPSWITCH  = 12'h270;
  localparam logic [11:0] CSR_VSLWID       = 12'h290;
  localparam logic [11:0] CSR_VSPMPCFG0    = 12'h2A0;
  localparam logic [11:0] CSR_VSPMPADDR0   = 12'h2C0;
  localparam logic [11:0] CSR_MLWID        = 12'h390;
  localparam logic [11:0] CSR_HWIDDELEG    = 12'h648;  // +k, k = 0..3 (h, h2, h3)
  localparam logic [11:0] CSR_HSPMPSWITCH  = 12'h670;
  localparam logic [11:0] CSR_HSLWID       = 12'h690;
  localparam logic [11:0] CSR_MWIDDELEG    = 12'h748;  // +k, k = 0..3 (h, h2, h3)

  // One CSR instruction as presented by the hart. The read data comes back
  // in the same cycle; a write takes effect at the next clock edge.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [11:0]       addr;
    logic [XLEN-1:0]   wdata;
    priv_e             priv;
    logic              v;
  } csr_req_t;

  typedef struct packed {
    logic              hit;       // the address belongs to this block
    logic [XLEN-1:0]   rdata;
  } csr_rsp_t;

  // Address after the V = 1 redirection.
  function automatic logic [11:0] csr_eff_addr(input logic [11:0] a, input logic v);
    return (v && a[9:8] == 2'b01) ? {a[11:10], 2'b10, a[7:0]} : a;
  endfunction

  // Lowest privilege allowed to touch an address, from bits 9:8: 0 user,
  // 1 supervisor, 2 hypervisor (HS), 3 machine.
  // Returns 1 when the requester may access the address at all.
  function automatic logic csr_priv_ok(input logic [11:0] a, input priv_e p, input logic v);
    unique case (p)
      PRIV_M:  return 1'b1;
      PRIV_S:  return v ? (a[9:8] <= 2'b01) : (a[9:8] <= 2'b10);
      default: return a[9:8] == 2'b00;
    endcase
  endfunction

  // A VS-mode access to a hypervisor-level CSR raises a virtual
  // instruction exception rather than an illegal instruction one.
  function automatic logic csr_virt_fault(input logic [11:0] a, input priv_e p, input logic v);
    return v && (p == PRIV_S) && (a[9:8] == 2'b10);
  endfunction

  function automatic mode_e mode_of(input priv_e p, input logic v);
    if (p == PRIV_M)      return MODE_M;
    else if (p == PRIV_S) return v ? MODE_VS : MODE_HS;
    else                  return v ? MODE_VU : MODE_U;
  endfunction

endpackage
