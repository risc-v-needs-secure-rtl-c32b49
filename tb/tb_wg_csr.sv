// tb_wg_csr: self-checking test of the WorldGuard CSR unit.
// A reference model of the registers (delegation vectors as 128-bit values,
// lwid registers as integers) follows a random stream of CSR writes:
// mlwid, the four mwiddeleg words, slwid, hslwid, the four hwiddeleg words
// and vslwid (both at its own address and at the slwid address with V = 1).
// After every write all registers are read back and the WID of each of the
// five modes is compared with the model, including the fall-back to the
// level above when an lwid register names a WID no longer delegated.
module tb_wg_csr;
  import iprot_pkg::*;

  localparam int NW   = 128;
  localparam int MWID = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  csr_req_t   csr;
  csr_rsp_t   rsp;
  mode_e      mode;
  logic [6:0] wid;
  logic [NW-1:0] md_o, hd_o;

  wg_csr #(.NWORLDS(NW), .MWID(MWID)) dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_i(csr), .csr_ok_i(1'b1), .rsp_o(rsp),
    .mode_i(mode), .wid_o(wid), .mwiddeleg_o(md_o), .hwiddeleg_o(hd_o)
  );

  int checks = 0, failures = 0;
  int n_ignored = 0, n_fallback = 0, n_virt_alias = 0;

  // model
  int          m_mlwid, m_slwid, m_hslwid, m_vslwid;
  bit [127:0]  m_md, m_hd, m_he;   // m_he: visible hwiddeleg = m_hd & m_md

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic csr_wr(input logic [11:0] a, input logic [31:0] d, input logic v);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d, priv: PRIV_M, v: v};
    @(negedge clk);
    csr = '0;
  endtask

  logic [31:0] rd;
  task automatic csr_rd(input logic [11:0] a);
    csr = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0, priv: PRIV_M, v: 1'b0};
    #1;
    rd = rsp.rdata;
    check(rsp.hit, $sformatf("hit %h", a));
    csr = '0;
  endtask

  function automatic int exp_wid(input mode_e m);
    int vs;
    vs = m_md[m_hslwid] ? m_hslwid : m_mlwid;
    case (m)
      MODE_M:  return MWID;
      MODE_HS: return m_mlwid;
      MODE_U:  return m_md[m_slwid] ? m_slwid : m_mlwid;
      MODE_VS: return vs;
      default: return m_he [m_vslwid] ? m_vslwid : vs;
    endcase
  endfunction

  task automatic check_all();
    csr_rd(CSR_MLWID);  check(rd == 32'(m_mlwid),  "mlwid");
    csr_rd(CSR_SLWID);  check(rd == 32'(m_slwid),  "slwid");
    csr_rd(CSR_HSLWID); check(rd == 32'(m_hslwid), "hslwid");
    csr_rd(CSR_VSLWID); check(rd == 32'(m_vslwid), "vslwid");
    for (int k = 0; k < 4; k++) begin
      csr_rd(CSR_MWIDDELEG + 12'(k)); check(rd == m_md[32*k +: 32], "mwiddeleg");
      csr_rd(CSR_HWIDDELEG + 12'(k)); check(rd == m_he[32*k +: 32], "hwiddeleg");
    end
    check(md_o == m_md && hd_o == m_he, "deleg outputs");
    for (int m = 0; m <= 4; m++) begin
      mode = mode_e'(m);
      #1;
      check(int'(wid) == exp_wid(mode), $sformatf("wid mode %s got %0d exp %0d", mode.name(), wid, exp_wid(mode)));
    end
    if (exp_wid(MODE_U) != m_slwid || exp_wid(MODE_VU) != m_vslwid) n_fallback++;
  endtask

  function automatic logic [31:0] rand_wid();
    return ($urandom_range(0, 15) == 0) ? $urandom : 32'($urandom_range(0, 127));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr = '0; mode = MODE_M;
    m_mlwid = MWID; m_slwid = 0; m_hslwid = 0; m_vslwid = 0; m_md = '0; m_hd = '0; m_he = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();   // reset state: every mode uses MWID
    for (int step = 0; step < 3000; step++) begin
      int       op, k;
      logic [31:0] d;
      op = $urandom_range(0, 7);
      k  = $urandom_range(0, 3);
      d  = rand_wid();
      m_he = m_hd & m_md;
      case (op)
        0: begin
             csr_wr(CSR_MLWID, d, 1'b0);
             if (d < 128) m_mlwid = int'(d); else n_ignored++;
           end
        1: begin
             d = ($urandom_range(0, 3) == 0) ? 32'h0 : $urandom;
             csr_wr(CSR_MWIDDELEG + 12'(k), d, 1'b0);
             m_md[32*k +: 32] = d;
           end
        2: begin
             csr_wr(CSR_SLWID, d, 1'b0);
             if (d < 128 && m_md[d[6:0]]) m_slwid = int'(d); else n_ignored++;
           end
        3: begin
             csr_wr(CSR_HSLWID, d, 1'b0);
             if (d < 128 && m_md[d[6:0]]) m_hslwid = int'(d); else n_ignored++;
           end
        4: begin
             d = $urandom;
             csr_wr(CSR_HWIDDELEG + 12'(k), d, 1'b0);
             m_hd[32*k +: 32] = d & m_md[32*k +: 32];
           end
        5, 6: begin
             // vslwid, by the guest at the slwid address or by HS directly
             if (op == 5) begin csr_wr(CSR_SLWID, d, 1'b1); n_virt_alias++; end
             else          csr_wr(CSR_VSLWID, d, 1'b0);
             if (d < 128 && m_he[d[6:0]]) m_vslwid = int'(d); else n_ignored++;
           end
        default: begin
             // a read with V = 1 at the slwid address must return vslwid
             csr = '{valid: 1'b1, we: 1'b0, addr: CSR_SLWID, wdata: '0, priv: PRIV_S, v: 1'b1};
             #1;
             check(rsp.rdata == 32'(m_vslwid), "V=1 slwid read gives vslwid");
             csr = '0;
           end
      endcase
      m_he = m_hd & m_md;
      check_all();
    end
    check(n_ignored > 50 && n_fallback > 50 && n_virt_alias > 50, "coverage");
    $display("ignored=%0d fallback=%0d alias=%0d", n_ignored, n_fallback, n_virt_alias);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
