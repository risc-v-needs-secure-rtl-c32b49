// tb_initiator_protection: end-to-end test of the initiator-side protection
// unit at its default size (128 worlds, 16 + 16 SPMP entries).
//
// It follows the boot flow of a virtualised hart: M-mode firmware sets
// mlwid and delegates WIDs 20-99 to the hypervisor; the hypervisor sets its
// user WID, the first guest's WID and delegation, and splits the unified
// hSPMP entries between itself (spmpswitch) and the guest (hspmpswitch);
// the guest sets its user WID and its own vSPMP. Directed accesses from all
// five modes then check the WID tag and which stage (if any) refuses them.
// A VM switch (new hslwid and hspmpswitch) and a revocation of delegated
// WIDs by M-mode follow. Last, random accesses with random back-pressure are
// checked against a reference model of both SPMP stages, and the one-cycle
// latency of the register stage is checked on every accepted request.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_initiator_protection;
  import iprot_pkg::*;
  import spmp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  csr_req_t          csr;
  logic              csr_hit, csr_illegal, csr_virtual;
  logic [31:0]       csr_rdata;
  logic              req_valid, req_ready, req_v;
  logic [PAW-1:0]    req_addr;
  acc_e              req_acc;
  priv_e             req_priv;
  logic              out_valid, out_ready, out_fault;
  logic [PAW-1:0]    out_addr;
  acc_e              out_acc;
  priv_e             out_priv;
  logic [6:0]        out_wid;
  stage_e            out_stage;
  logic [127:0]      mdeleg, hdeleg;

  initiator_protection dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_i(csr), .csr_hit_o(csr_hit), .csr_rdata_o(csr_rdata),
    .csr_illegal_o(csr_illegal), .csr_virtual_o(csr_virtual),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_addr_i(req_addr),
    .req_acc_i(req_acc), .req_priv_i(req_priv), .req_v_i(req_v),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_addr_o(out_addr),
    .out_acc_o(out_acc), .out_priv_o(out_priv), .out_wid_o(out_wid),
    .out_fault_o(out_fault), .out_stage_o(out_stage),
    .mwiddeleg_o(mdeleg), .hwiddeleg_o(hdeleg)
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int c_mbypass = 0, c_vfault = 0, c_hfault_guest = 0, c_hfault_host = 0;
  int c_illegal = 0, c_virtual = 0, c_refused = 0, c_fallback = 0;
  int c_vmswitch = 0, c_stall = 0, c_vswitch = 0, c_guest_ok = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ---------------------------------------------------------------- model
  bit [7:0]        hcfg [32], vcfg [32];
  longint unsigned hwa  [32], vwa  [32];
  bit [31:0]       sw, hsw, vsw;
  int              exp_wid [5];      // indexed by mode_e

  // ---------------------------------------------------------------- CSR
  // One CSR instruction; checks the exception the unit reports.
  task automatic csr_do(input priv_e p, input logic v, input logic [11:0] a,
                        input logic [31:0] d, input logic we,
                        input bit exp_illegal = 0, input bit exp_virtual = 0);
    @(negedge clk);
    csr = '{valid: 1'b1, we: we, addr: a, wdata: d, priv: p, v: v};
    #1;
    check(csr_hit, $sformatf("csr hit %h", a));
    check(csr_illegal == exp_illegal, $sformatf("csr illegal %h", a));
    check(csr_virtual == exp_virtual, $sformatf("csr virtual %h", a));
    if (csr_illegal) c_illegal++;
    if (csr_virtual) c_virtual++;
    @(negedge clk);
    csr = '0;
  endtask

  task automatic csr_expect(input priv_e p, input logic v, input logic [11:0] a,
                            input logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0, priv: p, v: v};
    #1;
    check(csr_rdata == d, $sformatf("csr read %h got %h exp %h", a, csr_rdata, d));
    @(negedge clk);
    csr = '0;
  endtask

  task automatic hent(input int i, input bit [7:0] c, input longint unsigned w);
    hcfg[i] = c; hwa[i] = w;
    csr_do(PRIV_S, 1'b0, CSR_SPMPCFG0 + 12'(i), 32'(c), 1'b1);
    csr_do(PRIV_S, 1'b0, CSR_SPMPADDR0 + 12'(i), 32'(w), 1'b1);
  endtask

  task automatic vent(input int i, input bit [7:0] c, input longint unsigned w);
    vcfg[i] = c; vwa[i] = w;
    csr_do(PRIV_S, 1'b1, CSR_SPMPCFG0 + 12'(i), 32'(c), 1'b1);
    csr_do(PRIV_S, 1'b1, CSR_SPMPADDR0 + 12'(i), 32'(w), 1'b1);
  endtask

  // ---------------------------------------------------------------- accesses
  typedef struct {
    logic [PAW-1:0] addr;
    int             wid;
    bit             fault;
    stage_e         stage;
    priv_e          priv;
    bit             v;
  } exp_t;

  exp_t exp_q [$];
  bit   bp_en = 0;
  int   accepted = 0, retired = 0;
  bit   last_v = 0;

  // expected result of an access under the current model
  function automatic exp_t expect_of(input logic [PAW-1:0] a, input acc_e ac,
                                     input priv_e p, input logic v);
    exp_t  e;
    mode_e m;
    bit    vok, hok;
    m = mode_of(p, v);
    e.addr = a; e.priv = p; e.v = v; e.wid = exp_wid[m];
    vok = 1; hok = 1;
    case (m)
      MODE_HS: hok = ref_check(hcfg, hwa, sw, 16, longint'(a), int'(ac), 1'b0);
      MODE_U:  hok = ref_check(hcfg, hwa, sw, 16, longint'(a), int'(ac), 1'b1);
      MODE_VS, MODE_VU: begin
        vok = ref_check(vcfg, vwa, vsw, 16, longint'(a), int'(ac), m == MODE_VU);
        hok = ref_check(hcfg, hwa, hsw, 16, longint'(a), int'(ac), 1'b1);
      end
      default: ;
    endcase
    e.fault = !(vok && hok);
    e.stage = !vok ? STAGE_VSPMP : (!hok ? STAGE_HSPMP : STAGE_NONE);
    return e;
  endfunction

  // Offer one access; returns once it has been accepted.
  task automatic access(input logic [PAW-1:0] a, input acc_e ac, input priv_e p,
                        input logic v, input int dwid = -1, input int dfault = -1,
                        input stage_e dstage = STAGE_NONE);
    exp_t e;
    e = expect_of(a, ac, p, v);
    // directed expectations worked out by hand must agree with the model
    if (dwid >= 0)   check(e.wid == dwid, $sformatf("directed wid %h", a));
    if (dfault >= 0) check(e.fault == bit'(dfault) && e.stage == dstage,
                           $sformatf("directed outcome %h", a));
    @(negedge clk);
    req_valid = 1; req_addr = a; req_acc = ac; req_priv = p; req_v = v;
    exp_q.push_back(e);
    do @(posedge clk); while (!req_ready);
    if (v != last_v) c_vswitch++;
    last_v = v;
    @(negedge clk);
    req_valid = 0;
  endtask

  // downstream: random back-pressure, scoreboard, latency check
  logic        acc_d;
  logic [PAW-1:0] acc_addr_d;
  always @(negedge clk) out_ready <= bp_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n) begin
      // a request accepted at the previous edge must be offered now
      if (acc_d) check(out_valid && out_addr == acc_addr_d, "one-cycle latency");
      if (out_valid && !out_ready) c_stall++;
      if (out_valid && out_ready) begin
        exp_t e;
        if (exp_q.size() == 0) check(0, "unexpected output");
        else begin
          e = exp_q.pop_front();
          check(out_addr == e.addr && out_priv == e.priv,
                $sformatf("order/addr %h exp %h", out_addr, e.addr));
          check(int'(out_wid) == e.wid,
                $sformatf("wid %0d exp %0d at %h", out_wid, e.wid, e.addr));
          check(out_fault == e.fault && out_stage == e.stage,
                $sformatf("fault %0b/%s exp %0b/%s at %h priv %s", out_fault,
                          out_stage.name(), e.fault, e.stage.name(), e.addr, e.priv.name()));
          if (e.priv == PRIV_M) c_mbypass++;
          if (e.stage == STAGE_VSPMP) c_vfault++;
          if (e.stage == STAGE_HSPMP && e.v) c_hfault_guest++;
          if (e.stage == STAGE_HSPMP && !e.v) c_hfault_host++;
          retired++;
        end
      end
      acc_d      <= req_valid && req_ready;
      acc_addr_d <= req_addr;
    end else acc_d <= 0;
  end

  task automatic drain();
    while (exp_q.size() != 0) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr = '0; req_valid = 0; req_addr = '0; req_acc = ACC_R; req_priv = PRIV_M; req_v = 0;
    out_ready = 1; acc_d = 0; acc_addr_d = '0;
    for (int i = 0; i < 32; i++) begin hcfg[i] = 0; hwa[i] = 0; vcfg[i] = 0; vwa[i] = 0; end
    sw = 0; hsw = 0; vsw = 0;
    foreach (exp_wid[i]) exp_wid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- M-mode firmware
    csr_do(PRIV_M, 1'b0, CSR_MLWID, 10, 1'b1);
    csr_do(PRIV_M, 1'b0, CSR_MWIDDELEG + 0, 32'hFFF0_0000, 1'b1);   // 20-31
    csr_do(PRIV_M, 1'b0, CSR_MWIDDELEG + 1, 32'hFFFF_FFFF, 1'b1);   // 32-63
    csr_do(PRIV_M, 1'b0, CSR_MWIDDELEG + 2, 32'hFFFF_FFFF, 1'b1);   // 64-95
    csr_do(PRIV_M, 1'b0, CSR_MWIDDELEG + 3, 32'h0000_000F, 1'b1);   // 96-99
    // HS may not touch M-level registers
    csr_do(PRIV_S, 1'b0, CSR_MLWID, 99, 1'b1, 1'b1);
    csr_expect(PRIV_M, 1'b0, CSR_MLWID, 10);
    check(mdeleg == {28'h0, 4'hF, 64'hFFFF_FFFF_FFFF_FFFF, 32'hFFF0_0000}, "mwiddeleg output");

    // ---------------- hypervisor (HS)
    csr_do(PRIV_S, 1'b0, CSR_SLWID, 21, 1'b1);
    csr_do(PRIV_S, 1'b0, CSR_SLWID, 5, 1'b1);             // not delegated: ignored
    c_refused++;
    csr_expect(PRIV_S, 1'b0, CSR_SLWID, 21);
    csr_do(PRIV_S, 1'b0, CSR_HSLWID, 40, 1'b1);
    csr_do(PRIV_S, 1'b0, CSR_HWIDDELEG + 1, 32'hFFFF_FFFF, 1'b1);   // 32-63
    csr_do(PRIV_S, 1'b0, CSR_HWIDDELEG + 2, 32'h0000_007F, 1'b1);   // 64-70
    csr_do(PRIV_S, 1'b0, CSR_HWIDDELEG + 0, 32'h0000_00FF, 1'b1);   // 0-7: not M-delegated
    csr_expect(PRIV_S, 1'b0, CSR_HWIDDELEG + 0, 32'h0);
    // hSPMP entries: hypervisor, guest RAM, shared MMIO word, host user app
    hent(0, 8'h1F, 64'h5FF);    // S  RWX NAPOT 0x1000-0x1FFF
    hent(1, 8'h9B, 64'h2FFF);   // U  RW  NAPOT 0x8000-0xFFFF
    hent(2, 8'h91, 64'h8000);   // U  R   NA4   0x20000
    hent(3, 8'h00, 64'hC00);    // off, lower bound of the next TOR entry
    hent(4, 8'h8F, 64'h1000);   // U  RWX TOR   0x3000-0x3FFF
    sw = 32'b11001; hsw = 32'b00110;
    csr_do(PRIV_S, 1'b0, CSR_SPMPSWITCH, sw, 1'b1);
    csr_do(PRIV_S, 1'b0, CSR_HSPMPSWITCH, hsw, 1'b1);

    // ---------------- guest (VS)
    csr_do(PRIV_S, 1'b1, CSR_SLWID, 65, 1'b1);            // vslwid
    csr_do(PRIV_S, 1'b1, CSR_SLWID, 30, 1'b1);            // not VS-delegated: ignored
    c_refused++;
    csr_expect(PRIV_S, 1'b1, CSR_SLWID, 65);
    csr_expect(PRIV_S, 1'b0, CSR_SLWID, 21);              // HS view unchanged
    vent(0, 8'h1B, 64'h27FF);   // S RW NAPOT 0x8000-0xBFFF (guest kernel)
    vent(1, 8'h9B, 64'h31FF);   // U RW NAPOT 0xC000-0xCFFF (guest app)
    vsw = 32'b11;
    csr_do(PRIV_S, 1'b1, CSR_SPMPSWITCH, vsw, 1'b1);
    csr_expect(PRIV_S, 1'b0, CSR_VSPMPSWITCH, vsw);
    csr_expect(PRIV_S, 1'b0, CSR_SPMPSWITCH, sw);
    csr_do(PRIV_S, 1'b1, CSR_HSPMPSWITCH, 0, 1'b1, 1'b0, 1'b1);   // virtual instruction
    csr_do(PRIV_S, 1'b1, CSR_VSPMPSWITCH, 0, 1'b1, 1'b0, 1'b1);   // direct vs-address too
    csr_do(PRIV_U, 1'b1, CSR_SPMPSWITCH, 0, 1'b0, 1'b1);          // VU: illegal
    csr_do(PRIV_U, 1'b0, CSR_SLWID, 0, 1'b0, 1'b1);               // U: illegal
    csr_expect(PRIV_S, 1'b0, CSR_HSPMPSWITCH, hsw);

    exp_wid[MODE_M] = 0; exp_wid[MODE_HS] = 10; exp_wid[MODE_U] = 21;
    exp_wid[MODE_VS] = 40; exp_wid[MODE_VU] = 65;

    // ---------------- directed accesses, VM 1
    access(34'h50000, ACC_W, PRIV_M, 0, 0,  0, STAGE_NONE);
    access(34'h01200, ACC_X, PRIV_S, 0, 10, 0, STAGE_NONE);
    access(34'h50000, ACC_R, PRIV_S, 0, 10, 0, STAGE_NONE);
    access(34'h08100, ACC_R, PRIV_S, 0, 10, 0, STAGE_NONE);
    access(34'h03100, ACC_R, PRIV_U, 0, 21, 0, STAGE_NONE);
    access(34'h01200, ACC_R, PRIV_U, 0, 21, 1, STAGE_HSPMP);
    access(34'h08100, ACC_R, PRIV_U, 0, 21, 1, STAGE_HSPMP);
    access(34'h08100, ACC_W, PRIV_S, 1, 40, 0, STAGE_NONE);
    access(34'h08100, ACC_X, PRIV_S, 1, 40, 1, STAGE_VSPMP);
    access(34'h0C100, ACC_W, PRIV_U, 1, 65, 0, STAGE_NONE);
    access(34'h08100, ACC_R, PRIV_U, 1, 65, 1, STAGE_VSPMP);
    access(34'h20000, ACC_R, PRIV_S, 1, 40, 0, STAGE_NONE);
    access(34'h20000, ACC_W, PRIV_S, 1, 40, 1, STAGE_HSPMP);
    access(34'h01200, ACC_R, PRIV_S, 1, 40, 1, STAGE_HSPMP);
    access(34'h03100, ACC_R, PRIV_S, 1, 40, 1, STAGE_HSPMP);
    access(34'h03100, ACC_W, PRIV_M, 0, 0,  0, STAGE_NONE);
    drain();

    // ---------------- VM switch: second guest
    csr_do(PRIV_S, 1'b0, CSR_HSLWID, 50, 1'b1);
    hsw = 32'b10000;
    csr_do(PRIV_S, 1'b0, CSR_HSPMPSWITCH, hsw, 1'b1);
    vsw = 0;
    csr_do(PRIV_S, 1'b0, CSR_VSPMPSWITCH, vsw, 1'b1);     // hypervisor restores the guest's vSPMP
    c_vmswitch++;
    exp_wid[MODE_VS] = 50;
    access(34'h03100, ACC_R, PRIV_S, 1, 50, 0, STAGE_NONE);
    access(34'h08100, ACC_R, PRIV_S, 1, 50, 1, STAGE_HSPMP);
    access(34'h03100, ACC_R, PRIV_U, 1, 65, 1, STAGE_VSPMP);
    drain();

    // ---------------- M-mode takes WIDs 64-95 back: VU falls back to VS's WID
    csr_do(PRIV_M, 1'b0, CSR_MWIDDELEG + 2, 32'h0, 1'b1);
    exp_wid[MODE_VU] = 50;
    c_fallback++;
    csr_expect(PRIV_S, 1'b0, CSR_HWIDDELEG + 2, 32'h0);
    access(34'h03100, ACC_R, PRIV_U, 1, 50, 1, STAGE_VSPMP);
    drain();

    // ---------------- random accesses with back-pressure
    vsw = 32'b11;
    csr_do(PRIV_S, 1'b0, CSR_VSPMPSWITCH, vsw, 1'b1);
    hsw = 32'b10110;
    csr_do(PRIV_S, 1'b0, CSR_HSPMPSWITCH, hsw, 1'b1);
    bp_en = 1;
    for (int k = 0; k < 3000; k++) begin
      logic [PAW-1:0] a;
      int   sel;
      logic v;
      priv_e p;
      a   = PAW'($urandom_range(0, 32'h23FFF)) & ~PAW'(3);
      sel = $urandom_range(0, 4);
      p   = (sel == 0) ? PRIV_M : (sel == 1 || sel == 3) ? PRIV_S : PRIV_U;
      v   = (sel >= 3);
      access(a, acc_e'($urandom_range(0, 2)), p, v);
    end
    drain();
    bp_en = 0;

    // ---------------- mechanism coverage
    $display("m_bypass=%0d vspmp_fault=%0d hspmp_fault_guest=%0d hspmp_fault_host=%0d",
             c_mbypass, c_vfault, c_hfault_guest, c_hfault_host);
    $display("csr_illegal=%0d csr_virtual=%0d lwid_refused=%0d wid_fallback=%0d vm_switch=%0d",
             c_illegal, c_virtual, c_refused, c_fallback, c_vmswitch);
    $display("v_switch=%0d stall=%0d retired=%0d", c_vswitch, c_stall, retired);
    check(c_mbypass > 0,      "M-mode bypass happened");
    check(c_vfault > 0,       "vSPMP fault happened");
    check(c_hfault_guest > 0, "second-stage hSPMP fault happened");
    check(c_hfault_host > 0,  "host hSPMP fault happened");
    check(c_illegal > 0,      "illegal CSR access happened");
    check(c_virtual > 0,      "virtual-instruction CSR access happened");
    check(c_refused > 0,      "refused lwid write happened");
    check(c_fallback > 0,     "WID fall-back happened");
    check(c_vmswitch > 0,     "VM switch happened");
    check(c_vswitch > 0,      "V mode switch happened");
    check(c_stall > 0,        "back-pressure stall happened");
    check(retired == 3020,    "all accesses retired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
