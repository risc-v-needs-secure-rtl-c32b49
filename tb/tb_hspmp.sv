// tb_hspmp: self-checking test of the unified hypervisor SPMP.
// Programs random entries and the two switch registers through the CSR
// port, reads them back, then checks random accesses from HS, U, VS and VU
// against a byte-range reference model: HS is a supervisor access and U a
// user access under spmpswitch; VS and VU are both user accesses under
// hspmpswitch. Repeated for several random configurations.
module tb_hspmp;
  import iprot_pkg::*;
  import spmp_ref_pkg::*;

  localparam int N = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  csr_req_t       csr;
  csr_rsp_t       rsp;
  logic [PAW-1:0] addr;
  acc_e           acc;
  mode_e          mode;
  logic           ok;

  hspmp #(.NENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_i(csr), .csr_ok_i(1'b1), .rsp_o(rsp),
    .chk_addr_i(addr), .chk_acc_i(acc), .chk_mode_i(mode), .chk_ok_o(ok)
  );

  int checks = 0, failures = 0;
  int n_allow = 0, n_deny = 0, n_guest_allow = 0;

  bit [7:0]        cfg [32];
  longint unsigned wa  [32];
  bit [31:0]       sw, hsw;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic csr_wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d, priv: PRIV_M, v: 1'b0};
    @(negedge clk);
    csr = '0;
  endtask

  logic [31:0] rd;
  task automatic csr_rd(input logic [11:0] a, input logic v);
    csr = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0, priv: PRIV_S, v: v};
    #1;
    rd = rsp.rdata;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr = '0; addr = '0; acc = ACC_R; mode = MODE_HS;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // after reset nothing is enabled: HS may access, U may not
    @(negedge clk);
    addr = 34'h100; acc = ACC_W; mode = MODE_HS; #1; check(ok === 1'b1, "reset HS allow");
    mode = MODE_U; #1; check(ok === 1'b0, "reset U deny");
    mode = MODE_VS; #1; check(ok === 1'b0, "reset VS deny");

    for (int round = 0; round < 40; round++) begin
      for (int i = 0; i < N; i++) begin
        cfg[i] = rand_cfg();
        wa[i]  = rand_waddr();
        csr_wr(CSR_SPMPCFG0 + 12'(i), {24'hABCDE0 , cfg[i]} );
        csr_wr(CSR_SPMPADDR0 + 12'(i), 32'(wa[i]));
        cfg[i][6:5] = 2'b00;                // reserved bits read as zero
      end
      sw  = 32'($urandom) & ((32'd1 << N) - 1);
      hsw = 32'($urandom) & ((32'd1 << N) - 1);
      if (round % 4 == 0) sw = '1 & ((32'd1 << N) - 1);
      csr_wr(CSR_SPMPSWITCH,  sw);
      csr_wr(CSR_HSPMPSWITCH, hsw);
      // read back
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        csr_rd(CSR_SPMPCFG0 + 12'(i), 1'b0); check(rd == 32'(cfg[i]), "cfg readback");
        csr_rd(CSR_SPMPADDR0 + 12'(i), 1'b0); check(rd == 32'(wa[i]), "addr readback");
        check(rsp.hit, "hit");
      end
      csr_rd(CSR_SPMPSWITCH, 1'b0); check(rd == sw,  "spmpswitch readback");
      csr_rd(CSR_HSPMPSWITCH, 1'b0); check(rd == hsw, "hspmpswitch readback");
      // with V = 1 the spmp addresses are not this block's
      csr_rd(CSR_SPMPCFG0, 1'b1); check(!rsp.hit, "V=1 redirect away");
      csr = '0;
      for (int k = 0; k < 400; k++) begin
        longint unsigned pa;
        int    ai;
        bit    exp, user;
        bit [31:0] en;
        pa   = rand_paddr();
        ai   = $urandom_range(0, 2);
        addr = PAW'(pa);
        acc  = acc_e'(ai);
        mode = mode_e'($urandom_range(1, 4));
        user = (mode != MODE_HS);
        en   = (mode == MODE_VS || mode == MODE_VU) ? hsw : sw;
        exp  = ref_check(cfg, wa, en, N, pa, ai, user);
        #1;
        check(ok === exp, $sformatf("check mode=%s addr=%h acc=%0d exp=%0b", mode.name(), pa, ai, exp));
        if (exp) n_allow++; else n_deny++;
        if (exp && (mode == MODE_VS)) n_guest_allow++;
      end
    end
    check(n_allow > 100 && n_deny > 100 && n_guest_allow > 10, "coverage of both outcomes");
    $display("allowed=%0d denied=%0d guest_allowed=%0d", n_allow, n_deny, n_guest_allow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
