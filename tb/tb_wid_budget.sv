// tb_wid_budget: the WID budgets of the example MCU configurations, run on
// one hart's initiator-side unit at its default size (128 worlds).
//
// Each configuration needs a number of distinct WIDs: 6 (S,low), 16 (S,typ),
// 43 (M,typ), 82 (H,typ,VF2), 52 (H,low,VF2), 106 (H,typ,VF4) and
// 71 (H,typ,VF0). For each, M-mode delegates WIDs 1..K-1 to the hypervisor
// (WID 0 stays the M-mode WID) and the hypervisor delegates the upper half
// of those to its guest. Then every one of the K WIDs is put in turn into
// the lwid register of a mode that may use it (mlwid for HS, slwid for U,
// hslwid for VS, vslwid for VU) and an access from that mode must leave
// tagged with exactly that WID. A WID just above the budget must be refused
// by the lower-level registers. This shows that all K partitions can be
// told apart at the initiator, which a 32-world limit could not do for the
// medium and high configurations.
module tb_wid_budget;
  import iprot_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  csr_req_t          csr;
  logic              csr_hit, csr_illegal, csr_virtual;
  logic [31:0]       csr_rdata;
  logic              req_valid, req_ready, req_v;
  logic [PAW-1:0]    req_addr;
  acc_e              req_acc;
  priv_e             req_priv;
  logic              out_valid, out_fault;
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
    .out_valid_o(out_valid), .out_ready_i(1'b1), .out_addr_o(out_addr),
    .out_acc_o(out_acc), .out_priv_o(out_priv), .out_wid_o(out_wid),
    .out_fault_o(out_fault), .out_stage_o(out_stage),
    .mwiddeleg_o(mdeleg), .hwiddeleg_o(hdeleg)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  task automatic csr_wr(input priv_e p, input logic v, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d, priv: p, v: v};
    #1;
    check(csr_hit && !csr_illegal && !csr_virtual, $sformatf("csr write %h", a));
    @(negedge clk);
    csr = '0;
  endtask

  // one access from (p, v); returns the WID it left with
  task automatic tag(input priv_e p, input logic v, output int w);
    @(negedge clk);
    req_valid = 1; req_priv = p; req_v = v; req_addr = 34'h100; req_acc = ACC_R;
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    check(out_valid, "one-cycle latency");
    w = int'(out_wid);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int budgets [7] = '{6, 16, 43, 82, 52, 106, 71};
  string names [7] = '{"S,low", "S,typ", "M,typ", "H,typ,VF2", "H,low,VF2", "H,typ,VF4", "H,typ,VF0"};

  initial begin
    int distinct;
    csr = '0; req_valid = 0; req_v = 0; req_priv = PRIV_M; req_addr = '0; req_acc = ACC_R;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 7; c++) begin
      int k, half, w;
      bit [127:0] md, hd;
      bit seen [128];
      k    = budgets[c];
      half = k / 2;
      md = '0; hd = '0;
      for (int i = 1; i < k; i++) md[i] = 1'b1;
      for (int i = half; i < k; i++) hd[i] = 1'b1;
      for (int j = 0; j < 4; j++) csr_wr(PRIV_M, 1'b0, CSR_MWIDDELEG + 12'(j), md[32*j +: 32]);
      for (int j = 0; j < 4; j++) csr_wr(PRIV_S, 1'b0, CSR_HWIDDELEG + 12'(j), hd[32*j +: 32]);
      foreach (seen[i]) seen[i] = 0;
      // WID 0: M-mode
      tag(PRIV_M, 1'b0, w); check(w == 0, "M-mode WID"); seen[w] = 1;
      for (int i = 1; i < k; i++) begin
        case (i % 4)
          0: begin csr_wr(PRIV_M, 1'b0, CSR_MLWID, i);  tag(PRIV_S, 1'b0, w); end
          1: begin csr_wr(PRIV_S, 1'b0, CSR_SLWID, i);  tag(PRIV_U, 1'b0, w); end
          2: begin csr_wr(PRIV_S, 1'b0, CSR_HSLWID, i); tag(PRIV_S, 1'b1, w); end
          default: begin
            if (i >= half) begin
              csr_wr(PRIV_S, 1'b1, CSR_SLWID, i);       tag(PRIV_U, 1'b1, w);
            end else begin
              csr_wr(PRIV_S, 1'b0, CSR_SLWID, i);       tag(PRIV_U, 1'b0, w);
            end
          end
        endcase
        check(w == i, $sformatf("%s: WID %0d tagged as %0d", names[c], i, w));
        seen[w] = 1;
      end
      distinct = 0;
      foreach (seen[i]) distinct += seen[i];
      check(distinct == k, $sformatf("%s: %0d distinct WIDs", names[c], distinct));
      // one past the budget is not delegated: hslwid must keep its value
      if (k < 128) begin
        csr_wr(PRIV_S, 1'b0, CSR_HSLWID, 2);
        csr_wr(PRIV_S, 1'b0, CSR_HSLWID, k);
        tag(PRIV_S, 1'b1, w);
        check(w == 2, $sformatf("%s: WID %0d refused", names[c], k));
      end
      $display("%-10s needs %3d WIDs: %3d distinct tags produced", names[c], k, distinct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
