// tb_dual_aes_ctl: self-checking test of the dual AES core control.
//
// The two engines are modelled in the testbench as Nr-cycle busy timers. With
// a block always waiting, the checks are: the round count per key size; loads
// alternate between the engines, Nr/2 cycles apart, and engine 0 is loaded in
// the cycle its previous result leaves (the timing diagram of the design);
// in CBC (single) only engine 0 is used, Nr cycles apart; force1 loads engine
// 1; the output select follows the engine that finished.
module tb_dual_aes_ctl;
  logic       clk = 0, rst_n = 0;
  logic [1:0] ks = 0;
  logic       single = 0, force1 = 0, issue = 0;
  logic       busy0, busy1, done0, done1;
  logic [3:0] nr;
  logic       can_issue, issue_core, load0, load1, out_valid, out_sel;
  int         checks = 0, failures = 0;
  int         cnt0 = 0, cnt1 = 0, cyc = 0;

  always #5 clk = ~clk;

  dual_aes_ctl dut (.clk, .rst_n, .ks, .single, .force1, .issue, .busy0, .busy1,
                    .done0, .done1, .nr, .can_issue, .issue_core, .load0, .load1,
                    .out_valid, .out_sel);

  // engine models: busy for nr cycles after a load, done in the last one
  assign busy0 = cnt0 > 1;
  assign busy1 = cnt1 > 1;
  assign done0 = cnt0 == 1;
  assign done1 = cnt1 == 1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    cnt0 <= load0 ? int'(nr) : (cnt0 > 0 ? cnt0 - 1 : 0);
    cnt1 <= load1 ? int'(nr) : (cnt1 > 0 ? cnt1 - 1 : 0);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int l0 [$];
  int l1 [$];
  always @(posedge clk) begin
    if (load0) l0.push_back(cyc);
    if (load1) l1.push_back(cyc);
    if (out_valid) begin
      checks++;
      if (out_sel != done1 || (done0 && done1)) begin failures++; $display("FAIL: out_sel"); end
    end
  end

  // issue whenever allowed for n cycles
  task automatic stream(input int n);
    l0.delete(); l1.delete();
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      issue = can_issue;
    end
    @(negedge clk);
    issue = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      int exp_nr;
      exp_nr = (s == 0) ? 10 : (s == 1) ? 12 : 14;
      ks = 2'(s); single = 0;
      @(negedge clk);
      check(int'(nr) == exp_nr, $sformatf("nr %0d for ks %0d", nr, s));
      stream(8 * exp_nr);
      check(l0.size() >= 6 && l1.size() >= 6, $sformatf("both engines used (ks %0d)", s));
      for (int i = 0; i < l1.size() && i < l0.size(); i++)
        check(l1[i] - l0[i] == exp_nr / 2, $sformatf("stagger %0d, ks %0d", l1[i] - l0[i], s));
      for (int i = 1; i < l0.size(); i++)
        check(l0[i] - l0[i-1] == exp_nr, $sformatf("engine 0 period %0d", l0[i] - l0[i-1]));
      // CBC: engine 0 alone
      single = 1;
      stream(6 * exp_nr);
      check(l1.size() == 0, "engine 1 disabled in CBC");
      check(l0.size() >= 5, "engine 0 used in CBC");
      for (int i = 1; i < l0.size(); i++)
        check(l0[i] - l0[i-1] == exp_nr, $sformatf("CBC period %0d", l0[i] - l0[i-1]));
      single = 0;
    end
    // force1: next block to engine 1 only
    force1 = 1;
    l0.delete(); l1.delete();
    @(negedge clk);
    check(can_issue && issue_core, "force1 selects engine 1");
    issue = 1;
    @(negedge clk);
    issue = 0; force1 = 0;
    repeat (20) @(negedge clk);
    check(l1.size() == 1 && l0.size() == 0, "force1 loaded engine 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
