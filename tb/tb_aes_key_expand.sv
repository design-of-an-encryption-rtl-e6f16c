// tb_aes_key_expand: self-checking test of the AES key expansion unit.
//
// Checks every entry of the round-key table against the reference key
// schedule for 128/192/256-bit keys (the FIPS-197 appendix A keys and random
// keys), the final-round-key output `fk` against the last Nk schedule words
// (FIPS-197 appendix A gives them for the example keys), and the timing:
// `ready` and `fk_valid` Nr+2 cycles after `load` (one round key per cycle).
module tb_aes_key_expand;
  import aes_ref_pkg::*;

  logic         clk = 0, rst_n = 0, load = 0;
  logic [1:0]   ks = 0;
  logic [255:0] key = '0, fk;
  logic [3:0]   rd_a_idx = 0, rd_b_idx = 0;
  logic [127:0] rk_a, rk_b;
  logic         ready, fk_valid;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expand dut (.clk, .rst_n, .load, .ks, .key, .rd_a_idx, .rd_b_idx,
                      .rk_a, .rk_b, .ready, .fk, .fk_valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expand_and_check(input logic [255:0] k, input int s, input logic [255:0] fk_exp);
    int cyc, nr;
    rk_t ref_rk;
    ref_rk = expand(k, s);
    nr = nr_of_ks(s);
    @(negedge clk);
    key = k; ks = 2'(s); load = 1;
    @(negedge clk);
    load = 0;
    key = ~k;                         // key must only be sampled at load
    cyc = 1;
    check(!ready, "ready low after load");
    while (!ready) begin
      if (cyc < nr + 2) check(!fk_valid, "fk_valid early");
      @(negedge clk); cyc++;
    end
    check(cyc == nr + 2, $sformatf("ready after %0d cycles, expected %0d", cyc, nr + 2));
    check(fk_valid, "fk_valid with ready");
    for (int r = 0; r <= nr; r++) begin
      rd_a_idx = 4'(r); rd_b_idx = 4'(nr - r);
      #1;
      check(rk_a == ref_rk[r], $sformatf("ks=%0d round key %0d: %h vs %h", s, r, rk_a, ref_rk[r]));
      check(rk_b == ref_rk[nr - r], $sformatf("ks=%0d port b round key %0d", s, nr - r));
    end
    check(fk == fk_exp, $sformatf("ks=%0d fk %h vs %h", s, fk, fk_exp));
  endtask

  function automatic logic [255:0] ref_fk(input logic [255:0] k, input int s);
    rk_t r;
    r = expand(k, s);
    return (s == 0) ? {r[10], 128'h0} : (s == 1) ? {r[11][63:0], r[12], 64'h0} : {r[13], r[14]};
  endfunction

  initial begin
    logic [255:0] k;
    init_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // FIPS-197 appendix A keys and their last schedule words
    k = {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0};
    expand_and_check(k, 0, ref_fk(k, 0));
    check(fk[255:128] == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "FIPS-197 A.1 last round key");
    k = {192'h8e73b0f7da0e6452c810f32b809079e562f8ead2522c6b7b, 64'h0};
    expand_and_check(k, 1, ref_fk(k, 1));
    check(fk[191:64] == 128'he98ba06f448c773c8ecc720401002202, "FIPS-197 A.2 last round key");
    k = 256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4;
    expand_and_check(k, 2, ref_fk(k, 2));
    check(fk[127:0] == 128'hfe4890d1e6188d0b046df344706c631e, "FIPS-197 A.3 last round key");
    for (int i = 0; i < 12; i++) begin
      k = {rnd128(), rnd128()};
      if (i % 3 == 0) k[127:0] = '0;
      if (i % 3 == 1) k[63:0] = '0;
      expand_and_check(k, i % 3, ref_fk(k, i % 3));
    end
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
