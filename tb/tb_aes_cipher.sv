// tb_aes_cipher: self-checking test of the iterative AES round engine.
//
// The round-key table is modelled in the testbench from the reference key
// schedule. Checks: the FIPS-197 appendix C example for 128/192/256-bit keys
// (encryption and decryption), random blocks and keys against the reference
// model, and the latency (result exactly Nr cycles after the load, busy low in
// that cycle).
module tb_aes_cipher;
  import aes_ref_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         load = 0, encrypt = 1;
  logic [3:0]   nr = 10;
  logic [127:0] din = '0, rk_a, rk_b, dout;
  logic [3:0]   rk_a_idx, rk_b_idx;
  logic         busy, done;
  rk_t          rk;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_cipher dut (.clk, .rst_n, .load, .encrypt, .nr, .din, .rk_a_idx, .rk_b_idx,
                  .rk_a, .rk_b, .busy, .done, .dout);

  assign rk_a = rk[rk_a_idx];
  assign rk_b = rk[rk_b_idx];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input logic [127:0] x, input logic [255:0] key, input int ks,
                     input bit enc, output logic [127:0] y);
    int cyc;
    rk = expand(key, ks);
    nr = 4'(nr_of_ks(ks));
    @(negedge clk);
    din = x; encrypt = enc; load = 1;
    @(negedge clk);
    load = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == nr_of_ks(ks), $sformatf("latency %0d, expected %0d", cyc, nr_of_ks(ks)));
    check(!busy, "busy low with done");
    y = dout;
  endtask

  localparam logic [127:0] PT = 128'h00112233445566778899aabbccddeeff;
  localparam logic [255:0] KEY = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
  localparam logic [127:0] CT [3] = '{128'h69c4e0d86a7b0430d8cdb78070b4c55a,
                                      128'hdda97ca4864cdfe06eaf70a0ec0d7191,
                                      128'h8ea2b7ca516745bfeafc49904b496089};

  initial begin
    logic [127:0] y, x;
    logic [255:0] key;
    int ks;
    init_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      // key left aligned: 128 bits use [255:128], 192 bits [255:64]
      key = (k == 0) ? {KEY[255:128], 128'h0} : (k == 1) ? {KEY[255:64], 64'h0} : KEY;
      check(ref_encrypt(PT, key, k) == CT[k], $sformatf("reference model, ks=%0d", k));
      run(PT, key, k, 1, y);
      check(y == CT[k], $sformatf("FIPS-197 encrypt ks=%0d: %h", k, y));
      run(CT[k], key, k, 0, y);
      check(y == PT, $sformatf("FIPS-197 decrypt ks=%0d: %h", k, y));
    end
    for (int i = 0; i < 30; i++) begin
      ks = i % 3;
      key = {rnd128(), rnd128()};
      x = rnd128();
      run(x, key, ks, i % 2 == 0, y);
      check(y == cipher(x, key, ks, i % 2 == 0), $sformatf("random %0d", i));
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
