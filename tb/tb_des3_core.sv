// tb_des3_core: self-checking test of the 3DES core.
//
// Checks: the classic DES example through the core (three equal keys make
// EDE a single DES), random 3DES-CBC streams in both directions against the
// reference model, the key parity flags, `done` with the last result, and the
// block rate: with plaintext always valid the core takes a block every
// 1 + 48/ROUNDS_PER_CYCLE cycles.
module tb_des3_core;
  import des_ref_pkg::*;

  localparam int RPC = 6;           // the core's default ROUNDS_PER_CYCLE

  logic        clk = 0, reset_n = 0;
  logic [63:0] d = '0, k1 = '0, k2 = '0, k3 = '0, iv = '0, q;
  logic        encrypt = 1, start = 0, endc = 0, pt_valid = 0;
  logic        pt_ready, write_enable, done;
  logic [2:0]  write_error;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  des3_core dut (
    .clk, .reset_n, .d, .k1, .k2, .k3, .iv, .encrypt, .start, .endc, .pt_valid,
    .pt_ready, .q, .write_enable, .done, .write_error);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] got [$];
  int          take_cyc [$];
  int          cyc = 0, done_cnt = 0;
  bit          done_with_write = 1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (write_enable) got.push_back(q);
    if (pt_valid && pt_ready) take_cyc.push_back(cyc);
    if (done) begin done_cnt++; if (!write_enable) done_with_write = 0; end
  end

  // Set odd parity in every byte of a key.
  function automatic logic [63:0] odd_par(input logic [63:0] k);
    for (int i = 0; i < 8; i++) k[8*i] = ~(^k[8*i+1 +: 7]);
    return k;
  endfunction

  task automatic stream(input logic [63:0] blks [$], input logic [63:0] exp [$],
                        input bit enc, input bit gaps, input string name);
    int dc;
    got.delete();
    take_cyc.delete();
    dc = done_cnt;
    @(negedge clk);
    encrypt = enc; start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < blks.size(); i++) begin
      if (gaps && $urandom % 3 == 0) begin pt_valid = 0; @(negedge clk); end
      d = blks[i]; endc = (i == blks.size() - 1); pt_valid = 1;
      #1;
      while (!pt_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      pt_valid = 0; endc = 0;
    end
    repeat (60) @(negedge clk);
    check(done_cnt == dc + 1, {name, ": done"});
    check(got.size() == exp.size(), $sformatf("%s: %0d results", name, got.size()));
    for (int i = 0; i < got.size() && i < exp.size(); i++)
      check(got[i] == exp[i], $sformatf("%s: block %0d %h vs %h", name, i, got[i], exp[i]));
    if (!gaps)
      for (int i = 1; i < take_cyc.size(); i++)
        check(take_cyc[i] - take_cyc[i-1] == 1 + 48 / RPC,
              $sformatf("%s: interval %0d", name, take_cyc[i] - take_cyc[i-1]));
  endtask

  initial begin
    logic [63:0] blks [$];
    logic [63:0] exp [$];
    logic [63:0] prev, x, y;
    repeat (3) @(negedge clk);
    reset_n = 1;

    // Known answer: DES(133457799BBCDFF1, 0123456789ABCDEF) = 85E813540F0AB405
    check(des(64'h0123456789abcdef, 64'h133457799bbcdff1, 1) == 64'h85e813540f0ab405,
          "reference DES example");
    k1 = 64'h133457799bbcdff1; k2 = k1; k3 = k1; iv = '0;
    blks = '{64'h0123456789abcdef};
    exp  = '{64'h85e813540f0ab405};
    stream(blks, exp, 1, 0, "DES example");
    check(write_error == 3'b000, "parity of the example key");
    blks = '{64'h85e813540f0ab405};
    exp  = '{64'h0123456789abcdef};
    stream(blks, exp, 0, 0, "DES example decrypt");

    // Random 3DES-CBC streams
    for (int t = 0; t < 8; t++) begin
      bit enc, gaps;
      enc = t[0]; gaps = t[1];
      k1 = odd_par({$urandom, $urandom}); k2 = odd_par({$urandom, $urandom});
      k3 = odd_par({$urandom, $urandom}); iv = {$urandom, $urandom};
      if (t >= 4) begin                      // spoil the parity of one key
        case (t % 3) 0: k1[8] = ~k1[8]; 1: k2[40] = ~k2[40]; default: k3[0] = ~k3[0]; endcase
      end
      blks.delete(); exp.delete();
      prev = iv;
      for (int i = 0; i < 5; i++) begin
        x = {$urandom, $urandom};
        y = tdes(enc ? (x ^ prev) : x, k1, k2, k3, enc);
        if (!enc) y ^= prev;
        prev = enc ? y : x;
        blks.push_back(x);
        exp.push_back(y);
      end
      stream(blks, exp, enc, gaps, $sformatf("3DES-CBC run %0d", t));
      check(write_error == ((t < 4) ? 3'b000 : (t % 3 == 0) ? 3'b001 : (t % 3 == 1) ? 3'b010 : 3'b100),
            $sformatf("run %0d write_error %b", t, write_error));
    end
    check(done_with_write, "done comes with the last write_enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
