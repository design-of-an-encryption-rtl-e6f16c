// tb_crypto_top: end-to-end test of the complete encryption core.
//
// The top is used with its default parameters. AES streams (every mode and
// key size, both directions, XTS with ciphertext stealing and NewIV, source
// gaps) run while a 3DES-CBC job list runs on the other core at the same
// time; every output block is compared with the reference models. The test
// also counts how often each mechanism of the design happens and counts a
// failure for any mechanism that was never exercised:
//   both AES engines computing at once, CBC on engine 0 alone, 192-bit
//   (three-phase) and 256-bit key expansion, the XTS tweak encryption on
//   engine 1, ciphertext stealing, NewIV, GCM last-block byte masking, CTR,
//   AES decryption, source pauses (Cen low), 3DES blocks, 3DES decryption,
//   3DES key parity errors, and AES and 3DES busy in the same cycle.
module tb_crypto_top;
  import aes_ref_pkg::*;
  import des_ref_pkg::*;

  logic         clk = 0, reset_n = 0;
  logic         cen = 0, encrypt = 1, newiv = 0, cts = 0, start = 0, endc = 0;
  logic [2:0]   mode = 3;
  logic [1:0]   ks = 0;
  logic [127:0] d = '0, iv = '0, q;
  logic [255:0] k1 = '0, k2 = '0, fk;
  logic [3:0]   be = 4'hf;
  logic         read, write, fkvalid, done;
  int           checks = 0, failures = 0;

  logic [63:0]  dd = '0, dk1 = '0, dk2 = '0, dk3 = '0, div = '0, dq;
  logic         dencrypt = 1, dstart = 0, dendc = 0, dvalid = 0;
  logic         dready, dwe, ddone;
  logic [2:0]   derr;

  always #5 clk = ~clk;

  crypto_top dut (
    .clk, .reset_n,
    .aes_icg_disable(1'b0), .aes_cen(cen), .aes_mode(mode), .aes_encrypt(encrypt),
    .aes_ks(ks), .aes_newiv(newiv), .aes_cts(cts), .aes_start(start), .aes_read(read),
    .aes_d(d), .aes_k1(k1), .aes_k2(k2), .aes_iv(iv), .aes_be(be), .aes_endc(endc),
    .aes_q(q), .aes_write(write), .aes_fk(fk), .aes_fkvalid(fkvalid), .aes_done(done),
    .des_d(dd), .des_k1(dk1), .des_k2(dk2), .des_k3(dk3), .des_iv(div),
    .des_encrypt(dencrypt), .des_start(dstart), .des_endc(dendc), .des_pt_valid(dvalid),
    .des_pt_ready(dready), .des_q(dq), .des_write_enable(dwe), .des_done(ddone),
    .des_write_error(derr));

  // ---- mechanism counters
  int n_par = 0, n_cbc1 = 0, n_ks192 = 0, n_ks256 = 0, n_tweak = 0, n_cts = 0,
      n_newiv = 0, n_gcm_mask = 0, n_ctr = 0, n_dec = 0, n_gap = 0, n_des = 0,
      n_des_dec = 0, n_parity = 0, n_both = 0;
  bit aes_active = 0, des_active = 0;
  always @(posedge clk) if (reset_n) begin
    if (dut.u_aes.u_aes0.busy && dut.u_aes.u_aes1.busy) n_par++;
    if (dut.u_aes.u_dual.load0 && dut.u_aes.u_dual.single) n_cbc1++;
    if (fkvalid && ks == 2'b01) n_ks192++;
    if (fkvalid && ks == 2'b10) n_ks256++;
    if (dut.u_aes.u_dual.load1 && dut.u_aes.u_dual.force1) n_tweak++;
    if (read && cen && cts) n_cts++;
    if (read && cen && newiv) n_newiv++;
    if (read && cen && mode == 3'b000 && endc && be != 4'hf) n_gcm_mask++;
    if (write && mode == 3'b010) n_ctr++;
    if (write && !encrypt) n_dec++;
    if (aes_active && !cen) n_gap++;
    if (dwe) n_des++;
    if (dwe && !dencrypt) n_des_dec++;
    if (ddone && derr != 3'b000) n_parity++;
    if ((dut.u_aes.u_aes0.busy || dut.u_aes.u_aes1.busy) && dut.u_des.state == dut.u_des.S_CALC) n_both++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- stream description
  typedef struct {
    logic [127:0] d;
    logic [127:0] iv;     // Iv presented with the block (next unit's Iv for NewIV)
    logic         newiv, cts, endc;
    logic [3:0]   be;
  } blk_t;

  blk_t         in_q [$];
  logic [127:0] exp_q [$];
  logic [127:0] got_q [$];
  int           take_cyc [$];
  int           cyc = 0;
  logic [255:0] fk_seen;
  bit           fk_pulse;
  int           done_cnt = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (write) got_q.push_back(q);
    if (read && cen) take_cyc.push_back(cyc);
    if (fkvalid) begin fk_seen = fk; fk_pulse = 1; end
    if (done) done_cnt++;
  end

  function automatic logic [255:0] mask_key(input logic [255:0] k, input int s);
    return (s == 0) ? {k[255:128], 128'h0} : (s == 1) ? {k[255:64], 64'h0} : k;
  endfunction

  // Drive one stream and compare outputs.
  task automatic run_stream(input int m, input bit enc, input int s, input logic [255:0] key1,
                            input logic [255:0] key2, input logic [127:0] iv0,
                            input bit gaps, input string name, input int rate);
    int n, dc0;
    rk_t r;
    n = in_q.size();
    got_q.delete();
    take_cyc.delete();
    fk_pulse = 0;
    dc0 = done_cnt;
    @(negedge clk);
    mode = 3'(m); encrypt = enc; ks = 2'(s); k1 = key1; k2 = key2; iv = iv0; start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < n; i++) begin
      if (gaps && ($urandom % 4 == 0)) begin cen = 0; @(negedge clk); end
      d = in_q[i].d; newiv = in_q[i].newiv; cts = in_q[i].cts; endc = in_q[i].endc;
      be = in_q[i].be; iv = in_q[i].iv; cen = 1;
      #1;
      while (!read) begin @(negedge clk); #1; end
      @(negedge clk);
      cen = 0; endc = 0; newiv = 0; cts = 0;
    end
    d = '0;
    fork
      begin : wait_done
        while (done_cnt == dc0) @(negedge clk);
      end
      begin
        repeat (600) @(negedge clk);
      end
    join_any
    disable fork;
    check(done_cnt == dc0 + 1, {name, ": done"});
    check(got_q.size() == exp_q.size(),
          $sformatf("%s: %0d outputs, expected %0d", name, got_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("%s: block %0d %h vs %h", name, i, got_q[i], exp_q[i]));
    r = expand(mask_key(key1, s), s);
    check(fk_pulse, {name, ": fkvalid"});
    check(fk_seen == ((s == 0) ? {r[10], 128'h0} : (s == 1) ? {r[11][63:0], r[12], 64'h0} : {r[13], r[14]}),
          {name, ": fk"});
    if (rate > 0 && take_cyc.size() > 2)
      for (int i = 1; i < take_cyc.size(); i++)
        check(take_cyc[i] - take_cyc[i-1] == rate,
              $sformatf("%s: block interval %0d, expected %0d", name, take_cyc[i] - take_cyc[i-1], rate));
    in_q.delete();
    exp_q.delete();
  endtask

  function automatic blk_t mk(input logic [127:0] dd);
    blk_t b;
    b.d = dd; b.iv = '0; b.newiv = 0; b.cts = 0; b.endc = 0; b.be = 4'hf;
    return b;
  endfunction

  // ---- streams for each mode
  task automatic t_ecb_cbc_ctr(input int m, input bit enc, input int s, input int n, input bit gaps);
    logic [255:0] key;
    logic [127:0] iv0, prev, p, c, ctr;
    blk_t b;
    int nr;
    key = mask_key({rnd128(), rnd128()}, s);
    iv0 = rnd128();
    prev = iv0; ctr = iv0;
    nr = nr_of_ks(s);
    for (int i = 0; i < n; i++) begin
      p = rnd128();
      b = mk(p);
      b.endc = (i == n - 1);
      if (m == 3) c = cipher(p, key, s, enc);
      else if (m == 1) begin
        if (enc) begin c = ref_encrypt(p ^ prev, key, s); prev = c; end
        else     begin c = ref_decrypt(p, key, s) ^ prev; prev = p; end
      end else begin
        c = p ^ ref_encrypt(ctr, key, s);
        if (m == 2) ctr = ctr + 1;
        else        ctr = {ctr[127:32], ctr[31:0] + 32'd1};
        if (m == 0 && i == n - 1) begin
          b.be = 4'($urandom % 16);
          c = first_bytes(c, int'(b.be) + 1);
        end
      end
      in_q.push_back(b);
      exp_q.push_back(c);
    end
    run_stream(m, enc, s, key, {rnd128(), rnd128()}, iv0, gaps,
               $sformatf("mode%0d enc%0d ks%0d", m, enc, s),
               gaps ? 0 : ((m == 1) ? nr : nr / 2));
  endtask

  // XTS: units = number of data units (NewIV between them); the last unit may
  // end with ciphertext stealing (partial block of plen bytes, 0 = none).
  task automatic t_xts(input bit enc, input int s, input int nblk, input int units,
                       input int plen, input bit gaps);
    logic [255:0] ka, kb;
    logic [127:0] ivs [4];
    logic [127:0] pt [$];
    logic [127:0] ct [$];
    logic [127:0] t, tm, cc, pp, x;
    blk_t b;
    ka = mask_key({rnd128(), rnd128()}, s);
    kb = mask_key({rnd128(), rnd128()}, s);
    for (int u = 0; u < units; u++) ivs[u] = rnd128();
    for (int u = 0; u < units; u++) begin
      bit steal;
      steal = (u == units - 1) && (plen > 0);
      pt.delete(); ct.delete();
      for (int i = 0; i < nblk; i++) pt.push_back(rnd128());
      if (steal) pt.push_back(rnd128());          // partial block (first plen bytes used)
      // encryption by the reference
      t = ref_encrypt(ivs[u], kb, s);
      for (int i = 0; i < nblk; i++) begin
        ct.push_back(ref_encrypt(pt[i] ^ t, ka, s) ^ t);
        if (!(steal && i == nblk - 1)) t = xts_next(t);
      end
      if (steal) begin
        tm = xts_next(t);
        cc = ct[nblk-1];
        pp = first_bytes(pt[nblk], plen) | (cc & ~first_bytes({128{1'b1}}, plen));
        ct[nblk-1] = ref_encrypt(pp ^ tm, ka, s) ^ tm;
        ct.push_back(first_bytes(cc, plen));
      end
      for (int i = 0; i < pt.size(); i++) begin
        if (enc) begin
          b = mk(pt[i]);
          exp_q.push_back(ct[i]);
        end else begin
          x = ct[i];
          if (steal && i == nblk) x = x | ({$urandom, $urandom, $urandom, $urandom} & ~first_bytes({128{1'b1}}, plen));
          b = mk(x);
          exp_q.push_back((steal && i == nblk) ? first_bytes(pt[i], plen) : pt[i]);
        end
        if (enc && steal && i == nblk) b.d = pt[i];        // tail bytes are ignored by the core
        b.cts = steal && (i == nblk - 1);
        if (steal && i == nblk) b.be = 4'(plen - 1);
        if (i == pt.size() - 1) begin
          if (u == units - 1) b.endc = 1;
          else begin b.newiv = 1; b.iv = ivs[u+1]; end
        end
        in_q.push_back(b);
      end
    end
    run_stream(4, enc, s, ka, kb, ivs[0], gaps,
               $sformatf("xts enc%0d ks%0d units%0d plen%0d", enc, s, units, plen), 0);
  endtask

  // ---- 3DES jobs
  logic [63:0] dgot [$];
  int          ddone_cnt = 0;
  always @(posedge clk) begin
    if (dwe) dgot.push_back(dq);
    if (ddone) ddone_cnt++;
  end

  function automatic logic [63:0] odd_par(input logic [63:0] k);
    for (int i = 0; i < 8; i++) k[8*i] = ~(^k[8*i+1 +: 7]);
    return k;
  endfunction

  task automatic des_job(input int t);
    logic [63:0] blks [$];
    logic [63:0] exp [$];
    logic [63:0] prev, x, y;
    bit enc;
    int dc;
    enc = !t[0];
    dk1 = odd_par({$urandom, $urandom}); dk2 = odd_par({$urandom, $urandom});
    dk3 = odd_par({$urandom, $urandom}); div = {$urandom, $urandom};
    if (t % 3 == 2) dk2[16] = ~dk2[16];
    prev = div;
    for (int i = 0; i < 6; i++) begin
      x = {$urandom, $urandom};
      y = tdes(enc ? (x ^ prev) : x, dk1, dk2, dk3, enc);
      if (!enc) y ^= prev;
      prev = enc ? y : x;
      blks.push_back(x);
      exp.push_back(y);
    end
    dgot.delete();
    dc = ddone_cnt;
    @(negedge clk);
    dencrypt = enc; dstart = 1;
    @(negedge clk);
    dstart = 0;
    for (int i = 0; i < blks.size(); i++) begin
      dd = blks[i]; dendc = (i == blks.size() - 1); dvalid = 1;
      #1;
      while (!dready) begin @(negedge clk); #1; end
      @(negedge clk);
      dvalid = 0; dendc = 0;
    end
    repeat (30) @(negedge clk);
    check(ddone_cnt == dc + 1, $sformatf("3DES job %0d: done", t));
    check(dgot.size() == exp.size(), $sformatf("3DES job %0d: %0d results", t, dgot.size()));
    for (int i = 0; i < dgot.size() && i < exp.size(); i++)
      check(dgot[i] == exp[i], $sformatf("3DES job %0d: block %0d", t, i));
    check(derr == ((t % 3 == 2) ? 3'b010 : 3'b000), $sformatf("3DES job %0d: write_error %b", t, derr));
  endtask

  task automatic need(input int n, input string what);
    checks++;
    $display("mechanism %-28s : %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  initial begin
    init_tables();
    repeat (3) @(negedge clk);
    reset_n = 1;
    fork
      begin
        aes_active = 1;
        for (int s = 0; s < 3; s++) begin
          t_ecb_cbc_ctr(3, 1, s, 6, 0);
          t_ecb_cbc_ctr(1, 1, s, 4, 0);
        end
        for (int s = 0; s < 3; s++)
          for (int e = 0; e < 2; e++) begin
            t_ecb_cbc_ctr(3, e, s, 4, 1);
            t_ecb_cbc_ctr(1, e, s, 4, 1);
            t_ecb_cbc_ctr(2, e, s, 4, 1);
            t_ecb_cbc_ctr(0, e, s, 4, 1);
            t_xts(e, s, 3, 2, 0, 1);
            t_xts(e, s, 2, 1, 1 + $urandom % 15, 0);
          end
        aes_active = 0;
      end
      begin
        for (int t = 0; t < 12; t++) des_job(t);
      end
    join
    need(n_par, "two AES engines in parallel");
    need(n_cbc1, "CBC on one engine");
    need(n_ks192, "192-bit key expansion");
    need(n_ks256, "256-bit key expansion");
    need(n_tweak, "XTS tweak on engine 1");
    need(n_cts, "ciphertext stealing");
    need(n_newiv, "NewIV");
    need(n_gcm_mask, "GCM last-block mask");
    need(n_ctr, "CTR blocks");
    need(n_dec, "AES decryption blocks");
    need(n_gap, "source pauses");
    need(n_des, "3DES blocks");
    need(n_des_dec, "3DES decryption blocks");
    need(n_parity, "3DES parity errors");
    need(n_both, "AES and 3DES busy together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
