// aes_cipher: iterative AES round engine (AES0 / AES1 of the AES core).
//
// One engine encrypts or decrypts one 128-bit block at a time, one round per
// clock cycle, so a block takes Nr cycles (10, 12 or 14 for 128-, 192- and
// 256-bit keys; 14 cycles for 256-bit keys as the design specifies). The
// initial AddRoundKey is folded into the load cycle together with the first
// round, which is what makes the latency exactly Nr.
//
// Interface: `load` (one cycle, only while `busy` is low) takes `din`,
// `encrypt` and the round count `nr`. Round keys come from the key expansion
// unit's table: the engine drives the two read indices `rk_a_idx`/`rk_b_idx`
// and gets the keys back combinationally on `rk_a`/`rk_b`. Encryption reads
// rk[0], rk[1], ... rk[Nr]; decryption uses the straight inverse cipher and
// reads rk[Nr], rk[Nr-1], ... rk[0].
//
// Timing: load in cycle t, `done` is high for the single cycle t+Nr with the
// result on `dout`; `busy` is already low in that cycle, so the next block may
// be loaded in the same cycle the previous result leaves (dout stays valid
// until the next load's clock edge).
module aes_cipher
  import aes_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  logic   encrypt,
  input  rnd_t   nr,
  input  block_t din,
  output rnd_t   rk_a_idx,
  output rnd_t   rk_b_idx,
  input  block_t rk_a,
  input  block_t rk_b,
  output logic   busy,
  output logic   done,
  output block_t dout
);

  block_t state;
  rnd_t   cnt;      // rounds completed
  rnd_t   nr_q;
  logic   enc_q;

  assign busy = (cnt != nr_q);
  assign dout = state;

  // Round-key addressing: at load, the whitening key and the first round's
  // key; while busy, the key of round cnt+1.
  always_comb begin
    if (busy) begin
      rk_a_idx = '0;
      rk_b_idx = enc_q ? rnd_t'(cnt + 4'd1) : rnd_t'(nr_q - cnt - 4'd1);
    end else begin
      rk_a_idx = encrypt ? 4'd0 : nr;
      rk_b_idx = encrypt ? 4'd1 : rnd_t'(nr - 4'd1);
    end
  end

  // One round function shared by the load cycle and the following rounds.
  block_t rin, rout;
  logic   r_enc, r_last;
  always_comb begin
    rin    = busy ? state : (din ^ rk_a);
    r_enc  = busy ? enc_q : encrypt;
    r_last = busy && (cnt + 4'd1 == nr_q);
    rout   = r_enc ? enc_round(rin, rk_b, r_last) : dec_round(rin, rk_b, r_last);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      cnt   <= '0;
      nr_q  <= '0;
      enc_q <= 1'b1;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load && !busy) begin
        nr_q  <= nr;
        enc_q <= encrypt;
        cnt   <= 4'd1;
        state <= rout;
      end else if (busy) begin
        cnt   <= cnt + 4'd1;
        state <= rout;
        if (cnt + 4'd1 == nr_q) done <= 1'b1;
      end
    end
  end

  load_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy)
    else $error("aes_cipher: load while busy");

endmodule
