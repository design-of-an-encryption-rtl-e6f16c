// aes_key_expand: AES key expansion unit (KX0 / KX1 of the AES core).
//
// Turns a 128-, 192- or 256-bit cipher key into the Nr+1 round keys of
// FIPS-197, producing one 128-bit round key per clock cycle, and keeps them in
// a 15 x 128-bit round-key table that the AES round engine reads through two
// combinational read ports (forwards for encryption, backwards for decryption).
//
// Structure, following the key-expansion diagram of the design: the key is
// loaded into the state register `cur` (the Reg1/Reg2 path, holding the last
// Nk words); the key expansion logic computes the next Nk words in one step.
// For 128-bit keys one step gives one round key per cycle. For 256-bit keys a
// step gives two round keys, output high half then low half, so the logic
// steps every second cycle. For 192-bit keys a mod-3 counter (MOD3 CNT)
// sequences an output multiplexer and a 128-bit holding register (Reg3):
//   phase 0: output the upper 128 bits of the current 192, park the lower 64
//            bits in Reg3, step the expansion;
//   phase 1: output Reg3's 64 bits with the upper 64 bits of the new 192,
//            park its lower 128 bits in Reg3, step again;
//   phase 2: output Reg3; the expansion logic is halted for this cycle.
// So three cycles give three round keys from two expansion steps.
//
// Interface: `load` (one cycle) samples `ks` and `key` (left aligned: a
// 128-bit key in key[255:128], a 192-bit key in key[255:64]). `ready` falls at
// the load; round key i is written at the end of cycle i+1 after the load
// cycle, so `ready` rises Nr+2 cycles after the load cycle (cycles 1..Nr+1
// produce the Nr+1 round keys), together with a one-cycle `fk_valid` and the final Nk words of the expanded
// key on `fk` (left aligned like `key`).
//
// This design's own choices: the first round key is the cipher key itself
// (FIPS-197 w[0..Nk-1]); round keys go into a table instead of straight to the
// engine so that decryption can use them in reverse order and every block of a
// stream reuses them.
module aes_key_expand
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [1:0]   ks,
  input  logic [255:0] key,
  input  rnd_t         rd_a_idx,
  input  rnd_t         rd_b_idx,
  output block_t       rk_a,
  output block_t       rk_b,
  output logic         ready,
  output logic [255:0] fk,
  output logic         fk_valid
);

  logic [255:0] cur;        // last Nk words of the schedule (Reg1/Reg2)
  logic [127:0] reg3;       // leftover words for 192-bit keys
  logic [1:0]   phase;      // MOD3 CNT (mod 2 for 256-bit keys)
  logic [3:0]   rci;        // round-constant index of the next step
  rnd_t         idx;        // number of the round key produced this cycle
  logic         busy;
  logic [1:0]   ks_q;
  block_t       rk_tab [15];

  // Key expansion logic: next Nk words from the last Nk words.
  function automatic logic [255:0] expand_step(input logic [255:0] c,
                                               input logic [1:0] k,
                                               input logic [3:0] ri);
    logic [31:0] w [8];
    logic [31:0] n [8];
    logic [31:0] t;
    int nk;
    logic [255:0] r;
    nk = (k == KS_256) ? 8 : (k == KS_192) ? 6 : 4;
    for (int i = 0; i < 8; i++) w[i] = c[255-32*i -: 32];
    t = sub_word(rot_word(w[nk-1])) ^ {rcon(ri), 24'h0};
    for (int i = 0; i < 8; i++) n[i] = 32'h0;
    n[0] = w[0] ^ t;
    for (int i = 1; i < 8; i++) begin
      if (i < nk) begin
        if (nk == 8 && i == 4) n[i] = w[i] ^ sub_word(n[i-1]);  // extra SubWord, no rotation
        else                   n[i] = w[i] ^ n[i-1];
      end
    end
    for (int i = 0; i < 8; i++) r[255-32*i -: 32] = n[i];
    return r;
  endfunction

  logic [255:0] nxt;
  assign nxt = expand_step(cur, ks_q, rci);

  block_t kout;     // output stage multiplexer
  logic   step;     // expansion logic advances this cycle
  always_comb begin
    kout = cur[255:128];
    step = 1'b0;
    unique case (ks_q)
      KS_192: begin
        unique case (phase)
          2'd0:    begin kout = cur[255:128];             step = 1'b1; end
          2'd1:    begin kout = {reg3[63:0], cur[255:192]}; step = 1'b1; end
          default: begin kout = reg3;                     step = 1'b0; end
        endcase
      end
      KS_256: begin
        kout = phase[0] ? cur[127:0] : cur[255:128];
        step = phase[0];
      end
      default: begin
        kout = cur[255:128];
        step = 1'b1;
      end
    endcase
  end

  rnd_t nr;
  assign nr = nr_of(ks_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur      <= '0;
      reg3     <= '0;
      phase    <= '0;
      rci      <= 4'd1;
      idx      <= '0;
      busy     <= 1'b0;
      ready    <= 1'b0;
      fk_valid <= 1'b0;
      ks_q     <= KS_128;
    end else begin
      fk_valid <= 1'b0;
      if (load) begin
        cur   <= key;
        ks_q  <= ks;
        phase <= '0;
        rci   <= 4'd1;
        idx   <= '0;
        busy  <= 1'b1;
        ready <= 1'b0;
      end else if (busy) begin
        if (step) begin
          cur <= nxt;
          rci <= rci + 4'd1;
        end
        if (ks_q == KS_192) begin
          if (phase == 2'd0) reg3[63:0] <= cur[127:64];
          if (phase == 2'd1) reg3       <= cur[191:64];
          phase <= (phase == 2'd2) ? 2'd0 : phase + 2'd1;
        end else if (ks_q == KS_256) begin
          phase <= {1'b0, ~phase[0]};
        end
        idx <= idx + 4'd1;
        if (idx == nr) begin
          busy     <= 1'b0;
          ready    <= 1'b1;
          fk_valid <= 1'b1;
        end
      end
    end
  end

  // Round-key table (written one entry per cycle while expanding).
  always_ff @(posedge clk) begin
    if (busy && !load) rk_tab[idx] <= kout;
  end

  assign rk_a = rk_tab[rd_a_idx];
  assign rk_b = rk_tab[rd_b_idx];

  always_comb begin
    unique case (ks_q)
      KS_192:  fk = {rk_tab[11][63:0], rk_tab[12], 64'h0};
      KS_256:  fk = {rk_tab[13], rk_tab[14]};
      default: fk = {rk_tab[10], 128'h0};
    endcase
  end

endmodule
