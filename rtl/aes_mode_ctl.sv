// aes_mode_ctl: AES mode control (ECB, CBC, CTR, GCM, XTS).
//
// Owns the data path around the two AES engines: the multiplexer in front of
// the engines ("AES in"), the XOR behind them, the per-engine delay registers
// that carry the value to be XORed until the engine's result appears, the
// counter for CTR/GCM, the chaining register for CBC, the XTS tweak and its
// multiply-by-alpha, and the "save Dout" register for XTS ciphertext stealing.
// A state machine runs a stream from key loading through data to `done`.
//
//   ECB      in = D                 Q = E(in)            (E = encrypt or decrypt)
//   CBC enc  in = D ^ chain         Q = E(in), chain = Q (one engine only)
//   CBC dec  in = D                 Q = D(in) ^ chain, chain = D
//   CTR      in = counter           Q = E(counter) ^ D, counter + 1 (128-bit)
//   GCM      in = counter           Q = E(counter) ^ D, counter + 1 (low 32 bits),
//                                   last block cut to Be+1 bytes
//   XTS      in = D ^ T             Q = E(in) ^ T, T = T * alpha; T0 = E_K2(Iv)
//
// Stream: `start` samples Mode, Encrypt, Ks and Iv. Both key expansion units
// then load K1 (in XTS unit 1 loads K2, engine 1 encrypts Iv into the first
// tweak, then unit 1 reloads K1). In the run state `read` is high when the
// core takes a block; a block is transferred in a cycle with `read` and `cen`
// both high, together with its EndC, NewIV, Cts and Be flags. EndC ends the
// stream (after the last result `done` pulses one cycle after the last
// `write`). In XTS, NewIV ends a data unit: the core drains, takes the Iv
// present with that block as the next unit's tweak input, and re-derives the
// tweak. Cts marks the last full block before a partial one (Be+1 bytes): the
// two are processed with ciphertext stealing and the results come out in
// stream order, the partial result zero-padded.
//
// Paper: the modes, the port set and encodings, the FSM "from loading keys,
// fetching data to outputting result", the mux/XOR structure with CNT, tweak,
// delay registers and Save Dout. Own choices: the handshake (read & cen), that
// EndC ends a stream in every mode, that GCM produces the GCTR output only
// (the interface has no AAD input or tag output, so no GHASH), that the
// counter for the first block is Iv itself, and when the new XTS Iv is taken.
module aes_mode_ctl
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // user side (interface table of the AES core)
  input  logic         cen,
  input  logic [2:0]   mode,
  input  logic         encrypt,
  input  logic [1:0]   ks,
  input  logic         newiv,
  input  logic         cts,
  input  logic         start,
  output logic         read,
  input  block_t       d,
  input  block_t       iv,
  input  logic [3:0]   be,
  input  logic         endc,
  output block_t       q,
  output logic         write,
  output logic         done,
  // key expansion units
  output logic [1:0]   cfg_ks,
  output logic [1:0]   kx_load,
  output logic         kx1_sel_k2,
  input  logic [1:0]   kx_ready,
  // dual core control / engines
  output logic         single,
  output logic         force1,
  input  logic         can_issue,
  input  logic         issue_core,
  output logic         issue,
  output block_t       eng_in,
  output logic         eng_enc,
  input  logic         res_valid,
  input  logic         res_core,
  input  block_t       res_data
);

  typedef enum logic [3:0] {
    S_IDLE, S_KLOAD, S_KEY, S_TWK, S_TWK_WAIT, S_KEY1, S_RUN,
    S_CTS_WAIT, S_CTS_LAST, S_DRAIN, S_NDRAIN, S_KEYT
  } state_e;

  state_e    state;
  aes_mode_e mode_q;
  logic      enc_q;
  block_t    ctr;        // CTR/GCM counter (CNT)
  block_t    chain;      // CBC chaining value
  block_t    tweak;      // XTS tweak T
  block_t    iv_q;
  block_t    save_dout;  // XTS ciphertext stealing
  logic      save_ok;
  logic [3:0] be_q;
  logic      tail_pend;
  logic [2:0] outstanding;

  // Per-engine delay registers: value XORed into the result, and flags.
  block_t    side     [2];
  logic      f_mask   [2];  // cut to be_q bytes (GCM last block)
  logic      f_save   [2];  // XTS: result goes to save_dout, not out
  logic      f_final  [2];  // XTS: stolen block; the short tail follows
  logic      f_tweak  [2];  // tweak encryption result

  logic [1:0] ks_q;
  assign cfg_ks = ks_q;

  logic is_xts, cbc_enc;
  assign is_xts  = (mode_q == MODE_XTS);
  assign cbc_enc = (mode_q == MODE_CBC) && enc_q;

  assign single = (mode_q == MODE_CBC);
  assign force1 = (state == S_TWK);

  // ----------------------------------------------------------- input side
  logic   take;           // a data block is transferred this cycle
  block_t in_blk, side_val, t_alpha, stolen, chain_now;
  logic   in_enc;

  assign read = (state == S_RUN || state == S_CTS_LAST) && can_issue;
  assign take = read && cen;

  assign t_alpha   = xts_mul_alpha(tweak);
  assign stolen    = (d & byte_mask(be)) | (save_dout & ~byte_mask(be));
  assign chain_now = (cbc_enc && res_valid) ? res_data : chain;

  always_comb begin
    in_blk   = d;
    side_val = '0;
    in_enc   = enc_q;
    if (state == S_TWK) begin
      in_blk = iv_q;
      in_enc = 1'b1;
    end else begin
      unique case (mode_q)
        MODE_CBC: begin
          if (enc_q) in_blk = d ^ chain_now;
          else       side_val = chain;
        end
        MODE_CTR, MODE_GCM: begin
          in_blk   = ctr;
          side_val = d;
          in_enc   = 1'b1;
        end
        MODE_XTS: begin
          if (state == S_CTS_LAST) begin
            in_blk   = stolen ^ tweak;
            side_val = tweak;
          end else if (cts && !enc_q) begin
            in_blk   = d ^ t_alpha;       // decrypt: last full block uses T(m)
            side_val = t_alpha;
          end else begin
            in_blk   = d ^ tweak;
            side_val = tweak;
          end
        end
        default: ;                        // ECB
      endcase
    end
  end

  assign issue   = take || (state == S_TWK && can_issue);
  assign eng_in  = in_blk;
  assign eng_enc = in_enc;

  // ---------------------------------------------------------- output side
  block_t res_x;
  assign res_x = res_data ^ side[res_core];

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      mode_q      <= MODE_ECB;
      enc_q       <= 1'b1;
      ks_q        <= KS_128;
      ctr         <= '0;
      chain       <= '0;
      tweak       <= '0;
      iv_q        <= '0;
      save_dout   <= '0;
      save_ok     <= 1'b0;
      be_q        <= 4'hf;
      tail_pend   <= 1'b0;
      outstanding <= '0;
      q           <= '0;
      write       <= 1'b0;
      done        <= 1'b0;
      kx_load     <= '0;
      kx1_sel_k2  <= 1'b0;
      for (int i = 0; i < 2; i++) begin
        side[i] <= '0; f_mask[i] <= 1'b0; f_save[i] <= 1'b0;
        f_final[i] <= 1'b0; f_tweak[i] <= 1'b0;
      end
    end else begin
      write   <= 1'b0;
      done    <= 1'b0;
      kx_load <= '0;

      // outstanding blocks in the engines
      outstanding <= outstanding + 3'(issue) - 3'(res_valid);

      // ---- issue bookkeeping
      if (issue) begin
        side[issue_core]    <= side_val;
        f_tweak[issue_core] <= (state == S_TWK);
        f_mask[issue_core]  <= (mode_q == MODE_GCM) && endc && take;
        f_save[issue_core]  <= is_xts && cts && take && (state == S_RUN);
        f_final[issue_core] <= is_xts && take && (state == S_CTS_LAST);
      end
      if (take) begin
        unique case (mode_q)
          MODE_CBC: chain <= enc_q ? chain_now : d;
          MODE_CTR: ctr   <= ctr + 128'd1;
          MODE_GCM: ctr   <= {ctr[127:32], ctr[31:0] + 32'd1};
          MODE_XTS: if (state == S_RUN && !(cts && !enc_q)) tweak <= t_alpha;
          default: ;
        endcase
        if (endc || (is_xts && (newiv || state == S_CTS_LAST))) be_q <= be;
        if (is_xts && newiv) iv_q <= iv;
      end

      // ---- results
      if (res_valid) begin
        if (cbc_enc) chain <= res_data;
        if (f_tweak[res_core]) begin
          tweak <= res_data;
        end else if (f_save[res_core]) begin
          save_dout <= res_x;
          save_ok   <= 1'b1;
        end else begin
          q     <= f_mask[res_core] ? (res_x & byte_mask(be_q)) : res_x;
          write <= 1'b1;
          if (f_final[res_core]) tail_pend <= 1'b1;
        end
      end else if (tail_pend) begin
        q         <= save_dout & byte_mask(be_q);
        write     <= 1'b1;
        tail_pend <= 1'b0;
        save_ok   <= 1'b0;
      end

      // ---- state machine
      unique case (state)
        S_IDLE: if (start) begin
          mode_q <= aes_mode_e'(mode);
          enc_q  <= encrypt;
          ks_q   <= ks;
          iv_q   <= iv;
          ctr    <= iv;
          chain  <= iv;
          state  <= S_KLOAD;
        end
        S_KLOAD: begin
          kx_load    <= 2'b11;
          kx1_sel_k2 <= is_xts;
          state      <= S_KEY;
        end
        S_KEY: if (kx_load == 2'b00 && kx_ready == 2'b11) state <= is_xts ? S_TWK : S_RUN;
        S_TWK: if (can_issue) state <= S_TWK_WAIT;
        S_TWK_WAIT: if (res_valid) begin
          kx_load    <= 2'b10;
          kx1_sel_k2 <= 1'b0;
          state      <= S_KEY1;
        end
        S_KEY1: if (kx_load == 2'b00 && kx_ready[1]) state <= S_RUN;
        S_RUN: if (take) begin
          if (endc)                     state <= S_DRAIN;
          else if (is_xts && newiv)     state <= S_NDRAIN;
          else if (is_xts && cts)       state <= S_CTS_WAIT;
        end
        S_CTS_WAIT: if (save_ok || (res_valid && f_save[res_core])) state <= S_CTS_LAST;
        S_CTS_LAST: if (take) state <= newiv ? S_NDRAIN : S_DRAIN;
        S_DRAIN: if (outstanding == 0 && !tail_pend) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_NDRAIN: if (outstanding == 0 && !tail_pend) begin
          kx_load    <= 2'b10;
          kx1_sel_k2 <= 1'b1;
          state      <= S_KEYT;
        end
        S_KEYT: if (kx_load == 2'b00 && kx_ready[1]) state <= S_TWK;
        default: state <= S_IDLE;
      endcase
    end
  end

  // S_TWK issues from iv_q: the tweak input of a new data unit.
  a_no_take_outside_run: assert property (@(posedge clk) disable iff (!rst_n)
      take |-> (state == S_RUN || state == S_CTS_LAST))
    else $error("aes_mode_ctl: block taken outside the run state");

endmodule
