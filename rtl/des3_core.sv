// des3_core: 3DES (triple DES, EDE) core with a 64-bit data path.
//
// Encryption is C = E_K3(D_K2(E_K1(P))) and decryption P = D_K1(E_K2(D_K3(C))),
// with three independent 64-bit keys. The 48 DES rounds of one block are run
// as one Feistel network: the initial permutation once at the input, the final
// permutation once at the output, and between two DES passes only the swap of
// the halves (FP followed by IP cancels). ROUNDS_PER_CYCLE rounds are unrolled
// per clock cycle.
//
// Blocks are chained with the 64-bit IV (CBC): encryption XORs the plaintext
// with the previous ciphertext (IV for the first block) before the cipher,
// decryption XORs the cipher output with the previous ciphertext.
//
// Interface (the 3DES interface table): `start` (one cycle) samples the keys,
// `encrypt` and `iv`, computes the three key schedules and the key parity
// check, whose result stays on `write_error[2:0]` (bit i for key i+1: some
// byte of that key has even parity) until the next start. Then `pt_ready` is
// high while the core can take a block; a block moves on `pt_valid &&
// pt_ready` with `endc` marking the last one. The result appears on `q` with a
// one-cycle `write_enable`; after the last block `done` pulses with it.
//
// Timing: a block is taken in one cycle and computed in 48/ROUNDS_PER_CYCLE
// cycles, so one block every 1 + 48/ROUNDS_PER_CYCLE cycles (9 at the default
// of 6, 64/9 bit per cycle, 3.2 Gbit/s at 450 MHz). The design states no round
// organisation for 3DES; 6 rounds per cycle is this design's choice, taken so
// that the throughput is close to the 3DES figure the design reports (about
// 3.3 Gbit/s at 450 MHz). The design names no mode input for 3DES but lists an
// IV; chaining with it (CBC) is also this design's reading.
module des3_core
  import des_pkg::*;
#(
  parameter int unsigned ROUNDS_PER_CYCLE = 6   // must divide 48
) (
  input  logic        clk,
  input  logic        reset_n,
  input  dblock_t     d,
  input  logic [63:0] k1,
  input  logic [63:0] k2,
  input  logic [63:0] k3,
  input  dblock_t     iv,
  input  logic        encrypt,
  input  logic        start,
  input  logic        endc,
  input  logic        pt_valid,
  output logic        pt_ready,
  output dblock_t     q,
  output logic        write_enable,
  output logic        done,
  output logic [2:0]  write_error
);

  localparam int unsigned STEPS = 48 / ROUNDS_PER_CYCLE;

  typedef enum logic [1:0] {S_IDLE, S_READY, S_CALC} state_e;

  state_e      state;
  sched_t      sk [3];      // key schedules of K1, K2, K3
  logic        enc_q, last_q;
  dblock_t     chain, cin_q;
  logic [31:0] lreg, rreg;
  logic [5:0]  step;

  // ROUNDS_PER_CYCLE unrolled rounds.
  logic [31:0] l_n, r_n, tmp;
  logic [5:0]  g;            // overall round 0..47
  logic [1:0]  pass, kidx;   // DES pass 0..2, key 0..2
  logic [3:0]  rr, ridx;     // round in the pass, subkey index
  logic        fwd;
  always_comb begin
    g = '0; pass = '0; kidx = '0; rr = '0; ridx = '0; fwd = 1'b0;
    l_n = lreg;
    r_n = rreg;
    for (int k = 0; k < int'(ROUNDS_PER_CYCLE); k++) begin
      g    = 6'(int'(step) * int'(ROUNDS_PER_CYCLE) + k);
      pass = g[5:4];
      rr   = g[3:0];
      // encrypt: E(K1) D(K2) E(K3); decrypt: D(K3) E(K2) D(K1)
      kidx = (pass == 2'd1) ? 2'd1 : ((pass == 2'd0) == enc_q) ? 2'd0 : 2'd2;
      fwd  = (pass == 2'd1) ? !enc_q : enc_q;
      ridx = fwd ? rr : 4'd15 - rr;
      tmp  = r_n;
      r_n  = l_n ^ feistel(r_n, sk[kidx][ridx]);
      l_n  = tmp;
      if (rr == 4'd15) begin         // end of a DES pass: undo the last swap
        tmp = l_n; l_n = r_n; r_n = tmp;
      end
    end
  end

  dblock_t res;
  assign res      = fp({l_n, r_n});
  assign pt_ready = (state == S_READY);

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n) begin
      state        <= S_IDLE;
      enc_q        <= 1'b1;
      last_q       <= 1'b0;
      chain        <= '0;
      cin_q        <= '0;
      lreg         <= '0;
      rreg         <= '0;
      step         <= '0;
      q            <= '0;
      write_enable <= 1'b0;
      done         <= 1'b0;
      write_error  <= '0;
      for (int j = 0; j < 3; j++) for (int r = 0; r < 16; r++) sk[j][r] <= '0;
    end else begin
      write_enable <= 1'b0;
      done         <= 1'b0;
      if (start && state != S_CALC) begin
        sk[0]       <= key_schedule(k1);
        sk[1]       <= key_schedule(k2);
        sk[2]       <= key_schedule(k3);
        write_error <= {parity_error(k3), parity_error(k2), parity_error(k1)};
        enc_q       <= encrypt;
        chain       <= iv;
        state       <= S_READY;
      end else begin
        unique case (state)
          S_READY: if (pt_valid) begin
            {lreg, rreg} <= ip(enc_q ? (d ^ chain) : d);
            cin_q        <= d;
            last_q       <= endc;
            step         <= '0;
            state        <= S_CALC;
          end
          S_CALC: begin
            lreg <= l_n;
            rreg <= r_n;
            step <= step + 6'd1;
            if (int'(step) == int'(STEPS) - 1) begin
              q            <= enc_q ? res : (res ^ chain);
              chain        <= enc_q ? res : cin_q;
              write_enable <= 1'b1;
              done         <= last_q;
              state        <= last_q ? S_IDLE : S_READY;
            end
          end
          default: ;
        endcase
      end
    end
  end

  initial begin
    assert (48 % ROUNDS_PER_CYCLE == 0)
      else $error("des3_core: ROUNDS_PER_CYCLE must divide 48");
  end

endmodule
