// aes_core: the complete AES core (ECB/CBC/CTR/GCM/XTS, 128/192/256-bit keys).
//
// Two key expansion units (KX0, KX1) feed two iterative AES engines (AES0,
// AES1); the dual core control staggers blocks across the engines and selects
// the finished result; the mode control wraps the pair with the mode data
// path and the stream state machine. KX0 always expands the data key K1. KX1
// expands K1 as well, except at the start of an XTS data unit, when it first
// expands the tweak key K2 so that engine 1 can encrypt Iv into the tweak.
//
// Ports follow the core's interface table (names in lower case): `cen` marks
// D valid, `read` is high when the core takes it, a block is transferred when
// both are high; results come out on `q` with `write`; `done` pulses after the
// last result of a stream; `fk` / `fkvalid` show the final round key of K1
// (left aligned like the key) when its expansion finishes.
//
// Throughput: a block occupies an engine for Nr cycles, and with both engines
// a block is accepted every Nr/2 cycles (5/6/7 cycles for 128/192/256-bit
// keys); in CBC only engine 0 runs, one block per Nr cycles.
//
// `icg_disable` is the global clock-gating override of the interface table.
// This RTL has no clock-gating cells (they are library cells), so the input is
// accepted and has no effect; it is kept so that the port list matches.
module aes_core
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         reset_n,
  input  logic         icg_disable,
  input  logic         cen,
  input  logic [2:0]   mode,
  input  logic         encrypt,
  input  logic [1:0]   ks,
  input  logic         newiv,
  input  logic         cts,
  input  logic         start,
  output logic         read,
  input  block_t       d,
  input  logic [255:0] k1,
  input  logic [255:0] k2,
  input  block_t       iv,
  input  logic [3:0]   be,
  input  logic         endc,
  output block_t       q,
  output logic         write,
  output logic [255:0] fk,
  output logic         fkvalid,
  output logic         done
);

  logic [1:0] cfg_ks, kx_load, kx_ready;
  logic       kx1_sel_k2;
  logic       single, force1, can_issue, issue_core, issue;
  block_t     eng_in;
  logic       eng_enc;
  logic       load0, load1, busy0, busy1, done0, done1, out_valid, out_sel;
  rnd_t       nr;
  rnd_t       ia0, ib0, ia1, ib1;
  block_t     ka0, kb0, ka1, kb1, q0, q1, res_data;
  logic [255:0] fk1_unused;
  logic         fkv1_unused;

  aes_mode_ctl u_mode (
    .clk, .rst_n(reset_n),
    .cen, .mode, .encrypt, .ks, .newiv, .cts, .start, .read, .d, .iv, .be, .endc,
    .q, .write, .done,
    .cfg_ks, .kx_load, .kx1_sel_k2, .kx_ready,
    .single, .force1, .can_issue, .issue_core, .issue, .eng_in, .eng_enc,
    .res_valid(out_valid), .res_core(out_sel), .res_data
  );

  dual_aes_ctl u_dual (
    .clk, .rst_n(reset_n), .ks(cfg_ks), .single, .force1, .issue,
    .busy0, .busy1, .done0, .done1,
    .nr, .can_issue, .issue_core, .load0, .load1, .out_valid, .out_sel
  );

  aes_key_expand u_kx0 (
    .clk, .rst_n(reset_n), .load(kx_load[0]), .ks(cfg_ks), .key(k1),
    .rd_a_idx(ia0), .rd_b_idx(ib0), .rk_a(ka0), .rk_b(kb0),
    .ready(kx_ready[0]), .fk, .fk_valid(fkvalid)
  );

  aes_key_expand u_kx1 (
    .clk, .rst_n(reset_n), .load(kx_load[1]), .ks(cfg_ks), .key(kx1_sel_k2 ? k2 : k1),
    .rd_a_idx(ia1), .rd_b_idx(ib1), .rk_a(ka1), .rk_b(kb1),
    .ready(kx_ready[1]), .fk(fk1_unused), .fk_valid(fkv1_unused)
  );

  aes_cipher u_aes0 (
    .clk, .rst_n(reset_n), .load(load0), .encrypt(eng_enc), .nr, .din(eng_in),
    .rk_a_idx(ia0), .rk_b_idx(ib0), .rk_a(ka0), .rk_b(kb0),
    .busy(busy0), .done(done0), .dout(q0)
  );

  aes_cipher u_aes1 (
    .clk, .rst_n(reset_n), .load(load1), .encrypt(eng_enc), .nr, .din(eng_in),
    .rk_a_idx(ia1), .rk_b_idx(ib1), .rk_a(ka1), .rk_b(kb1),
    .busy(busy1), .done(done1), .dout(q1)
  );

  // Output multiplexer of the two engines.
  assign res_data = out_sel ? q1 : q0;

endmodule
