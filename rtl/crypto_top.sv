// crypto_top: the complete encryption core, AES and 3DES side by side.
//
// AES and 3DES protect data in entirely different ways, so the encryption
// module combines two separate cores, each with its own interface, into one
// block: the complete AES core (ECB/CBC/CTR/GCM/XTS with 128/192/256-bit keys
// on a 128-bit data path, two AES engines in parallel) and the 3DES core
// (64-bit data path, three 64-bit keys with parity check). They share the
// clock and the low-active reset and nothing else; both may run at once.
//
// Ports: `aes_*` are the AES core's interface, `des_*` the 3DES core's (see
// aes_core and des3_core for their protocols and timing). `aes_icg_disable`
// is the clock-gating override of the AES interface; this RTL has no
// clock-gating cells, so it has no effect.
module crypto_top
  import aes_pkg::*;
  import des_pkg::*;
(
  input  logic         clk,
  input  logic         reset_n,
  // complete AES core
  input  logic         aes_icg_disable,
  input  logic         aes_cen,
  input  logic [2:0]   aes_mode,
  input  logic         aes_encrypt,
  input  logic [1:0]   aes_ks,
  input  logic         aes_newiv,
  input  logic         aes_cts,
  input  logic         aes_start,
  output logic         aes_read,
  input  block_t       aes_d,
  input  logic [255:0] aes_k1,
  input  logic [255:0] aes_k2,
  input  block_t       aes_iv,
  input  logic [3:0]   aes_be,
  input  logic         aes_endc,
  output block_t       aes_q,
  output logic         aes_write,
  output logic [255:0] aes_fk,
  output logic         aes_fkvalid,
  output logic         aes_done,
  // 3DES core
  input  dblock_t      des_d,
  input  logic [63:0]  des_k1,
  input  logic [63:0]  des_k2,
  input  logic [63:0]  des_k3,
  input  dblock_t      des_iv,
  input  logic         des_encrypt,
  input  logic         des_start,
  input  logic         des_endc,
  input  logic         des_pt_valid,
  output logic         des_pt_ready,
  output dblock_t      des_q,
  output logic         des_write_enable,
  output logic         des_done,
  output logic [2:0]   des_write_error
);

  aes_core u_aes (
    .clk, .reset_n, .icg_disable(aes_icg_disable), .cen(aes_cen), .mode(aes_mode),
    .encrypt(aes_encrypt), .ks(aes_ks), .newiv(aes_newiv), .cts(aes_cts),
    .start(aes_start), .read(aes_read), .d(aes_d), .k1(aes_k1), .k2(aes_k2),
    .iv(aes_iv), .be(aes_be), .endc(aes_endc), .q(aes_q), .write(aes_write),
    .fk(aes_fk), .fkvalid(aes_fkvalid), .done(aes_done)
  );

  des3_core u_des (
    .clk, .reset_n, .d(des_d), .k1(des_k1), .k2(des_k2), .k3(des_k3), .iv(des_iv),
    .encrypt(des_encrypt), .start(des_start), .endc(des_endc), .pt_valid(des_pt_valid),
    .pt_ready(des_pt_ready), .q(des_q), .write_enable(des_write_enable), .done(des_done),
    .write_error(des_write_error)
  );

endmodule
