// agencid_pl_top: on-board AgEncID key-decryption core for the programmable
// logic of an FPGA without a usable processor.
//
// A cluster of boards S shares one AES bitstream key K_S. The key travels as
// an AgEncID ciphertext (c1, c2, c3) that any board i in S can open with its
// own private key d_i, and no board outside S can. This top holds what one
// board needs for that:
//   privkey_store    write-once slot for (i, d_i), filled at provisioning;
//   pk_param_mem     the public parameters g_1..g_2n, loaded by the host;
//   agencid_decrypt  Decrypt(S, i, d_i, C), built from ecc_core,
//                    pairing_core and fq2_unit.
// The recovered key leaves on `aes_key` for the vendor's AES bitstream
// decryptor, which is outside this design, as is the host that loads the
// parameters and ciphertexts.
//
// Interface:
//   key provisioning  key_prog_en/index/d (one write; later writes raise
//                     key_prog_err), key_valid shows the slot is filled;
//   parameter load    prm_wr_en/addr/data, address k holds g_k;
//   decryption        pulse dec_start with dec_set (bit j-1 = board j in S)
//                     and dec_c1/c2/c3; dec_done pulses once with dec_null
//                     (board not in S, or no key yet), aes_key and gt_msg
//                     valid. A start while busy is ignored.
// Timing: about 3.9 million cycles per decryption at the default sizes
// (two pairings dominate); a null answer takes 2 cycles.
//
// The block split follows the paper's picture of a board (private key in
// tamper-proof memory, a decryption unit, an AES unit fed with the key); the
// parameter memory, the ports and the sizes of indices are this design's.
module agencid_pl_top
  import agencid_pkg::*;
#(
  parameter int N    = N_BOARDS,            // boards in the system (n)
  parameter int IDXW = $clog2(N + 1),
  parameter int AW   = $clog2(2*N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,          // functional reset
  input  logic              por_n,          // power-on reset of a blank device
  // private-key provisioning (by the FPGA vendor)
  input  logic              key_prog_en,
  input  logic [IDXW-1:0]   key_prog_index,
  input  ec_point_t         key_prog_d,
  output logic              key_prog_err,
  output logic              key_valid,
  // public parameter load
  input  logic              prm_wr_en,
  input  logic [AW-1:0]     prm_wr_addr,
  input  ec_point_t         prm_wr_data,
  // encrypted key in, AES key out
  input  logic              dec_start,
  input  logic [N-1:0]      dec_set,
  input  ec_point_t         dec_c1,
  input  ec_point_t         dec_c2,
  input  fq2_t              dec_c3,
  output logic              dec_busy,
  output logic              dec_done,
  output logic              dec_null,
  output logic [AES_KW-1:0] aes_key,
  output logic              aes_key_valid,
  output fq2_t              gt_msg,
  output logic [IDXW:0]     dec_adds        // point additions of the last run
);

  logic            ks_valid;
  logic [IDXW-1:0] ks_index;
  ec_point_t       ks_key;
  logic            prm_rd_en;
  logic [AW-1:0]   prm_rd_addr;
  ec_point_t       prm_rd_data;
  logic            eng_start, eng_null, eng_done;

  privkey_store #(.IDXW(IDXW)) u_keys (
    .clk, .por_n, .prog_en(key_prog_en), .prog_index(key_prog_index),
    .prog_key(key_prog_d), .prog_err(key_prog_err), .valid(ks_valid),
    .index(ks_index), .key(ks_key)
  );

  pk_param_mem #(.N(N), .AW(AW)) u_params (
    .clk, .wr_en(prm_wr_en), .wr_addr(prm_wr_addr), .wr_data(prm_wr_data),
    .rd_en(prm_rd_en), .rd_addr(prm_rd_addr), .rd_data(prm_rd_data)
  );

  // without a provisioned key the engine sees index 0 and answers null
  assign eng_start = dec_start && !dec_busy;

  agencid_decrypt #(.N(N), .IDXW(IDXW), .AW(AW)) u_dec (
    .clk, .rst_n, .start(eng_start),
    .idx(ks_valid ? ks_index : '0), .set(dec_set), .d_key(ks_key),
    .c1(dec_c1), .c2(dec_c2), .c3(dec_c3),
    .prm_rd_en, .prm_rd_addr, .prm_rd_data,
    .busy(dec_busy), .done(eng_done), .null_out(eng_null), .m(gt_msg),
    .key(aes_key), .adds_done(dec_adds)
  );

  assign key_valid = ks_valid;
  assign dec_done  = eng_done;
  assign dec_null  = eng_null;

  // the key is offered to the AES unit only after a successful decryption
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        aes_key_valid <= 1'b0;
    else if (eng_start) aes_key_valid <= 1'b0;
    else if (eng_done)  aes_key_valid <= !eng_null;
  end

endmodule
