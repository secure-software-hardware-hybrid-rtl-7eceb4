// kmac128: KMAC128 hash engine (NIST SP 800-185) used as the output-response
// analyser of the in-field test. It turns a DUT response of any length into a
// fixed DIGEST_BITS signature keyed with the device-specific key, so that the
// signature neither reveals the response nor can be forged or predicted on
// another device.
//
// What is computed, with the customisation string S empty:
//   KMAC128(K, X) = cSHAKE128( bytepad(encode_string(K),168) || X ||
//                              right_encode(DIGEST_BITS), DIGEST_BITS,
//                              "KMAC", "" )
// On the sponge this is: block 1 = bytepad(encode_string("KMAC") ||
// encode_string(""),168), a constant; block 2 = bytepad(encode_string(K),168)
// (the key initialisation); then the response bytes X; then right_encode of
// the digest length; then the cSHAKE padding 0x04 ... 0x80. One squeeze gives
// the signature, since DIGEST_BITS <= 1344. The key is an input wire only:
// it never reaches the bus.
//
// Interface: start_i begins a signature (prefix and key are absorbed, busy_o
// high meanwhile). Response words are then offered with msg_valid_i,
// msg_data_i (first byte in bits 7:0) and msg_nbytes_i (1..4 valid low
// bytes); a word is taken in a cycle where msg_valid_i and msg_ready_o are
// both high. msg_ready_o drops while a full 168-byte block is permuted, which
// stalls the producer. A word that would cross a block boundary (possible
// only after a partial word) sets error_o and is dropped, so every word but
// the last should be full. finish_i (while idle-absorbing, msg_ready_o high)
// appends the encoding and padding; done_o then rises and digest_o holds
// the signature, first output byte in bits 7:0, until the next start_i.
// digest_o reads as zero while done_o is low, so no intermediate state leaks.
// start_i is taken when idle, done or absorbing (abandoning the response).
//
// Timing (one Keccak round per cycle), counted in clock edges after the edge
// that samples the request: start_i to msg_ready_o = 54 (two permutations of
// 24 plus sequencing); after the 168th byte of a block msg_ready_o is low
// for 26 cycles; finish_i to done_o = 30, or 56 when the three length bytes
// cross into a new block (response length mod 168 of 165..167).
//
// Follows the published design: KMAC128, 64-bit key, 256-bit digest. This
// design's own choices: byte-granular responses (a response of L bits is
// zero-padded to whole bytes by the software), the 32-bit word interface,
// the key byte order (key_i[7:0] is the first key byte) and an empty S.
module kmac128
  import keccak_pkg::*;
#(
  parameter int unsigned KEY_BITS    = 64,
  parameter int unsigned DIGEST_BITS = 256
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [KEY_BITS-1:0]    key_i,
  input  logic                   start_i,
  input  logic                   msg_valid_i,
  input  logic [31:0]            msg_data_i,
  input  logic [2:0]             msg_nbytes_i,
  output logic                   msg_ready_o,
  input  logic                   finish_i,
  output logic                   busy_o,
  output logic                   done_o,
  output logic                   error_o,
  output logic [DIGEST_BITS-1:0] digest_o
);

  localparam int unsigned RATE     = KMAC128_RATE_BYTES;
  localparam int unsigned KEY_B    = KEY_BITS / 8;
  localparam int unsigned KLEN_N   = enc_nbytes(KEY_BITS);
  localparam int unsigned DLEN_N   = enc_nbytes(DIGEST_BITS);
  localparam int unsigned POS_W    = 8;

  if (KEY_BITS % 8 != 0 || KEY_BITS == 0 || 3 + KLEN_N + KEY_B > RATE) begin : gen_key_check
    $error("kmac128: KEY_BITS must be a non-zero multiple of 8 that fits one block");
  end
  if (DIGEST_BITS % 8 != 0 || DIGEST_BITS == 0 || DIGEST_BITS > 8 * RATE) begin : gen_digest_check
    $error("kmac128: DIGEST_BITS must be a multiple of 8 and at most 1344");
  end

  typedef enum logic [3:0] {
    S_IDLE,     // no signature in progress
    S_B1,       // absorb the constant "KMAC" prefix block
    S_B2,       // absorb the key block
    S_ABSORB,   // take response words
    S_TAIL,     // absorb right_encode(DIGEST_BITS) byte by byte
    S_PAD,      // absorb 0x04 .. 0x80
    S_PERM,     // start a permutation
    S_WAIT,     // wait for it, then go to ret_q
    S_DONE      // signature valid
  } state_e;

  state_e             st_q, ret_q;
  logic [POS_W-1:0]   pos_q;
  logic [1:0]         tidx_q;
  logic               err_q;

  // Keccak state unit. Only the first DIGEST_BITS of its state leave the
  // engine (the signature); the rest of the rate and the capacity stay
  // inside, so lint reports those state bits as unused.
  logic   kc_clear, kc_xor, kc_start, kc_busy, kc_done;
  state_t kc_data, kc_state;

  keccak_f1600 u_keccak (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clear_i (kc_clear),
    .xor_i   (kc_xor),
    .data_i  (kc_data),
    .start_i (kc_start),
    .busy_o  (kc_busy),
    .done_o  (kc_done),
    .state_o (kc_state)
  );

  // ---------------------------------------------------------------- blocks
  // Block 1: left_encode(168) || left_encode(32) || "KMAC" || left_encode(0)
  localparam logic [79:0] BLOCK1_BYTES = {8'h00, 8'h01, 8'h43, 8'h41, 8'h4D,
                                          8'h4B, 8'h20, 8'h01, 8'hA8, 8'h01};
  // Block 2: left_encode(168) || left_encode(KEY_BITS) || K, zero padded.
  state_t block2;
  always_comb begin
    block2 = '0;
    block2[0][7:0]  = 8'h01;
    block2[0][15:8] = 8'(RATE);
    block2[0][23:16] = 8'(KLEN_N);
    for (int i = 0; i < KLEN_N; i++)
      block2[(3+i)/8][8*((3+i)%8) +: 8] = 8'(KEY_BITS >> (8*(KLEN_N-1-i)));
    for (int i = 0; i < KEY_B; i++)
      block2[(3+KLEN_N+i)/8][8*((3+KLEN_N+i)%8) +: 8] = key_i[8*i +: 8];
  end

  // right_encode(DIGEST_BITS): the integer big-endian, then its length.
  function automatic logic [7:0] tail_byte(logic [1:0] i);
    if (int'(i) < DLEN_N) return 8'(DIGEST_BITS >> (8*(DLEN_N-1-int'(i))));
    return 8'(DLEN_N);
  endfunction

  // Bytes to XOR at the current byte position.
  logic [31:0] word_masked;
  always_comb begin
    word_masked = '0;
    for (int i = 0; i < 4; i++)
      if (i < int'(msg_nbytes_i)) word_masked[8*i +: 8] = msg_data_i[8*i +: 8];
  end

  logic [POS_W:0] pos_next_word;
  logic           word_ok;
  assign pos_next_word = {1'b0, pos_q} + {6'b0, msg_nbytes_i};
  assign word_ok       = (msg_nbytes_i != 3'd0) && (msg_nbytes_i <= 3'd4) &&
                         (pos_next_word <= (POS_W+1)'(RATE));

  assign msg_ready_o = (st_q == S_ABSORB);

  // ---------------------------------------------------------------- control
  always_comb begin
    kc_clear = 1'b0;
    kc_xor   = 1'b0;
    kc_start = 1'b0;
    kc_data  = '0;
    unique case (st_q)
      S_IDLE, S_DONE: kc_clear = start_i;
      S_B1: begin
        kc_xor  = 1'b1;
        kc_data = state_t'({{(STATE_BITS-80){1'b0}}, BLOCK1_BYTES});
      end
      S_B2: begin
        kc_xor  = 1'b1;
        kc_data = block2;
      end
      S_ABSORB: begin
        kc_xor   = msg_valid_i && word_ok;
        kc_clear = start_i && !msg_valid_i;   // abandon and restart
        kc_data = state_t'({{(STATE_BITS-32){1'b0}}, word_masked} << (8*pos_q));
      end
      S_TAIL: begin
        kc_xor  = 1'b1;
        kc_data = state_t'({{(STATE_BITS-8){1'b0}}, tail_byte(tidx_q)} << (8*pos_q));
      end
      S_PAD: begin
        kc_xor  = 1'b1;
        kc_data = state_t'({{(STATE_BITS-8){1'b0}}, 8'h04} << (8*pos_q));
        kc_data[(RATE-1)/8][8*((RATE-1)%8) +: 8] =
          kc_data[(RATE-1)/8][8*((RATE-1)%8) +: 8] ^ 8'h80;
      end
      S_PERM:  kc_start = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q   <= S_IDLE;
      ret_q  <= S_IDLE;
      pos_q  <= '0;
      tidx_q <= '0;
      err_q  <= 1'b0;
    end else begin
      unique case (st_q)
        S_IDLE, S_DONE: if (start_i) begin
          st_q  <= S_B1;
          err_q <= 1'b0;
        end
        S_B1: begin
          st_q  <= S_PERM;
          ret_q <= S_B2;
        end
        S_B2: begin
          st_q  <= S_PERM;
          ret_q <= S_ABSORB;
        end
        S_ABSORB: begin
          if (msg_valid_i) begin
            if (!word_ok) begin
              err_q <= 1'b1;
            end else if (pos_next_word == (POS_W+1)'(RATE)) begin
              pos_q <= '0;
              st_q  <= S_PERM;
              ret_q <= S_ABSORB;
            end else begin
              pos_q <= pos_next_word[POS_W-1:0];
            end
          end else if (start_i) begin
            st_q  <= S_B1;
            pos_q <= '0;
            err_q <= 1'b0;
          end else if (finish_i) begin
            st_q   <= S_TAIL;
            tidx_q <= '0;
          end
        end
        S_TAIL: begin
          tidx_q <= tidx_q + 2'd1;
          if (int'(tidx_q) == DLEN_N) ret_q <= S_PAD;
          else                        ret_q <= S_TAIL;
          if (int'(pos_q) == RATE - 1) begin
            pos_q <= '0;
            st_q  <= S_PERM;
          end else begin
            pos_q <= pos_q + 1'b1;
            if (int'(tidx_q) == DLEN_N) st_q <= S_PAD;
          end
        end
        S_PAD: begin
          st_q  <= S_PERM;
          ret_q <= S_DONE;
          pos_q <= '0;
        end
        S_PERM: st_q <= S_WAIT;
        S_WAIT: if (kc_done) st_q <= ret_q;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o   = (st_q != S_IDLE) && (st_q != S_DONE) && (st_q != S_ABSORB);
  assign done_o   = (st_q == S_DONE);
  assign error_o  = err_q;
  assign digest_o = done_o ? DIGEST_BITS'(kc_state) : '0;

  // Response words are offered only while absorbing; finish only then too.
  a_valid_in_absorb : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                       msg_valid_i |-> (st_q == S_ABSORB) || busy_o);
  // The permutation is started only when the Keccak unit is idle.
  a_start_when_idle : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                       kc_start |-> !kc_busy);
  a_finish_in_absorb : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                        finish_i |-> (st_q == S_ABSORB));

endmodule
