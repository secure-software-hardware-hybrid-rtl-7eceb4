// kmac_apb: memory-mapped front end of the KMAC128 hash engine, the
// output-response analyser (ORA) of the in-field test.
//
// The CPU starts a signature, writes the DUT response into the engine word
// by word, finishes and reads the DIGEST_BITS signature h'. The device key
// enters on key_i from the key store and has no bus path in either
// direction; the sponge state is not readable, and the signature registers
// read as zero until the signature is complete.
//
// Registers (offsets from the window base, 32 bits):
//   0x000 CTRL     W: bit 0 START (key initialisation, new signature),
//                     bit 1 FINISH (end of response, squeeze).
//   0x004 STATUS   R: bit 0 busy, bit 1 done, bit 2 error, bit 3 ready
//                     (accepting response words).
//   0x010 DATA1 .. 0x01C DATA4
//                  W: absorb the n = 1..4 low bytes of the written word,
//                     n = 1 + (offset - 0x10)/4; bits 7:0 are the first byte.
//   0x100 + 4*i DIGEST[i], i < DIGEST_BITS/32
//                  R: signature bytes 4i..4i+3, byte 4i in bits 7:0.
// Flow control: a DATA or FINISH write while the engine is busy (key
// initialisation or a block permutation) is held with pready low until the
// engine can take it, so software may write back to back. START while busy,
// DATA/FINISH with no signature open, reads of write-only registers and
// unknown offsets complete at once with pslverr.
//
// From the published design: KMAC128 as a memory-mapped IP beside the CPU,
// keyed by a device key hidden from the system bus. The register map, the
// wait-state flow control and the zero-until-done rule are this design's own.
module kmac_apb
  import apb_pkg::*;
#(
  parameter int unsigned KEY_BITS    = 64,
  parameter int unsigned DIGEST_BITS = 256
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [KEY_BITS-1:0] key_i,
  input  apb_req_t            apb_req_i,
  output apb_rsp_t            apb_rsp_o,
  output logic                done_o        // signature ready (e.g. for an interrupt)
);

  localparam int unsigned DWORDS = DIGEST_BITS / 32;

  logic                   start, mvalid, mready, finish, busy, done, err;
  logic [31:0]            mdata;
  logic [2:0]             mnb;
  logic [DIGEST_BITS-1:0] digest;

  kmac128 #(.KEY_BITS(KEY_BITS), .DIGEST_BITS(DIGEST_BITS)) u_kmac (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .key_i        (key_i),
    .start_i      (start),
    .msg_valid_i  (mvalid),
    .msg_data_i   (mdata),
    .msg_nbytes_i (mnb),
    .msg_ready_o  (mready),
    .finish_i     (finish),
    .busy_o       (busy),
    .done_o       (done),
    .error_o      (err),
    .digest_o     (digest)
  );

  logic        access, wr, rd;
  logic [11:0] offs;
  assign access = apb_req_i.psel && apb_req_i.penable;
  assign wr     = access && apb_req_i.pwrite;
  assign rd     = access && !apb_req_i.pwrite;
  assign offs   = apb_req_i.paddr[11:0];

  logic is_ctrl, is_status, is_data, is_digest;
  logic [5:0] dig_idx;
  assign is_ctrl   = offs == 12'h000;
  assign is_status = offs == 12'h004;
  assign is_data   = offs[11:4] == 8'h01 && offs[1:0] == 2'b00;
  assign dig_idx   = offs[7:2];
  assign is_digest = offs[11:8] == 4'h1 && offs[1:0] == 2'b00 && int'(dig_idx) < DWORDS;

  logic do_start, want_data, want_finish, open_sig;
  assign open_sig    = busy || mready;          // a signature is being built
  assign do_start    = wr && is_ctrl && apb_req_i.pwdata[0] && !busy;
  assign want_data   = wr && is_data;
  assign want_finish = wr && is_ctrl && apb_req_i.pwdata[1] && !apb_req_i.pwdata[0];

  assign start  = do_start;
  assign mvalid = want_data && mready;
  assign mdata  = apb_req_i.pwdata;
  assign mnb    = 3'(offs[3:2]) + 3'd1;
  assign finish = want_finish && mready;

  always_comb begin
    apb_rsp_o        = '0;
    apb_rsp_o.pready = 1'b1;
    if (wr) begin
      if (is_ctrl && apb_req_i.pwdata[0]) begin
        apb_rsp_o.pslverr = busy;
      end else if (want_finish || want_data) begin
        apb_rsp_o.pready  = mready || !open_sig;
        apb_rsp_o.pslverr = !open_sig;
      end else begin
        apb_rsp_o.pslverr = !is_ctrl;           // CTRL write of 0 is a no-op
      end
    end else if (rd) begin
      if (is_status)
        apb_rsp_o.prdata = {28'b0, mready, err, done, busy};
      else if (is_digest)
        apb_rsp_o.prdata = digest[32*dig_idx +: 32];
      else
        apb_rsp_o.pslverr = 1'b1;
    end
  end

  assign done_o = done;

  // APB rules: penable only inside a selected transfer, and the address and
  // data of a transfer held while it waits.
  a_penable_psel : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    apb_req_i.penable |-> apb_req_i.psel);
  a_hold_wait : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 access && !apb_rsp_o.pready |=>
                                 apb_req_i.psel && apb_req_i.penable &&
                                 $stable(apb_req_i.paddr) && $stable(apb_req_i.pwdata));

endmodule
