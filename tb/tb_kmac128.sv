// tb_kmac128: self-checking test of the KMAC128 engine.
// Instance u_kat uses a 256-bit key so that the published SP 800-185 sample
// (KMAC128, key 40..5F, data 00 01 02 03, S empty, 256-bit output) can be
// checked byte for byte. Instance u_dev has the default 64-bit device key
// and is compared with the reference model on responses of 0 to 400 bytes,
// with a partial last word, across block boundaries and with the encoding
// bytes landing on a block boundary. Latencies checked: start to ready 54
// cycles, 26 stall cycles per block boundary inside a response, finish to
// done 30 cycles (56 when the length bytes cross into a new block). Also checked: the digest is zero
// before done, the start-to-ready latency, stalling at block boundaries,
// the error flag on a word crossing a block, and that a different key
// gives a different signature.
module tb_kmac128;
  import kmac_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   stalls = 0;
  int   fin_cyc;
  int   stalls_prev = 0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ two engines
  logic [255:0] kat_key;
  logic [63:0]  dev_key;
  logic         start [2], mvalid [2], mready [2], finish [2], busy [2], done [2], err [2];
  logic [31:0]  mdata [2];
  logic [2:0]   mnb [2];
  logic [255:0] dig [2];

  kmac128 #(.KEY_BITS(256), .DIGEST_BITS(256)) u_kat (
    .clk_i(clk), .rst_ni(rst_n), .key_i(kat_key), .start_i(start[0]),
    .msg_valid_i(mvalid[0]), .msg_data_i(mdata[0]), .msg_nbytes_i(mnb[0]),
    .msg_ready_o(mready[0]), .finish_i(finish[0]), .busy_o(busy[0]),
    .done_o(done[0]), .error_o(err[0]), .digest_o(dig[0])
  );

  kmac128 u_dev (
    .clk_i(clk), .rst_ni(rst_n), .key_i(dev_key), .start_i(start[1]),
    .msg_valid_i(mvalid[1]), .msg_data_i(mdata[1]), .msg_nbytes_i(mnb[1]),
    .msg_ready_o(mready[1]), .finish_i(finish[1]), .busy_o(busy[1]),
    .done_o(done[1]), .error_o(err[1]), .digest_o(dig[1])
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [255:0] pack(bytes_t b);
    logic [255:0] r = '0;
    foreach (b[i]) r[8 * i +: 8] = b[i];
    return r;
  endfunction

  // Hash msg on engine e; return the digest and the start-to-ready cycles.
  task automatic hash(int e, bytes_t msg, output logic [255:0] d, output int init_cyc);
    int i = 0;
    @(negedge clk) start[e] = 1'b1;
    @(negedge clk) start[e] = 1'b0;
    init_cyc = 0;
    while (!mready[e]) begin
      @(negedge clk);
      init_cyc++;
    end
    while (i < msg.size()) begin
      int n = (msg.size() - i >= 4) ? 4 : msg.size() - i;
      mvalid[e] = 1'b1;
      mnb[e] = 3'(n);
      mdata[e] = '0;
      for (int k = 0; k < n; k++) mdata[e][8 * k +: 8] = msg[i + k];
      @(posedge clk);
      if (mready[e]) i += n;
      else if (e == 1) stalls++;
      @(negedge clk);
    end
    mvalid[e] = 1'b0;
    while (!mready[e]) @(negedge clk);
    check(dig[e] == '0, "digest reads zero before the signature is done");
    finish[e] = 1'b1;
    @(negedge clk) finish[e] = 1'b0;
    fin_cyc = 0;
    while (!done[e]) begin
      @(negedge clk);
      fin_cyc++;
    end
    d = dig[e];
  endtask

  bytes_t kat_k, dev_k, msg, ref_d;
  int lens [21] = '{0, 1, 2, 3, 4, 5, 7, 14, 100, 163, 164, 165, 166, 167,
                    168, 169, 171, 335, 336, 337, 400};
  logic [255:0] got;
  int ic;

  initial begin
    for (int e = 0; e < 2; e++) begin
      start[e] = 0; mvalid[e] = 0; finish[e] = 0; mdata[e] = '0; mnb[e] = '0;
    end
    kat_k = new[32];
    foreach (kat_k[i]) begin
      kat_k[i] = byte'(8'h40 + i);
      kat_key[8 * i +: 8] = kat_k[i];
    end
    dev_key = 64'h0123_4567_89AB_CDEF;
    dev_k = new[8];
    foreach (dev_k[i]) dev_k[i] = dev_key[8 * i +: 8];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Published sample 1 of SP 800-185 for KMAC128
    msg = new[4];
    foreach (msg[i]) msg[i] = byte'(i);
    hash(0, msg, got, ic);
    // digest bytes E5 78 0B 0D ... 4E, first byte in bits 7:0
    check(got == {<<8{256'hE5780B0D3EA6F7D3A429C5706AA43A00FADBD7D49628839E3187243F456EE14E}},
          "SP 800-185 KMAC128 sample 1");
    check(got == pack(kmac128(kat_k, msg, 256)), "reference model agrees with sample 1");
    check(!err[0], "no error on the sample");

    // Device key, many lengths. 165/166/167 put the encoding across a block.
    foreach (lens[k]) begin
      msg = new[lens[k]];
      foreach (msg[i]) msg[i] = byte'($urandom);
      hash(1, msg, got, ic);
      check(got == pack(kmac128(dev_k, msg, 256)), $sformatf("device key, %0d bytes", lens[k]));
      check(ic == 54, $sformatf("start-to-ready latency %0d, expected 54", ic));
      check(!err[1], "no error flag");
      check(fin_cyc == ((lens[k] % 168 >= 165) ? 56 : 30),
            $sformatf("finish-to-done %0d cycles for %0d bytes", fin_cyc, lens[k]));
      // a block boundary followed by more data stalls the producer 26 cycles
      check(stalls - stalls_prev == 26 * ((lens[k] - 1) / 168) ||
            lens[k] == 0, $sformatf("stall cycles %0d for %0d bytes", stalls - stalls_prev, lens[k]));
      stalls_prev = stalls;
    end
    check(stalls > 0, "producer was stalled at block boundaries");

    // Another key gives another signature for the same response
    begin
      logic [255:0] d1;
      msg = new[16];
      foreach (msg[i]) msg[i] = byte'(i * 3);
      hash(1, msg, d1, ic);
      dev_key = 64'h0123_4567_89AB_CDEE;
      hash(1, msg, got, ic);
      check(got != d1, "one key bit changes the signature");
      foreach (dev_k[i]) dev_k[i] = dev_key[8 * i +: 8];
      check(got == pack(kmac128(dev_k, msg, 256)), "changed key matches the model");
    end

    // A full word after a partial one that would cross the block boundary
    @(negedge clk) start[1] = 1'b1;
    @(negedge clk) start[1] = 1'b0;
    while (!mready[1]) @(negedge clk);
    for (int w = 0; w < 41; w++) begin
      mvalid[1] = 1'b1; mnb[1] = 3'd4; mdata[1] = $urandom;
      @(negedge clk);
    end
    mnb[1] = 3'd3;
    @(negedge clk);                      // 167 bytes absorbed
    mnb[1] = 3'd4;
    @(negedge clk);
    mvalid[1] = 1'b0;
    check(err[1], "error flag on a word crossing the block boundary");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
