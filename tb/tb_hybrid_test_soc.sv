// tb_hybrid_test_soc: end-to-end test of the SoC test domain at its default
// parameters (64-bit key, 256-bit signature).
//
// A bus-functional CPU runs the self-test flow: seed the TPG, start the
// hash engine, and for every pattern read the TPG, apply the pattern to the
// IP under test (ISCAS-85 c17 on the external bus port), read its 2-bit
// response, pack the response bits (LSB first, pattern by pattern) and write
// them to the engine a word at a time, the last word partial; finish and
// read the signature. Golden signatures are computed independently from
// the LFSR recurrence, a behavioural c17 and the reference KMAC128.
//
// Scenarios: on-chip testing (fault-free pass, every stuck-at fault on the
// 11 nets of c17 run through the SoC, detected exactly when its response
// differs), remote testing (a tester builds the device-specific fault
// dictionary of signatures, injects faults and diagnoses them from the
// returned signature alone), aliasing (distinct responses never share a
// signature), device specificity (another key, other signatures), a short
// response (L = 14 bits < d) and a long one spanning several blocks.
// Counted mechanisms, each must happen: engine wait states, multi-block
// responses, partial last words, bus errors on misuse, external-port
// traffic, detected faults, remote diagnoses.
module tb_hybrid_test_soc;
  import apb_pkg::*;
  import kmac_ref_pkg::*;

  localparam logic [31:0] TPG  = 32'h1A12_0000;
  localparam logic [31:0] KM   = 32'h1A12_1000;
  localparam logic [31:0] C17  = 32'h1A13_0000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [63:0] key;
  apb_req_t    cpu_req, ext_req;
  apb_rsp_t    cpu_rsp, ext_rsp;
  logic        sig_done;
  logic        f_en = 1'b0;
  logic [3:0]  f_net = '0;
  logic        f_val = 1'b0;
  int          checks = 0, failures = 0;
  always #5 clk = ~clk;

  hybrid_test_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .device_key_i(key),
    .cpu_req_i(cpu_req), .cpu_rsp_o(cpu_rsp),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp), .sig_done_o(sig_done)
  );
  apb_master_bfm cpu (.clk_i(clk), .req_o(cpu_req), .rsp_i(cpu_rsp));
  c17_apb_dut #(.BASE(C17)) ip (
    .clk_i(clk), .rst_ni(rst_n), .apb_req_i(ext_req), .apb_rsp_o(ext_rsp),
    .fault_en_i(f_en), .fault_net_i(f_net), .fault_val_i(f_val)
  );

  // mechanism counters
  int n_multiblock = 0, n_partial = 0, n_buserr = 0, n_ext = 0;
  int n_detect = 0, n_diag = 0, n_pass = 0;
  always @(posedge clk) if (ext_req.psel && ext_req.penable && ext_rsp.pready) n_ext++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ independent reference
  function automatic logic [31:0] ref_lfsr_step(logic [31:0] q);
    bit fb = q[31] ^ q[21] ^ q[1] ^ q[0];   // x^32 + x^22 + x^2 + x + 1
    return {q[30:0], fb};
  endfunction

  // c17 with optional stuck-at on net fnet (-1: none)
  function automatic logic [1:0] ref_c17(logic [4:0] v, int fnet, bit fval);
    logic [10:0] n;
    for (int i = 0; i < 5; i++) n[i] = (fnet == i) ? fval : v[i];
    n[5]  = (fnet == 5)  ? fval : !(n[0] && n[2]);
    n[6]  = (fnet == 6)  ? fval : !(n[2] && n[3]);
    n[7]  = (fnet == 7)  ? fval : !(n[1] && n[6]);
    n[8]  = (fnet == 8)  ? fval : !(n[6] && n[4]);
    n[9]  = (fnet == 9)  ? fval : !(n[5] && n[7]);
    n[10] = (fnet == 10) ? fval : !(n[7] && n[8]);
    return {n[10], n[9]};
  endfunction

  function automatic bytes_t ref_response(logic [31:0] seed, int npat, int fnet, bit fval);
    bytes_t r = new[(2 * npat + 7) / 8];
    logic [31:0] q = seed;
    foreach (r[i]) r[i] = 0;
    for (int p = 0; p < npat; p++) begin
      logic [1:0] o = ref_c17(q[4:0], fnet, fval);
      r[(2 * p) / 8][(2 * p) % 8] = o[0];
      r[(2 * p + 1) / 8][(2 * p + 1) % 8] = o[1];
      q = ref_lfsr_step(q);
    end
    return r;
  endfunction

  function automatic logic [255:0] pack(bytes_t b);
    logic [255:0] r = '0;
    foreach (b[i]) r[8 * i +: 8] = b[i];
    return r;
  endfunction

  function automatic bytes_t key_bytes(logic [63:0] k);
    bytes_t r = new[8];
    foreach (r[i]) r[i] = k[8 * i +: 8];
    return r;
  endfunction

  // ------------------------------------------------ self-test library (CPU)
  // buffered = 0: each response word goes to the engine as soon as it is
  // full. buffered = 1: responses are first collected (as in memory) and
  // then streamed back to back, so the engine's wait states show.
  task automatic stl_run(logic [31:0] seed, int npat, output logic [255:0] sig,
                         input bit buffered = 0);
    logic e;
    logic [31:0] r, word;
    logic [31:0] buf_q [$];
    int nbits = 0;
    cpu.write(TPG + 0, seed, e);
    check(!e, "seed written");
    if (!buffered) cpu.write(KM + 0, 32'h1, e);   // START: key initialisation
    word = '0;
    for (int p = 0; p < npat; p++) begin
      logic [31:0] v, o;
      cpu.read(TPG + 4, v, e);                // next test vector
      cpu.write(C17 + 0, v, e);               // apply to the IP under test
      cpu.read(C17 + 4, o, e);                // its response
      word[nbits % 32] = o[0];
      word[(nbits + 1) % 32] = o[1];
      nbits += 2;
      if (nbits % 32 == 0) begin
        if (buffered) buf_q.push_back(word);
        else cpu.write(KM + 32'h1C, word, e);   // 4 response bytes
        word = '0;
      end
    end
    if (buffered) begin
      cpu.write(KM + 0, 32'h1, e);
      foreach (buf_q[i]) cpu.write(KM + 32'h1C, buf_q[i], e);
    end
    if (nbits % 32 != 0) begin
      int nb = ((nbits % 32) + 7) / 8;
      cpu.write(KM + 32'h10 + 32'(4 * (nb - 1)), word, e);
      n_partial++;
    end
    if ((nbits + 7) / 8 + 3 > 168) n_multiblock++;
    cpu.write(KM + 0, 32'h2, e);              // FINISH
    do cpu.read(KM + 4, r, e); while (!r[1]);
    for (int k = 0; k < 8; k++) begin
      cpu.read(KM + 32'h100 + 32'(4 * k), r, e);
      sig[32 * k +: 32] = r;
    end
  endtask

  // ------------------------------------------------ main
  logic [255:0] sig, golden;
  bytes_t good;
  logic [255:0] dict_sig [22];
  bytes_t       dict_rsp [22];

  initial begin
    logic e;
    logic [31:0] r;
    int w0;
    logic [31:0] seed;
    key = 64'h1F2E_3D4C_5B6A_7988;             // device-specific key k_A
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- on-chip test, c17 sized as in the benchmark table: 7 patterns,
    //      L = 14 bits, shorter than the 256-bit signature
    seed = 32'h0000_ACE1;
    w0 = cpu.total_waits;
    stl_run(seed, 7, sig);
    golden = pack(kmac128(key_bytes(key), ref_response(seed, 7, -1, 0), 256));
    check(sig == golden, "on-chip test, fault-free c17 matches golden signature");
    check(sig[31:0] != 0 && sig != pack(ref_response(seed, 7, -1, 0)),
          "signature does not expose the 14-bit response");
    if (sig == golden) n_pass++;

    // ---- every stuck-at fault through the SoC (on-chip, 7 patterns)
    good = ref_response(seed, 7, -1, 0);
    for (int f = 0; f < 22; f++) begin
      bit differs;
      dict_rsp[f] = ref_response(seed, 7, f / 2, f % 2);
      dict_sig[f] = pack(kmac128(key_bytes(key), dict_rsp[f], 256));
      f_en = 1'b1; f_net = 4'(f / 2); f_val = f % 2;
      stl_run(seed, 7, sig);
      f_en = 1'b0;
      differs = (dict_rsp[f] != good);
      check(sig == dict_sig[f], $sformatf("fault %0d signature as predicted", f));
      check((sig != golden) == differs, $sformatf("fault %0d detected iff response differs", f));
      if (sig != golden) n_detect++;
    end

    // ---- aliasing: distinct responses, distinct signatures
    for (int a = 0; a < 22; a++)
      for (int b = a + 1; b < 22; b++)
        if (dict_rsp[a] != dict_rsp[b])
          check(dict_sig[a] != dict_sig[b], "no aliasing between distinct responses");

    // ---- remote testing: tester sends seed, SoC returns h'_j, tester
    //      diagnoses from its device-specific fault dictionary
    for (int t = 0; t < 6; t++) begin
      int f, found;
      f = $urandom_range(0, 21);
      found = -1;
      f_en = 1'b1; f_net = 4'(f / 2); f_val = f % 2;
      stl_run(seed, 7, sig);
      f_en = 1'b0;
      if (sig == golden) found = 99;
      for (int g = 0; g < 22; g++) if (found < 0 && sig == dict_sig[g]) found = g;
      check(found >= 0, "remote tester found the signature in its dictionary");
      if (found >= 0 && found != 99) begin
        check(dict_rsp[found] == dict_rsp[f], "diagnosis names a fault with the injected fault's response");
        n_diag++;
      end
    end

    // ---- long test: 800 patterns -> 200 bytes, two blocks
    seed = 32'h1357_9BDF;
    w0 = cpu.total_waits;
    stl_run(seed, 800, sig, 1);
    check(cpu.total_waits > w0, "engine held a response write while permuting");
    check(sig == pack(kmac128(key_bytes(key), ref_response(seed, 800, -1, 0), 256)),
          "long on-chip test (1600-bit response) matches golden");
    f_en = 1'b1; f_net = 4'd7; f_val = 1'b0;
    stl_run(seed, 800, sig);
    f_en = 1'b0;
    check(sig == pack(kmac128(key_bytes(key), ref_response(seed, 800, 7, 0), 256)),
          "long test with N16 stuck-at-0 as predicted");

    // ---- device specificity: SoC^B with another key
    begin
      logic [255:0] sig_a, sig_b;
      seed = 32'h0000_ACE1;
      stl_run(seed, 7, sig_a);
      key = 64'h1F2E_3D4C_5B6A_7989;
      stl_run(seed, 7, sig_b);
      check(sig_b != sig_a, "device B gives another signature for the same response");
      check(sig_b == pack(kmac128(key_bytes(key), ref_response(seed, 7, -1, 0), 256)),
            "device B signature matches its own dictionary");
    end

    // ---- misuse is refused on the bus
    cpu.write(KM + 32'h1C, 32'h0, e);          // no signature open (done)
    if (e) n_buserr++;
    cpu.write(TPG + 0, 32'h0, e);              // zero seed
    if (e) n_buserr++;
    cpu.read(KM + 32'h008, r, e);              // no such register
    if (e) n_buserr++;
    check(n_buserr == 3, "three refused accesses");

    // ---- mechanisms
    check(cpu.total_waits > 0, $sformatf("engine wait states: %0d", cpu.total_waits));
    check(n_multiblock > 0, $sformatf("multi-block responses: %0d", n_multiblock));
    check(n_partial > 0, $sformatf("partial last words: %0d", n_partial));
    check(n_ext > 0, $sformatf("external-port transfers: %0d", n_ext));
    check(n_detect > 0, $sformatf("faults detected on chip: %0d", n_detect));
    check(n_pass > 0, "fault-free on-chip pass");
    check(n_diag > 0, $sformatf("remote diagnoses: %0d", n_diag));
    check(sig_done, "signature-done output high after the last test");
    $display("mechanisms: waits=%0d multiblock=%0d partial=%0d buserr=%0d ext=%0d detected=%0d/22 diagnosed=%0d",
             cpu.total_waits, n_multiblock, n_partial, n_buserr, n_ext, n_detect, n_diag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
