// tb_iscas85_lengths: runs the test domain at its default parameters on
// responses of the sizes of the eleven ISCAS-85 benchmark tests (primary
// outputs x patterns = response length L, from 14 bits for c17 to 73677
// bits for c5315). The response contents are pseudo-random here, since the
// benchmark netlists and their ATPG patterns are not part of this design;
// what is exercised is the engine on each length: the CPU streams the
// response as 32-bit words back to back, the signature must equal the
// reference KMAC128, and the compaction rate 1 - d/L of each signature is
// checked against the benchmark table (to 0.01 %). Flipping one response
// bit must change the signature (no aliasing on that pair).
module tb_iscas85_lengths;
  import apb_pkg::*;
  import kmac_ref_pkg::*;

  localparam logic [31:0] KM = 32'h1A12_1000;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [63:0] key = 64'hC0FF_EE00_1234_5678;
  apb_req_t    cpu_req, ext_req;
  apb_rsp_t    cpu_rsp, ext_rsp;
  logic        sig_done;
  int          checks = 0, failures = 0;
  always #5 clk = ~clk;

  hybrid_test_soc dut (
    .clk_i(clk), .rst_ni(rst_n), .device_key_i(key),
    .cpu_req_i(cpu_req), .cpu_rsp_o(cpu_rsp),
    .ext_req_o(ext_req), .ext_rsp_i(ext_rsp), .sig_done_o(sig_done)
  );
  apb_master_bfm cpu (.clk_i(clk), .req_o(cpu_req), .rsp_i(cpu_rsp));
  assign ext_rsp = '{prdata: '0, pready: 1'b1, pslverr: 1'b1};

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

  task automatic sign(bytes_t msg, output logic [255:0] d);
    logic e;
    logic [31:0] r;
    int i = 0;
    cpu.write(KM + 0, 32'h1, e);
    while (i < msg.size()) begin
      int n = (msg.size() - i >= 4) ? 4 : msg.size() - i;
      logic [31:0] w = '0;
      for (int k = 0; k < n; k++) w[8 * k +: 8] = msg[i + k];
      cpu.write(KM + 32'h10 + 32'(4 * (n - 1)), w, e);
      i += n;
    end
    cpu.write(KM + 0, 32'h2, e);
    do cpu.read(KM + 4, r, e); while (!r[1]);
    for (int k = 0; k < 8; k++) begin
      cpu.read(KM + 32'h100 + 32'(4 * k), r, e);
      d[32 * k +: 32] = r;
    end
  endtask

  // name, primary outputs, patterns, compaction rate in 0.01 %
  string names [11] = '{"c17", "c432", "c499", "c880", "c1355", "c1908",
                        "c2670", "c3540", "c5315", "c6288", "c7552"};
  int    outs  [11] = '{2, 7, 32, 26, 32, 25, 140, 22, 123, 32, 108};
  int    pats  [11] = '{7, 63, 55, 148, 100, 128, 444, 264, 599, 33, 455};
  int    cr100 [11] = '{-172857, 4195, 8545, 9335, 9200, 9200, 9959, 9559, 9965, 7576, 9948};

  initial begin
    bytes_t kb, msg;
    logic [255:0] sig, sig2;
    int blocks_total = 0;
    kb = new[8];
    foreach (kb[i]) kb[i] = key[8 * i +: 8];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (names[c]) begin
      automatic int  L      = outs[c] * pats[c];
      automatic int  nbytes = (L + 7) / 8;
      automatic real cr     = 100.0 * (1.0 - 256.0 / real'(L));
      automatic int  w0     = cpu.total_waits;
      msg = new[nbytes];
      foreach (msg[i]) msg[i] = byte'($urandom);
      if (L % 8 != 0) msg[nbytes - 1] &= byte'((1 << (L % 8)) - 1);   // zero pad
      sign(msg, sig);
      check(sig == pack(kmac128(kb, msg, 256)), $sformatf("%s: signature of L = %0d bits", names[c], L));
      check(int'(cr * 100.0) == cr100[c],      // int' rounds to nearest
            $sformatf("%s: compaction rate %0.2f %%", names[c], cr));
      msg[0] ^= 8'h01;
      sign(msg, sig2);
      check(sig2 != sig, $sformatf("%s: one flipped response bit changes the signature", names[c]));
      blocks_total += (nbytes + 3) / 168 + 1;
      $display("%-6s L=%6d bits  %5d bytes  CR=%8.2f%%  wait states %0d", names[c], L, nbytes, cr,
               cpu.total_waits - w0);
    end
    check(blocks_total > 11, "long responses span several blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
