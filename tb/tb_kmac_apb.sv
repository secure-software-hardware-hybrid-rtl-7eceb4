// tb_kmac_apb: bus-level test of the hash engine's register front end.
// Streams responses of several lengths through DATA4/DATAn writes, checks
// the signatures against the reference KMAC128, that writes are held with
// wait states while a block is permuted, that the signature registers read
// zero until done, the STATUS bits, the error responses for misuse, and
// that no register offset reads back the device key.
module tb_kmac_apb;
  import apb_pkg::*;
  import kmac_ref_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  apb_req_t req;
  apb_rsp_t rsp;
  logic     done;
  logic [63:0] key = 64'hA5A5_0F0F_3C3C_9696;
  int       checks = 0, failures = 0;
  always #5 clk = ~clk;

  kmac_apb dut (.clk_i(clk), .rst_ni(rst_n), .key_i(key), .apb_req_i(req),
                .apb_rsp_o(rsp), .done_o(done));
  apb_master_bfm cpu (.clk_i(clk), .req_o(req), .rsp_i(rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic sign(bytes_t msg, output logic [255:0] d);
    logic e;
    logic [31:0] r;
    int i = 0;
    cpu.write(32'h000, 32'h1, e);
    check(!e, "START accepted");
    while (i < msg.size()) begin
      int n = (msg.size() - i >= 4) ? 4 : msg.size() - i;
      logic [31:0] w = '0;
      for (int k = 0; k < n; k++) w[8 * k +: 8] = msg[i + k];
      cpu.write(32'h010 + 32'(4 * (n - 1)), w, e);
      if (e) check(0, "DATA write refused");
      i += n;
    end
    cpu.read(32'h100, r, e);
    check(r == 0 && !done, "DIGEST reads zero before FINISH");
    cpu.write(32'h000, 32'h2, e);
    check(!e, "FINISH accepted");
    do cpu.read(32'h004, r, e); while (!r[1]);
    check(r[3:0] == 4'b0010, "STATUS shows done only");
    for (int k = 0; k < 8; k++) begin
      cpu.read(32'h100 + 32'(4 * k), r, e);
      d[32 * k +: 32] = r;
    end
  endtask

  function automatic logic [255:0] pack(bytes_t b);
    logic [255:0] r = '0;
    foreach (b[i]) r[8 * i +: 8] = b[i];
    return r;
  endfunction

  bytes_t kb, msg;
  logic [255:0] got;
  logic e;
  logic [31:0] r;
  int lens [6] = '{0, 2, 13, 168, 250, 500};

  initial begin
    kb = new[8];
    foreach (kb[i]) kb[i] = key[8 * i +: 8];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // misuse before any signature
    cpu.write(32'h010, 32'h1234, e);
    check(e, "DATA without START refused");
    cpu.write(32'h000, 32'h2, e);
    check(e, "FINISH without START refused");
    cpu.read(32'h000, r, e);
    check(e, "CTRL is write-only");
    cpu.read(32'h080, r, e);
    check(e, "unknown offset refused");
    cpu.read(32'h120, r, e);
    check(e, "DIGEST index 8 does not exist");

    foreach (lens[k]) begin
      int w0 = cpu.total_waits;
      msg = new[lens[k]];
      foreach (msg[i]) msg[i] = byte'($urandom);
      sign(msg, got);
      check(got == pack(kmac128(kb, msg, 256)), $sformatf("signature of %0d bytes", lens[k]));
      // key initialisation (2 permutations) always holds the first write
      check(cpu.total_waits - w0 >= 48, $sformatf("wait states %0d", cpu.total_waits - w0));
    end

    // No offset of the window returns the key or any half of it, before or
    // after a signature.
    begin
      bit leak = 0;
      for (int a = 0; a < 4096; a += 4) begin
        cpu.read(32'(a), r, e);
        if (r == key[31:0] || r == key[63:32]) leak = 1;
      end
      check(!leak, "key not readable at any offset");
    end

    // START while busy is refused
    cpu.write(32'h000, 32'h1, e);
    cpu.write(32'h000, 32'h1, e);
    check(e, "START while initialising refused");
    // digest cleared again once a new signature is started
    cpu.read(32'h100, r, e);
    check(r == 0, "DIGEST zero after restart");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
