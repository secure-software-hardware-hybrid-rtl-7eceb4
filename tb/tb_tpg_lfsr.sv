// tb_tpg_lfsr: self-checking test of the memory-mapped LFSR pattern
// generator. The expected patterns come from the bit recurrence
// s[t] = s[t-32] ^ s[t-22] ^ s[t-2] ^ s[t-1] of x^32 + x^22 + x^2 + x + 1,
// computed on a bit sequence rather than on a register. Also checked: the
// seed read-back, COUNT, the refused zero seed, error responses and that
// a new seed restarts the sequence.
module tb_tpg_lfsr;
  import apb_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  apb_req_t req;
  apb_rsp_t rsp;
  int       checks = 0, failures = 0;
  always #5 clk = ~clk;

  tpg_lfsr dut (.clk_i(clk), .rst_ni(rst_n), .apb_req_i(req), .apb_rsp_o(rsp));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic xfer(bit wr, logic [31:0] addr, logic [31:0] wdata,
                      output logic [31:0] rdata, output logic err);
    @(negedge clk);
    req = '0;
    req.psel = 1'b1; req.pwrite = wr; req.paddr = addr; req.pwdata = wdata;
    @(negedge clk) req.penable = 1'b1;
    #1;
    while (!rsp.pready) begin
      @(negedge clk);
      #1;
    end
    rdata = rsp.prdata;
    err = rsp.pslverr;
    @(posedge clk);
    @(negedge clk) req = '0;
  endtask

  // Reference: bit sequence, register holds s[t-31..t], bit 0 newest.
  function automatic logic [31:0] ref_pattern(logic [31:0] seed, int k);
    bit s [$];
    logic [31:0] r;
    for (int i = 31; i >= 0; i--) s.push_back(seed[i]);   // oldest first
    for (int t = 0; t < k; t++) begin
      int n = s.size();
      s.push_back(s[n - 32] ^ s[n - 22] ^ s[n - 2] ^ s[n - 1]);
    end
    for (int i = 0; i < 32; i++) r[i] = s[s.size() - 1 - i];
    return r;
  endfunction

  initial begin
    logic [31:0] rd, seed;
    logic er;
    req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int n = 0; n < 4; n++) begin
      seed = (n == 0) ? 32'h0000_0001 : $urandom | 32'h1;
      xfer(1, 32'h0, seed, rd, er);
      check(!er, "seed write accepted");
      xfer(0, 32'h0, 0, rd, er);
      check(rd == seed && !er, "seed read back");
      for (int k = 0; k < 100; k++) begin
        xfer(0, 32'h4, 0, rd, er);
        check(rd == ref_pattern(seed, k) && !er,
              $sformatf("pattern %0d of seed %08h: %08h", k, seed, rd));
      end
      xfer(0, 32'h8, 0, rd, er);
      check(rd == 100, "COUNT after 100 patterns");
    end

    // zero seed refused, sequence continues
    xfer(0, 32'h4, 0, rd, er);
    seed = ref_pattern(seed, 101);
    xfer(1, 32'h0, 0, rd, er);
    check(er, "zero seed refused");
    xfer(0, 32'h4, 0, rd, er);
    check(rd == seed, "zero seed left the LFSR alone");
    // errors
    xfer(1, 32'h4, 5, rd, er);
    check(er, "write to PATTERN refused");
    xfer(0, 32'hC, 0, rd, er);
    check(er, "unknown offset refused");
    // full period of a short stretch: no zero pattern appears
    xfer(1, 32'h0, 32'h8000_0000, rd, er);
    begin
      bit any_zero = 0;
      for (int k = 0; k < 300; k++) begin
        xfer(0, 32'h4, 0, rd, er);
        if (rd == 0) any_zero = 1;
      end
      check(!any_zero, "no lock-up state in 300 steps");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
