// tb_keccak_f1600: self-checking test of the iterative Keccak-f[1600] unit.
// Checks the all-zero-state answer of the standard (first lane
// F1258F7940E1DDE7), random states against the reference model, the
// XOR and clear operations, and the 24-cycle latency from start to done.
module tb_keccak_f1600;
  import keccak_pkg::*;
  import kmac_ref_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   clear, xr, start, busy, done;
  state_t din, dout;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  keccak_f1600 dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .xor_i(xr), .data_i(din),
    .start_i(start), .busy_o(busy), .done_o(done), .state_o(dout)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Run one permutation and return the number of clock edges after the
  // one that samples start_i until done_o is seen.
  task automatic run_perm(output int cycles);
    cycles = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;   // start sampled at this edge
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic load(logic [1599:0] v);
    @(negedge clk) clear = 1'b1;
    @(negedge clk) begin clear = 1'b0; xr = 1'b1; din = state_t'(v); end
    @(negedge clk) xr = 1'b0;
  endtask

  initial begin
    int cyc;
    logic [1599:0] v, exp;
    clear = 0; xr = 0; start = 0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(dout == '0, "state is zero after reset");

    // All-zero input
    run_perm(cyc);
    check(dout[0] == 64'hF1258F7940E1DDE7, "zero-state known answer, lane 0");
    check(dout == state_t'(permute_flat('0)), "zero-state answer, all lanes");
    check(cyc == 24, $sformatf("latency %0d, expected 24", cyc));

    // Second permutation continues from the first result
    exp = permute_flat(permute_flat('0));
    run_perm(cyc);
    check(dout == state_t'(exp), "two chained permutations");

    // Random states through clear + xor
    for (int k = 0; k < 20; k++) begin
      for (int i = 0; i < 50; i++) v[32 * i +: 32] = $urandom;
      load(v);
      check(dout == state_t'(v), "clear then xor loads the state");
      run_perm(cyc);
      check(dout == state_t'(permute_flat(v)), $sformatf("random state %0d", k));
      check(cyc == 24, "latency of random permutation");
    end

    // XOR accumulates onto the state
    v = dout;
    @(negedge clk) begin xr = 1'b1; din = state_t'({1600{1'b1}}); end
    @(negedge clk) xr = 1'b0;
    check(dout == state_t'(~v), "xor with ones inverts the state");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
