// tb_apb_interconnect: checks the window decoder with three register-file
// slaves. Every access must reach exactly the slave whose window holds the
// address (the last port for addresses outside both windows), with psel
// raised for that slave only, and return that slave's data, error flag and
// wait states.
module tb_apb_interconnect;
  import apb_pkg::*;

  logic     clk = 1'b0;
  apb_req_t mreq;
  apb_rsp_t mrsp;
  apb_req_t [2:0] sreq;
  apb_rsp_t [2:0] srsp;
  int       checks = 0, failures = 0;
  int       hits [3];
  always #5 clk = ~clk;

  apb_interconnect dut (.mst_req_i(mreq), .mst_rsp_o(mrsp), .slv_req_o(sreq), .slv_rsp_i(srsp));
  apb_master_bfm cpu (.clk_i(clk), .req_o(mreq), .rsp_i(mrsp));

  // Slave models: a register each; slave 2 inserts two wait states and
  // flags an error on offset 0xFFC; read data carries the slave number.
  logic [31:0] regs [3];
  int          wcnt;
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      srsp[i].prdata  = regs[i] ^ (32'(i) << 28);
      srsp[i].pready  = (i != 2) || (wcnt >= 2);
      srsp[i].pslverr = (i == 2) && sreq[i].paddr[11:0] == 12'hFFC;
    end
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < 3; i++)
      if (sreq[i].psel && sreq[i].penable && srsp[i].pready) begin
        hits[i]++;
        if (sreq[i].pwrite) regs[i] <= sreq[i].pwdata;
      end
    if (sreq[2].psel && sreq[2].penable && !srsp[2].pready) wcnt <= wcnt + 1;
    else wcnt <= 0;
  end
  // never two slaves selected
  always @(posedge clk) if (!$onehot0({sreq[2].psel, sreq[1].psel, sreq[0].psel})) begin
    failures++;
    $display("FAIL: several slaves selected");
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int expect_slave(logic [31:0] a);
    if (a[31:12] == 20'h1A120) return 0;
    if (a[31:12] == 20'h1A121) return 1;
    return 2;
  endfunction

  initial begin
    logic [31:0] a, d, r;
    logic e;
    int w, s;
    int prev [3];
    regs[0] = 0; regs[1] = 0; regs[2] = 0; wcnt = 0;
    hits[0] = 0; hits[1] = 0; hits[2] = 0;
    for (int k = 0; k < 60; k++) begin
      case (k % 4)
        0: a = 32'h1A12_0000 | 32'($urandom_range(0, 1023) * 4);
        1: a = 32'h1A12_1000 | 32'($urandom_range(0, 1022) * 4);
        2: a = 32'h1C00_0000 + 32'($urandom_range(0, 4095) * 4);
        default: a = 32'h1A12_2000;
      endcase
      s = expect_slave(a);
      prev = hits;
      d = $urandom;
      cpu.xfer(1'b1, a, d, r, e, w);
      check(hits[s] == prev[s] + 1, $sformatf("write %08h reached slave %0d", a, s));
      check(hits[(s+1)%3] == prev[(s+1)%3] && hits[(s+2)%3] == prev[(s+2)%3],
            "no other slave took the write");
      check(w == ((s == 2) ? 2 : 0), "wait states of the selected slave");
      cpu.xfer(1'b0, a, 0, r, e, w);
      check(r == (d ^ (32'(s) << 28)), $sformatf("read back through slave %0d", s));
    end
    cpu.xfer(1'b0, 32'h2000_0FFC, 0, r, e, w);
    check(e, "error of the default slave returned");
    cpu.xfer(1'b0, 32'h1A12_0FFC, 0, r, e, w);
    check(!e, "no error from slave 0");
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
