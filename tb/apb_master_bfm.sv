// apb_master_bfm: bus-functional model of the processor's bus port, used by
// the testbenches in place of the CPU. write()/read() perform one APB
// transfer (setup cycle, access cycle, wait while pready is low) and return
// the error flag and the number of wait states. total_waits counts all wait
// states seen, so tests can prove that back-pressure happened.
module apb_master_bfm
  import apb_pkg::*;
(
  input  logic     clk_i,
  output apb_req_t req_o,
  input  apb_rsp_t rsp_i
);
  int total_waits = 0;
  int transfers = 0;

  initial req_o = '0;

  task automatic xfer(input bit wr, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata, output logic err, output int waits);
    @(negedge clk_i);
    req_o        = '0;
    req_o.psel   = 1'b1;
    req_o.pwrite = wr;
    req_o.paddr  = addr;
    req_o.pwdata = wdata;
    @(negedge clk_i) req_o.penable = 1'b1;
    waits = 0;
    #1;
    while (!rsp_i.pready) begin
      waits++;
      @(negedge clk_i);
      #1;
    end
    rdata = rsp_i.prdata;
    err   = rsp_i.pslverr;
    total_waits += waits;
    transfers++;
    @(posedge clk_i);
    #1 req_o = '0;
  endtask

  task automatic write(input logic [31:0] addr, input logic [31:0] wdata, output logic err);
    logic [31:0] d;
    int w;
    xfer(1'b1, addr, wdata, d, err, w);
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] rdata, output logic err);
    int w;
    xfer(1'b0, addr, '0, rdata, err, w);
  endtask
endmodule
