// c17_apb_dut: the ISCAS-85 benchmark circuit c17 (six 2-input NAND gates,
// inputs N1 N2 N3 N6 N7, outputs N22 N23) as a bus slave, standing for an IP
// under test in the testbenches. Writing IN applies a pattern (bits 4:0 =
// N1 N2 N3 N6 N7), reading OUT returns {N23, N22}. Any of the 11 nets can be
// held stuck at 0 or 1 from the testbench for fault simulation.
// Net numbers for fault_net_i: 0..4 = N1 N2 N3 N6 N7, 5 = N10, 6 = N11,
// 7 = N16, 8 = N19, 9 = N22, 10 = N23.
module c17_apb_dut
  import apb_pkg::*;
#(
  parameter logic [31:0] BASE = 32'h1A13_0000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  apb_req_t apb_req_i,
  output apb_rsp_t apb_rsp_o,
  input  logic       fault_en_i,
  input  logic [3:0] fault_net_i,
  input  logic       fault_val_i
);
  logic [4:0] in_q;
  logic [10:0] n;

  function automatic logic f(logic v, int idx, logic en, logic [3:0] net, logic val);
    return (en && int'(net) == idx) ? val : v;
  endfunction

  always_comb begin
    n[0]  = f(in_q[0], 0, fault_en_i, fault_net_i, fault_val_i);
    n[1]  = f(in_q[1], 1, fault_en_i, fault_net_i, fault_val_i);
    n[2]  = f(in_q[2], 2, fault_en_i, fault_net_i, fault_val_i);
    n[3]  = f(in_q[3], 3, fault_en_i, fault_net_i, fault_val_i);
    n[4]  = f(in_q[4], 4, fault_en_i, fault_net_i, fault_val_i);
    n[5]  = f(~(n[0] & n[2]), 5, fault_en_i, fault_net_i, fault_val_i);   // N10
    n[6]  = f(~(n[2] & n[3]), 6, fault_en_i, fault_net_i, fault_val_i);   // N11
    n[7]  = f(~(n[1] & n[6]), 7, fault_en_i, fault_net_i, fault_val_i);   // N16
    n[8]  = f(~(n[6] & n[4]), 8, fault_en_i, fault_net_i, fault_val_i);   // N19
    n[9]  = f(~(n[5] & n[7]), 9, fault_en_i, fault_net_i, fault_val_i);   // N22
    n[10] = f(~(n[7] & n[8]), 10, fault_en_i, fault_net_i, fault_val_i);  // N23
  end

  logic sel_ok;
  assign sel_ok = (apb_req_i.paddr & 32'hFFFF_F000) == BASE;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) in_q <= '0;
    else if (apb_req_i.psel && apb_req_i.penable && apb_req_i.pwrite && sel_ok &&
             apb_req_i.paddr[11:0] == 12'h0)
      in_q <= apb_req_i.pwdata[4:0];
  end

  always_comb begin
    apb_rsp_o        = '0;
    apb_rsp_o.pready = 1'b1;
    if (apb_req_i.psel && apb_req_i.penable) begin
      if (!sel_ok) apb_rsp_o.pslverr = 1'b1;
      else if (!apb_req_i.pwrite && apb_req_i.paddr[11:0] == 12'h4)
        apb_rsp_o.prdata = {30'b0, n[10], n[9]};
      else if (!apb_req_i.pwrite && apb_req_i.paddr[11:0] == 12'h0)
        apb_rsp_o.prdata = {27'b0, in_q};
    end
  end
endmodule
