// apb_interconnect: single-master bus decoder joining the CPU to the test
// domain and to the rest of the SoC.
//
// The master's request goes to every slave; psel and penable are raised only for the
// slave whose window matches the address, and that slave's response is
// returned. Slave i matches when (paddr & MASK[i]) == BASE[i], the lowest
// index winning. An address that matches no window goes to the last port,
// NSLV-1, which leads to the rest of the SoC (memory, I/O, the IPs under
// test), so the test domain can be dropped into an existing bus. The
// decoder is combinational and adds no wait states.
//
// From the published design: TPG and hash engine sit as memory-mapped IPs
// on the bus the CPU shares with memory, I/O and the IPs. The decoder
// structure and the address map are this design's own.
module apb_interconnect
  import apb_pkg::*;
#(
  parameter int unsigned NSLV = 3,
  parameter logic [NSLV-2:0][ADDR_W-1:0] BASE = {KMAC_BASE, TPG_BASE},
  parameter logic [NSLV-2:0][ADDR_W-1:0] MASK = {WIN_MASK, WIN_MASK}
) (
  input  apb_req_t            mst_req_i,
  output apb_rsp_t            mst_rsp_o,
  output apb_req_t [NSLV-1:0] slv_req_o,
  input  apb_rsp_t [NSLV-1:0] slv_rsp_i
);

  logic [$clog2(NSLV)-1:0] sel;

  always_comb begin
    sel = $clog2(NSLV)'(NSLV - 1);
    for (int i = NSLV - 2; i >= 0; i--)
      if ((mst_req_i.paddr & MASK[i]) == BASE[i]) sel = $clog2(NSLV)'(i);
  end

  always_comb begin
    for (int i = 0; i < NSLV; i++) begin
      slv_req_o[i]      = mst_req_i;
      slv_req_o[i].psel    = mst_req_i.psel && (int'(sel) == i);
      slv_req_o[i].penable = mst_req_i.penable && (int'(sel) == i);
    end
    mst_rsp_o = slv_rsp_i[sel];
  end

endmodule
