// apb_pkg: types of the 32-bit peripheral bus that joins the CPU to the test
// domain (TPG and hash engine) and to the rest of the SoC.
//
// The bus is modelled on AMBA APB (setup phase with psel, access phase with
// psel and penable, completion when pready is high, pslverr flags an error).
// The peripheral bus of the reference SoC is a 32-bit memory-mapped bus; the
// choice of APB and of the address map below is this design's own.
package apb_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;

  // Request from the bus master (the CPU) to a slave.
  typedef struct packed {
    logic [ADDR_W-1:0] paddr;
    logic              psel;
    logic              penable;
    logic              pwrite;
    logic [DATA_W-1:0] pwdata;
  } apb_req_t;

  // Response from a slave.
  typedef struct packed {
    logic [DATA_W-1:0] prdata;
    logic              pready;
    logic              pslverr;
  } apb_rsp_t;

  // Default address map of the test domain (4 KiB windows).
  localparam logic [ADDR_W-1:0] TPG_BASE  = 32'h1A12_0000;
  localparam logic [ADDR_W-1:0] KMAC_BASE = 32'h1A12_1000;
  localparam logic [ADDR_W-1:0] WIN_MASK  = 32'hFFFF_F000;

endpackage
