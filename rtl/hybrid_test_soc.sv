// hybrid_test_soc: the test domain of a SoC for secure software/hardware
// hybrid in-field testing, with its bus.
//
// Idea: instead of a scan chain and a dedicated compactor, the SoC's own
// processor runs a self-test library. It seeds a pseudo-random pattern
// generator (TPG), applies the patterns to the component under test, and
// streams the responses into a KMAC128 engine keyed with a device-specific
// key. The resulting 256-bit signature is compared with a golden signature,
// on chip or by a trusted remote tester. The key makes every signature
// device specific and hides the raw response even when it is shorter than
// the signature.
//
// Contents: apb_interconnect (window decoder), tpg_lfsr (32-bit LFSR TPG at
// TPG_BASE), kmac_apb (KMAC128 at KMAC_BASE) fed by device_key_i. The
// processor, memory with the self-test library and golden signatures, the
// I/O link and the IPs under test are parts of the host SoC: the processor's
// bus port enters as cpu_req_i/cpu_rsp_o, and every address outside the two
// test-domain windows leaves on ext_req_o/ext_rsp_i towards them. The key
// arrives on device_key_i from the key store; it is wired to the hash engine
// only.
//
// Timing: the decoder adds no cycles; TPG accesses take no wait states;
// hash-engine writes are held while it permutes (26 cycles after each
// 168-byte block, 54 cycles after START for the prefix and key blocks).
module hybrid_test_soc
  import apb_pkg::*;
#(
  parameter int unsigned KEY_BITS    = 64,
  parameter int unsigned DIGEST_BITS = 256
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [KEY_BITS-1:0] device_key_i,
  input  apb_req_t            cpu_req_i,
  output apb_rsp_t            cpu_rsp_o,
  output apb_req_t            ext_req_o,
  input  apb_rsp_t            ext_rsp_i,
  output logic                sig_done_o
);

  apb_req_t [2:0] req;
  apb_rsp_t [2:0] rsp;

  apb_interconnect #(
    .NSLV (3),
    .BASE ({KMAC_BASE, TPG_BASE}),
    .MASK ({WIN_MASK, WIN_MASK})
  ) u_bus (
    .mst_req_i (cpu_req_i),
    .mst_rsp_o (cpu_rsp_o),
    .slv_req_o (req),
    .slv_rsp_i (rsp)
  );

  tpg_lfsr u_tpg (
    .clk_i     (clk_i),
    .rst_ni    (rst_ni),
    .apb_req_i (req[0]),
    .apb_rsp_o (rsp[0])
  );

  kmac_apb #(.KEY_BITS(KEY_BITS), .DIGEST_BITS(DIGEST_BITS)) u_kmac (
    .clk_i     (clk_i),
    .rst_ni    (rst_ni),
    .key_i     (device_key_i),
    .apb_req_i (req[1]),
    .apb_rsp_o (rsp[1]),
    .done_o    (sig_done_o)
  );

  assign ext_req_o = req[2];
  assign rsp[2]    = ext_rsp_i;

endmodule
