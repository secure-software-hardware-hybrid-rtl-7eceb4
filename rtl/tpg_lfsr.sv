// tpg_lfsr: memory-mapped pseudo-random test pattern generator (TPG).
//
// The CPU writes a seed s_j and then reads test vectors v_j one after the
// other; no pattern memory is needed. The generator is a WIDTH-bit
// Fibonacci LFSR that shifts towards the MSB: the new bit 0 is the XOR of
// the state bits selected by TAPS. Each read of PATTERN returns the current
// state and advances the LFSR by one step, so the read after a seed write
// returns the seed itself, the next one the first successor, and so on.
//
// Registers (offsets from the window base, 32-bit, no wait states):
//   0x0 SEED     W: load the LFSR and clear COUNT; R: the last seed written.
//                A zero seed (the lock-up state of an XOR LFSR) is refused
//                with pslverr and leaves the LFSR as it was.
//   0x4 PATTERN  R: current pattern, then one LFSR step.
//   0x8 COUNT    R: patterns read since the last seed.
// Other offsets answer pslverr.
//
// From the published design: an LFSR of degree 32 used as a pseudo-random
// TPG, sized to the 32-bit bus and mapped into memory. This design's own:
// the feedback polynomial x^32 + x^22 + x^2 + x + 1 (a maximal-length
// polynomial; the published design does not give one), the Fibonacci form,
// the register map, the COUNT register and the zero-seed rule.
module tpg_lfsr
  import apb_pkg::*;
#(
  parameter int unsigned       WIDTH = 32,
  parameter logic [WIDTH-1:0]  TAPS  = WIDTH'(32'h8020_0003)  // bits 31,21,1,0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  apb_req_t apb_req_i,
  output apb_rsp_t apb_rsp_o
);

  logic [WIDTH-1:0] lfsr_q, seed_q;
  logic [31:0]      count_q;
  logic [WIDTH-1:0] lfsr_next;

  assign lfsr_next = {lfsr_q[WIDTH-2:0], ^(lfsr_q & TAPS)};

  logic       access, wr, rd;
  logic [3:0] offs;
  assign access = apb_req_i.psel && apb_req_i.penable;
  assign wr     = access && apb_req_i.pwrite;
  assign rd     = access && !apb_req_i.pwrite;
  assign offs   = apb_req_i.paddr[5:2];

  logic seed_wr, pat_rd, bad;
  assign seed_wr = wr && offs == 4'd0 && apb_req_i.pwdata[WIDTH-1:0] != '0;
  assign pat_rd  = rd && offs == 4'd1;
  assign bad     = access && (apb_req_i.paddr[11:6] != '0 || offs > 4'd2 ||
                              (apb_req_i.pwrite && offs != 4'd0) ||
                              (apb_req_i.pwrite && apb_req_i.pwdata[WIDTH-1:0] == '0));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lfsr_q  <= WIDTH'(1);
      seed_q  <= WIDTH'(1);
      count_q <= '0;
    end else if (seed_wr) begin
      lfsr_q  <= apb_req_i.pwdata[WIDTH-1:0];
      seed_q  <= apb_req_i.pwdata[WIDTH-1:0];
      count_q <= '0;
    end else if (pat_rd) begin
      lfsr_q  <= lfsr_next;
      count_q <= count_q + 32'd1;
    end
  end

  always_comb begin
    apb_rsp_o         = '0;
    apb_rsp_o.pready  = 1'b1;
    apb_rsp_o.pslverr = bad;
    if (rd && !bad) begin
      unique case (offs)
        4'd0:    apb_rsp_o.prdata = 32'(seed_q);
        4'd1:    apb_rsp_o.prdata = 32'(lfsr_q);
        default: apb_rsp_o.prdata = count_q;
      endcase
    end
  end

  // APB rules: penable only inside a selected transfer.
  a_penable_psel : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    apb_req_i.penable |-> apb_req_i.psel);

endmodule
