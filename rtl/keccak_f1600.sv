// keccak_f1600: the Keccak state register and the Keccak-f[1600] permutation
// of FIPS 202, computed iteratively with one round per clock cycle.
//
// The unit owns the 1600-bit state so that the sponge around it (kmac128)
// needs no second copy. Three operations act on the state:
//   clear_i  - state := 0
//   xor_i    - state := state ^ data_i      (absorbing a block or a few bytes)
//   start_i  - run the 24 rounds
// Only one of them may be given per cycle, and none while busy_o is high;
// they are ignored while the permutation runs.
//
// Timing: start_i sampled at clock edge 0; the rounds are written at edges
// 1..24; busy_o is high from edge 1 to edge 24 and done_o pulses for one
// cycle after edge 24, when state_o holds the permuted state. A permutation
// therefore occupies 24 cycles. The round logic (theta, rho, pi, chi, iota)
// is the standard's; the one-round-per-cycle schedule is this design's
// choice, the published design gives no throughput figure.
module keccak_f1600
  import keccak_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   clear_i,
  input  logic   xor_i,
  input  state_t data_i,
  input  logic   start_i,
  output logic   busy_o,
  output logic   done_o,
  output state_t state_o
);

  state_t     st_q;
  logic [4:0] rnd_q;
  logic       run_q;
  logic       done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q   <= '0;
      rnd_q  <= '0;
      run_q  <= 1'b0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (run_q) begin
        st_q  <= keccak_round(st_q, rnd_q);
        rnd_q <= rnd_q + 5'd1;
        if (rnd_q == 5'(NROUNDS - 1)) begin
          run_q  <= 1'b0;
          done_q <= 1'b1;
        end
      end else if (start_i) begin
        run_q <= 1'b1;
        rnd_q <= '0;
      end else if (clear_i) begin
        st_q <= '0;
      end else if (xor_i) begin
        st_q <= st_q ^ data_i;
      end
    end
  end

  assign busy_o  = run_q;
  assign done_o  = done_q;
  assign state_o = st_q;

  // Only one operation per cycle, and none while the rounds run.
  a_one_op : assert property (@(posedge clk_i) disable iff (!rst_ni)
                              $onehot0({clear_i, xor_i, start_i}));
  a_no_op_busy : assert property (@(posedge clk_i) disable iff (!rst_ni)
                                  run_q |-> !(clear_i || xor_i || start_i));

endmodule
