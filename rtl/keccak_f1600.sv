// keccak_f1600: the Keccak-f[1600] permutation, one round per clock.
//
// The 1600-bit state lives in this module. load writes state_in into it
// (used by the sponge to absorb); start, sampled while idle, runs the 24
// rounds on the held state: each clock applies one full round (theta, rho,
// pi, chi, iota), so the permutation takes exactly 24 cycles from the edge
// that samples start to the edge after which done pulses and busy falls.
// state_out always shows the held state. The 24-cycle latency is the
// paper's figure for its Keccak permute; unrolling one round per cycle is
// this design's way of reaching it. load and start must not be given
// together or while busy.
module keccak_f1600
  import mirith_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load,
  input  kstate_t state_in,
  input  logic    start,
  output kstate_t state_out,
  output logic    busy,
  output logic    done
);
  kstate_t     st;
  logic [4:0]  rnd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= '0;
      rnd  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        st  <= keccak_round(st, int'(rnd));
        rnd <= rnd + 5'd1;
        if (rnd == 5'(KECCAK_ROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (start) begin
        st   <= keccak_round(st, 0);
        rnd  <= 5'd1;
        busy <= 1'b1;
      end else if (load) begin
        st <= state_in;
      end
    end
  end

  assign state_out = st;

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !start && !load);
endmodule
