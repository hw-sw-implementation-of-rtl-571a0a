// keccak_prng: Keccak sponge used as pseudo-random number generator and
// extendable-output hash (the "Cut 2" hardware block).
//
// Operation: pulse init to clear the state. Then stream the seed or message
// in as 64-bit little-endian words on in_valid/in_ready/in_data; the word
// with in_last carries in_bytes (0..8) valid bytes in its low bytes. Each
// full block of RATE_LANES words is followed by a permutation. After the
// last word the module appends the domain byte DS and the final 0x80 bit
// (SHAKE padding), permutes, and then serves output words on
// out_valid/out_ready/out_data as long as the consumer wants them,
// permuting again after every RATE_LANES words. A permutation takes 24
// cycles (keccak_f1600), during which both streams stall. Defaults are
// SHAKE128 (rate 168 bytes, DS = 0x1F).
// The paper states only that its PRNG is Keccak-based with a 24-cycle
// permute; the streaming interface, the padding in hardware and the SHAKE128
// defaults are this design's choices.
module keccak_prng
  import mirith_pkg::*;
#(
  parameter int unsigned RATE_LANES = 21,
  parameter logic [7:0]  DS         = 8'h1F
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  input  logic        in_last,
  input  logic [3:0]  in_bytes,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  output logic        perm_busy
);
  typedef enum logic [2:0] {P_ABSORB, P_PAD, P_FINAL, P_SQUEEZE, P_PERM} pstate_t;

  localparam int unsigned PW = $clog2(RATE_LANES + 1);

  pstate_t        ps, ret;     // ret: where to go after a permutation
  logic [PW-1:0]  pos;
  kstate_t        st, st_next;
  logic           kf_load, kf_start, kf_busy, kf_done;

  keccak_f1600 u_kf (
    .clk, .rst_n, .load(kf_load), .state_in(st_next), .start(kf_start),
    .state_out(st), .busy(kf_busy), .done(kf_done)
  );

  assign perm_busy = kf_busy;

  // mask of the first n bytes of a lane
  function automatic lane_t byte_mask(logic [3:0] n);
    lane_t m;
    for (int b = 0; b < 8; b++) m[8*b +: 8] = (4'(b) < n) ? 8'hFF : 8'h00;
    return m;
  endfunction

  logic absorb_fire, squeeze_fire;
  assign in_ready     = (ps == P_ABSORB) && !init;
  assign absorb_fire  = in_valid && in_ready;
  assign out_valid    = (ps == P_SQUEEZE) && !init;
  assign squeeze_fire = out_valid && out_ready;
  assign out_data     = st[pos];

  // state update written through the permutation module's load port
  always_comb begin
    st_next = st;
    kf_load = 1'b0;
    if (init) begin
      st_next = '0;
      kf_load = 1'b1;
    end else if (absorb_fire) begin
      kf_load = 1'b1;
      if (in_last && in_bytes < 4'd8) begin
        st_next[pos] ^= (in_data & byte_mask(in_bytes)) ^ (lane_t'(DS) << (8 * in_bytes));
        st_next[RATE_LANES-1][63] ^= 1'b1;
      end else begin
        st_next[pos] ^= in_data;
      end
    end else if (ps == P_PAD) begin
      kf_load = 1'b1;
      st_next[pos] ^= lane_t'(DS);
      st_next[RATE_LANES-1][63] ^= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps       <= P_ABSORB;
      ret      <= P_ABSORB;
      pos      <= '0;
      kf_start <= 1'b0;
    end else begin
      kf_start <= 1'b0;
      if (init) begin
        ps  <= P_ABSORB;
        pos <= '0;
      end else begin
        case (ps)
          P_ABSORB: if (absorb_fire) begin
            if (in_last && in_bytes < 4'd8) begin
              pos <= '0; kf_start <= 1'b1; ret <= P_SQUEEZE; ps <= P_PERM;
            end else if (pos == PW'(RATE_LANES - 1)) begin
              pos <= '0; kf_start <= 1'b1; ps <= P_PERM;
              ret <= in_last ? P_PAD : P_ABSORB;
            end else begin
              pos <= pos + 1'b1;
              if (in_last) ps <= P_PAD;
            end
          end
          P_PAD: begin
            pos <= '0; kf_start <= 1'b1; ret <= P_SQUEEZE; ps <= P_PERM;
          end
          P_SQUEEZE: if (squeeze_fire) begin
            if (pos == PW'(RATE_LANES - 1)) begin
              pos <= '0; kf_start <= 1'b1; ret <= P_SQUEEZE; ps <= P_PERM;
            end else begin
              pos <= pos + 1'b1;
            end
          end
          P_PERM: if (kf_done) ps <= ret;
          default: ps <= P_ABSORB;
        endcase
      end
    end
  end

  a_bytes: assert property (@(posedge clk) disable iff (!rst_n)
    absorb_fire && in_last |-> in_bytes <= 4'd8);
endmodule
