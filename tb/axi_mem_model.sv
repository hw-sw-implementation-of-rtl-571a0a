// axi_mem_model: behavioural AXI4 slave memory for the testbenches.
//
// Models system memory behind the accelerator's AXI4 master: 64-bit words,
// INCR bursts, one read and one write burst in progress at a time, each
// ready/valid answered after a random delay (STALL_PCT percent of cycles
// are stalls). Checks the master against AXI rules it relies on: a burst
// may not cross a 4 KiB boundary and may not exceed MAX_LEN+1 beats; each
// violation is counted in proto_errors. Counts address handshakes in n_ar
// and n_aw. B_DELAY holds back each write response by that many cycles,
// to model a slow write path. Test code reads and writes the array mem directly.
module axi_mem_model #(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned STALL_PCT = 20,
  parameter int unsigned MAX_LEN   = 15,
  parameter int unsigned B_DELAY   = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  output int          proto_errors,
  output int          n_ar,
  output int          n_aw
);
  logic [63:0] mem [WORDS];

  function automatic bit stall();
    return ($urandom_range(99) < STALL_PCT);
  endfunction

  function automatic bit bad_burst(logic [31:0] a, logic [7:0] len);
    return (len > 8'(MAX_LEN)) || ((a >> 12) != ((a + 32'(len) * 8) >> 12)) || (a[2:0] != 0);
  endfunction

  int proto_r, proto_w;
  assign proto_errors = proto_r + proto_w;

  // read side
  logic        r_act;
  logic [31:0] r_a;
  logic [7:0]  r_n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0;
      r_act <= 1'b0; r_a <= '0; r_n <= '0; n_ar <= 0; proto_r <= 0;
    end else begin
      arready <= 1'b0;
      if (!r_act && arvalid && !arready && !stall()) begin
        arready <= 1'b1;
        r_act   <= 1'b1;
        r_a     <= araddr;
        r_n     <= arlen;
        n_ar    <= n_ar + 1;
        if (bad_burst(araddr, arlen)) proto_r <= proto_r + 1;
      end
      if (rvalid && rready) begin
        rvalid <= 1'b0;
        if (rlast) r_act <= 1'b0;
        else begin r_a <= r_a + 8; r_n <= r_n - 1; end
      end else if (r_act && !rvalid && !arready && !stall()) begin
        rvalid <= 1'b1;
        rdata  <= mem[(r_a / 8) % WORDS];
        rlast  <= (r_n == 0);
      end
    end
  end
  assign rresp = 2'b00;

  // write side
  logic        w_act, b_pend;
  logic [31:0] w_a;
  logic [7:0]  w_n;
  int          b_wait;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      w_act <= 1'b0; b_pend <= 1'b0; w_a <= '0; w_n <= '0; n_aw <= 0; b_wait <= 0; proto_w <= 0;
    end else begin
      awready <= 1'b0;
      wready  <= 1'b0;
      if (!w_act && !b_pend && awvalid && !awready && !stall()) begin
        awready <= 1'b1;
        w_act   <= 1'b1;
        w_a     <= awaddr;
        w_n     <= awlen;
        n_aw    <= n_aw + 1;
        if (bad_burst(awaddr, awlen)) proto_w <= proto_w + 1;
      end
      if (w_act && wvalid && wready) begin
        mem[(w_a / 8) % WORDS] <= wdata;
        if (wlast != (w_n == 0)) proto_w <= proto_w + 1;
        if (w_n == 0) begin w_act <= 1'b0; b_pend <= 1'b1; b_wait <= B_DELAY; end
        else begin w_a <= w_a + 8; w_n <= w_n - 1; end
      end else if (w_act && !awready && !stall()) begin
        wready <= 1'b1;
      end
      if (b_pend && b_wait > 0) b_wait <= b_wait - 1;
      else if (b_pend && !bvalid && !stall()) bvalid <= 1'b1;
      if (bvalid && bready) begin bvalid <= 1'b0; b_pend <= 1'b0; end
    end
  end
  assign bresp = 2'b00;
endmodule
