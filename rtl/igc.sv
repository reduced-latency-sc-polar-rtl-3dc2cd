// igc: input generating circuit (IGC) for the Type I candidate selection.
// Each time the last decoder stage decides a bit pair (u(2i-1), u(2i)), the
// IGC updates the partial sums: the XOR combinations of already decided bits
// that tell every earlier stage which of its two look-ahead candidates
// (u = 0 or u = 1) is the right one. It works like a pipelined real-FFT flow
// graph with XOR in place of the butterfly:
//   U_1  : one XOR-pass element, {u(2i-1)^u(2i), u(2i)}.
//   U_k  : U_(k-1), a store RAM_k of 2^(k-1) bits and 2^(k-1) XOR-pass
//          elements. A toggle c_k flips each time U_(k-1) delivers. With
//          c_k = 0 the output of U_(k-1) (the partial sums of a left half) is
//          written to RAM_k; with c_k = 1 U_k delivers
//          {RAM_k ^ U_(k-1), U_(k-1)}, the partial sums of the whole block.
// For a code of length N there are NU = log2(N)-1 units, N/2-2 storage bits
// and N/2-1 XOR elements in total. beta[k] holds the 2^k outputs of U_k
// (bit 0 is the sum over the whole block; bits 2^k and up are 0) and
// beta_valid[k] says U_k delivered in this cycle.
// Timing: the pair presented with u_valid is registered; beta/beta_valid are
// combinational from that register and the RAMs, i.e. valid in the cycle after
// the pair was decided, which is the cycle in which the decoder selects its
// candidates. clear (start of a codeword) returns every c_k to 0.
// The unit structure and counts follow the paper; the register at the input
// and the toggle form of c_k are this design's choices.
module igc #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 u_valid,
  input  logic                 u_odd,
  input  logic                 u_even,
  output logic [N/2-1:0]       beta       [1:$clog2(N)-1],
  output logic [$clog2(N)-1:1] beta_valid
);
  localparam int unsigned NU = $clog2(N) - 1;

  logic u_v_q, u_o_q, u_e_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_v_q <= 1'b0;
      u_o_q <= 1'b0;
      u_e_q <= 1'b0;
    end else begin
      u_v_q <= u_valid & ~clear;
      u_o_q <= u_odd;
      u_e_q <= u_even;
    end
  end

  // U_1
  logic [N/2-1:0] u1_o;
  always_comb begin
    u1_o    = '0;
    u1_o[0] = u_o_q ^ u_e_q;
    u1_o[1] = u_e_q;
  end
  assign beta[1]       = u1_o;
  assign beta_valid[1] = u_v_q;

  // U_2 .. U_NU, each built on the one before
  for (genvar k = 2; k <= NU; k++) begin : g_unit
    localparam int unsigned H = 2 ** (k - 1);
    logic [N/2-1:0] prev_o, o;
    logic           prev_v, v;
    logic           ram_q [H];
    logic           c_q;

    if (k == 2) begin : g_first
      assign prev_o = u1_o;
      assign prev_v = u_v_q;
    end else begin : g_next
      assign prev_o = g_unit[k-1].o;
      assign prev_v = g_unit[k-1].v;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      c_q <= 1'b0;
      else if (clear)  c_q <= 1'b0;
      else if (prev_v) c_q <= ~c_q;
    end

    // RAM_k: written while c_k = 0
    always_ff @(posedge clk) begin
      if (prev_v && !c_q)
        for (int i = 0; i < H; i++) ram_q[i] <= prev_o[i];
    end

    always_comb begin
      o = '0;
      for (int i = 0; i < H; i++) begin
        o[i]     = ram_q[i] ^ prev_o[i];
        o[i + H] = prev_o[i];
      end
      v = prev_v & c_q;
    end

    assign beta[k]       = o;
    assign beta_valid[k] = v;
  end
endmodule
