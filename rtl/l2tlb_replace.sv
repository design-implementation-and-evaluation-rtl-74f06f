// l2tlb_replace: victim choice for an L2 TLB insert.
//
// An insert goes to the lowest-numbered invalid way of its set; when the
// set is full, a way is taken from a 16-bit maximal-length Fibonacci LFSR
// (taps 16,14,13,11), which advances once per insert. The paper does not
// describe replacement; a pseudo-random choice is what this design uses.
// WAYS must be a power of two.
//
// Timing: victim is combinational from set_valid and the LFSR state; the
// LFSR steps on the clock edge that ends a cycle with advance = 1.
module l2tlb_replace #(
  parameter int unsigned WAYS = 16,
  localparam int unsigned WAY_BITS = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [WAYS-1:0]     set_valid,
  input  logic                advance,
  output logic [WAY_BITS-1:0] victim
);

  logic [15:0] lfsr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       lfsr_q <= 16'hACE1;
    else if (advance) lfsr_q <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};
  end

  always_comb begin
    victim = WAY_BITS'(lfsr_q);
    for (int w = WAYS-1; w >= 0; w--) begin
      if (!set_valid[w]) victim = WAY_BITS'(w);
    end
  end

endmodule
