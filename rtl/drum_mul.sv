// drum_mul -- DRUMk approximate multiplier (dynamic range unbiased multiplier).
//
// How it works (as described in the paper): for each operand the position of
// the leading one is found; the k bits starting at the leading one are kept,
// the lowest of them is forced to 1 so that the truncation error is unbiased,
// the two k-bit values are multiplied exactly by a k x k multiplier and a
// barrel shifter moves the product back by the number of bits dropped from
// both operands.  Bits below the kept window are thus truncated.
//
// Own choices, where the paper is silent: operands are two's complement and
// are handled in sign-magnitude form around the unsigned core (the result is
// negated when the signs differ); an operand whose magnitude already fits in
// k bits is used exactly, without forcing its lowest bit.
//
// Interface: a, b (N bits, signed) -> p (2N bits, signed).  Purely
// combinational, no clock.
module drum_mul #(
  parameter int unsigned N = 32,  // operand width
  parameter int unsigned K = 7    // bits kept from the leading one (DRUM7)
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  localparam int unsigned SW = $clog2(N) + 1;

  // Kept k-bit window and the shift that undoes the truncation.
  typedef struct packed {
    logic [K-1:0]  val;
    logic [SW-1:0] drop;
  } trunc_t;

  function automatic trunc_t truncate(logic [N-1:0] m);
    trunc_t r;
    int unsigned lead;
    lead = 0;
    for (int unsigned i = 0; i < N; i++)
      if (m[i]) lead = i;
    if (lead < K) begin
      r.val = m[K-1:0];
      r.drop = '0;
    end else begin
      r.drop = SW'(lead - K + 1);
      r.val = K'(m >> r.drop) | K'(1);
    end
    return r;
  endfunction

  logic           sa, sb;
  logic [N-1:0]   ma, mb;
  trunc_t         op_a, op_b;
  logic [2*K-1:0] core;
  logic [2*N-1:0] mag;

  always_comb begin
    sa   = a[N-1];
    sb   = b[N-1];
    ma   = sa ? (~a + 1'b1) : a;
    mb   = sb ? (~b + 1'b1) : b;
    op_a = truncate(ma);
    op_b = truncate(mb);
    core = op_a.val * op_b.val;                   // exact k x k multiplier
    mag  = (2*N)'(core) << (op_a.drop + op_b.drop); // barrel shifter
    p    = (sa ^ sb) ? (~mag + 1'b1) : mag;
  end

endmodule
