// urand_sel -- uniform random choice of the Selected Activation Number (SAN).
//
// At every REF (and at every pseudo-mitigation) MINT needs a number drawn
// uniformly from the slots of the coming window: 1..M, or 0..M when
// transitive mitigation is enabled (slot 0 then means "mitigate the row
// already in SAR again, one level further out"). The raw entropy is a 7-bit
// TRNG word per cycle. Because 74 (or 73, 33, 17) does not divide 128, this
// block uses rejection sampling: each cycle it looks at the TRNG word and, if
// the word lies in [LO, M] and no unused value is held, it keeps it. The held
// value is what the tracker loads; when the tracker consumes it (`take`) the
// block starts looking for the next one. Accepted values are exactly
// uniform.
//
// Interface: `san_next` is always a legal value in [LO, M] (reset loads
// M/2+1 so it is legal from the first cycle). `fresh` is high when
// `san_next` has not been used since it was drawn. With 74 of 128 words
// accepted a new value is ready after about two cycles; the tracker needs one
// only once per REF interval (tens of ACTs, each tRC = 48 ns apart), so a
// value that is not fresh is used only if two REF/pseudo-mitigation events
// come within a few cycles, which the DDR5 command timing rules out.
//
// The paper gives the function (URAND over the slots, a 7-bit TRNG); the
// rejection sampler and the one-value buffer are this design's choice.
module urand_sel #(
  parameter int unsigned RNG_BITS   = mint_pkg::RNG_BITS,
  parameter int unsigned CNT_BITS   = mint_pkg::CNT_BITS,
  parameter int unsigned M          = mint_pkg::MAX_ACT,
  parameter bit          TRANSITIVE = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RNG_BITS-1:0] rng_bits,
  input  logic                take,
  output logic [CNT_BITS-1:0] san_next,
  output logic                fresh
);

  logic in_range;
  always_comb begin
    in_range = (32'(rng_bits) <= M) && (TRANSITIVE || rng_bits != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      san_next <= CNT_BITS'(M / 2 + 1);
      fresh    <= 1'b0;
    end else if ((take || !fresh) && in_range) begin
      san_next <= CNT_BITS'(rng_bits);
      fresh    <= 1'b1;
    end else if (take) begin
      fresh    <= 1'b0;
    end
  end

  initial begin
    assert (M < (1 << RNG_BITS)) else $error("urand_sel: M must fit in the TRNG word");
    assert (M < (1 << CNT_BITS)) else $error("urand_sel: M must fit in CNT_BITS");
  end

endmodule
