// lfsr_combiner: the pseudo-random generator built of composed LFSRs.
//
// Three maximal-length Fibonacci LFSRs of coprime lengths (31, 29 and 23
// bits; trinomials x^31+x^28+1, x^29+x^27+1, x^23+x^18+1) step once per
// clock.  The metastable bit chosen by the selection controller is the seed:
// while `seed_en` is high it is XORed into the feedback of every register,
// so the true randomness keeps entering the state.  The output bit is the
// XOR of the three register outputs.  The paper names this block only
// ("Composed LFSRs", seeded by the most metastable DFF); the lengths,
// polynomials, the XOR composition and the continuous reseeding are this
// design's choices.
//
// Interface: `seed_bit`, `seed_en` in; `prng_bit` out, a new bit every
// clock (combinational from the registers).  Reset loads fixed non-zero
// states INIT0..INIT2.
module lfsr_combiner #(
  parameter logic [30:0] INIT0 = 31'h2A5C_39E1,
  parameter logic [28:0] INIT1 = 29'h1234_5679,
  parameter logic [22:0] INIT2 = 23'h5E_D1C3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic seed_bit,
  input  logic seed_en,
  output logic prng_bit
);

  logic [30:0] r0;
  logic [28:0] r1;
  logic [22:0] r2;
  logic        s;

  assign s        = seed_en & seed_bit;
  assign prng_bit = r0[30] ^ r1[28] ^ r2[22];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0 <= INIT0;
      r1 <= INIT1;
      r2 <= INIT2;
    end else begin
      r0 <= {r0[29:0], r0[30] ^ r0[27] ^ s};
      r1 <= {r1[27:0], r1[28] ^ r1[26] ^ s};
      r2 <= {r2[21:0], r2[22] ^ r2[17] ^ s};
    end
  end

endmodule
