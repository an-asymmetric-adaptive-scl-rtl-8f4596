// urng: 32-bit uniform random number generator.
//
// A 43-bit linear feedback shift register (x^43+x^41+x^20+x+1, Fibonacci
// form, advanced 32 steps per word) and a 37-bit hybrid cellular automaton
// (rule 90 everywhere, rule 150 at cell 28, null boundaries) run side by side;
// each output word is the XOR of the low 32 bits of both. The pairing of a
// 43-bit LFSR with a 37-bit CA register, giving a combined period close to
// 2^80, is the published design; the taps, the CA rule vector and the XOR
// combining are this design's choices.
//
// Interface: `load` copies `seed` into both registers (an all-zero half is
// replaced by 1), `en` advances both by one output word. `rnd` is registered
// and valid one cycle after `en`.
module urng (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [79:0] seed,
  input  logic        en,
  output logic [31:0] rnd
);
  logic [42:0] lfsr, lfsr_n;
  logic [36:0] casr, casr_n;

  always_comb begin
    lfsr_n = lfsr;
    for (int s = 0; s < 32; s++)
      lfsr_n = {lfsr_n[41:0], lfsr_n[42] ^ lfsr_n[40] ^ lfsr_n[19] ^ lfsr_n[0]};
    for (int i = 0; i < 37; i++) begin
      logic l, r;
      l = (i == 0)  ? 1'b0 : casr[i-1];
      r = (i == 36) ? 1'b0 : casr[i+1];
      casr_n[i] = l ^ r ^ ((i == 28) ? casr[i] : 1'b0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 43'h1;
      casr <= 37'h1;
      rnd  <= '0;
    end else if (load) begin
      lfsr <= (seed[42:0] == '0) ? 43'h1 : seed[42:0];
      casr <= (seed[79:43] == '0) ? 37'h1 : seed[79:43];
    end else if (en) begin
      lfsr <= lfsr_n;
      casr <= casr_n;
      rnd  <= lfsr_n[31:0] ^ casr_n[31:0];
    end
  end
endmodule
