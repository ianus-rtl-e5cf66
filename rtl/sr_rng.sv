// sr_rng: 32-bit shift-register random number generator, one word per clock.
//
// The generator is additive lagged-Fibonacci with an output XOR:
//   I(k) = I(k-24) + I(k-55)  (mod 2^32),   R(k) = I(k) ^ I(k-61)
// (the Parisi-Rapuano shift-register generator). The last 64 words live in a
// circular buffer; each enabled cycle writes one new word and reads three
// old ones, so no word has to move.
//
// The paper says only that each update engine has its own shift-register
// generator working on 32-bit words. The lags 24/55/61 and the buffer are
// this design's choice. The buffer is reset to 64 words of a xorshift32
// sequence started from SEED, so every instance with a different SEED
// produces a different stream from reset on.
//
// Interface: rnd is the word R of the step the generator is about to take;
// it comes straight from the buffer registers through one adder and one XOR.
// A clock edge with en high takes that step, so each enabled cycle offers a
// fresh word, the first one already valid after reset.
module sr_rng #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);

  typedef logic [31:0] ring_t [64];

  function automatic ring_t init_ring(input logic [31:0] seed);
    ring_t r;
    logic [31:0] x;
    x = (seed == 32'd0) ? 32'h9E37_79B9 : seed;
    for (int k = 0; k < 64; k++) begin
      x ^= x << 13;
      x ^= x >> 17;
      x ^= x << 5;
      r[k] = x;
    end
    return r;
  endfunction

  localparam ring_t INIT = init_ring(SEED);

  ring_t       ring;
  logic [5:0]  ptr;
  logic [31:0] next;

  always_comb begin
    next = ring[ptr - 6'd24] + ring[ptr - 6'd55];
    rnd  = next ^ ring[ptr - 6'd61];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ring <= INIT;
      ptr  <= '0;
    end else if (en) begin
      ring[ptr] <= next;
      ptr       <= ptr + 6'd1;
    end
  end

endmodule
