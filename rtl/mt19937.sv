// mt19937: Mersenne-Twister pseudorandom number generator (MT19937, 624 x
// 32-bit state) supplying the random words of the dropout layers.
//
// Seeding (init_start with seed) writes state[0] = seed and then
// state[k] = 1812433253 * (state[k-1] ^ (state[k-1] >> 30)) + k, one word per
// cycle, so seeding takes 624 cycles; busy is high meanwhile. Generation
// twists the state on the fly: the word at index i is replaced by
// state[i+397] ^ (y >> 1) ^ (y[0] ? 0x9908B0DF : 0) with y the upper bit of
// state[i] and the lower 31 bits of state[i+1], and the new word, tempered,
// is the output. Because each word is rewritten in index order this gives
// the same sequence as the usual block-wise twist.
// Interface: rnd is valid whenever rnd_valid is high; rnd_take advances the
// generator by one word (one word per cycle at most).
// The generator and the 624-word state come from the paper, which names MT;
// the constants are those of the standard MT19937.
module mt19937 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init_start,
  input  logic [31:0] seed,
  output logic        busy,
  output logic        rnd_valid,
  output logic [31:0] rnd,
  input  logic        rnd_take
);

  localparam int N = 624;
  localparam int M = 397;

  logic [31:0] mt [N];
  logic [9:0]  idx;
  logic [31:0] prev;
  logic        seeded;

  function automatic logic [9:0] wrap(input int a);
    return (a >= N) ? 10'(a - N) : 10'(a);
  endfunction

  logic [31:0] y, t, tw;
  always_comb begin
    y  = {mt[idx][31], mt[wrap(int'(idx) + 1)][30:0]};
    tw = mt[wrap(int'(idx) + M)] ^ (y >> 1) ^ (y[0] ? 32'h9908_B0DF : 32'h0);
    t  = tw ^ (tw >> 11);
    t  = t ^ ((t << 7) & 32'h9D2C_5680);
    t  = t ^ ((t << 15) & 32'hEFC6_0000);
    t  = t ^ (t >> 18);
  end

  assign rnd       = t;
  assign rnd_valid = seeded && !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      seeded <= 1'b0;
      idx    <= '0;
    end else if (init_start) begin
      mt[0]  <= seed;
      prev   <= seed;
      idx    <= 10'd1;
      busy   <= 1'b1;
      seeded <= 1'b0;
    end else if (busy) begin
      automatic logic [31:0] nv = 32'd1812433253 * (prev ^ (prev >> 30)) + 32'(idx);
      mt[idx] <= nv;
      prev    <= nv;
      if (int'(idx) == N - 1) begin
        idx    <= '0;
        busy   <= 1'b0;
        seeded <= 1'b1;
      end else begin
        idx <= idx + 1'b1;
      end
    end else if (rnd_take && rnd_valid) begin
      mt[idx] <= tw;
      idx     <= wrap(int'(idx) + 1);
    end
  end

endmodule
