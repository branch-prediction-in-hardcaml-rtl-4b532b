// xorshift_prng: five independent 32-bit Marsaglia xorshift generators.
// Each register is cleared to its own seed and, whenever en is high, is
// replaced by f(x) with x ^= x<<13; x ^= x>>17; x ^= x<<5. The step function
// and the five seeds are those of the reference BATAGE model's PRNG; the
// BATAGE predictor uses the outputs for its random allocation and decay
// decisions. Outputs are registered: rnd[i] is the current state.
module xorshift_prng (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  output logic [31:0] rnd [5]
);
  localparam logic [31:0] SEEDS [5] = '{32'd2463534242, 32'd1850600128,
                                        32'd3837179466, 32'd4290344314,
                                        32'd614373416};

  function automatic logic [31:0] gen_random(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    for (int i = 0; i < 5; i++) begin
      if (rst)     rnd[i] <= SEEDS[i];
      else if (en) rnd[i] <= gen_random(rnd[i]);
    end
  end
endmodule
