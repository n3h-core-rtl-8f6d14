// dpu: dot-product unit of the LUT-core (bit-serial GEMM).
// Each cycle with `valid` it takes a K-bit chunk of one activation bit plane
// and the matching K-bit chunk of one weight bit plane, counts the positions
// where both bits are 1 (binary dot product), shifts the count left by the
// combined significance i+j of the two planes and adds it to, or subtracts it
// from, the accumulator. Summing these partial products over all plane pairs
// gives the integer product, as in the bit-serial decomposition
// P = sum_ij 2^(i+j) L[i] R[j]; subtracting the pairs that involve exactly
// one sign plane makes it two's complement. `clear` zeroes the accumulator in
// the same cycle (the chunk of that cycle, if valid, is then added to zero).
// The result is visible one cycle after the input.
// The published text says the DPU uses XNOR and popcount; that is the form
// for {-1,+1} binary operands. For the {0,1} bit planes of the decomposition
// the product of two bits is their AND, which is what is built here.
module dpu #(
  parameter int unsigned K     = 128,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic [K-1:0]            a,
  input  logic [K-1:0]            w,
  input  logic [4:0]              shift,
  input  logic                    negate,
  output logic signed [ACC_W-1:0] acc
);
  logic [$clog2(K+1)-1:0] pc;
  logic signed [ACC_W-1:0] term;
  logic signed [ACC_W-1:0] base;

  always_comb begin
    pc = '0;
    for (int unsigned b = 0; b < K; b++) pc += {{($clog2(K+1)-1){1'b0}}, a[b] & w[b]};
    term = $signed(ACC_W'(pc) << shift);
    base = clear ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (valid) acc <= negate ? base - term : base + term;
    else if (clear) acc <= '0;
  end
endmodule
