// rand_gen: the Random Generator that produces the random projection filters
// R_1..R_N used to compute signatures.
//
// RPQ needs a K*K x N matrix with zero-mean, unit-variance normal entries; its
// column j, folded into a K x K "random filter", gives signature bit j. This
// block makes column j on demand: on start it seeds a 32-bit Galois LFSR from
// the bit index j, then produces one filter element per cycle. Each element is
// the sum of four signed 4-bit fields of the LFSR state, a central-limit
// approximation of a normal value (mean about 0, standard deviation about 9).
// The same j always yields the same filter, so signatures stay comparable
// across a channel and can be recomputed for the backward pass.
//
// Timing: start (with idx) in cycle 0; the filter appears on r_filter and done
// pulses K*K cycles later; busy is high in between.
// The paper only names the Random Generator and asks for normal entries; the
// LFSR, the seeding and the CLT approximation are this design's own choices.
module rand_gen #(
  parameter int          K      = 3,
  parameter int          DATA_W = 16,
  parameter int          IDX_W  = 6,
  parameter logic [31:0] SEED   = 32'h1F2E3D4C
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [IDX_W-1:0]         idx,
  output logic signed [DATA_W-1:0] r_filter [K][K],
  output logic                     done,
  output logic                     busy
);

  localparam int N_EL = K * K;
  localparam int EW   = $clog2(N_EL + 1);

  logic [31:0]   lfsr;
  logic [EW-1:0] cnt;

  function automatic logic [31:0] step8(input logic [31:0] s);
    logic [31:0] t;
    t = s;
    for (int i = 0; i < 8; i++)
      t = t[0] ? ((t >> 1) ^ 32'h80200003) : (t >> 1);
    return t;
  endfunction

  function automatic logic signed [DATA_W-1:0] gauss(input logic [31:0] s);
    logic signed [DATA_W-1:0] v;
    v = '0;
    for (int i = 0; i < 4; i++)
      v += DATA_W'(signed'(s[4*i +: 4]));
    return v;
  endfunction

  // seed: mix the index into the base seed, never zero
  logic [31:0] seed_j;
  always_comb begin
    seed_j = SEED ^ (32'(idx) * 32'h9E3779B9);
    if (seed_j == '0) seed_j = SEED;
  end

  logic [31:0] nxt;
  assign nxt = step8(lfsr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= SEED;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) r_filter[r][c] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        lfsr <= step8(seed_j);
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        r_filter[int'(cnt) / K][int'(cnt) % K] <= gauss(lfsr);
        lfsr <= nxt;
        if (cnt == EW'(N_EL - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
