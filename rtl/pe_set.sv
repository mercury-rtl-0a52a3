// pe_set: a "PE Set" - K PEs stacked vertically that together compute one
// K x K two-dimensional dot product (one input vector against one filter).
//
// PE k holds filter row k and receives input row k of the vector. Partial sums
// flow downward: PE 0 starts from zero, PE k adds its row to what PE k-1
// passes, and PE K-1 delivers the full dot product. As in the pipelined
// signature timing of the paper, PE k starts k cycles after PE 0 (a skew line
// of k registers in front of it), so that each PE's pass cycle meets the
// partial sum of the PE above exactly. With the ORg in every PE, a new vector
// can enter every K cycles.
//
// Latency: start in cycle 0 -> res_valid in cycle 2K+1 (paper: "the first bit
// of the first signature ... takes 2x+1 cycles"); afterwards one result every
// K cycles. sig_bit is the sign extraction of RPQ: 1 when the result is
// negative, 0 otherwise.
// Own choices: weights of all K rows load in one cycle (w_load), interface.
module pe_set #(
  parameter int K      = 3,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_rows  [K][K],
  input  logic                     start,
  input  logic signed [DATA_W-1:0] in_rows [K][K],
  output logic                     res_valid,
  output logic signed [ACC_W-1:0]  res,
  output logic                     sig_bit,
  output logic                     busy
);

  // skewed start and input rows: entry d holds the values of d cycles ago
  // (entry 0 is unused; PE 0 takes start/in_rows directly)
  logic                     sk_start [K];
  logic signed [DATA_W-1:0] sk_row   [K][K][K];   // [delay][row][elem]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < K; d++) begin
        sk_start[d] <= 1'b0;
        for (int r = 0; r < K; r++)
          for (int e = 0; e < K; e++) sk_row[d][r][e] <= '0;
      end
    end else begin
      sk_start[0] <= 1'b0;
      for (int d = 1; d < K; d++) begin
        sk_start[d] <= (d == 1) ? start   : sk_start[d-1];
        sk_row[d]   <= (d == 1) ? in_rows : sk_row[d-1];
      end
    end
  end

  logic signed [ACC_W-1:0] psum  [K+1];
  logic                    pvld  [K];
  logic                    pbusy [K];
  assign psum[0] = '0;

  for (genvar k = 0; k < K; k++) begin : g_pe
    logic                     pe_start;
    logic signed [DATA_W-1:0] pe_row [K];
    if (k == 0) begin : g_first
      assign pe_start = start;
      assign pe_row   = in_rows[0];
    end else begin : g_skewed
      assign pe_start = sk_start[k];
      assign pe_row   = sk_row[k][k];
    end
    mercury_pe #(.K(K), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .w_load     (w_load),
      .w_row      (w_rows[k]),
      .start      (pe_start),
      .in_row     (pe_row),
      .psum_in    (psum[k]),
      .psum_out   (psum[k+1]),
      .psum_valid (pvld[k]),
      .busy       (pbusy[k])
    );
  end

  assign res_valid = pvld[K-1];
  assign res       = psum[K];
  assign sig_bit   = psum[K][ACC_W-1];

  always_comb begin
    busy = 1'b0;
    for (int d = 1; d < K; d++) busy |= sk_start[d];
    for (int k = 0; k < K; k++) busy |= pbusy[k] | pvld[k];
  end

endmodule
