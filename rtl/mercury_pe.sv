// mercury_pe: one processing element of the row-stationary array, with the
// Overlapped register (ORg) that lets consecutive dot products pipeline.
//
// A PE holds one filter row in its weight register (K values, loaded with
// w_load) and one input row in its input register (K values, loaded with
// start). After start it multiplies the K pairs, one per cycle, and sums them
// with a single adder. When a row is done, the adder is used once more to add
// the partial sum coming from the PE above (psum_in) and the total leaves on
// psum_out, towards the PE below.
//
// The ORg: the first product of a row needs no addition, so it is parked in
// ORg. That frees the adder in the same cycle for the psum pass of the previous
// row, so a new row can start every K cycles with one adder (Sec. on pipelined
// signature calculation). A start is accepted when the PE is idle or in the
// cycle of its last multiply.
//
// Timing: start in cycle 0 -> products in cycles 1..K -> row sum complete in
// cycle K -> pass (rowsum + psum_in) in cycle K+1 -> psum_out valid (one-cycle
// pulse psum_valid) in cycle K+2. psum_in is sampled in cycle K+1.
// Follows the paper: input/weight registers, multiplier, adder, psum register,
// ORg. Own choices: signed fixed-point widths, the start/valid interface.
module mercury_pe #(
  parameter int K      = 3,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_row  [K],
  input  logic                     start,
  input  logic signed [DATA_W-1:0] in_row [K],
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  psum_out,
  output logic                     psum_valid,
  output logic                     busy
);

  localparam int CW = (K > 1) ? $clog2(K) : 1;

  logic signed [DATA_W-1:0] wreg  [K];
  logic signed [DATA_W-1:0] inreg [K];
  logic                     active;
  logic [CW-1:0]            cnt;

  // multiplier stage
  logic signed [ACC_W-1:0]  prod_q;
  logic                     p_valid, p_first, p_last;

  // adder stage
  logic signed [ACC_W-1:0]  org;      // Overlapped register
  logic signed [ACC_W-1:0]  acc;      // running row sum
  logic                     use_org;  // next add takes ORg instead of acc
  logic                     pass;     // pass cycle pending

  logic accept;
  assign accept = start && (!active || (cnt == CW'(K-1)));
  assign busy   = active || p_valid || pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      cnt     <= '0;
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      prod_q  <= '0;
      for (int k = 0; k < K; k++) begin
        wreg[k]  <= '0;
        inreg[k] <= '0;
      end
    end else begin
      if (w_load)
        for (int k = 0; k < K; k++) wreg[k] <= w_row[k];
      // multiplier
      p_valid <= active;
      p_first <= active && (cnt == '0);
      p_last  <= active && (cnt == CW'(K-1));
      if (active) prod_q <= ACC_W'(inreg[cnt] * wreg[cnt]);
      // sequencing
      if (accept) begin
        for (int k = 0; k < K; k++) inreg[k] <= in_row[k];
        active <= 1'b1;
        cnt    <= '0;
      end else if (active) begin
        if (cnt == CW'(K-1)) active <= 1'b0;
        else                 cnt    <= cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      org        <= '0;
      acc        <= '0;
      use_org    <= 1'b0;
      pass       <= 1'b0;
      psum_out   <= '0;
      psum_valid <= 1'b0;
    end else begin
      psum_valid <= 1'b0;
      // the adder does the psum pass in this cycle, if one is pending
      if (pass) begin
        psum_out   <= acc + psum_in;
        psum_valid <= 1'b1;
      end
      pass <= p_valid && p_last;
      if (p_valid) begin
        if (p_first && p_last) begin
          acc <= prod_q;                 // K == 1: row is a single product
        end else if (p_first) begin
          org     <= prod_q;             // park first product, adder stays free
          use_org <= 1'b1;
        end else begin
          acc     <= (use_org ? org : acc) + prod_q;
          use_org <= 1'b0;
        end
      end
    end
  end

endmodule
