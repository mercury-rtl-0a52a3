// global_buffer: the on-chip Global Buffer, holding the input tile of the
// current channel and the output (dot-product results) of the current filter.
//
// Input side: the host writes the tile one element per cycle (in_we, in_row,
// in_col). Every PE set has a read port that returns, combinationally, the
// K x K input vector of one output position: vector v covers rows
// v / OW_MAX .. +K-1 and columns v % OW_MAX .. +K-1 of the tile. This stands
// for the input rows that the row-stationary array streams diagonally into the
// PEs.
// Output side: every PE set has a write port (vector number, result); the host
// reads results back through out_raddr.
//
// Paper: a global buffer holds inputs, weights and partial sums between
// off-chip memory and the PE array (block memory in the FPGA build). Own
// choices: tile size (34 x 34 input, 32 x 32 output positions), the window
// read ports, and registers instead of block memory so that all PE sets read
// in parallel.
module global_buffer #(
  parameter int K      = 3,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 32,
  parameter int OW_MAX = 32,
  parameter int OH_MAX = 32,
  parameter int PORTS  = 56,
  localparam int IW    = OW_MAX + K - 1,
  localparam int IH    = OH_MAX + K - 1,
  localparam int NV    = OW_MAX * OH_MAX,
  localparam int VEC_W = $clog2(NV),
  localparam int RW    = $clog2(IH),
  localparam int CW    = $clog2(IW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host tile write
  input  logic                     in_we,
  input  logic [RW-1:0]            in_row,
  input  logic [CW-1:0]            in_col,
  input  logic signed [DATA_W-1:0] in_data,
  // window reads
  input  logic [VEC_W-1:0]         win_vec [PORTS],
  output logic signed [DATA_W-1:0] win     [PORTS][K][K],
  // result writes
  input  logic                     o_en    [PORTS],
  input  logic [VEC_W-1:0]         o_vec   [PORTS],
  input  logic [ACC_W-1:0]         o_data  [PORTS],
  // host result read
  input  logic [VEC_W-1:0]         out_raddr,
  output logic [ACC_W-1:0]         out_rdata
);

  logic signed [DATA_W-1:0] tile [IH][IW];
  logic [ACC_W-1:0]         outb [NV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < IH; r++)
        for (int c = 0; c < IW; c++) tile[r][c] <= '0;
    end else if (in_we && (int'(in_row) < IH) && (int'(in_col) < IW)) begin
      tile[in_row][in_col] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NV; v++) outb[v] <= '0;
    end else begin
      for (int p = 0; p < PORTS; p++)
        if (o_en[p]) outb[o_vec[p]] <= o_data[p];
    end
  end

  always_comb
    for (int p = 0; p < PORTS; p++) begin
      int r0, c0;
      r0 = int'(win_vec[p]) / OW_MAX;
      c0 = int'(win_vec[p]) % OW_MAX;
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++)
          win[p][i][j] = tile[r0 + i][c0 + j];
    end

  assign out_rdata = outb[out_raddr];

endmodule
