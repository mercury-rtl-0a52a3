// signature_table: the Signature Table - one signature per input vector,
// indexed by input vector number, together with the MCache entry id that the
// signature was given when it was offered to the cache.
//
// Signatures are built one bit at a time: while the PE sets convolve random
// filter R_j over the input, each PE set produces bit j for its own input
// vectors. The table is therefore split into one bank per PE set (vector v
// lives in bank v / VPS at row v % VPS, matching the contiguous assignment of
// vectors to PE sets), and every bank has its own bit-write port. The entry id
// is stored so that, in the dot-product phase, a PE set reaches the cached
// result through the id without a tag compare (one id-read port per bank).
// One full-signature read port feeds the MCache fill; the host port lets the
// forward-pass signatures be saved and restored for the backward pass.
//
// All reads are combinational, all writes take effect at the clock edge.
// Paper: table indexed by vector number, holds signature and entry id, kept in
// block memory. Own choices: banking per PE set, port set, reset to zero.
module signature_table #(
  parameter int BANKS = 56,
  parameter int VPS   = 19,     // vectors (rows) per bank
  parameter int SIG_W = 32,
  parameter int ID_W  = 10,
  localparam int NV    = BANKS * VPS,
  localparam int VEC_W = $clog2(NV),
  localparam int ROW_W = (VPS > 1) ? $clog2(VPS) : 1,
  localparam int BIT_W = $clog2(SIG_W)
) (
  input  logic             clk,
  input  logic             rst_n,
  // bit writes from the PE sets (bit index common to all banks)
  input  logic [BIT_W-1:0] bw_idx,
  input  logic             bw_en   [BANKS],
  input  logic [ROW_W-1:0] bw_row  [BANKS],
  input  logic             bw_bit  [BANKS],
  // full-signature read for the MCache fill
  input  logic [VEC_W-1:0] rd_vec,
  output logic [SIG_W-1:0] rd_sig,
  // entry id write from MCache responses
  input  logic             idw_en,
  input  logic [VEC_W-1:0] idw_vec,
  input  logic [ID_W-1:0]  idw_id,
  // entry id read, one per bank (PE set)
  input  logic [ROW_W-1:0] ir_row  [BANKS],
  output logic [ID_W-1:0]  ir_id   [BANKS],
  // host save / restore
  input  logic             h_we,
  input  logic [VEC_W-1:0] h_vec,
  input  logic [SIG_W-1:0] h_wsig,
  input  logic [ID_W-1:0]  h_wid,
  output logic [SIG_W-1:0] h_rsig,
  output logic [ID_W-1:0]  h_rid
);

  logic [SIG_W-1:0] sig [NV];
  logic [ID_W-1:0]  id  [NV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NV; v++) begin
        sig[v] <= '0;
        id[v]  <= '0;
      end
    end else begin
      for (int b = 0; b < BANKS; b++)
        if (bw_en[b] && (int'(bw_row[b]) < VPS))
          sig[b*VPS + int'(bw_row[b])][bw_idx] <= bw_bit[b];
      if (idw_en) id[idw_vec] <= idw_id;
      if (h_we) begin
        sig[h_vec] <= h_wsig;
        id[h_vec]  <= h_wid;
      end
    end
  end

  assign rd_sig = sig[rd_vec];
  assign h_rsig = sig[h_vec];
  assign h_rid  = id[h_vec];

  always_comb
    for (int b = 0; b < BANKS; b++)
      ir_id[b] = (int'(ir_row[b]) < VPS) ? id[b*VPS + int'(ir_row[b])] : '0;

endmodule
