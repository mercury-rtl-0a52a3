// hitmap: the Hitmap - one two-bit state (HIT, MAU or MNU) per input vector,
// recording what happened when that vector's signature was offered to the
// MCache.
//
// It is filled once per channel by the MCache responses (one write per cycle),
// then read by every PE set, each for the vector it is about to process
// (RD_PORTS combinational read ports). clear sets every entry to MNU, so with
// similarity detection off every vector is simply computed. The host port saves
// and restores the map between the forward and the backward pass.
//
// Paper: one entry per input vector, states HIT/MAU/MNU, held in registers,
// cleared with a new set of input vectors, saved for the backward pass. Own
// choices: port set, MNU as the cleared state.
module hitmap
  import mercury_pkg::*;
#(
  parameter int NV       = 1024,
  parameter int RD_PORTS = 56,
  localparam int VEC_W   = $clog2(NV)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             we,
  input  logic [VEC_W-1:0] w_vec,
  input  hit_e             w_state,
  input  logic [VEC_W-1:0] rd_vec   [RD_PORTS],
  output hit_e             rd_state [RD_PORTS],
  input  logic             h_we,
  input  logic [VEC_W-1:0] h_vec,
  input  hit_e             h_wstate,
  output hit_e             h_rstate
);

  hit_e map [NV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NV; v++) map[v] <= HM_MNU;
    end else if (clear) begin
      for (int v = 0; v < NV; v++) map[v] <= HM_MNU;
    end else begin
      if (we)   map[w_vec] <= w_state;
      if (h_we) map[h_vec] <= h_wstate;
    end
  end

  always_comb
    for (int p = 0; p < RD_PORTS; p++)
      rd_state[p] = (int'(rd_vec[p]) < NV) ? map[rd_vec[p]] : HM_MNU;

  assign h_rstate = map[h_vec];

endmodule
