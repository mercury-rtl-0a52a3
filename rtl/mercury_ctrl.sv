// mercury_ctrl: the central sequencer of the synchronous design.
//
// For every channel (a new input tile) it runs three phases:
//  1. Signatures: for j = 0 .. sig_len-1 the Random Generator makes filter R_j,
//     it is loaded into every PE set, and all PE sets convolve it over their
//     input vectors, writing bit j of each signature. A barrier on the busy
//     bits separates the bits.
//  2. MCache fill: the signatures are read from the Signature Table one per
//     cycle (masked to sig_len bits) and offered to the MCache; its answers
//     (written by the top into the Hitmap and the Signature Table) arrive
//     later. The phase ends when every request has been answered.
//  3. Filters: for each filter the host supplies (filter_go), the weights are
//     loaded into all PE sets, every VD bit of the MCache is cleared, and the
//     PE sets run in MODE_CONV. When no PE set is busy, filter_done pulses and
//     the controller waits for the next filter or for chan_end.
// With similarity detection off (sim_en low), phases 1 and 2 are skipped and
// the Hitmap is cleared, so every vector is computed. With chan_reuse (the
// backward pass of a layer whose Hitmap and signatures were saved in the
// forward pass), phases 1 and 2 are skipped and the Hitmap and table are kept.
// active_cycles counts the cycles spent in phases 1-3, the measured cost that
// the adaptation logic compares with the baseline cost.
//
// Paper: signatures before the dot products, one random filter per bit, busy
// bits checked by a controller before the next filter, VD cleared through a
// bitline per filter, tables recalculated per channel, saved signatures reused
// backward. Own choices: the exact phase sequence and host handshake.
module mercury_ctrl
  import mercury_pkg::*;
#(
  parameter int K       = 3,
  parameter int DATA_W  = 16,
  parameter int SIG_W   = 32,
  parameter int OW_MAX  = 32,
  parameter int OH_MAX  = 32,
  parameter int CYC_W   = 40,
  localparam int NV     = OW_MAX * OH_MAX,
  localparam int VEC_W  = $clog2(NV),
  localparam int LEN_W  = $clog2(SIG_W + 1),
  localparam int BIT_W  = $clog2(SIG_W),
  localparam int DIM_W  = $clog2(OW_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host control
  input  logic                     chan_start,
  input  logic                     chan_reuse,
  input  logic                     filter_go,
  input  logic                     chan_end,
  input  logic [DIM_W-1:0]         out_w,
  input  logic [DIM_W-1:0]         out_h,
  input  logic signed [DATA_W-1:0] filt [K][K],
  output logic                     filter_ready,
  output logic                     filter_done,
  output logic                     chan_done,
  output logic [CYC_W-1:0]         active_cycles,
  // adaptation
  input  logic [LEN_W-1:0]         sig_len,
  input  logic                     sim_en,
  // random generator
  output logic                     rg_start,
  output logic [BIT_W-1:0]         rg_idx,
  input  logic                     rg_done,
  input  logic signed [DATA_W-1:0] rg_filter [K][K],
  // PE sets
  output logic                     sets_go,
  output set_mode_e                sets_mode,
  output logic [BIT_W-1:0]         bit_idx,
  output logic                     w_load,
  output logic signed [DATA_W-1:0] w_rows [K][K],
  input  logic                     sets_busy,
  // tables and cache
  output logic                     hm_clear,
  output logic                     mc_clear_all,
  output logic                     mc_clear_vd,
  output logic [VEC_W-1:0]         st_rd_vec,
  input  logic [SIG_W-1:0]         st_rd_sig,
  output logic                     mc_req_valid,
  input  logic                     mc_req_ready,
  output logic [SIG_W-1:0]         mc_req_sig,
  output logic [VEC_W-1:0]         mc_req_vec,
  input  logic                     mc_resp_valid,
  input  logic                     mc_busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_RG, S_RGW, S_SIGGO, S_SIGRUN, S_LOOK, S_LDRAIN,
    S_WAITF, S_CONVGO, S_CONVRUN
  } state_e;

  state_e           st;
  logic [BIT_W:0]   j;
  logic [VEC_W:0]   lv;            // next vector to offer
  logic [VEC_W:0]   n_req, n_resp;

  int unsigned lr, lc;
  logic        lpos_ok;
  assign lr      = int'(lv) / OW_MAX;
  assign lc      = int'(lv) % OW_MAX;
  assign lpos_ok = (lr < int'(out_h)) && (lc < int'(out_w));

  logic [SIG_W-1:0] mask;
  always_comb
    for (int b = 0; b < SIG_W; b++) mask[b] = (b < int'(sig_len));

  assign st_rd_vec    = lv[VEC_W-1:0];
  assign mc_req_sig   = st_rd_sig & mask;
  assign mc_req_vec   = lv[VEC_W-1:0];
  assign mc_req_valid = (st == S_LOOK) && (int'(lv) < NV) && lpos_ok;

  assign rg_idx       = j[BIT_W-1:0];
  assign bit_idx      = j[BIT_W-1:0];
  assign rg_start     = (st == S_RG);
  assign sets_go      = (st == S_SIGGO) || (st == S_CONVGO);
  assign sets_mode    = (st == S_SIGGO || st == S_SIGRUN) ? MODE_SIG : MODE_CONV;
  assign filter_ready = (st == S_WAITF);

  always_comb begin
    w_load = 1'b0;
    w_rows = filt;
    if (st == S_RGW && rg_done) begin
      w_load = 1'b1;
      w_rows = rg_filter;
    end else if (st == S_WAITF && filter_go) begin
      w_load = 1'b1;
    end
  end

  assign hm_clear     = (st == S_IDLE) && chan_start && !chan_reuse;
  assign mc_clear_all = hm_clear;
  assign mc_clear_vd  = (st == S_WAITF) && filter_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      j             <= '0;
      lv            <= '0;
      n_req         <= '0;
      n_resp        <= '0;
      filter_done   <= 1'b0;
      chan_done     <= 1'b0;
      active_cycles <= '0;
    end else begin
      filter_done <= 1'b0;
      chan_done   <= 1'b0;
      if (st != S_IDLE && st != S_WAITF) active_cycles <= active_cycles + 1'b1;
      if (mc_resp_valid) n_resp <= n_resp + 1'b1;
      unique case (st)
        S_IDLE: if (chan_start) begin
          active_cycles <= '0;
          j             <= '0;
          lv            <= '0;
          n_req         <= '0;
          n_resp        <= '0;
          if (chan_reuse || !sim_en || sig_len == '0) st <= S_WAITF;
          else                                        st <= S_RG;
        end
        S_RG:     st <= S_RGW;
        S_RGW:    if (rg_done) st <= S_SIGGO;
        S_SIGGO:  st <= S_SIGRUN;
        S_SIGRUN: if (!sets_busy) begin
          if (int'(j) + 1 < int'(sig_len)) begin
            j  <= j + 1'b1;
            st <= S_RG;
          end else begin
            st <= S_LOOK;
          end
        end
        S_LOOK: begin
          if (int'(lv) >= NV) st <= S_LDRAIN;
          else if (!lpos_ok || mc_req_ready) begin
            lv <= lv + 1'b1;
            if (lpos_ok) n_req <= n_req + 1'b1;
          end
        end
        S_LDRAIN: if (n_req == n_resp && !mc_busy) st <= S_WAITF;
        S_WAITF: begin
          if (chan_end) begin
            st        <= S_IDLE;
            chan_done <= 1'b1;
          end else if (filter_go) st <= S_CONVGO;
        end
        S_CONVGO:  st <= S_CONVRUN;
        S_CONVRUN: if (!sets_busy) begin
          st          <= S_WAITF;
          filter_done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
