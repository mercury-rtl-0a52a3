// mercury_top: a row-stationary DNN accelerator that skips dot products of
// input vectors found similar by random-projection signatures, and reuses the
// result already computed for the similar vector.
//
// Structure: PE_ROWS x PE_COLS PEs grouped into NUM_SETS PE sets of K PEs
// (one K x K dot product per set), a Global Buffer with the input tile and the
// results, a Random Generator for the projection filters, a Signature Table,
// a Hitmap, the MCache, the adaptation logic and the central controller. Each
// PE set owns VPS consecutive input vectors.
//
// Host protocol (one channel of one layer):
//   1. write the input tile (in_we/in_row/in_col/in_data) and set out_w/out_h
//      (output positions = input size - K + 1, at most OW_MAX x OH_MAX);
//   2. pulse chan_start (chan_reuse = 1 keeps the saved Hitmap and signatures,
//      for the backward pass); signatures and the MCache fill run;
//   3. when filter_ready: write the K x K filter (f_we/f_row/f_col/f_data),
//      pulse filter_go; wait for filter_done; read results via out_raddr;
//      repeat per filter; pulse chan_end at the end (chan_done answers).
//   Adaptation: pulse iter_end with avg_loss each iteration and batch_end with
//   the baseline cost c_b each batch. The saved-state port (h_*) reads and
//   writes Signature Table and Hitmap entries.
// Counters (cnt_*) count reused results, HITs whose data was not ready,
// computed dot products, cycles the MCache queues stalled the fill, and
// adaptation events.
// Paper: 168 PEs as in the Eyeriss-style baseline, MCache of 1024 entries and
// 16 ways, synchronous design. Own choices: tile size, widths, host protocol.
module mercury_top
  import mercury_pkg::*;
#(
  parameter int K        = 3,
  parameter int DATA_W   = 16,
  parameter int ACC_W    = 32,
  parameter int PE_ROWS  = 12,
  parameter int PE_COLS  = 14,
  parameter int OW_MAX   = 32,
  parameter int OH_MAX   = 32,
  parameter int ENTRIES  = 1024,
  parameter int WAYS     = 16,
  parameter int SIG_MAX  = 32,
  parameter int SIG_INIT = 20,
  parameter int QDEPTH   = 4,
  localparam int NUM_SETS = (PE_ROWS / K) * PE_COLS,
  localparam int NV       = OW_MAX * OH_MAX,
  localparam int VPS      = (NV + NUM_SETS - 1) / NUM_SETS,
  localparam int VEC_W    = $clog2(NV),
  localparam int ID_W     = $clog2(ENTRIES),
  localparam int LEN_W    = $clog2(SIG_MAX + 1),
  localparam int DIM_W    = $clog2(OW_MAX + 1),
  localparam int RW       = $clog2(OH_MAX + K - 1),
  localparam int CW       = $clog2(OW_MAX + K - 1),
  localparam int KW       = (K > 1) ? $clog2(K) : 1,
  localparam int ST_VEC_W = $clog2(NUM_SETS * VPS),
  localparam int CYC_W    = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input tile
  input  logic                     in_we,
  input  logic [RW-1:0]            in_row,
  input  logic [CW-1:0]            in_col,
  input  logic signed [DATA_W-1:0] in_data,
  // filter
  input  logic                     f_we,
  input  logic [KW-1:0]            f_row,
  input  logic [KW-1:0]            f_col,
  input  logic signed [DATA_W-1:0] f_data,
  // channel control
  input  logic [DIM_W-1:0]         out_w,
  input  logic [DIM_W-1:0]         out_h,
  input  logic                     chan_start,
  input  logic                     chan_reuse,
  input  logic                     filter_go,
  input  logic                     chan_end,
  output logic                     filter_ready,
  output logic                     filter_done,
  output logic                     chan_done,
  // results
  input  logic [VEC_W-1:0]         out_raddr,
  output logic [ACC_W-1:0]         out_rdata,
  // saved state (Signature Table and Hitmap)
  input  logic                     h_we,
  input  logic [VEC_W-1:0]         h_vec,
  input  logic [SIG_MAX-1:0]       h_wsig,
  input  logic [ID_W-1:0]          h_wid,
  input  hit_e                     h_wstate,
  output logic [SIG_MAX-1:0]       h_rsig,
  output logic [ID_W-1:0]          h_rid,
  output hit_e                     h_rstate,
  // adaptation
  input  logic                     iter_end,
  input  logic signed [31:0]       avg_loss,
  input  logic                     batch_end,
  input  logic [CYC_W-1:0]         c_b,
  output logic [LEN_W-1:0]         sig_len,
  output logic                     sim_en,
  // counters
  output logic [31:0]              cnt_skip,
  output logic [31:0]              cnt_late_hit,
  output logic [31:0]              cnt_compute,
  output logic [31:0]              cnt_qstall,
  output logic [31:0]              cnt_grow,
  output logic [31:0]              cnt_stop
);

  localparam int ROW_W = (VPS > 1) ? $clog2(VPS) : 1;
  localparam int BIT_W = $clog2(SIG_MAX);

  // ---------------- filter register ----------------
  logic signed [DATA_W-1:0] filt [K][K];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) filt[r][c] <= '0;
    end else if (f_we && (int'(f_row) < K) && (int'(f_col) < K)) begin
      filt[f_row][f_col] <= f_data;
    end
  end

  // ---------------- controller ----------------
  logic                     rg_start, rg_done;
  logic [BIT_W-1:0]         rg_idx, bit_idx;
  logic signed [DATA_W-1:0] rg_filter [K][K];
  logic                     sets_go, w_load, sets_busy;
  set_mode_e                sets_mode;
  logic signed [DATA_W-1:0] w_rows [K][K];
  logic                     hm_clear, mc_clear_all, mc_clear_vd;
  logic [VEC_W-1:0]         st_rd_vec, mc_req_vec;
  logic [SIG_MAX-1:0]       st_rd_sig, mc_req_sig;
  logic                     mc_req_valid, mc_req_ready, mc_resp_valid, mc_busy;
  hit_e                     mc_resp_state;
  logic [ID_W-1:0]          mc_resp_id;
  logic [VEC_W-1:0]         mc_resp_vec;
  logic [CYC_W-1:0]         active_cycles, batch_cycles;

  mercury_ctrl #(.K(K), .DATA_W(DATA_W), .SIG_W(SIG_MAX), .OW_MAX(OW_MAX),
                 .OH_MAX(OH_MAX), .CYC_W(CYC_W)) u_ctrl (
    .clk, .rst_n,
    .chan_start, .chan_reuse, .filter_go, .chan_end, .out_w, .out_h,
    .filt, .filter_ready, .filter_done, .chan_done, .active_cycles,
    .sig_len, .sim_en,
    .rg_start, .rg_idx, .rg_done, .rg_filter,
    .sets_go, .sets_mode, .bit_idx, .w_load, .w_rows, .sets_busy,
    .hm_clear, .mc_clear_all, .mc_clear_vd,
    .st_rd_vec, .st_rd_sig,
    .mc_req_valid, .mc_req_ready, .mc_req_sig, .mc_req_vec,
    .mc_resp_valid, .mc_busy
  );

  rand_gen #(.K(K), .DATA_W(DATA_W), .IDX_W(BIT_W)) u_rg (
    .clk, .rst_n, .start(rg_start), .idx(rg_idx), .r_filter(rg_filter),
    .done(rg_done), .busy()
  );

  // ---------------- adaptation ----------------
  logic st_grow, st_stop;
  // cost of the current batch: active cycles of finished channels
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         batch_cycles <= '0;
    else if (batch_end) batch_cycles <= '0;
    else if (chan_done) batch_cycles <= batch_cycles + active_cycles;
  end

  adapt_ctrl #(.SIG_MAX(SIG_MAX), .SIG_INIT(SIG_INIT), .CYC_W(CYC_W)) u_adapt (
    .clk, .rst_n, .restart(1'b0), .iter_end, .avg_loss, .batch_end,
    .c_s(batch_cycles), .c_b, .sig_len, .sim_en, .st_grow, .st_stop
  );

  // ---------------- per-set wiring ----------------
  logic [VEC_W-1:0]         win_vec  [NUM_SETS];
  logic signed [DATA_W-1:0] win      [NUM_SETS][K][K];
  logic [VEC_W-1:0]         hm_vec   [NUM_SETS];
  hit_e                     hm_state [NUM_SETS];
  logic [ROW_W-1:0]         id_row   [NUM_SETS];
  logic [ID_W-1:0]          id_in    [NUM_SETS];
  logic [ID_W-1:0]          c_rd_id  [NUM_SETS];
  logic [ACC_W-1:0]         c_rd_data[NUM_SETS];
  logic                     c_rd_vd  [NUM_SETS];
  logic                     c_wr_en  [NUM_SETS];
  logic [ID_W-1:0]          c_wr_id  [NUM_SETS];
  logic [ACC_W-1:0]         c_wr_data[NUM_SETS];
  logic                     sb_en    [NUM_SETS];
  logic [ROW_W-1:0]         sb_row   [NUM_SETS];
  logic                     sb_bit   [NUM_SETS];
  logic                     o_en     [NUM_SETS];
  logic [VEC_W-1:0]         o_vec    [NUM_SETS];
  logic [ACC_W-1:0]         o_data   [NUM_SETS];
  logic                     s_busy   [NUM_SETS];
  logic                     s_skip   [NUM_SETS];
  logic                     s_late   [NUM_SETS];
  logic                     s_comp   [NUM_SETS];

  for (genvar s = 0; s < NUM_SETS; s++) begin : g_set
    pe_set_ctrl #(.K(K), .DATA_W(DATA_W), .ACC_W(ACC_W), .VEC_W(VEC_W), .ID_W(ID_W),
                  .VPS(VPS), .OW_MAX(OW_MAX), .OH_MAX(OH_MAX), .SIG_W(SIG_MAX)) u_sc (
      .clk, .rst_n,
      .go        (sets_go),
      .mode      (sets_mode),
      .base_vec  (VEC_W'(s * VPS)),
      .out_w, .out_h,
      .w_load, .w_rows,
      .win_vec   (win_vec[s]),   .win      (win[s]),
      .hm_vec    (hm_vec[s]),    .hm_state (hm_state[s]),
      .id_row    (id_row[s]),    .id_in    (id_in[s]),
      .c_rd_id   (c_rd_id[s]),   .c_rd_data(c_rd_data[s]), .c_rd_vd(c_rd_vd[s]),
      .c_wr_en   (c_wr_en[s]),   .c_wr_id  (c_wr_id[s]),   .c_wr_data(c_wr_data[s]),
      .sb_en     (sb_en[s]),     .sb_row   (sb_row[s]),    .sb_bit (sb_bit[s]),
      .o_en      (o_en[s]),      .o_vec    (o_vec[s]),     .o_data (o_data[s]),
      .busy      (s_busy[s]),
      .st_skip   (s_skip[s]),    .st_late_hit(s_late[s]),  .st_compute(s_comp[s])
    );
  end

  always_comb begin
    sets_busy = 1'b0;
    for (int s = 0; s < NUM_SETS; s++) sets_busy |= s_busy[s];
  end

  // ---------------- storage ----------------
  global_buffer #(.K(K), .DATA_W(DATA_W), .ACC_W(ACC_W), .OW_MAX(OW_MAX),
                  .OH_MAX(OH_MAX), .PORTS(NUM_SETS)) u_gb (
    .clk, .rst_n, .in_we, .in_row, .in_col, .in_data,
    .win_vec, .win, .o_en, .o_vec, .o_data, .out_raddr, .out_rdata
  );

  logic [ST_VEC_W-1:0] st_h_vec;
  assign st_h_vec = ST_VEC_W'(h_vec);

  signature_table #(.BANKS(NUM_SETS), .VPS(VPS), .SIG_W(SIG_MAX), .ID_W(ID_W)) u_st (
    .clk, .rst_n,
    .bw_idx  (bit_idx),
    .bw_en   (sb_en), .bw_row (sb_row), .bw_bit (sb_bit),
    .rd_vec  (ST_VEC_W'(st_rd_vec)), .rd_sig (st_rd_sig),
    .idw_en  (mc_resp_valid), .idw_vec (ST_VEC_W'(mc_resp_vec)), .idw_id (mc_resp_id),
    .ir_row  (id_row), .ir_id (id_in),
    .h_we, .h_vec(st_h_vec), .h_wsig, .h_wid, .h_rsig, .h_rid
  );

  hitmap #(.NV(NV), .RD_PORTS(NUM_SETS)) u_hm (
    .clk, .rst_n, .clear(hm_clear),
    .we(mc_resp_valid), .w_vec(mc_resp_vec), .w_state(mc_resp_state),
    .rd_vec(hm_vec), .rd_state(hm_state),
    .h_we, .h_vec, .h_wstate, .h_rstate
  );

  mcache #(.ENTRIES(ENTRIES), .WAYS(WAYS), .SIG_W(SIG_MAX), .VEC_W(VEC_W),
           .DATA_W(ACC_W), .PORTS(NUM_SETS), .QDEPTH(QDEPTH)) u_mc (
    .clk, .rst_n, .clear_all(mc_clear_all), .clear_vd(mc_clear_vd),
    .req_valid(mc_req_valid), .req_ready(mc_req_ready),
    .req_sig(mc_req_sig), .req_vec(mc_req_vec),
    .resp_valid(mc_resp_valid), .resp_state(mc_resp_state),
    .resp_id(mc_resp_id), .resp_vec(mc_resp_vec), .busy(mc_busy),
    .rd_id(c_rd_id), .rd_data(c_rd_data), .rd_vd(c_rd_vd),
    .wr_en(c_wr_en), .wr_id(c_wr_id), .wr_data(c_wr_data)
  );

  // ---------------- counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_skip     <= '0;
      cnt_late_hit <= '0;
      cnt_compute  <= '0;
      cnt_qstall   <= '0;
      cnt_grow     <= '0;
      cnt_stop     <= '0;
    end else begin
      cnt_skip     <= cnt_skip     + count_of(s_skip);
      cnt_late_hit <= cnt_late_hit + count_of(s_late);
      cnt_compute  <= cnt_compute  + count_of(s_comp);
      cnt_qstall   <= cnt_qstall   + 32'(mc_req_valid && !mc_req_ready);
      cnt_grow     <= cnt_grow     + 32'(st_grow);
      cnt_stop     <= cnt_stop     + 32'(st_stop);
    end
  end

  function automatic logic [31:0] count_of(input logic v [NUM_SETS]);
    logic [31:0] n;
    n = '0;
    for (int s = 0; s < NUM_SETS; s++) n += 32'(v[s]);
    return n;
  endfunction

endmodule
