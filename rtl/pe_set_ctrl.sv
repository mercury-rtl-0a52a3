// pe_set_ctrl: one PE Set together with the logic that walks it through its
// share of the input vectors, and skips the dot products the MCache can supply.
//
// Each PE set owns VPS consecutive input vectors, starting at base_vec (vector
// v is output position row v / OW_MAX, column v % OW_MAX; positions outside the
// current out_h x out_w are passed over in one cycle). On go it processes them
// in order, one decision per cycle:
//   MODE_SIG : every vector is convolved with the random filter in the weight
//              registers; the sign of the result is written into the Signature
//              Table as bit bit_idx of that vector.
//   MODE_CONV: the Hitmap entry of the vector is read.
//              HIT and the cached line's VD set -> the dot product is skipped;
//                  the stored result is taken through the entry id (from the
//                  Signature Table) and written to the output, 1 cycle.
//              MAU -> computed, written to the output and into the MCache line
//                  (which sets its VD).
//              MNU, or HIT whose line has no data yet -> computed, output only.
// A dot product can start every K cycles (ORg pipelining); skipped vectors
// fill the cycles in between. Every issued vector enters a delay line of
// 2K+1 stages, the latency of the PE set, so results (computed or reused)
// leave in issue order, one per cycle at most, on a single output write port.
// busy is the PE set's busy bit B of the synchronous design.
//
// Paper: Hitmap check per vector, skip on HIT with reuse from MCache, compute
// and fill on MAU, compute only on MNU, busy bit per PE set. Own choices: the
// delay line, the contiguous vector ranges, and computing a HIT whose data is
// not ready yet (the paper does not say what happens then).
module pe_set_ctrl
  import mercury_pkg::*;
#(
  parameter int K      = 3,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 32,
  parameter int VEC_W  = 10,
  parameter int ID_W   = 10,
  parameter int VPS    = 19,
  parameter int OW_MAX = 32,
  parameter int OH_MAX = 32,
  parameter int SIG_W  = 32,
  localparam int ROW_W = (VPS > 1) ? $clog2(VPS) : 1,
  localparam int DIM_W = $clog2(OW_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     go,
  input  set_mode_e                mode,
  input  logic [VEC_W-1:0]         base_vec,
  input  logic [DIM_W-1:0]         out_w,
  input  logic [DIM_W-1:0]         out_h,
  // weights (random filter or real filter)
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_rows [K][K],
  // input window from the global buffer
  output logic [VEC_W-1:0]         win_vec,
  input  logic signed [DATA_W-1:0] win    [K][K],
  // Hitmap and Signature Table (entry id) reads
  output logic [VEC_W-1:0]         hm_vec,
  input  hit_e                     hm_state,
  output logic [ROW_W-1:0]         id_row,
  input  logic [ID_W-1:0]          id_in,
  // MCache data port
  output logic [ID_W-1:0]          c_rd_id,
  input  logic [ACC_W-1:0]         c_rd_data,
  input  logic                     c_rd_vd,
  output logic                     c_wr_en,
  output logic [ID_W-1:0]          c_wr_id,
  output logic [ACC_W-1:0]         c_wr_data,
  // signature bit write
  output logic                     sb_en,
  output logic [ROW_W-1:0]         sb_row,
  output logic                     sb_bit,
  // result write
  output logic                     o_en,
  output logic [VEC_W-1:0]         o_vec,
  output logic [ACC_W-1:0]         o_data,
  // status
  output logic                     busy,
  output logic                     st_skip,
  output logic                     st_late_hit,
  output logic                     st_compute
);

  localparam int L = 2 * K + 1;

  typedef enum logic [1:0] {K_NONE, K_SIG, K_COMP, K_REUSE} kind_e;
  typedef struct packed {
    kind_e            kind;
    logic [ROW_W-1:0] row;
    logic [VEC_W-1:0] vec;
    logic             fill;   // write result into the MCache line
    logic [ID_W-1:0]  id;
    logic [ACC_W-1:0] data;   // reused result
  } slot_t;

  slot_t dl [L];

  logic             run;
  logic [ROW_W:0]   cur;
  logic [$clog2(K+1)-1:0] gap;

  logic [VEC_W:0]   vec_full;
  logic [VEC_W-1:0] vec;
  int unsigned      pos_r, pos_c;
  logic             pos_ok, last;

  assign vec_full = (VEC_W+1)'(base_vec) + (VEC_W+1)'(cur);
  assign vec      = vec_full[VEC_W-1:0];
  assign pos_r    = int'(vec_full) / OW_MAX;
  assign pos_c    = int'(vec_full) % OW_MAX;
  assign pos_ok   = (pos_r < int'(out_h)) && (pos_c < int'(out_w)) && (pos_r < OH_MAX);
  assign last     = (int'(cur) == VPS - 1);

  assign win_vec  = vec;
  assign hm_vec   = vec;
  assign id_row   = cur[ROW_W-1:0];
  assign c_rd_id  = id_in;

  // issue decision
  logic slot_ok, do_reuse, do_comp, advance;
  assign slot_ok  = (gap == '0);
  always_comb begin
    do_reuse = 1'b0;
    do_comp  = 1'b0;
    advance  = 1'b0;
    if (run) begin
      if (!pos_ok) begin
        advance = 1'b1;
      end else if (mode == MODE_CONV && hm_state == HM_HIT && c_rd_vd) begin
        do_reuse = 1'b1;
        advance  = 1'b1;
      end else if (slot_ok) begin
        do_comp  = 1'b1;
        advance  = 1'b1;
      end
    end
  end

  assign st_skip     = do_reuse;
  assign st_compute  = do_comp && (mode == MODE_CONV);
  assign st_late_hit = do_comp && (mode == MODE_CONV) && (hm_state == HM_HIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      cur <= '0;
      gap <= '0;
    end else begin
      if (do_comp)       gap <= ($clog2(K+1))'(K - 1);
      else if (gap != 0) gap <= gap - 1'b1;
      if (go) begin
        run <= 1'b1;
        cur <= '0;
      end else if (advance) begin
        if (last) run <= 1'b0;
        cur <= cur + 1'b1;
      end
    end
  end

  // delay line
  slot_t ns;
  always_comb begin
    ns      = '0;
    ns.row  = cur[ROW_W-1:0];
    ns.vec  = vec;
    ns.id   = id_in;
    ns.data = c_rd_data;
    ns.fill = (hm_state == HM_MAU);
    if (do_reuse)     ns.kind = K_REUSE;
    else if (do_comp) ns.kind = (mode == MODE_SIG) ? K_SIG : K_COMP;
    else              ns.kind = K_NONE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++) dl[i] <= '0;
    end else begin
      dl[0] <= ns;
      for (int i = 1; i < L; i++) dl[i] <= dl[i-1];
    end
  end

  // the PE set
  logic                    res_valid, sig_bit, set_busy;
  logic signed [ACC_W-1:0] res;

  pe_set #(.K(K), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_set (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_load    (w_load),
    .w_rows    (w_rows),
    .start     (do_comp),
    .in_rows   (win),
    .res_valid (res_valid),
    .res       (res),
    .sig_bit   (sig_bit),
    .busy      (set_busy)
  );

  slot_t e;
  assign e = dl[L-1];

  always_comb begin
    sb_en     = (e.kind == K_SIG);
    sb_row    = e.row;
    sb_bit    = sig_bit;
    o_en      = (e.kind == K_COMP) || (e.kind == K_REUSE);
    o_vec     = e.vec;
    o_data    = (e.kind == K_REUSE) ? e.data : res;
    c_wr_en   = (e.kind == K_COMP) && e.fill;
    c_wr_id   = e.id;
    c_wr_data = res;
  end

  always_comb begin
    busy = run || set_busy;
    for (int i = 0; i < L; i++) busy |= (dl[i].kind != K_NONE);
  end

  // a computed slot must meet the PE set's result
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    ((e.kind == K_SIG) || (e.kind == K_COMP)) |-> res_valid);

endmodule
