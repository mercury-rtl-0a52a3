// mcache: the MCache - a set-associative cache tagged by signature whose data
// portion holds dot-product results, so input vectors with equal signatures
// share one computed result.
//
// Two things set it apart from an ordinary cache. Tags arrive before data: a
// signature is inserted (Valid Tag set) long before the dot product for it is
// known, so each line has a separate Valid Data (VD) bit, set when a PE set
// writes the result. And there is no replacement: a full set rejects new
// signatures (MNU) until the cache is cleared for the next channel.
//
// Insertion path: a request {signature, vector number} goes to set
// sig[SET_W-1:0] and waits in that set's queue (req_ready is low when that
// queue is full). Each set's controller answers HIT / MAU / MNU with the entry
// id = set * WAYS + way; a round-robin arbiter passes one answer per cycle to
// resp_*. Sets work independently, so requests to different sets overlap.
//
// Data path: the data and VD bits sit in registers addressed by entry id, so
// every PE set has its own combinational read port and its own write port
// (write sets VD). clear_vd drops every VD bit at once - the "bitline" used
// when a new filter starts; clear_all empties the cache for a new channel.
//
// Paper: 1024 entries, 16 ways (64 sets), VT/VD bits, no replacement, queue
// and controller per set, access to data by entry id without compare, held in
// registers. Own choices: set index = low signature bits, queue depth,
// arbiter, one data version (the synchronous design; the multi-version lines
// of the asynchronous design are not built).
module mcache
  import mercury_pkg::*;
#(
  parameter int ENTRIES = 1024,
  parameter int WAYS    = 16,
  parameter int SIG_W   = 32,
  parameter int VEC_W   = 10,
  parameter int DATA_W  = 32,
  parameter int PORTS   = 56,
  parameter int QDEPTH  = 4,
  localparam int SETS   = ENTRIES / WAYS,
  localparam int SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int ID_W   = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear_all,
  input  logic              clear_vd,
  // insertion requests
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [SIG_W-1:0]  req_sig,
  input  logic [VEC_W-1:0]  req_vec,
  // insertion answers
  output logic              resp_valid,
  output hit_e              resp_state,
  output logic [ID_W-1:0]   resp_id,
  output logic [VEC_W-1:0]  resp_vec,
  output logic              busy,
  // data ports, one per PE set
  input  logic [ID_W-1:0]   rd_id   [PORTS],
  output logic [DATA_W-1:0] rd_data [PORTS],
  output logic              rd_vd   [PORTS],
  input  logic              wr_en   [PORTS],
  input  logic [ID_W-1:0]   wr_id   [PORTS],
  input  logic [DATA_W-1:0] wr_data [PORTS]
);

  // ---------------- tag side: sets with queues ----------------
  logic             s_full  [SETS];
  logic             s_rv    [SETS];
  hit_e             s_state [SETS];
  logic [WAY_W-1:0] s_way   [SETS];
  logic [VEC_W-1:0] s_vec   [SETS];
  logic             s_grant [SETS];
  logic             s_busy  [SETS];

  logic [SET_W-1:0] req_set;
  assign req_set   = (SETS > 1) ? req_sig[SET_W-1:0] : '0;
  assign req_ready = !s_full[req_set];

  for (genvar s = 0; s < SETS; s++) begin : g_set
    mcache_set #(.WAYS(WAYS), .SIG_W(SIG_W), .VEC_W(VEC_W), .QDEPTH(QDEPTH)) u_set (
      .clk        (clk),
      .rst_n      (rst_n),
      .clear      (clear_all),
      .req_push   (req_valid && req_ready && (req_set == SET_W'(s))),
      .req_sig    (req_sig),
      .req_vec    (req_vec),
      .req_full   (s_full[s]),
      .resp_valid (s_rv[s]),
      .resp_state (s_state[s]),
      .resp_way   (s_way[s]),
      .resp_vec   (s_vec[s]),
      .resp_grant (s_grant[s]),
      .busy       (s_busy[s])
    );
  end

  // round-robin answer arbiter
  logic [SET_W-1:0] rr;
  logic             any;
  logic [SET_W-1:0] gsel;
  always_comb begin
    any  = 1'b0;
    gsel = '0;
    for (int i = 0; i < SETS; i++) begin
      int s;
      s = (int'(rr) + i) % SETS;
      if (s_rv[s] && !any) begin
        any  = 1'b1;
        gsel = SET_W'(s);
      end
    end
    for (int s = 0; s < SETS; s++) s_grant[s] = any && (gsel == SET_W'(s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rr <= '0;
    else if (any) rr <= (SETS > 1) ? SET_W'((int'(gsel) + 1) % SETS) : '0;
  end

  assign resp_valid = any && !clear_all;
  assign resp_state = s_state[gsel];
  assign resp_id    = ID_W'(int'(gsel) * WAYS + int'(s_way[gsel]));
  assign resp_vec   = s_vec[gsel];

  always_comb begin
    busy = 1'b0;
    for (int s = 0; s < SETS; s++) busy |= s_busy[s];
  end

  // ---------------- data side: results and VD bits ----------------
  logic [DATA_W-1:0] data [ENTRIES];
  logic              vd   [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        data[e] <= '0;
        vd[e]   <= 1'b0;
      end
    end else if (clear_all || clear_vd) begin
      for (int e = 0; e < ENTRIES; e++) vd[e] <= 1'b0;
    end else begin
      for (int p = 0; p < PORTS; p++)
        if (wr_en[p]) begin
          data[wr_id[p]] <= wr_data[p];
          vd[wr_id[p]]   <= 1'b1;
        end
    end
  end

  always_comb
    for (int p = 0; p < PORTS; p++) begin
      rd_data[p] = data[rd_id[p]];
      rd_vd[p]   = vd[rd_id[p]];
    end

endmodule
