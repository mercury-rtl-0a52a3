// mcache_set: one set of the MCache with its request queue and its controller.
//
// Holds the WAYS tags of the set with their Valid Tag (VT) bits. Requests
// (signature + input vector number) wait in a small queue; the controller
// takes one per cycle and applies the MCache update rule:
//   signature already present (VT set, tag equal) -> HIT,   entry = that way
//   not present, set not full -> write tag, set VT  -> MAU, entry = new way
//   not present, set full                           -> MNU  (nothing inserted)
// There is no replacement: once the set is full it stays full until clear.
// Ways are filled in order, so "set full" is a fill counter reaching WAYS.
// The result is held in a response register until resp_grant (arbitration
// between sets happens in mcache); a new request is only taken when the
// register is free or being granted.
//
// Paper: VT bit per line, tag = signature, no replacement, queue plus simple
// controller per set so sets update independently. Own choices: queue depth,
// fill-in-order way choice, one request per cycle.
module mcache_set
  import mercury_pkg::*;
#(
  parameter int WAYS   = 16,
  parameter int SIG_W  = 32,
  parameter int VEC_W  = 10,
  parameter int QDEPTH = 4,
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             req_push,
  input  logic [SIG_W-1:0] req_sig,
  input  logic [VEC_W-1:0] req_vec,
  output logic             req_full,
  output logic             resp_valid,
  output hit_e             resp_state,
  output logic [WAY_W-1:0] resp_way,
  output logic [VEC_W-1:0] resp_vec,
  input  logic             resp_grant,
  output logic             busy
);

  logic [SIG_W-1:0] tag [WAYS];
  logic             vt  [WAYS];
  logic [WAY_W:0]   fill;

  logic [SIG_W+VEC_W-1:0] q_out;
  logic                   q_empty, q_pop;
  logic [SIG_W-1:0]       h_sig;
  logic [VEC_W-1:0]       h_vec;

  req_fifo #(.W(SIG_W + VEC_W), .DEPTH(QDEPTH)) u_q (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .push    (req_push),
    .wr_data ({req_sig, req_vec}),
    .pop     (q_pop),
    .rd_data (q_out),
    .empty   (q_empty),
    .full    (req_full)
  );

  assign {h_sig, h_vec} = q_out;
  assign q_pop = !q_empty && (!resp_valid || resp_grant);
  assign busy  = !q_empty || resp_valid;

  // tag compare
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vt[w] && (tag[w] == h_sig) && !hit) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill       <= '0;
      resp_valid <= 1'b0;
      resp_state <= HM_MNU;
      resp_way   <= '0;
      resp_vec   <= '0;
      for (int w = 0; w < WAYS; w++) begin
        tag[w] <= '0;
        vt[w]  <= 1'b0;
      end
    end else if (clear) begin
      fill       <= '0;
      resp_valid <= 1'b0;
      for (int w = 0; w < WAYS; w++) vt[w] <= 1'b0;
    end else begin
      if (resp_grant) resp_valid <= 1'b0;
      if (q_pop) begin
        resp_valid <= 1'b1;
        resp_vec   <= h_vec;
        if (hit) begin
          resp_state <= HM_HIT;
          resp_way   <= hit_way;
        end else if (fill < (WAY_W+1)'(WAYS)) begin
          resp_state              <= HM_MAU;
          resp_way                <= fill[WAY_W-1:0];
          tag[fill[WAY_W-1:0]]    <= h_sig;
          vt[fill[WAY_W-1:0]]     <= 1'b1;
          fill                    <= fill + 1'b1;
        end else begin
          resp_state <= HM_MNU;
          resp_way   <= '0;
        end
      end
    end
  end

endmodule
