// adapt_ctrl: the adaptation logic - how long signatures are, and whether
// similarity detection runs at all.
//
// Signature length: training starts with short signatures (SIG_INIT bits),
// which find many similar vectors. Each iteration the average loss is
// reported (iter_end with avg_loss). If the loss has not changed for K_ITERS
// consecutive iterations, the signature grows by one bit (up to SIG_MAX), so
// that only closer vectors share results as the model converges.
// Stoppage: at the end of every batch the cycles actually spent with
// similarity detection (c_s, signature generation plus reduced computation)
// are compared with the analytic cost of the plain accelerator (c_b). If
// c_s > c_b for T_BATCHES consecutive batches, detection is switched off
// (sim_en low) until restart.
// "No change in the loss" is taken as |loss - previous loss| <= LOSS_EPS.
//
// Timing: sig_len and sim_en change in the cycle after the strobe.
// Paper: +1 bit after K iterations without loss change, start around 20 bits,
// stop after T batches where signature cost exceeds baseline cost. Own
// choices: K_ITERS, T_BATCHES, LOSS_EPS and SIG_MAX values, loss format.
module adapt_ctrl #(
  parameter int SIG_MAX   = 32,
  parameter int SIG_INIT  = 20,
  parameter int K_ITERS   = 5,
  parameter int T_BATCHES = 5,
  parameter int LOSS_W    = 32,
  parameter int LOSS_EPS  = 0,
  parameter int CYC_W     = 40,
  localparam int LEN_W    = $clog2(SIG_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     restart,
  input  logic                     iter_end,
  input  logic signed [LOSS_W-1:0] avg_loss,
  input  logic                     batch_end,
  input  logic [CYC_W-1:0]         c_s,
  input  logic [CYC_W-1:0]         c_b,
  output logic [LEN_W-1:0]         sig_len,
  output logic                     sim_en,
  output logic                     st_grow,
  output logic                     st_stop
);

  logic signed [LOSS_W-1:0] prev_loss;
  logic                     have_prev;
  logic [$clog2(K_ITERS+1)-1:0]   same_cnt;
  logic [$clog2(T_BATCHES+1)-1:0] slow_cnt;

  logic signed [LOSS_W:0] diff;
  logic                   unchanged;
  assign diff      = (LOSS_W+1)'(avg_loss) - (LOSS_W+1)'(prev_loss);
  assign unchanged = have_prev &&
                     (diff <= (LOSS_W+1)'(LOSS_EPS)) && (diff >= -(LOSS_W+1)'(LOSS_EPS));

  assign st_grow = iter_end && unchanged && (int'(same_cnt) == K_ITERS - 1)
                   && (int'(sig_len) < SIG_MAX);
  assign st_stop = batch_end && sim_en && (c_s > c_b)
                   && (int'(slow_cnt) == T_BATCHES - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_loss <= '0;
      have_prev <= 1'b0;
      same_cnt  <= '0;
      slow_cnt  <= '0;
      sig_len   <= LEN_W'(SIG_INIT);
      sim_en    <= 1'b1;
    end else if (restart) begin
      prev_loss <= '0;
      have_prev <= 1'b0;
      same_cnt  <= '0;
      slow_cnt  <= '0;
      sig_len   <= LEN_W'(SIG_INIT);
      sim_en    <= 1'b1;
    end else begin
      if (iter_end) begin
        prev_loss <= avg_loss;
        have_prev <= 1'b1;
        if (!unchanged)    same_cnt <= '0;
        else if (st_grow) begin
          same_cnt <= '0;
          sig_len  <= sig_len + 1'b1;
        end else if (int'(same_cnt) < K_ITERS - 1)
          same_cnt <= same_cnt + 1'b1;
      end
      if (batch_end && sim_en) begin
        if (c_s <= c_b)   slow_cnt <= '0;
        else if (st_stop) begin
          slow_cnt <= '0;
          sim_en   <= 1'b0;
        end else
          slow_cnt <= slow_cnt + 1'b1;
      end
    end
  end

endmodule
