// tb_adapt_ctrl: checks signature growth after K_ITERS unchanged losses and
// the stop of similarity detection after T_BATCHES slow batches.
module tb_adapt_ctrl;
  logic clk = 0, rst_n = 1, restart = 0, iter_end = 0, batch_end = 0;
  logic signed [31:0] avg_loss = 0;
  logic [39:0] c_s = 0, c_b = 0;
  logic [5:0] sig_len;
  logic sim_en, st_grow, st_stop;
  int checks = 0, failures = 0;

  adapt_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic iter(input int loss);
    avg_loss = loss; iter_end = 1; @(posedge clk); #1 iter_end = 0;
  endtask

  task automatic batch(input int cs, input int cb);
    c_s = 40'(cs); c_b = 40'(cb); batch_end = 1; @(posedge clk); #1 batch_end = 0;
  endtask

  initial begin
    #5000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(sig_len == 20 && sim_en, "reset values");
    base = int'($urandom_range(100, 1000));
    iter(base);                       // first loss, no previous
    for (int i = 0; i < 4; i++) iter(base);
    chk(sig_len == 20, "no growth before K unchanged iterations");
    iter(base);
    chk(sig_len == 21, "growth after K unchanged iterations");
    iter(base + 7);
    chk(sig_len == 21, "changed loss does not grow");
    for (int i = 0; i < 4; i++) batch(200, 100);
    chk(sim_en, "still enabled after T-1 slow batches");
    batch(50, 100);
    batch(200, 100);
    chk(sim_en, "fast batch resets the count");
    for (int i = 0; i < 4; i++) batch(200, 100);
    chk(!sim_en, "stopped after T slow batches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
