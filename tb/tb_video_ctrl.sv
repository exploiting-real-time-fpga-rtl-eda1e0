// tb_video_ctrl: the controller must enable once, stall while no result is
// ready, consume a result by pulsing result_consume with both starts in the
// same clock, latch the angle values, wait for both done (given in either
// order and at different times), then swap banks exactly once per iteration.
module tb_video_ctrl;
  logic clk = 0, rst_n = 0;
  logic ready = 0, consume, in_done = 0, out_done = 0;
  logic [9:0] th_in = 0, th;
  logic signed [11:0] bx_in = 0, by_in = 0, bx, by;
  logic enable, in_start, out_start, bank_sel, stall, swap;
  int checks = 0, failures = 0;
  int n_cons = 0, n_swap = 0, n_stall = 0, n_in = 0, n_out = 0;

  video_ctrl dut (.clk(clk), .rst_n(rst_n), .result_ready(ready), .result_consume(consume),
    .theta_in(th_in), .bx_in(bx_in), .by_in(by_in), .theta(th), .bx(bx), .by(by),
    .enable(enable), .in_start(in_start), .out_start(out_start), .in_done(in_done), .out_done(out_done),
    .bank_sel(bank_sel), .stall_wait(stall), .swap(swap));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (consume) begin
      n_cons++; ready <= 0;
      checks++;
      if (!(in_start && out_start)) begin failures++; $display("starts not with consume"); end
    end
    if (in_start) n_in++;
    if (out_start) n_out++;
    if (swap) n_swap++;
    if (stall) n_stall++;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    logic b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check("enable after start-up", enable, 1);
    repeat (10) @(negedge clk);
    check("no start without a result", n_in, 0);
    check("stalled while waiting", int'(n_stall >= 10), 1);
    for (int it = 0; it < 3; it++) begin
      b0 = bank_sel;
      th_in = 10'(100 + it); bx_in = 12'(it - 1); by_in = 12'(2 * it);
      ready = 1;
      @(negedge clk); @(negedge clk);
      check("theta latched", th, 100 + it);
      check("bx latched", bx, it - 1);
      check("by latched", by, 2 * it);
      th_in = 10'(7);            // changes during the frame are not taken
      repeat (5) @(negedge clk);
      if (it == 1) begin out_done = 1; @(negedge clk) out_done = 0; repeat (4) @(negedge clk); in_done = 1; @(negedge clk) in_done = 0; end
      else if (it == 2) begin in_done = 1; out_done = 1; @(negedge clk) in_done = 0; out_done = 0; end
      else begin in_done = 1; @(negedge clk) in_done = 0; repeat (3) @(negedge clk); check("no swap before both done", n_swap, it); out_done = 1; @(negedge clk) out_done = 0; end
      check("theta held during frame", th, 100 + it);
      repeat (3) @(negedge clk);
      check("swap count", n_swap, it + 1);
      check("bank toggled", bank_sel, int'(!b0));
    end
    check("consumes", n_cons, 3);
    check("in starts", n_in, 3);
    check("out starts", n_out, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
