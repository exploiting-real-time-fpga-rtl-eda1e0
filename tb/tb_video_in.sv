// tb_video_in: 8x4 frames. Pixels sent before start and before the
// start-of-frame pixel must be ignored; the captured frame must be written to
// addresses 0..31 in order with the pixel values sent, with gaps in the input
// stream, and done must pulse once, with the last write.
module tb_video_in;
  localparam int W = 8, H = 4;
  logic clk = 0, rst_n = 0;
  logic start = 0, pv = 0, sof = 0;
  logic [23:0] pd;
  logic wr_en, busy, done;
  logic [18:0] wa;
  logic [31:0] wd;
  int checks = 0, failures = 0;
  int nwr = 0, ndone = 0;

  video_in #(.HRES(W), .VRES(H)) dut (.clk(clk), .rst_n(rst_n), .start(start), .pix_valid(pv),
    .pix_sof(sof), .pix_data(pd), .wr_en(wr_en), .wr_addr(wa), .wr_data(wd), .busy(busy), .done(done));

  always #5 clk = ~clk;

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [23:0] pix(int frame, int i);
    return 24'(frame * 24'h10000 + i * 24'h101 + 24'h5);
  endfunction

  always @(posedge clk) begin
    #1;
    if (wr_en) begin
      checks += 2;
      if (int'(wa) != nwr) begin failures++; $display("write %0d to address %0d", nwr, wa); end
      if (wd != {8'h0, pix(1, nwr)}) begin failures++; $display("write %0d data %h", nwr, wd); end
      nwr++;
    end
    if (done) begin
      ndone++;
      checks++;
      if (nwr != W*H) begin failures++; $display("done after %0d writes", nwr); end
    end
  end

  task automatic send_frame(int frame, bit gaps);
    for (int i = 0; i < W*H; i++) begin
      if (gaps && (i % 3 == 1)) begin @(negedge clk); pv = 0; sof = 0; end
      @(negedge clk);
      pv = 1; sof = (i == 0); pd = pix(frame, i);
    end
    @(negedge clk) pv = 0; sof = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send_frame(0, 0);            // before start: ignored
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    // tail of a frame without sof: ignored
    for (int i = 0; i < 5; i++) begin @(negedge clk); pv = 1; sof = 0; pd = 24'hBAD000 + 24'(i); end
    send_frame(1, 1);
    send_frame(2, 0);            // after done: ignored
    repeat (5) @(negedge clk);
    checks += 3;
    if (nwr != W*H) begin failures++; $display("%0d writes", nwr); end
    if (ndone != 1) begin failures++; $display("%0d done pulses", ndone); end
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
