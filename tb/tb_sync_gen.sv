// tb_sync_gen: checks the gate timer period (first tick PERIOD cycles after
// run rises, then every PERIOD cycles) and that run low stops the ticks.
module tb_sync_gen;
  localparam int unsigned P = 37;
  logic clk = 0, rst_n = 0, run = 0, tick;
  int checks = 0, failures = 0;

  sync_gen #(.PERIOD(P)) dut (.clk, .rst_n, .run, .tick);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last, ticks;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    #1 run = 1;
    last = 0; ticks = 0;
    for (int c = 1; c <= 10 * P; c++) begin
      @(posedge clk); #1;
      if (tick) begin
        ticks++;
        checks++;
        if (c - last != P) begin
          failures++;
          $display("tick at %0d, %0d cycles after the previous", c, c - last);
        end
        last = c;
      end
    end
    checks++;
    if (ticks != 10) begin failures++; $display("ticks=%0d", ticks); end
    run = 0;
    for (int c = 0; c < 3 * P; c++) begin
      @(posedge clk); #1;
      checks++;
      if (c > 0 && tick) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
