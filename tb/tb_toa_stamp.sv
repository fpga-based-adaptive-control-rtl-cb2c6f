// tb_toa_stamp: random level changes into toa_stamp; every rising edge must
// give exactly one strobe, one cycle later, carrying the time base value of
// the edge cycle; no strobe otherwise.
module tb_toa_stamp;
  import phase_stab_pkg::*;
  logic clk = 0, rst_n = 0, level = 0;
  ts_t now = '0;
  event_t ev;
  int checks = 0, failures = 0, edges = 0;

  toa_stamp dut (.clk, .rst_n, .level, .now, .ev);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev_level;
    ts_t  prev_now;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev_level = 0;
    for (int c = 0; c < 2000; c++) begin
      @(posedge clk);          // DUT samples level/now here
      #1;
      // expected strobe for the values sampled at this edge
      checks++;
      if (ev.valid !== (level & ~prev_level)) begin
        failures++;
        $display("cycle %0d: valid=%0b level=%0b prev=%0b", c, ev.valid, level, prev_level);
      end
      if (level & ~prev_level) begin
        edges++;
        checks++;
        if (ev.t !== now) begin
          failures++;
          $display("cycle %0d: t=%0d want %0d", c, ev.t, now);
        end
      end
      prev_level = level;
      prev_now   = now;
      now   = now + 8'd1;
      level = ($urandom % 2) == 0;
    end
    checks++;
    if (edges < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
