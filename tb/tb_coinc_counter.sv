// tb_coinc_counter: issues isolated event pairs on streams a and b with a
// chosen arrival-time offset (either order, including the same cycle) plus
// unpartnered singles, separated by quiet gaps. The expected count is the
// number of pairs whose offset is within the window; it is worked out from
// the stimulus, not from the DUT. Also checks that a pending event expires.
module tb_coinc_counter;
  import phase_stab_pkg::*;
  logic clk = 0, rst_n = 0, gate = 0, hit;
  ts_t now = '0;
  logic [3:0] window;
  event_t ev_a, ev_b;
  count_t cc;
  int checks = 0, failures = 0;

  coinc_counter dut (.clk, .rst_n, .now, .window, .gate, .ev_a, .ev_b, .hit, .cc);

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 8'd1;

  int hits = 0;
  always @(posedge clk) if (hit) hits++;

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one event on a (or b) in the current cycle, stamped with now
  task automatic idle(int n);
    repeat (n) begin
      ev_a = '0; ev_b = '0;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    int expected, hits_seen;
    ev_a = '0; ev_b = '0;
    window = 4'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int w = 0; w < 4; w++) begin
      window = 4'(w);
      expected = 0;
      idle(20);
      hits = 0;
      for (int k = 0; k < 200; k++) begin
        automatic int off = int'($urandom % 9) - 4;   // b arrives off cycles after a
        automatic int kind = $urandom % 5;
        if (kind == 0) begin                 // lone event on a or b
          if ($urandom % 2) begin ev_a.valid = 1; ev_a.t = now; end
          else begin ev_b.valid = 1; ev_b.t = now; end
          @(posedge clk); #1;
          idle(25);
          checks++;
          if (hits != expected) begin failures++; hits = expected; end
          continue;
        end
        if (off == 0) begin
          ev_a.valid = 1; ev_a.t = now; ev_b.valid = 1; ev_b.t = now;
          @(posedge clk); #1;
        end else if (off > 0) begin
          ev_a.valid = 1; ev_a.t = now;
          @(posedge clk); #1;
          idle(off - 1);
          ev_b.valid = 1; ev_b.t = now;
          @(posedge clk); #1;
        end else begin
          ev_b.valid = 1; ev_b.t = now;
          @(posedge clk); #1;
          idle(-off - 1);
          ev_a.valid = 1; ev_a.t = now;
          @(posedge clk); #1;
        end
        if ((off < 0 ? -off : off) <= w) expected++;
        idle(25);
        // every pair has been decided by now: one hit exactly when in window
        checks++;
        if (hits != expected) begin
          failures++;
          if (failures < 10) $display("window %0d offset %0d: hits %0d expected %0d", w, off, hits, expected);
          hits = expected;
        end
      end
      gate = 1;
      @(posedge clk); #1;
      gate = 0;
      checks++;
      if (cc !== count_t'(expected)) begin
        failures++;
        $display("window %0d: cc=%0d expected %0d", w, cc, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
