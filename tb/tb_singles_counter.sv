// tb_singles_counter: random events on Tg, D1 and D2, gates at irregular
// intervals; each snapshot must equal the number of events the testbench
// issued in that gate (an event in the gate cycle belongs to the closing
// gate). Also checks 24-bit saturation using a long burst.
module tb_singles_counter;
  import phase_stab_pkg::*;
  logic clk = 0, rst_n = 0, gate = 0;
  event_t ev_tg, ev_d1, ev_d2;
  // only the strobes reach the counter
  count_t cs_tg, cs_d1, cs_d2;
  int checks = 0, failures = 0;

  singles_counter dut (.clk, .rst_n, .gate, .ev_tg(ev_tg.valid), .ev_d1(ev_d1.valid),
                       .ev_d2(ev_d2.valid), .cs_tg, .cs_d1, .cs_d2);

  always #5 clk = ~clk;

  initial begin
    #1s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string n, count_t got, int want);
    checks++;
    if (got !== count_t'(want)) begin
      failures++;
      $display("%s: got %0d want %0d", n, got, want);
    end
  endtask

  initial begin
    int n_tg, n_d1, n_d2;
    ev_tg = '0; ev_d1 = '0; ev_d2 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 20; g++) begin
      automatic int len = 50 + ($urandom % 200);
      n_tg = 0; n_d1 = 0; n_d2 = 0;
      for (int c = 0; c < len; c++) begin
        ev_tg.valid = ($urandom % 2) == 0;
        ev_d1.valid = ($urandom % 3) == 0;
        ev_d2.valid = ($urandom % 5) == 0;
        n_tg += ev_tg.valid; n_d1 += ev_d1.valid; n_d2 += ev_d2.valid;
        gate = (c == len - 1);
        @(posedge clk); #1;
      end
      gate = 0; ev_tg = '0; ev_d1 = '0; ev_d2 = '0;
      check("cs_tg", cs_tg, n_tg);
      check("cs_d1", cs_d1, n_d1);
      check("cs_d2", cs_d2, n_d2);
    end
    // saturation: 2**24 + 5 events on Tg within one gate
    ev_tg.valid = 1;
    repeat ((1 << 24) + 5) @(posedge clk);
    #1 gate = 1;
    @(posedge clk); #1;
    gate = 0; ev_tg = '0;
    check("cs_tg saturated", cs_tg, (1 << 24) - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
