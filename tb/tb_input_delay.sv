// tb_input_delay: drives random pulse trains into input_delay at several
// tap settings and checks that dout equals din delayed by exactly
// 3 + delay clock cycles.
module tb_input_delay;
  localparam int unsigned MAXD = 32;
  logic clk = 0, rst_n = 0, din = 0, dout;
  logic [4:0] delay = '0;
  int checks = 0, failures = 0;
  logic hist [0:63];  // hist[k] = din k cycles ago (sampled at the edge)

  input_delay #(.MAX_DELAY(MAXD)) dut (.clk, .rst_n, .din, .delay, .dout);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d_list[5] = '{0, 1, 7, 20, 31};
    foreach (hist[k]) hist[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (d_list[n]) begin
      delay = 5'(d_list[n]);
      for (int c = 0; c < 300; c++) begin
        @(posedge clk);
        // history of what the DUT sampled at this edge and before
        for (int k = 63; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = din;
        #1;
        if (c > 40) begin
          checks++;
          if (dout !== hist[3 + d_list[n] - 1]) begin
            failures++;
            if (failures < 10) $display("delay %0d cycle %0d: dout=%0b want %0b", d_list[n], c, dout, hist[3 + d_list[n] - 1]);
          end
        end
        din = ($urandom % 3) == 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
