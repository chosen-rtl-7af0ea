// tb_softmax_unit: self-checking test of the softmax unit (MAX_WORDS = 13, one 197-element
// attention row slice at most). Runs slices of 197, 20, 16 and 1 valid elements with random
// scores in [-8, 8]; every output must be within 2 LSB + 2% of the exact softmax (Q8.8), lanes
// past the valid length must be 0, and a slice without stalls must take at most
// 3 * words + 4 cycles from start to done.
module tb_softmax_unit;
  import chosen_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, in_valid, in_ready, out_valid, out_ready, busy, done;
  logic [15:0] elems, words;
  vec_t in_data, out_data;
  softmax_unit #(.MAX_WORDS(13)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_slice(int n, int spread);
    int x [];
    int nw, t0, t1;
    real mx, s;
    nw = (n + PM - 1) / PM;
    x = new[nw * PM];
    mx = -1.0e9; s = 0.0;
    foreach (x[i]) x[i] = (i < n) ? int'($urandom_range(2 * spread)) - spread : 0;
    for (int i = 0; i < n; i++) if (real'(x[i]) > mx) mx = real'(x[i]);
    for (int i = 0; i < n; i++) s += $exp((real'(x[i]) - mx) / 256.0);
    elems = 16'(n); words = 16'(nw);
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    for (int w = 0; w < nw; w++) begin
      in_valid = 1;
      for (int i = 0; i < PM; i++) in_data[i] = data_t'(x[w * PM + i]);
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 0;
    out_ready = 1;
    for (int w = 0; w < nw; w++) begin
      do @(posedge clk); while (!out_valid);
      for (int i = 0; i < PM; i++) begin
        real y;
        int e;
        e = w * PM + i;
        y = (e < n) ? $exp((real'(x[e]) - mx) / 256.0) / s * 256.0 : 0.0;
        checks++;
        if ((real'(out_data[i]) - y) ** 2 > (2.0 + 0.02 * y) ** 2) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d e=%0d got %0d expected %f", n, e, out_data[i], y);
        end
      end
    end
    @(negedge clk);
    while (!done && busy) @(negedge clk);
    t1 = $time;
    out_ready = 0;
    checks++;
    if ((t1 - t0) / 10 > 3 * nw + 4) begin
      failures++;
      $display("FAIL slice of %0d words took %0d cycles", nw, (t1 - t0) / 10);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; out_ready = 0; in_data = '0; elems = 0; words = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_slice(197, 2048);
    run_slice(20, 1024);
    run_slice(16, 256);
    run_slice(1, 100);
    run_slice(197, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
