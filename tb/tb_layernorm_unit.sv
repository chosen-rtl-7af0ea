// tb_layernorm_unit: self-checking test of the LayerNorm unit with 768-element rows (48 beats,
// the DeiT-B width). Rows have random offsets and spreads (including a narrow one); each output
// must be within 1% + 3 LSB of the exact (x - mean) / sqrt(var) in Q8.8, and a row without
// stalls must take at most 2 * words + 5 cycles from start to done.
module tb_layernorm_unit;
  import chosen_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 768, NW = D / PM;

  logic rst_n, start, in_valid, in_ready, out_valid, out_ready, busy, done;
  logic [15:0] words;
  vec_t in_data, out_data;
  layernorm_unit #(.MAX_WORDS(48)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_row(int off, int spread);
    int x [D];
    real mu, v;
    int t0, t1;
    mu = 0.0; v = 0.0;
    foreach (x[i]) begin x[i] = off + int'($urandom_range(2 * spread)) - spread; mu += real'(x[i]); end
    mu /= real'(D);
    foreach (x[i]) v += (real'(x[i]) - mu) ** 2;
    v /= real'(D);
    words = 16'(NW);
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    for (int w = 0; w < NW; w++) begin
      in_valid = 1;
      for (int i = 0; i < PM; i++) in_data[i] = data_t'(x[w * PM + i]);
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    for (int w = 0; w < NW; w++) begin
      do @(posedge clk); while (!out_valid);
      for (int i = 0; i < PM; i++) begin
        real y;
        y = (real'(x[w * PM + i]) - mu) / $sqrt(v) * 256.0;
        checks++;
        if ((real'(out_data[i]) - y) ** 2 > (0.01 * y + 3.0) ** 2 + 9.0) begin
          failures++;
          if (failures < 10) $display("FAIL off=%0d spread=%0d got %0d expected %f", off, spread, out_data[i], y);
        end
      end
    end
    @(negedge clk);
    t1 = $time; out_ready = 0;
    checks++;
    if ((t1 - t0) / 10 > 2 * NW + 5) begin
      failures++;
      $display("FAIL row took %0d cycles", (t1 - t0) / 10);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; out_ready = 0; in_data = '0; words = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_row(0, 256);
    run_row(-3000, 4000);
    run_row(700, 20);
    run_row(100, 12000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
