// tb_gelu_unit: self-checking test of the GELU unit. Sends 300 beats of random Q8.8 inputs in
// [-6, 6] (plus the exact breakpoints) with random input gaps and output back-pressure; each
// result must be within 8 LSB (0.03) of the exact GELU, and beats must come out in order with a
// one-cycle latency when the output is not stalled.
module tb_gelu_unit;
  import chosen_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  vec_t in_data, out_data;
  gelu_unit dut (.*);

  function automatic real gelu_ref(real x);
    return 0.5 * x * (1.0 + ((2.0 / (1.0 + $exp(-2.0 * 0.7978845608 * (x + 0.044715 * x * x * x)))) - 1.0));
  endfunction

  vec_t q [$];
  localparam int NB = 300;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : drive
    rst_n = 0; in_valid = 0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < NB; n++) begin
      for (int i = 0; i < PM; i++)
        in_data[i] = (n == 0) ? data_t'(-1024 + 128 * i) : data_t'(int'($urandom_range(3072)) - 1536);
      in_valid = ($urandom_range(4) != 0);
      while (!in_valid) begin @(negedge clk); in_valid = ($urandom_range(4) != 0); end
      do @(posedge clk); while (!in_ready);
      q.push_back(in_data);
      @(negedge clk); in_valid = 0;
    end
  end

  int got = 0;
  initial begin : sink
    out_ready = 0;
    while (got < NB) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        vec_t x;
        x = q.pop_front();
        for (int i = 0; i < PM; i++) begin
          real y;
          y = gelu_ref(real'(x[i]) / 256.0) * 256.0;
          checks++;
          if ((real'(out_data[i]) - y) ** 2 > 64.0) begin
            failures++;
            if (failures < 10) $display("FAIL gelu(%0d) = %0d, expected %f", x[i], out_data[i], y);
          end
        end
        got++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
