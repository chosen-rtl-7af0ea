// tb_residual_add_unit: self-checking test of the residual addition. Three rows of 12 beats
// (skip part, then main part) with random values that often overflow; every sum must equal
// the saturated exact sum, with random output back-pressure.
module tb_residual_add_unit;
  import chosen_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NW = 12;

  logic rst_n, start, in_valid, in_ready, out_valid, out_ready, busy, done;
  logic [15:0] words;
  vec_t in_data, out_data;
  residual_add_unit #(.MAX_WORDS(48)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; in_valid = 0; out_ready = 0; in_data = '0; words = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int row = 0; row < 3; row++) begin
      vec_t s [NW];
      words = 16'(NW);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int w = 0; w < NW; w++) begin
        in_valid = 1;
        for (int i = 0; i < PM; i++) in_data[i] = data_t'($urandom);
        s[w] = in_data;
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
      end
      for (int w = 0; w < NW; w++) begin
        in_valid = 1;
        for (int i = 0; i < PM; i++) in_data[i] = data_t'($urandom);
        out_ready = ($urandom_range(1) == 1);
        while (!out_ready) begin @(negedge clk); out_ready = ($urandom_range(1) == 1); end
        do @(posedge clk); while (!(out_valid && out_ready));
        for (int i = 0; i < PM; i++) begin
          int e;
          e = int'(s[w][i]) + int'(in_data[i]);
          e = (e > 32767) ? 32767 : (e < -32768) ? -32768 : e;
          checks++;
          if (int'(out_data[i]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d word %0d lane %0d", row, w, i);
          end
        end
        @(negedge clk);
      end
      in_valid = 0; out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
