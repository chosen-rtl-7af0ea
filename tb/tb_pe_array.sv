// tb_pe_array: self-checking test of the 1D PE array at PN = 3, TN = 7, TM = 32 (ROWS = 3, so
// the last PE is only partly used). Runs two tiles (n_rows = 7, k = 9, 2 words; then n_rows = 4,
// k = 3, 1 word) with random operands and random gaps on the input streams and random
// back-pressure on the output, checks every C element exactly, and checks that the MAC cycles
// equal k * ROWS * m_words, the cost model of the source.
module tb_pe_array;
  import chosen_pkg::*;
  localparam int PN = 3, TN = 7, TM = 32, ROWS = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, a_valid, a_ready, b_valid, b_ready, c_valid, c_ready, busy, done;
  logic [15:0] n_rows, m_words, k_dim;
  data_t a_data;
  vec_t b_data, c_data;

  pe_array #(.PN(PN), .TN(TN), .TM(TM)) dut (.*);

  int macs;
  always @(posedge clk) if (dut.mac_en) macs++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int n, int k, int mw);
    int A [][], B [][];
    int got_rows;
    A = new[n]; foreach (A[i]) A[i] = new[k];
    B = new[k]; foreach (B[i]) B[i] = new[mw * PM];
    foreach (A[i, j]) A[i][j] = int'($urandom_range(4000)) - 2000;
    foreach (B[i, j]) B[i][j] = int'($urandom_range(4000)) - 2000;
    macs = 0;
    n_rows = 16'(n); k_dim = 16'(k); m_words = 16'(mw);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin   // A: column kk, rows 0..n-1
        for (int kk = 0; kk < k; kk++) for (int r = 0; r < n; r++) begin
          while ($urandom_range(3) == 0) @(negedge clk);
          a_valid = 1; a_data = data_t'(A[r][kk]);
          do @(posedge clk); while (!a_ready);
          @(negedge clk); a_valid = 0;
        end
      end
      begin   // B: row kk
        for (int kk = 0; kk < k; kk++) for (int w = 0; w < mw; w++) begin
          while ($urandom_range(3) == 0) @(negedge clk);
          b_valid = 1;
          for (int i = 0; i < PM; i++) b_data[i] = data_t'(B[kk][w * PM + i]);
          do @(posedge clk); while (!b_ready);
          @(negedge clk); b_valid = 0;
        end
      end
      begin   // C
        got_rows = 0;
        for (int r = 0; r < n; r++) for (int w = 0; w < mw; w++) begin
          c_ready = 0;
          while ($urandom_range(2) == 0) @(negedge clk);
          c_ready = 1;
          do @(posedge clk); while (!c_valid);
          for (int i = 0; i < PM; i++) begin
            longint acc;
            int e;
            acc = 0;
            for (int kk = 0; kk < k; kk++) acc += longint'(A[r][kk]) * longint'(B[kk][w * PM + i]);
            acc = acc >>> FRAC;
            e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
            checks++;
            if (int'(c_data[i]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL C[%0d][%0d] = %0d, expected %0d", r, w * PM + i, c_data[i], e);
            end
          end
          @(negedge clk);
        end
        c_ready = 0;
      end
    join
    checks++;
    if (macs != k * ROWS * mw) begin
      failures++;
      $display("FAIL MAC cycles %0d, expected %0d", macs, k * ROWS * mw);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; a_valid = 0; b_valid = 0; c_ready = 0; a_data = 0; b_data = '0;
    n_rows = 0; m_words = 0; k_dim = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_tile(7, 9, 2);
    run_tile(4, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
