// tb_a_tile_buffer: self-checking test of the A tile buffer (TN = 5, KMAX = 128, so 2 words per
// part). All four write ports are driven in the same cycles with random words; then every
// element is read back through the one-cycle read port, including a stalled read (rd_en low)
// to check that the output holds.
module tb_a_tile_buffer;
  import chosen_pkg::*;
  localparam int TN = 5, KMAX = 128, PART_W = KMAX / BN / PM;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [BN-1:0] wr_en;
  logic [BN-1:0][15:0] wr_row, wr_word;
  vec_t [BN-1:0] wr_data;
  logic rd_en;
  logic [1:0] rd_bank;
  logic [15:0] rd_row, rd_word;
  logic [3:0] rd_lane;
  data_t rd_data;

  a_tile_buffer #(.TN(TN), .KMAX(KMAX)) dut (.*);

  vec_t ref_mem [BN][TN][PART_W];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = '0; rd_en = 0; rd_bank = 0; rd_row = 0; rd_word = 0; rd_lane = 0; wr_row = '0; wr_word = '0; wr_data = '0;
    @(negedge clk);
    for (int r = 0; r < TN; r++) for (int w = 0; w < PART_W; w++) begin
      for (int b = 0; b < BN; b++) begin
        wr_en[b] = 1; wr_row[b] = 16'(r); wr_word[b] = 16'(w);
        for (int i = 0; i < PM; i++) wr_data[b][i] = data_t'($urandom);
        ref_mem[b][r][w] = wr_data[b];
      end
      @(negedge clk);
    end
    wr_en = '0;
    for (int b = 0; b < BN; b++) for (int r = 0; r < TN; r++) for (int w = 0; w < PART_W; w++)
      for (int i = 0; i < PM; i += 3) begin
        rd_en = 1; rd_bank = 2'(b); rd_row = 16'(r); rd_word = 16'(w); rd_lane = 4'(i);
        @(negedge clk);
        rd_en = 0; rd_bank = 2'(BN - 1 - b); rd_lane = 4'(PM - 1 - i);   // must not disturb the output
        @(negedge clk);
        checks++;
        if (rd_data != ref_mem[b][r][w][i]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d row %0d word %0d lane %0d", b, r, w, i);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
