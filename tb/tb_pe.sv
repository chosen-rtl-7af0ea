// tb_pe: self-checking test of one processing element (ROWS = 3, MW = 4).
// Loads A scalars into both ping-pong halves, runs vector MACs with and without clear in a
// random order and compares every accumulator with a reference kept in the testbench.
module tb_pe;
  import chosen_pkg::*;
  localparam int ROWS = 3, MW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_wr_en, a_wr_buf, mac_en, mac_clear, mac_buf;
  logic [1:0] a_wr_slot, mac_slot, rd_slot;
  logic [2:0] mac_col, rd_col;
  data_t a_wr_data;
  vec_t mac_b;
  logic [PM-1:0][ACC_W-1:0] rd_data;

  pe #(.ROWS(ROWS), .MW(MW)) dut (.*);

  int a_ref [2][ROWS];
  int acc_ref [ROWS][MW][PM];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_wr_en = 0; mac_en = 0; mac_clear = 0; mac_buf = 0; a_wr_buf = 0;
    a_wr_slot = 0; mac_slot = 0; rd_slot = 0; mac_col = 0; rd_col = 0; a_wr_data = 0; mac_b = '0;
    @(negedge clk);
    for (int bf = 0; bf < 2; bf++) for (int s = 0; s < ROWS; s++) begin
      a_wr_en = 1; a_wr_buf = bf[0]; a_wr_slot = 2'(s);
      a_ref[bf][s] = int'($urandom_range(2000)) - 1000; a_wr_data = data_t'(a_ref[bf][s]);
      @(negedge clk);
    end
    a_wr_en = 0;
    // first pass with clear on every (slot, col), then 40 random accumulations
    for (int it = 0; it < ROWS * MW + 40; it++) begin
      int s, c, bf;
      bit clr;
      if (it < ROWS * MW) begin s = it / MW; c = it % MW; clr = 1; end
      else begin s = int'($urandom_range(ROWS - 1)); c = int'($urandom_range(MW - 1)); clr = 0; end
      bf = int'($urandom_range(1));
      mac_en = 1; mac_clear = clr; mac_buf = bf[0]; mac_slot = 2'(s); mac_col = 3'(c);
      for (int i = 0; i < PM; i++) begin
        int bv;
        bv = int'($urandom_range(2000)) - 1000;
        mac_b[i] = data_t'(bv);
        acc_ref[s][c][i] = (clr ? 0 : acc_ref[s][c][i]) + a_ref[bf][s] * bv;
      end
      @(negedge clk);
    end
    mac_en = 0;
    for (int s = 0; s < ROWS; s++) for (int c = 0; c < MW; c++) begin
      rd_slot = 2'(s); rd_col = 3'(c);
      #1;
      for (int i = 0; i < PM; i++) begin
        checks++;
        if (signed'(rd_data[i]) != acc_ref[s][c][i]) begin
          failures++;
          if (failures < 10) $display("FAIL acc[%0d][%0d][%0d] = %0d, expected %0d", s, c, i, signed'(rd_data[i]), acc_ref[s][c][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
