// tb_bank_xbar: self-checking test of the bank/kernel crossbar. For every read rotation and
// write rotation, in direct and broadcast mode, with random valid/ready/open patterns and data,
// it checks that kernel k sees bank (k + rd_rot) mod 4, that ready flows back to the right bank,
// that broadcast delivers bank b to A port b, and that bank b writes the data of kernel
// (b - wr_rot) mod 4 only while wr_open[b] is set.
module tb_bank_xbar;
  import chosen_pkg::*;
  int checks = 0, failures = 0;

  route_e route;
  logic [1:0] rd_rot, wr_rot;
  logic [BN-1:0] wr_open, b_rd_valid, b_rd_ready, b_wr_valid, b_wr_ready;
  word_t [BN-1:0] b_rd_data, b_wr_data;
  logic [BN-1:0] k_in_valid, k_in_ready, k_a_valid, k_out_valid, k_out_ready;
  vec_t [BN-1:0] k_in_data, k_a_data, k_out_data;

  bank_xbar dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      route = (it % 3 == 2) ? RT_BCAST : RT_DIRECT;
      rd_rot = 2'($urandom); wr_rot = 2'($urandom);
      wr_open = 4'($urandom); b_rd_valid = 4'($urandom); b_wr_ready = 4'($urandom);
      k_in_ready = 4'($urandom); k_out_valid = 4'($urandom);
      for (int b = 0; b < BN; b++) begin
        for (int i = 0; i < PM; i++) begin
          b_rd_data[b][i * LANE_W +: LANE_W] = LANE_W'(signed'(16'($urandom)));
          k_out_data[b][i] = data_t'($urandom);
        end
      end
      #1;
      for (int k = 0; k < BN; k++) begin
        int src, dst;
        src = (k + rd_rot) % BN;
        dst = (k + wr_rot) % BN;
        chk(k_in_valid[k] == (route == RT_DIRECT && b_rd_valid[src]), "in_valid");
        chk(k_in_data[k] == unpack_word(b_rd_data[src]), "in_data");
        chk(k_a_valid[k] == (route == RT_BCAST && b_rd_valid[k]), "a_valid");
        chk(k_a_data[k] == unpack_word(b_rd_data[k]), "a_data");
        chk(k_out_ready[k] == (b_wr_ready[dst] && wr_open[dst]), "out_ready");
      end
      for (int b = 0; b < BN; b++) begin
        int kin, kout;
        kin  = (b - rd_rot + BN) % BN;
        kout = (b - wr_rot + BN) % BN;
        chk(b_rd_ready[b] == (route == RT_BCAST ? 1'b1 : k_in_ready[kin]), "rd_ready");
        chk(b_wr_valid[b] == (k_out_valid[kout] && wr_open[b]), "wr_valid");
        chk(unpack_word(b_wr_data[b]) == k_out_data[kout], "wr_data");
        chk(b_wr_data[b][LANE_W - 1] == k_out_data[kout][0][DW - 1], "lane sign extension");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
