// tb_chosen_top: end-to-end test of the accelerator at reduced sizes (Pn = 2, Tn = 8, Tm = 64).
// It connects chosen_top to the shared environment chosen_env (bank models, schedule, reference
// checks, mechanism counters) and taps a few internal signals as mechanism probes.
module tb_chosen_top;
  import chosen_pkg::*;

  logic clk, rst_n, prog_we, start, busy, done;
  logic [5:0] prog_addr;
  instr_t prog_data;
  logic  [BN-1:0] rq_valid, rq_ready, rd_valid, rd_ready, wr_valid, wr_ready, kernel_busy;
  addr_t [BN-1:0] rq_addr, wr_addr;
  logic  [BN-1:0][LEN_W-1:0] rq_len;
  word_t [BN-1:0] rd_data, wr_data;
  logic [9:0] probe;

  chosen_top #(.PN(2), .TN(8), .TM(64), .KMAX(128), .SM_WORDS(4), .LN_WORDS(8)) u_dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .start, .busy, .done, .kernel_busy,
    .rq_valid, .rq_ready, .rq_addr, .rq_len, .rd_valid, .rd_ready, .rd_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  chosen_env #(.PN(2), .TN(8), .TM(64), .DEPTH(4096), .STALL_PCT(10)) u_env (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .start, .busy, .done,
    .rq_valid, .rq_ready, .rq_addr, .rq_len, .rd_valid, .rd_ready, .rd_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .probe
  );

  always_comb begin
    probe[0] = u_dut.g_kernel[0].u_kernel.u_pe_array.mac_en &&
               (u_dut.g_kernel[0].u_kernel.u_pe_array.a_hs || u_dut.g_kernel[0].u_kernel.u_pe_array.b_hs);
    probe[1] = (u_dut.u_ctrl.route == RT_BCAST) && ((rd_valid & rd_ready) != '0);
    probe[2] = (u_dut.u_ctrl.rd_rot != '0) && ((rd_valid & rd_ready) != '0);
    probe[3] = (u_dut.u_ctrl.wr_rot != '0) && ((wr_valid & wr_ready) != '0);
    probe[4] = (u_dut.u_ctrl.state == 3'd2) && u_dut.u_ctrl.r_sync && !u_dut.u_ctrl.all_idle;
    probe[5] = u_dut.g_kernel[0].u_kernel.u_pe_array.mac_en;
    probe[6] = u_dut.g_kernel[0].u_kernel.u_pe_array.busy;
    probe[7] = (u_dut.u_ctrl.ins.k.op == OP_SOFTMAX) && (u_dut.u_ctrl.r_sub != 0) && ((rq_valid & rq_ready) != '0);
    probe[8] = (u_dut.g_kernel[0].u_kernel.u_pe_array.state == 2'd1) && !u_dut.g_kernel[0].u_kernel.u_pe_array.mac_en;
    probe[9] = u_dut.g_kernel[0].u_kernel.own && u_dut.g_kernel[0].u_kernel.abuf_we[0];
  end

endmodule
