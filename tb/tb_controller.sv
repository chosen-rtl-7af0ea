// tb_controller: self-checking test of the controller & scheduler with emulated banks and
// kernels. A six-operation list (LayerNorm, softmax, GELU, matrix product, add, head-wise
// product) is run; every
// read request each bank receives (address, length, crossbar routing and rotation) and every
// write address it is given are compared with lists built here from the schedules of the
// source: LayerNorm kernel k reads, in round c, its row's part from bank (k + c) mod 4;
// softmax reads each row once per head slice; GELU reads row r from every bank; the matrix
// product broadcasts the A rows and then reads B row by row; the head-wise product reads the
// A rows of each bank's own part without broadcast. Beats are returned and writes
// accepted at random times. The kernel configuration of LayerNorm (rows per kernel, words per
// row) and the done pulse are checked as well.
module tb_controller;
  import chosen_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, prog_we, start, busy, done, k_start;
  logic [5:0] prog_addr;
  instr_t prog_data;
  kcfg_t k_cfg;
  route_e route;
  logic [1:0] rd_rot, wr_rot;
  logic [BN-1:0] wr_open, rq_valid, rq_ready, rd_beat, wr_beat;
  addr_t [BN-1:0] rq_addr, wr_addr;
  logic [BN-1:0][LEN_W-1:0] rq_len;

  controller #(.PROG_DEPTH(64)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  typedef struct { int addr; int len; int rot; int bc; } rq_t;
  rq_t exp_rq [BN][$];
  int  exp_wr [BN][$];
  int  outst [BN];

  function automatic instr_t mk(op_e op, int n, int k, int w, int aw, int el, int reps,
                                int s0, int s1, int d, int s0s, int s1s, int ds);
    instr_t i;
    i = '0;
    i.k.op = op; i.k.n_rows = 16'(n); i.k.k_dim = 16'(k); i.k.words = 16'(w);
    i.k.a_words = 16'(aw); i.k.elems = 16'(el); i.k.reps = 8'(reps);
    i.src0 = addr_t'(s0); i.src1 = addr_t'(s1); i.dst = addr_t'(d);
    i.src0_stride = addr_t'(s0s); i.src1_stride = addr_t'(s1s); i.dst_stride = addr_t'(ds);
    return i;
  endfunction

  function automatic void ex_rd(int b, int a, int l, int rot, int bc);
    rq_t r;
    r.addr = a; r.len = l; r.rot = rot; r.bc = bc;
    exp_rq[b].push_back(r);
  endfunction

  // emulated banks: accept requests, return beats, accept writes at random
  always @(negedge clk) begin
    rq_ready = 4'($urandom);
    for (int b = 0; b < BN; b++) begin
      rd_beat[b] = (outst[b] > 0) && ($urandom_range(3) != 0);
      wr_beat[b] = wr_open[b] && ($urandom_range(2) != 0);
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < BN; b++) begin
      if (rd_beat[b]) outst[b]--;
      if (rq_valid[b] && rq_ready[b]) begin
        rq_t e;
        outst[b] += int'(rq_len[b]);
        if (exp_rq[b].size() == 0) chk(0, $sformatf("unexpected request on bank %0d", b));
        else begin
          e = exp_rq[b].pop_front();
          chk(int'(rq_addr[b]) == e.addr && int'(rq_len[b]) == e.len,
              $sformatf("bank %0d request %0d/%0d, expected %0d/%0d", b, rq_addr[b], rq_len[b], e.addr, e.len));
          chk(int'(rd_rot) == e.rot && (route == RT_BCAST) == (e.bc != 0),
              $sformatf("bank %0d routing rot %0d, expected %0d", b, rd_rot, e.rot));
        end
      end
      if (wr_beat[b]) begin
        if (exp_wr[b].size() == 0) chk(0, $sformatf("unexpected write on bank %0d", b));
        else begin
          int e;
          e = exp_wr[b].pop_front();
          chk(int'(wr_addr[b]) == e, $sformatf("bank %0d write %0d, expected %0d", b, wr_addr[b], e));
        end
      end
    end
    if (k_start && k_cfg.op == OP_LAYERNORM)
      chk(k_cfg.n_rows == 2 && k_cfg.words == 8, "LayerNorm kernel configuration");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t p [7];
    int n_done;
    rst_n = 0; prog_we = 0; prog_addr = 0; prog_data = '0; start = 0;
    rq_ready = '0; rd_beat = '0; wr_beat = '0;
    foreach (outst[b]) outst[b] = 0;
    p[0] = mk(OP_LAYERNORM, 8, 0, 2, 0, 0, 1, 100, 0, 200, 2, 0, 2);
    p[1] = mk(OP_SOFTMAX, 2, 0, 2, 0, 20, 3, 300, 0, 400, 6, 0, 6);
    p[2] = mk(OP_GELU, 3, 0, 2, 0, 0, 1, 500, 0, 600, 2, 0, 2);
    p[3] = mk(OP_MATMUL, 2, 3, 2, 1, 0, 1, 700, 800, 900, 1, 2, 2);
    p[4] = mk(OP_ADD, 2, 0, 1, 0, 0, 1, 1000, 1100, 1200, 1, 1, 1);
    p[5] = mk(OP_HMATMUL, 2, 16, 1, 1, 0, 1, 1300, 1400, 1500, 3, 1, 1);
    p[6] = '0;
    // expected traffic, written from the schedules
    for (int g = 0; g < 2; g++) for (int c = 0; c < BN; c++) for (int k = 0; k < BN; k++) begin
      int b;
      b = (k + c) % BN;
      ex_rd(b, 100 + (g * BN + k) * 2, 2, c, 0);
    end
    for (int g = 0; g < 2; g++) for (int c = 0; c < BN; c++) for (int k = 0; k < BN; k++)
      for (int w = 0; w < 2; w++) exp_wr[(k + c) % BN].push_back(200 + (g * BN + k) * 2 + w);
    for (int b = 0; b < BN; b++) begin
      for (int r = 0; r < 2; r++) for (int h = 0; h < 3; h++) begin
        ex_rd(b, 300 + r * 6 + h * 2, 2, 0, 0);
        for (int w = 0; w < 2; w++) exp_wr[b].push_back(400 + r * 6 + h * 2 + w);
      end
      for (int r = 0; r < 3; r++) begin
        ex_rd(b, 500 + r * 2, 2, 0, 0);
        for (int w = 0; w < 2; w++) exp_wr[b].push_back(600 + r * 2 + w);
      end
      for (int r = 0; r < 2; r++) ex_rd(b, 700 + r, 1, 0, 1);
      for (int kk = 0; kk < 3; kk++) ex_rd(b, 800 + kk * 2, 2, 0, 0);
      for (int r = 0; r < 2; r++) for (int w = 0; w < 2; w++) exp_wr[b].push_back(900 + r * 2 + w);
      for (int r = 0; r < 2; r++) begin
        ex_rd(b, 1100 + r, 1, 0, 0);
        ex_rd(b, 1000 + r, 1, 0, 0);
        exp_wr[b].push_back(1200 + r);
      end
      for (int r = 0; r < 2; r++) ex_rd(b, 1300 + r * 3, 1, 0, 0);
      for (int kk = 0; kk < 16; kk++) ex_rd(b, 1400 + kk, 1, 0, 0);
      for (int r = 0; r < 2; r++) exp_wr[b].push_back(1500 + r);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      prog_we = 1; prog_addr = 6'(i); prog_data = p[i];
      @(negedge clk);
    end
    prog_we = 0;
    start = 1; @(negedge clk); start = 0;
    n_done = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    for (int b = 0; b < BN; b++) begin
      chk(exp_rq[b].size() == 0, $sformatf("bank %0d: %0d requests missing", b, exp_rq[b].size()));
      chk(exp_wr[b].size() == 0, $sformatf("bank %0d: %0d writes missing", b, exp_wr[b].size()));
    end
    chk(!busy, "controller idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
