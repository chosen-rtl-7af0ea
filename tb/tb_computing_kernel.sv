// tb_computing_kernel: self-checking test of one computing kernel (PN = 2, TN = 4, TM = 32,
// KMAX = 64). Runs, one after the other: a matrix product (A tile through the four broadcast
// ports in parallel, B rows on the stream input; C checked exactly), a head-wise product (A
// rows on the stream input ahead of B, the broadcast ports held busy with other data and
// ignored; exact), a GELU row (within 8 LSB
// of the exact function), a softmax of two 20-element slices (each slice must sum to 1.0 within
// 3%), a 64-element LayerNorm row (output mean 0 and variance 1 within 3%) and a residual add
// (exact). Each operation must end with done.
module tb_computing_kernel;
  import chosen_pkg::*;
  localparam int N = 4, K = 64, W = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, busy, done, in_valid, in_ready, out_valid, out_ready;
  kcfg_t cfg;
  vec_t in_data, out_data;
  logic [BN-1:0] a_valid;
  vec_t [BN-1:0] a_data;

  computing_kernel #(.PN(2), .TN(4), .TM(32), .KMAX(64), .SM_WORDS(2), .LN_WORDS(8)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  vec_t outs [$];
  always @(posedge clk) if (out_valid && out_ready) outs.push_back(out_data);

  task automatic send(vec_t v);
    in_valid = 1; in_data = v;
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic begin_op(kcfg_t c);
    cfg = c; outs.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  task automatic wait_done();
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    int A [N][K], B [K][W * PM];
    kcfg_t c;
    vec_t v;
    rst_n = 0; start = 0; in_valid = 0; out_ready = 1; a_valid = '0; a_data = '0; in_data = '0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- matrix product ----
    foreach (A[i, j]) A[i][j] = int'($urandom_range(512)) - 256;
    foreach (B[i, j]) B[i][j] = int'($urandom_range(512)) - 256;
    c = '0; c.op = OP_MATMUL; c.n_rows = N; c.k_dim = K; c.words = W; c.a_words = K / BN / PM;
    begin_op(c);
    for (int r = 0; r < N; r++) begin
      a_valid = '1;
      for (int b = 0; b < BN; b++) for (int i = 0; i < PM; i++) a_data[b][i] = data_t'(A[r][b * PM + i]);
      @(negedge clk);
    end
    a_valid = '0;
    for (int kk = 0; kk < K; kk++) for (int w = 0; w < W; w++) begin
      for (int i = 0; i < PM; i++) v[i] = data_t'(B[kk][w * PM + i]);
      send(v);
    end
    wait_done();
    chk(outs.size() == N * W, "matmul beat count");
    for (int r = 0; r < N; r++) for (int w = 0; w < W; w++) for (int i = 0; i < PM; i++) begin
      longint acc;
      int e;
      acc = 0;
      for (int kk = 0; kk < K; kk++) acc += longint'(A[r][kk]) * longint'(B[kk][w * PM + i]);
      acc = acc >>> FRAC;
      e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
      if (outs.size() == N * W) chk(int'(outs[r * W + w][i]) == e, $sformatf("C[%0d][%0d]", r, w * PM + i));
    end

    // ---- head-wise matrix product: A (k = K/BN = 16) on the stream input, broadcast ports ignored ----
    c = '0; c.op = OP_HMATMUL; c.n_rows = N; c.k_dim = K / BN; c.words = W; c.a_words = K / BN / PM;
    begin_op(c);
    a_valid = '1;
    for (int b = 0; b < BN; b++) for (int i = 0; i < PM; i++) a_data[b][i] = data_t'(16'h7fff);
    for (int r = 0; r < N; r++) for (int w = 0; w < K / BN / PM; w++) begin
      for (int i = 0; i < PM; i++) v[i] = data_t'(A[r][w * PM + i]);
      send(v);
    end
    for (int kk = 0; kk < K / BN; kk++) for (int w = 0; w < W; w++) begin
      for (int i = 0; i < PM; i++) v[i] = data_t'(B[kk][w * PM + i]);
      send(v);
    end
    wait_done();
    a_valid = '0;
    chk(outs.size() == N * W, "head-wise matmul beat count");
    for (int r = 0; r < N; r++) for (int w = 0; w < W; w++) for (int i = 0; i < PM; i++) begin
      longint acc;
      int e;
      acc = 0;
      for (int kk = 0; kk < K / BN; kk++) acc += longint'(A[r][kk]) * longint'(B[kk][w * PM + i]);
      acc = acc >>> FRAC;
      e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
      if (outs.size() == N * W) chk(int'(outs[r * W + w][i]) == e, $sformatf("head-wise C[%0d][%0d] got %0d exp %0d", r, w * PM + i, outs[r * W + w][i], e));
    end

    // ---- GELU ----
    c = '0; c.op = OP_GELU; c.n_rows = 1; c.words = 2;
    begin_op(c);
    fork
      for (int w = 0; w < 2; w++) begin
        for (int i = 0; i < PM; i++) v[i] = data_t'((w * PM + i - 16) * 48);
        send(v);
      end
      wait_done();
    join
    for (int w = 0; w < 2; w++) for (int i = 0; i < PM; i++) begin
      real x, y;
      x = real'((w * PM + i - 16) * 48) / 256.0;
      y = 0.5 * x * (1.0 + ((2.0 / (1.0 + $exp(-2.0 * 0.7978845608 * (x + 0.044715 * x * x * x)))) - 1.0)) * 256.0;
      chk((real'(outs[w][i]) - y) ** 2 <= 64.0, "gelu");
    end

    // ---- softmax: 2 slices of 20 elements ----
    c = '0; c.op = OP_SOFTMAX; c.n_rows = 1; c.reps = 2; c.words = 2; c.elems = 20;
    begin_op(c);
    fork
      for (int s = 0; s < 2; s++) for (int w = 0; w < 2; w++) begin
        for (int i = 0; i < PM; i++) v[i] = data_t'(int'($urandom_range(1024)) - 512);
        send(v);
      end
      wait_done();
    join
    for (int s = 0; s < 2; s++) begin
      int sum;
      sum = 0;
      for (int w = 0; w < 2; w++) for (int i = 0; i < PM; i++) sum += int'(outs[s * 2 + w][i]);
      chk(sum >= 248 && sum <= 264, $sformatf("softmax slice sum %0d", sum));
    end

    // ---- LayerNorm: one 64-element row ----
    c = '0; c.op = OP_LAYERNORM; c.n_rows = 1; c.words = 4;
    begin_op(c);
    fork
      for (int w = 0; w < 4; w++) begin
        for (int i = 0; i < PM; i++) v[i] = data_t'(300 + int'($urandom_range(600)));
        send(v);
      end
      wait_done();
    join
    begin
      real m, q;
      m = 0.0; q = 0.0;
      for (int w = 0; w < 4; w++) for (int i = 0; i < PM; i++) begin
        m += real'(outs[w][i]) / 256.0; q += (real'(outs[w][i]) / 256.0) ** 2;
      end
      m /= 64.0; q = q / 64.0 - m * m;
      chk(m * m < 0.03 * 0.03 && q > 0.97 && q < 1.03, $sformatf("layernorm mean %f var %f", m, q));
    end

    // ---- residual add ----
    c = '0; c.op = OP_ADD; c.n_rows = 1; c.words = 1;
    begin_op(c);
    fork
      begin
        vec_t s1, s2;
        for (int i = 0; i < PM; i++) begin s1[i] = data_t'(i * 100); s2[i] = data_t'(-i * 7); end
        send(s1); send(s2);
      end
      wait_done();
    join
    for (int i = 0; i < PM; i++) chk(int'(outs[0][i]) == i * 93, "add");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
