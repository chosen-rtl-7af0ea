// chosen_env: test environment shared by the end-to-end testbenches of chosen_top.
//
// It owns the clock and reset, four DDR bank models, the operation list and the checks. It
// fills the banks with random matrices laid out as the accelerator expects (every matrix split
// column-wise over the banks, PM elements per 512-bit word), loads a schedule of seven
// operations (matrix product, residual add, LayerNorm, GELU, softmax, head-wise matrix product,
// end), runs it and compares every result word with a reference computed here from the same
// inputs:
//   matrix product : exact integer model (sum of products, >> FRAC, saturate);
//   head-wise product: kernel b multiplies its own bank's A part (KH = MM_AW*PM columns) by the
//                    first KH rows of its B part, exact as above;
//   add            : exact;
//   LayerNorm, GELU, softmax: floating-point models of the exact functions, with tolerances
//                    that cover the approximations of the hardware.
// It also checks the cycle count of the matrix product against k*ceil(TN/PN)*words and counts
// how often each mechanism of the design was exercised (probe inputs); a mechanism that never
// happened counts as a failure. A watchdog ends the run after WATCHDOG cycles.
module chosen_env
  import chosen_pkg::*;
#(
  parameter int PN        = 2,
  parameter int TN        = 8,
  parameter int TM        = 64,
  parameter int DEPTH     = 4096,
  parameter int STALL_PCT = 10,
  // workload sizes
  parameter int MM_N      = 8,    // rows of the A tile
  parameter int MM_K      = 128,  // shared dimension (multiple of BN*PM)
  parameter int MM_W      = 4,    // words of a C row part per bank
  parameter int LN_ROWS   = 8,    // multiple of BN
  parameter int LN_W      = 2,    // words of a row part per bank
  parameter int G_ROWS    = 3,
  parameter int G_W       = 2,
  parameter int SM_ROWS   = 2,
  parameter int SM_REPS   = 2,
  parameter int SM_ELEMS  = 20,
  parameter int AD_ROWS   = 2,
  parameter int AD_W      = 2,
  parameter int WATCHDOG  = 200000
) (
  output logic                     clk,
  output logic                     rst_n,
  output logic                     prog_we,
  output logic [5:0]               prog_addr,
  output instr_t                   prog_data,
  output logic                     start,
  input  logic                     busy,
  input  logic                     done,
  input  logic  [BN-1:0]           rq_valid,
  output logic  [BN-1:0]           rq_ready,
  input  addr_t [BN-1:0]           rq_addr,
  input  logic  [BN-1:0][LEN_W-1:0] rq_len,
  output logic  [BN-1:0]           rd_valid,
  input  logic  [BN-1:0]           rd_ready,
  output word_t [BN-1:0]           rd_data,
  input  logic  [BN-1:0]           wr_valid,
  output logic  [BN-1:0]           wr_ready,
  input  addr_t [BN-1:0]           wr_addr,
  input  word_t [BN-1:0]           wr_data,
  // probes: 0 mac while loading next step, 1 A broadcast beat, 2 rotated read beat,
  // 3 rotated write beat, 4 round waiting for previous round, 5 pe_array mac cycle (kernel 0),
  // 6 pe_array busy (kernel 0), 7 softmax slice > 0 read, 8 PE array waiting for operands
  input  logic [9:0]               probe
);

  localparam int R      = (TN + PN - 1) / PN;
  localparam int MM_AW  = MM_K / BN / PM;
  localparam int MM_M   = MM_W * PM * BN;
  localparam int SM_W   = (SM_ELEMS + PM - 1) / PM;
  localparam int LN_D   = LN_W * PM * BN;
  // bank address map (words)
  localparam int A_BASE  = 0;
  localparam int B_BASE  = A_BASE + MM_N * MM_AW;
  localparam int C_BASE  = B_BASE + MM_K * MM_W;
  localparam int S_BASE  = C_BASE + MM_N * MM_W;          // add: skip
  localparam int M_BASE  = S_BASE + AD_ROWS * AD_W;        // add: main
  localparam int D_BASE  = M_BASE + AD_ROWS * AD_W;        // add: result
  localparam int L_BASE  = D_BASE + AD_ROWS * AD_W;
  localparam int LO_BASE = L_BASE + LN_ROWS * LN_W;
  localparam int G_BASE  = LO_BASE + LN_ROWS * LN_W;
  localparam int GO_BASE = G_BASE + G_ROWS * G_W;
  localparam int X_BASE  = GO_BASE + G_ROWS * G_W;
  localparam int XO_BASE = X_BASE + SM_ROWS * SM_REPS * SM_W;
  localparam int H_BASE  = XO_BASE + SM_ROWS * SM_REPS * SM_W;   // head-wise product result
  localparam int END_A   = H_BASE + MM_N * MM_W;
  localparam int KH      = MM_AW * PM;                   // head-wise product: shared dimension

  int checks = 0, failures = 0;
  longint cycles = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- banks ----------------
  ddr_bank_model #(.DEPTH(DEPTH), .STALL_PCT(STALL_PCT)) u_bank0 (.clk, .rst_n,
    .rq_valid(rq_valid[0]), .rq_ready(rq_ready[0]), .rq_addr(rq_addr[0]), .rq_len(rq_len[0]),
    .rd_valid(rd_valid[0]), .rd_ready(rd_ready[0]), .rd_data(rd_data[0]),
    .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0]));
  ddr_bank_model #(.DEPTH(DEPTH), .STALL_PCT(STALL_PCT)) u_bank1 (.clk, .rst_n,
    .rq_valid(rq_valid[1]), .rq_ready(rq_ready[1]), .rq_addr(rq_addr[1]), .rq_len(rq_len[1]),
    .rd_valid(rd_valid[1]), .rd_ready(rd_ready[1]), .rd_data(rd_data[1]),
    .wr_valid(wr_valid[1]), .wr_ready(wr_ready[1]), .wr_addr(wr_addr[1]), .wr_data(wr_data[1]));
  ddr_bank_model #(.DEPTH(DEPTH), .STALL_PCT(STALL_PCT)) u_bank2 (.clk, .rst_n,
    .rq_valid(rq_valid[2]), .rq_ready(rq_ready[2]), .rq_addr(rq_addr[2]), .rq_len(rq_len[2]),
    .rd_valid(rd_valid[2]), .rd_ready(rd_ready[2]), .rd_data(rd_data[2]),
    .wr_valid(wr_valid[2]), .wr_ready(wr_ready[2]), .wr_addr(wr_addr[2]), .wr_data(wr_data[2]));
  ddr_bank_model #(.DEPTH(DEPTH), .STALL_PCT(STALL_PCT)) u_bank3 (.clk, .rst_n,
    .rq_valid(rq_valid[3]), .rq_ready(rq_ready[3]), .rq_addr(rq_addr[3]), .rq_len(rq_len[3]),
    .rd_valid(rd_valid[3]), .rd_ready(rd_ready[3]), .rd_data(rd_data[3]),
    .wr_valid(wr_valid[3]), .wr_ready(wr_ready[3]), .wr_addr(wr_addr[3]), .wr_data(wr_data[3]));

  function automatic word_t peek(int b, int a);
    case (b)
      0: return u_bank0.mem[a];
      1: return u_bank1.mem[a];
      2: return u_bank2.mem[a];
      default: return u_bank3.mem[a];
    endcase
  endfunction

  task automatic poke(int b, int a, word_t w);
    case (b)
      0: u_bank0.mem[a] = w;
      1: u_bank1.mem[a] = w;
      2: u_bank2.mem[a] = w;
      default: u_bank3.mem[a] = w;
    endcase
  endtask

  // element (r, col) of a matrix with part width pw words per bank, row stride st, base ba
  function automatic int get_el(int ba, int st, int pw, int r, int col);
    int b, c;
    vec_t v;
    b = col / (pw * PM);
    c = col % (pw * PM);
    v = unpack_word(peek(b, ba + r * st + c / PM));
    return int'(v[c % PM]);
  endfunction

  task automatic set_el(int ba, int st, int pw, int r, int col, int val);
    int b, c;
    vec_t v;
    b = col / (pw * PM);
    c = col % (pw * PM);
    v = unpack_word(peek(b, ba + r * st + c / PM));
    v[c % PM] = data_t'(val);
    poke(b, ba + r * st + c / PM, pack_word(v));
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(32'(hi - lo)));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real gelu_ref(real x);
    // GELU with the tanh form (within 1e-3 of the erf form)
    return 0.5 * x * (1.0 + ((2.0 / (1.0 + $exp(-2.0 * 0.7978845608 * (x + 0.044715 * x * x * x)))) - 1.0));
  endfunction

  function automatic instr_t mk(op_e op, int n, int k, int w, int aw, int el, int reps, int invd,
                                int s0, int s1, int d, int s0s, int s1s, int ds);
    instr_t i;
    i = '0;
    i.k.op = op; i.k.n_rows = 16'(n); i.k.k_dim = 16'(k); i.k.words = 16'(w);
    i.k.a_words = 16'(aw); i.k.elems = 16'(el); i.k.reps = 8'(reps);
    if (invd != 0) i.k.elems = 16'(invd);
    i.src0 = addr_t'(s0); i.src1 = addr_t'(s1); i.dst = addr_t'(d);
    i.src0_stride = addr_t'(s0s); i.src1_stride = addr_t'(s1s); i.dst_stride = addr_t'(ds);
    return i;
  endfunction

  // ---------------- mechanism counters ----------------
  int unsigned n_own_a, n_overlap, n_bcast, n_rrot, n_wrot, n_sync, n_mac, n_pbusy, n_slice, n_rd_bp,
               n_wr_stall, n_pe_wait;
  always @(posedge clk) if (rst_n) begin
    if (probe[0]) n_overlap++;
    if (probe[1]) n_bcast++;
    if (probe[2]) n_rrot++;
    if (probe[3]) n_wrot++;
    if (probe[4]) n_sync++;
    if (probe[5]) n_mac++;
    if (probe[6]) n_pbusy++;
    if (probe[7]) n_slice++;
    if (probe[8]) n_pe_wait++;
    if (probe[9]) n_own_a++;
    if ((rd_valid & ~rd_ready) != '0) n_rd_bp++;
    if ((wr_valid & ~wr_ready) != '0) n_wr_stall++;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus and checks ----------------
  int A [][], B [][];
  int skp [][], mainp [][];
  int lnx [][], gx [][], sx [][];

  initial begin : main
    longint t0, t1;
    rst_n = 1'b0; prog_we = 1'b0; prog_addr = '0; prog_data = '0; start = 1'b0;
    assert (END_A <= DEPTH) else $fatal(1, "bank model too small");
    for (int b = 0; b < BN; b++) for (int a = 0; a < DEPTH; a++) poke(b, a, '0);

    // matrix product operands (Q8.8 values in [-0.25, 0.25])
    A = new[MM_N]; foreach (A[i]) A[i] = new[MM_K];
    B = new[MM_K]; foreach (B[i]) B[i] = new[MM_M];
    for (int r = 0; r < MM_N; r++) for (int c = 0; c < MM_K; c++) begin
      A[r][c] = rnd(-64, 64); set_el(A_BASE, MM_AW, MM_AW, r, c, A[r][c]);
    end
    for (int r = 0; r < MM_K; r++) for (int c = 0; c < MM_M; c++) begin
      B[r][c] = rnd(-64, 64); set_el(B_BASE, MM_W, MM_W, r, c, B[r][c]);
    end
    // residual add
    skp = new[AD_ROWS]; mainp = new[AD_ROWS];
    for (int r = 0; r < AD_ROWS; r++) begin
      skp[r] = new[AD_W * PM * BN]; mainp[r] = new[AD_W * PM * BN];
      for (int c = 0; c < AD_W * PM * BN; c++) begin
        skp[r][c] = rnd(-30000, 30000); mainp[r][c] = rnd(-30000, 30000);
        set_el(S_BASE, AD_W, AD_W, r, c, skp[r][c]);
        set_el(M_BASE, AD_W, AD_W, r, c, mainp[r][c]);
      end
    end
    // LayerNorm rows: random offset and spread per row
    lnx = new[LN_ROWS];
    for (int r = 0; r < LN_ROWS; r++) begin
      int off, spr;
      off = rnd(-512, 512); spr = rnd(64, 1024);
      lnx[r] = new[LN_D];
      for (int c = 0; c < LN_D; c++) begin
        lnx[r][c] = off + rnd(-spr, spr); set_el(L_BASE, LN_W, LN_W, r, c, lnx[r][c]);
      end
    end
    // GELU inputs over [-5, 5]
    gx = new[G_ROWS];
    for (int r = 0; r < G_ROWS; r++) begin
      gx[r] = new[G_W * PM * BN];
      for (int c = 0; c < G_W * PM * BN; c++) begin
        gx[r][c] = rnd(-1280, 1280); set_el(G_BASE, G_W, G_W, r, c, gx[r][c]);
      end
    end
    // softmax scores over [-6, 6], SM_REPS slices per bank row
    sx = new[SM_ROWS];
    for (int r = 0; r < SM_ROWS; r++) begin
      sx[r] = new[SM_REPS * SM_W * PM * BN];
      for (int c = 0; c < SM_REPS * SM_W * PM * BN; c++) begin
        sx[r][c] = ((c % (SM_W * PM)) < SM_ELEMS) ? rnd(-1536, 1536) : 0;
        set_el(X_BASE, SM_REPS * SM_W, SM_REPS * SM_W, r, c, sx[r][c]);
      end
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // ---------------- schedule ----------------
    begin
      instr_t p [8];
      p[0] = mk(OP_MATMUL, MM_N, MM_K, MM_W, MM_AW, 0, 1, 0, A_BASE, B_BASE, C_BASE, MM_AW, MM_W, MM_W);
      p[1] = mk(OP_ADD, AD_ROWS, 0, AD_W, 0, 0, 1, 0, M_BASE, S_BASE, D_BASE, AD_W, AD_W, AD_W);
      p[2] = mk(OP_LAYERNORM, LN_ROWS, 0, LN_W, 0, LN_D, 1, 0,
                L_BASE, 0, LO_BASE, LN_W, 0, LN_W);
      p[3] = mk(OP_GELU, G_ROWS, 0, G_W, 0, 0, 1, 0, G_BASE, 0, GO_BASE, G_W, 0, G_W);
      p[4] = mk(OP_SOFTMAX, SM_ROWS, 0, SM_W, 0, SM_ELEMS, SM_REPS, 0, X_BASE, 0, XO_BASE,
                SM_REPS * SM_W, 0, SM_REPS * SM_W);
      p[5] = mk(OP_HMATMUL, MM_N, KH, MM_W, MM_AW, 0, 1, 0, A_BASE, B_BASE, H_BASE, MM_AW, MM_W, MM_W);
      p[6] = '0;   // OP_END
      for (int i = 0; i < 7; i++) begin
        prog_we <= 1'b1; prog_addr <= 6'(i); prog_data <= p[i];
        @(posedge clk);
      end
      prog_we <= 1'b0;
    end
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cycles;
    wait (done);
    t1 = cycles;
    @(posedge clk);
    $display("schedule finished in %0d cycles", t1 - t0);

    // ---------------- checks ----------------
    // matrix product: exact
    for (int r = 0; r < MM_N; r++) for (int c = 0; c < MM_M; c++) begin
      longint acc;
      int exp_v;
      acc = 0;
      for (int k = 0; k < MM_K; k++) acc += longint'(A[r][k]) * longint'(B[k][c]);
      acc = acc >>> FRAC;
      exp_v = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
      check(get_el(C_BASE, MM_W, MM_W, r, c) == exp_v,
            $sformatf("matmul C[%0d][%0d] = %0d, expected %0d", r, c, get_el(C_BASE, MM_W, MM_W, r, c), exp_v));
    end
    // head-wise product: exact, each bank's column part from its own A part
    for (int r = 0; r < MM_N; r++) for (int c = 0; c < MM_M; c++) begin
      longint acc;
      int exp_v, bk;
      bk = c / (MM_W * PM);
      acc = 0;
      for (int k = 0; k < KH; k++) acc += longint'(A[r][bk * KH + k]) * longint'(B[k][c]);
      acc = acc >>> FRAC;
      exp_v = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
      check(get_el(H_BASE, MM_W, MM_W, r, c) == exp_v,
            $sformatf("head-wise C[%0d][%0d] = %0d, expected %0d", r, c, get_el(H_BASE, MM_W, MM_W, r, c), exp_v));
    end
    // cycle count of both products: the source's cost model k * Tn * Tm / (Pn * Pm)
    check(n_mac == (MM_K + KH) * R * MM_W,
          $sformatf("PE array MAC cycles %0d, expected %0d", n_mac, (MM_K + KH) * R * MM_W));
    // busy time: per k step the longer of the MAC loop (R * MM_W) and the A column hand-out
    // (MM_N elements, one per cycle), plus the two drains
    check(n_pbusy <= ((MM_K + KH) * ((R * MM_W > MM_N) ? R * MM_W : MM_N)) * 3 / 2 + 2 * MM_N * MM_W * 2 + 400,
          $sformatf("PE array busy for %0d cycles, model %0d compute + %0d drain", n_pbusy, (MM_K + KH) * R * MM_W, 2 * MM_N * MM_W));
    $display("matmul + head-wise: %0d MAC cycles (model %0d), PE array busy %0d cycles", n_mac, (MM_K + KH) * R * MM_W, n_pbusy);
    // residual add: exact with saturation
    for (int r = 0; r < AD_ROWS; r++) for (int c = 0; c < AD_W * PM * BN; c++) begin
      int s;
      s = skp[r][c] + mainp[r][c];
      s = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
      check(get_el(D_BASE, AD_W, AD_W, r, c) == s, $sformatf("add [%0d][%0d]", r, c));
    end
    // LayerNorm: exact function, tolerance 1% of |y| + 3 LSB
    for (int r = 0; r < LN_ROWS; r++) begin
      real mu, v;
      mu = 0.0; v = 0.0;
      for (int c = 0; c < LN_D; c++) mu += real'(lnx[r][c]);
      mu /= real'(LN_D);
      for (int c = 0; c < LN_D; c++) v += (real'(lnx[r][c]) - mu) ** 2;
      v /= real'(LN_D);
      for (int c = 0; c < LN_D; c++) begin
        real y;
        int got;
        y = (real'(lnx[r][c]) - mu) / $sqrt(v) * 256.0;
        got = get_el(LO_BASE, LN_W, LN_W, r, c);
        check((real'(got) - y) ** 2 <= (0.01 * y + 3.0) ** 2 + 9.0,
              $sformatf("layernorm [%0d][%0d] = %0d, expected %f", r, c, got, y));
      end
    end
    // GELU: tolerance 8 LSB (0.03)
    for (int r = 0; r < G_ROWS; r++) for (int c = 0; c < G_W * PM * BN; c++) begin
      real y;
      int got;
      y = gelu_ref(real'(gx[r][c]) / 256.0) * 256.0;
      got = get_el(GO_BASE, G_W, G_W, r, c);
      check((real'(got) - y) ** 2 <= 64.0, $sformatf("gelu x=%0d got %0d expected %f", gx[r][c], got, y));
    end
    // softmax: per slice, tolerance 2 LSB + 2%
    for (int r = 0; r < SM_ROWS; r++) for (int b = 0; b < BN; b++) for (int h = 0; h < SM_REPS; h++) begin
      real mx, s;
      int base;
      base = (b * SM_REPS + h) * SM_W * PM;
      mx = -1.0e9; s = 0.0;
      for (int e = 0; e < SM_ELEMS; e++) if (real'(sx[r][base + e]) > mx) mx = real'(sx[r][base + e]);
      for (int e = 0; e < SM_ELEMS; e++) s += $exp((real'(sx[r][base + e]) - mx) / 256.0);
      for (int e = 0; e < SM_W * PM; e++) begin
        real y;
        int got;
        y = (e < SM_ELEMS) ? $exp((real'(sx[r][base + e]) - mx) / 256.0) / s * 256.0 : 0.0;
        got = get_el(XO_BASE, SM_REPS * SM_W, SM_REPS * SM_W, r, base + e);
        check((real'(got) - y) ** 2 <= (2.0 + 0.02 * y) ** 2,
              $sformatf("softmax r%0d b%0d h%0d e%0d got %0d expected %f", r, b, h, e, got, y));
      end
    end
    // mechanisms
    $display("mechanisms: own_a=%0d overlap=%0d bcast=%0d rot_rd=%0d rot_wr=%0d round_wait=%0d slices>0=%0d rd_backpressure=%0d wr_stall=%0d pe_wait=%0d",
             n_own_a, n_overlap, n_bcast, n_rrot, n_wrot, n_sync, n_slice, n_rd_bp, n_wr_stall, n_pe_wait);
    check(n_own_a    > 0, "no head-wise A tile was loaded from a kernel's own bank");
    check(n_overlap  > 0, "no k step was loaded while the previous one was computed");
    check(n_bcast    > 0, "no A broadcast happened");
    check(n_rrot     > 0, "no rotated LayerNorm read happened");
    check(n_wrot     > 0, "no rotated LayerNorm write happened");
    check(n_sync     > 0, "no read round waited for the previous round");
    check(n_slice    > 0 || SM_REPS == 1, "no second head slice of a row was read");
    check(n_rd_bp    > 0, "no read back-pressure happened");
    check(n_wr_stall > 0 || STALL_PCT == 0, "no write stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
