// computing_kernel: one of the identical computing kernels of the accelerator.
//
// A kernel holds the three parts the source draws inside "Computing Kernel": the buffers (here
// the A tile buffer; the B row buffers and accumulators sit in the PE array), the 1D PE array
// for matrix products, and the approximated non-linear functions (GELU, softmax, LayerNorm)
// together with the residual addition. All kernels run the same operation at the same time,
// each on the data of its own DDR bank (or, for LayerNorm, of a rotating bank).
//
// Operations (cfg.op, latched at start):
//   OP_MATMUL    : the A tile (cfg.n_rows rows, cfg.a_words beats per bank part) arrives on the
//                  BN broadcast ports a_*, one port per bank, and fills the A buffer; then the B
//                  rows (cfg.k_dim rows of cfg.words beats) arrive on in_*; the C tile
//                  (n_rows x words beats) leaves on out_*. A scalars are read from the buffer,
//                  column by column, one per cycle, into the PE array.
//   OP_HMATMUL   : head-wise product. As OP_MATMUL, but the A tile (cfg.a_words beats per row,
//                  one head slice of this kernel's own bank part) arrives on in_* ahead of the
//                  B rows and fills only sub-memory 0 of the A buffer; cfg.k_dim = a_words * PM,
//                  at most KMAX / BN (768 columns at the defaults, a DeiT-B head is 64).
//   OP_GELU      : cfg.n_rows rows of cfg.words beats stream through the GELU unit.
//   OP_SOFTMAX   : cfg.n_rows * cfg.reps slices of cfg.words beats (cfg.elems valid elements).
//   OP_LAYERNORM : cfg.n_rows rows of cfg.words beats (all BN parts of a row).
//   OP_ADD       : cfg.n_rows rows, each as skip part then main part, cfg.words beats each.
// done pulses when the last result beat has left. The exact sequencing is this design's.
module computing_kernel
  import chosen_pkg::*;
#(
  parameter int PN       = 102,
  parameter int TN       = 212,
  parameter int TM       = 3072,
  parameter int KMAX     = 3072,
  parameter int SM_WORDS = 13,
  parameter int LN_WORDS = 48
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  kcfg_t              cfg,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  vec_t               in_data,
  input  logic [BN-1:0]      a_valid,
  input  vec_t [BN-1:0]      a_data,
  output logic               out_valid,
  input  logic               out_ready,
  output vec_t               out_data
);

  localparam int BW = $clog2(BN);
  localparam int LW = $clog2(PM);

  typedef enum logic [1:0] {K_IDLE, K_ALOAD, K_RUN} kstate_e;
  kstate_e state;
  kcfg_t   c;

  // ---------------- job bookkeeping for the non-linear units ----------------
  logic [31:0] jobs_total, jobs_started, jobs_done, beats_out;
  logic        unit_start, unit_done, unit_busy;

  // ---------------- A tile buffer and loader ----------------
  // OP_MATMUL fills all BN sub-memories from the broadcast ports; OP_HMATMUL (own) fills only
  // sub-memory 0, from the kernel's own input stream.
  logic                own, is_mm;
  logic [BN-1:0]       abuf_we;
  logic [BN-1:0][15:0] arow, aword;
  logic [BN-1:0]       a_part_done;
  vec_t [BN-1:0]       abuf_wdata;
  assign own   = (c.op == OP_HMATMUL);
  assign is_mm = (c.op == OP_MATMUL) || own;
  for (genvar b = 0; b < BN; b++) begin : g_aload
    if (b == 0) begin : g_own
      assign abuf_we[b]    = (state == K_ALOAD) && (own ? in_valid : a_valid[b]) && !a_part_done[b];
      assign abuf_wdata[b] = own ? in_data : a_data[b];
    end else begin : g_bc
      assign abuf_we[b]    = (state == K_ALOAD) && !own && a_valid[b] && !a_part_done[b];
      assign abuf_wdata[b] = a_data[b];
    end
    assign a_part_done[b] = (own && b != 0) || (arow[b] == c.n_rows);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        arow[b] <= '0; aword[b] <= '0;
      end else if (start) begin
        arow[b] <= '0; aword[b] <= '0;
      end else if (abuf_we[b]) begin
        if (aword[b] == c.a_words - 1) begin aword[b] <= '0; arow[b] <= arow[b] + 1'b1; end
        else aword[b] <= aword[b] + 1'b1;
      end
    end
  end

  // feeder: A column k (rows 0..n_rows-1), k = 0..k_dim-1, one scalar per cycle
  logic            f_rd, f_v, f_more;
  logic [31:0]     f_left;
  logic [15:0]     f_row, f_word;
  logic [BW-1:0]   f_bank;
  logic [LW-1:0]   f_lane;
  data_t           f_data;
  logic            pa_a_ready, pa_b_ready, pa_c_valid, pa_busy, pa_done, pa_start;
  vec_t            pa_c_data;

  assign f_more = (f_left != 0);
  assign f_rd   = (state == K_RUN) && is_mm && f_more && (!f_v || pa_a_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_v <= 1'b0; f_left <= '0; f_row <= '0; f_word <= '0; f_bank <= '0; f_lane <= '0;
    end else if (pa_start) begin
      f_v <= 1'b0; f_left <= 32'(c.n_rows) * 32'(c.k_dim);
      f_row <= '0; f_word <= '0; f_bank <= '0; f_lane <= '0;
    end else begin
      if (f_rd) begin
        f_v    <= 1'b1;
        f_left <= f_left - 1;
        if (f_row == c.n_rows - 1) begin
          f_row <= '0;
          if (f_lane == LW'(PM - 1)) begin
            f_lane <= '0;
            if (f_word == c.a_words - 1) begin f_word <= '0; f_bank <= f_bank + 1'b1; end
            else f_word <= f_word + 1'b1;
          end else f_lane <= f_lane + 1'b1;
        end else f_row <= f_row + 1'b1;
      end else if (pa_a_ready) f_v <= 1'b0;
    end
  end

  a_tile_buffer #(.TN(TN), .KMAX(KMAX)) u_abuf (
    .clk     (clk),
    .wr_en   (abuf_we),
    .wr_row  (arow),
    .wr_word (aword),
    .wr_data (abuf_wdata),
    .rd_en   (f_rd),
    .rd_bank (f_bank),
    .rd_row  (f_row),
    .rd_word (f_word),
    .rd_lane (f_lane),
    .rd_data (f_data)
  );

  assign pa_start = (state == K_ALOAD) && (&a_part_done);

  pe_array #(.PN(PN), .TN(TN), .TM(TM)) u_pe_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (pa_start),
    .n_rows  (c.n_rows),
    .m_words (c.words),
    .k_dim   (c.k_dim),
    .a_valid (f_v),
    .a_ready (pa_a_ready),
    .a_data  (f_data),
    .b_valid (in_valid && state == K_RUN && is_mm),
    .b_ready (pa_b_ready),
    .b_data  (in_data),
    .c_valid (pa_c_valid),
    .c_ready (out_ready),
    .c_data  (pa_c_data),
    .busy    (pa_busy),
    .done    (pa_done)
  );

  // ---------------- non-linear processing unit ----------------
  logic g_in_ready, g_out_valid;
  vec_t g_out;
  logic s_in_ready, s_out_valid, s_busy, s_done;
  vec_t s_out;
  logic l_in_ready, l_out_valid, l_busy, l_done;
  vec_t l_out;
  logic r_in_ready, r_out_valid, r_busy, r_done;
  vec_t r_out;
  logic run;
  assign run = (state == K_RUN);

  gelu_unit u_gelu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid && run && c.op == OP_GELU), .in_ready(g_in_ready), .in_data(in_data),
    .out_valid(g_out_valid), .out_ready(out_ready), .out_data(g_out)
  );

  softmax_unit #(.MAX_WORDS(SM_WORDS)) u_softmax (
    .clk(clk), .rst_n(rst_n), .start(unit_start && c.op == OP_SOFTMAX),
    .elems(c.elems), .words(c.words),
    .in_valid(in_valid && run && c.op == OP_SOFTMAX), .in_ready(s_in_ready), .in_data(in_data),
    .out_valid(s_out_valid), .out_ready(out_ready), .out_data(s_out),
    .busy(s_busy), .done(s_done)
  );

  layernorm_unit #(.MAX_WORDS(LN_WORDS)) u_layernorm (
    .clk(clk), .rst_n(rst_n), .start(unit_start && c.op == OP_LAYERNORM),
    .words(c.words),
    .in_valid(in_valid && run && c.op == OP_LAYERNORM), .in_ready(l_in_ready), .in_data(in_data),
    .out_valid(l_out_valid), .out_ready(out_ready), .out_data(l_out),
    .busy(l_busy), .done(l_done)
  );

  residual_add_unit #(.MAX_WORDS(LN_WORDS)) u_add (
    .clk(clk), .rst_n(rst_n), .start(unit_start && c.op == OP_ADD),
    .words(c.words),
    .in_valid(in_valid && run && c.op == OP_ADD), .in_ready(r_in_ready), .in_data(in_data),
    .out_valid(r_out_valid), .out_ready(out_ready), .out_data(r_out),
    .busy(r_busy), .done(r_done)
  );

  always_comb begin
    unit_busy = 1'b0;
    unit_done = 1'b0;
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = '0;
    case (c.op)
      OP_MATMUL, OP_HMATMUL: begin
        in_ready  = (state == K_ALOAD) ? (own && !a_part_done[0]) : (run && pa_b_ready);
        out_valid = pa_c_valid; out_data = pa_c_data;
      end
      OP_GELU:      begin in_ready = run && g_in_ready; out_valid = g_out_valid; out_data = g_out; end
      OP_SOFTMAX:   begin in_ready = run && s_in_ready; out_valid = s_out_valid; out_data = s_out;
                          unit_busy = s_busy; unit_done = s_done; end
      OP_LAYERNORM: begin in_ready = run && l_in_ready; out_valid = l_out_valid; out_data = l_out;
                          unit_busy = l_busy; unit_done = l_done; end
      OP_ADD:       begin in_ready = run && r_in_ready; out_valid = r_out_valid; out_data = r_out;
                          unit_busy = r_busy; unit_done = r_done; end
      default: ;
    endcase
  end

  assign unit_start = run && !unit_busy && !unit_done && (jobs_started < jobs_total) &&
                      (jobs_started == jobs_done) &&
                      (c.op == OP_SOFTMAX || c.op == OP_LAYERNORM || c.op == OP_ADD);

  // ---------------- kernel sequencing ----------------
  logic fin;
  always_comb begin
    case (c.op)
      OP_MATMUL, OP_HMATMUL: fin = pa_done;
      OP_GELU:   fin = (out_valid && out_ready && beats_out == jobs_total - 1);
      default:   fin = unit_done && (jobs_done == jobs_total - 1);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= K_IDLE; c <= '0; done <= 1'b0;
      jobs_total <= '0; jobs_started <= '0; jobs_done <= '0; beats_out <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        K_IDLE: if (start) begin
          c <= cfg;
          jobs_started <= '0; jobs_done <= '0; beats_out <= '0;
          case (cfg.op)
            OP_GELU:    jobs_total <= 32'(cfg.n_rows) * 32'(cfg.words);
            OP_SOFTMAX: jobs_total <= 32'(cfg.n_rows) * 32'(cfg.reps);
            default:    jobs_total <= 32'(cfg.n_rows);
          endcase
          state <= (cfg.op inside {OP_MATMUL, OP_HMATMUL}) ? K_ALOAD : K_RUN;
        end
        K_ALOAD: if (pa_start) state <= K_RUN;
        K_RUN: begin
          if (unit_start) jobs_started <= jobs_started + 1;
          if (unit_done)  jobs_done    <= jobs_done + 1;
          if (out_valid && out_ready) beats_out <= beats_out + 1;
          if (fin) begin state <= K_IDLE; done <= 1'b1; end
        end
        default: state <= K_IDLE;
      endcase
    end
  end

  assign busy = (state != K_IDLE);

endmodule
