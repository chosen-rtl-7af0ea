// layernorm_unit: LayerNorm of one full row, LOP elements per cycle.
//
// Under the rotating schedule a kernel receives its row in BN parts, one from each DDR bank,
// so the unit stores the whole row (up to MAX_WORDS beats) while it sums x and x^2. With D the
// row length (words * PM), S = sum(x) and Q = sum(x^2), the exact integer V = D*Q - S^2 equals
// D^2 * var, and (x - mean) / sqrt(var) = (D*x - S) / sqrt(V), so neither a divider nor a
// rounded mean is needed:
//   1/sqrt(V) by bit manipulation: V = Mv * 2^p with Mv in [1, 2) from a leading-one search,
//   2^(-p/2) is a shift, an odd p takes one factor of the stored constant 2^(-1/2), and
//   Mv^(-1/2) starts from the chord 1 - (1 - 2^(-1/2))(Mv - 1) with two Newton steps
//   y <- y (3 - Mv y^2) / 2.
// The output (x - mean)/sqrt(var) leaves in the order the beats arrived, so each part returns
// to the bank it came from. The source names the method (bit manipulation and pre-stored
// fractional powers of two); the chord, the Newton steps and the fixed-point scaling are this
// design's. The affine scale and shift of LayerNorm are not applied here: they are assumed to
// be folded into the weights of the following matrix product.
//
// Interface: start (one cycle, idle only) with words <= MAX_WORDS; in_* takes words
// beats; out_* returns words beats; done pulses after the last. About 2*words + 3 cycles.
module layernorm_unit
  import chosen_pkg::*;
#(
  parameter int MAX_WORDS = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] words,
  input  logic        in_valid,
  output logic        in_ready,
  input  vec_t        in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output vec_t        out_data,
  output logic        busy,
  output logic        done
);

  localparam int WW = $clog2(MAX_WORDS + 1);
  localparam logic [63:0] INV_SQRT2_Q15 = 64'd23170;   // 2^(-1/2) * 2^15, stored constant
  localparam logic [63:0] CHORD_Q15     = 64'd9598;    // (1 - 2^(-1/2)) * 2^15

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MEAN, S_RSQRT, S_NORM} state_e;
  state_e state;

  vec_t               xbuf [MAX_WORDS];
  logic [WW-1:0]      w;
  logic signed [31:0] sum;
  logic [47:0]        sumsq;
  logic [31:0]        d_len;
  logic [63:0]        vq;
  logic [16:0]        h;
  logic [5:0]         hs;

  logic signed [31:0] beat_sum;
  logic [47:0]        beat_sq;
  always_comb begin
    beat_sum = '0;
    beat_sq  = '0;
    for (int i = 0; i < PM; i++) begin
      logic signed [31:0] xi;
      xi = 32'(in_data[i]);
      beat_sum = beat_sum + xi;
      beat_sq  = beat_sq + 48'(unsigned'(xi * xi));
    end
  end

  // 1/sqrt(v) = {h, hs}: h in Q1.15, 1/sqrt(v) = h * 2^-(15 + hs)
  function automatic logic [22:0] rsqrt_bm(logic [63:0] v);
    logic [63:0] mv, y, t;
    int unsigned p;
    p  = msb_pos(64'(v));
    mv = (p >= 15) ? (64'(v) >> (p - 15)) : (64'(v) << (15 - p));   // Q1.15
    y  = 64'd32768 - ((CHORD_Q15 * (mv - 64'd32768)) >> 15);
    for (int it = 0; it < 2; it++) begin
      t = (((mv * y) >> 15) * y) >> 15;                                // Mv*y^2
      y = (y * (64'd98304 - t)) >> 16;
    end
    if (p[0]) y = (y * INV_SQRT2_Q15) >> 15;
    return {y[16:0], 6'(p >> 1)};
  endfunction

  logic signed [63:0] var_w;
  always_comb begin
    var_w = signed'(vq) - 64'(sum) * 64'(sum);
    if (var_w < 64'sd1) var_w = 64'sd1;
  end

  always_comb begin
    for (int i = 0; i < PM; i++) begin
      logic signed [63:0] d;
      d = (64'(xbuf[w][i]) * signed'(64'(d_len)) - 64'(sum)) * signed'(64'(h));
      out_data[i] = sat_dw(d >>> (7 + 32'(hs)));
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_NORM);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      w <= '0; sum <= '0; sumsq <= '0; d_len <= '0; vq <= '0; h <= '0; hs <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          w <= '0; sum <= '0; sumsq <= '0;
        end
        S_LOAD: if (in_valid) begin
          sum   <= sum + beat_sum;
          sumsq <= sumsq + beat_sq;
          if (32'(w) == 32'(words) - 1) begin w <= '0; state <= S_MEAN; end
          else w <= w + 1'b1;
        end
        S_MEAN: begin
          d_len <= 32'(words) * PM;
          vq    <= 64'(sumsq) * (64'(words) * PM);
          state <= S_RSQRT;
        end
        S_RSQRT: begin
          {h, hs} <= rsqrt_bm(64'(var_w));
          state   <= S_NORM;
        end
        S_NORM: if (out_ready) begin
          if (32'(w) == 32'(words) - 1) begin w <= '0; state <= S_IDLE; done <= 1'b1; end
          else w <= w + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) xbuf[w] <= in_data;
  end

endmodule
