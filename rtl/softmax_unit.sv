// softmax_unit: softmax over one slice of an attention row, LOP elements per cycle.
//
// The source computes the exponential with a Pade approximation and removes divisions with bit
// manipulation; the exact formulas are not given, so this unit uses its own:
//   1. LOAD  : the slice (elems valid values, words beats) is stored and its maximum found.
//   2. EXP   : d = x - max <= 0; d*log2(e) = -(q + f) with integer q and fraction f;
//              2^-f = e^-r with r = f*ln2 is taken from the [1/1] Pade form (2 - r)/(2 + r),
//              whose 1/(2 + r) comes from the leading-one reciprocal (chosen_pkg::recip_bm);
//              shifting right by q gives e^d in Q1.15. The exponentials are stored and summed.
//   3. RECIP : 1/sum by the same leading-one reciprocal (chord + two Newton steps), no divider.
//   4. NORM  : each exponential times the reciprocal, shifted into Q8.8, is sent out.
// Lanes at or beyond elems are ignored and come out as 0.
//
// Interface: start (one cycle, idle only) with elems <= MAX_WORDS*PM and words = ceil(elems/PM);
// in_* accepts words beats during LOAD; out_* sends words beats during NORM; done pulses after
// the last output beat. A slice takes about 3*words + 2 cycles plus output stalls.
module softmax_unit
  import chosen_pkg::*;
#(
  parameter int MAX_WORDS = 13
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] elems,
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
  localparam logic [31:0] LOG2E_Q14 = 32'd23637;   // log2(e) * 2^14
  localparam logic [31:0] LN2_Q16   = 32'd45426;   // ln(2) * 2^16

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXP, S_RECIP, S_NORM} state_e;
  state_e state;

  vec_t          xbuf [MAX_WORDS];
  logic [15:0]   ebuf [MAX_WORDS][PM];
  logic [WW-1:0] w;
  data_t         mx;
  logic [31:0]   sum;
  recip_t        rs;

  function automatic logic lane_ok(logic [WW-1:0] wi, int lane, logic [15:0] n);
    return (32'(wi) * PM + lane) < 32'(n);
  endfunction

  // e^(x - mx) in Q1.15
  function automatic logic [15:0] exp_pade(data_t x, data_t m);
    logic [31:0] u, t, ip, fp, r16, num, den;
    logic [63:0] e;
    recip_t rd;
    u   = 32'(17'(m) - 17'(x));                    // -(x - m) >= 0, Q8.8
    t   = (u * LOG2E_Q14) >> 14;                   // Q8.8
    ip  = t >> 8;
    fp  = t & 32'hff;                              // Q0.8
    r16 = (fp * LN2_Q16) >> 8;                     // r = f*ln2, Q0.16
    num = 32'd131072 - r16;                        // 2 - r, Q.16
    den = 32'd131072 + r16;                        // 2 + r, Q.16
    rd  = recip_bm(48'(den));                      // 1/den = y * 2^-(p+15), p = 17
    e   = (64'(num) * 64'(rd.y)) >> rd.p;          // num/den in Q1.15
    if (ip >= 16) return 16'd0;
    return 16'(e >> ip);
  endfunction

  // max over the valid lanes of the incoming beat
  data_t beat_max;
  always_comb begin
    beat_max = mx;
    for (int i = 0; i < PM; i++)
      if (lane_ok(w, i, elems) && in_data[i] > beat_max) beat_max = in_data[i];
  end

  logic [15:0] ex [PM];
  logic [31:0] ex_sum;
  always_comb begin
    ex_sum = '0;
    for (int i = 0; i < PM; i++) begin
      ex[i] = lane_ok(w, i, elems) ? exp_pade(xbuf[w][i], mx) : 16'd0;
      ex_sum = ex_sum + 32'(ex[i]);
    end
  end

  always_comb begin
    for (int i = 0; i < PM; i++) begin
      logic [63:0] prod;
      prod = (64'(ebuf[w][i]) * 64'(rs.y) + (64'd1 << (32'(rs.p) + 6))) >> (32'(rs.p) + 7);
      out_data[i] = sat_dw(signed'(prod));
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_NORM);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      w <= '0; mx <= '0; sum <= '0; rs <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          w <= '0; mx <= data_t'(16'sh8000); sum <= '0;
        end
        S_LOAD: if (in_valid) begin
          mx <= beat_max;
          if (32'(w) == 32'(words) - 1) begin w <= '0; state <= S_EXP; end
          else w <= w + 1'b1;
        end
        S_EXP: begin
          sum <= sum + ex_sum;
          if (32'(w) == 32'(words) - 1) begin w <= '0; state <= S_RECIP; end
          else w <= w + 1'b1;
        end
        S_RECIP: begin
          rs    <= recip_bm(48'(sum));
          state <= S_NORM;
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
    if (state == S_EXP) for (int i = 0; i < PM; i++) ebuf[w][i] <= ex[i];
  end

endmodule
