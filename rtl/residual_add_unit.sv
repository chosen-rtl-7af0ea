// residual_add_unit: adds the skip path to the main path (the residual connections of a ViT
// block), one beat of PM elements per cycle, with saturation to DW bits.
//
// The source lists this addition among the jobs of the kernel's processing unit but gives no
// detail. Here the kernel first streams the skip-path part of a row (words beats), which is
// kept in a small row buffer, and then the main-path part of the same row; each main-path beat
// leaves, added to the stored beat, in the same cycle it arrives (in_ready = out_ready).
//
// Interface: start (one cycle, idle only) with words <= MAX_WORDS; in_* carries first the skip
// beats, then the main beats; out_* carries the sums; done pulses with the last sum.
module residual_add_unit
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

  typedef enum logic [1:0] {S_IDLE, S_SKIP, S_MAIN} state_e;
  state_e        state;
  vec_t          skip [MAX_WORDS];
  logic [WW-1:0] w;
  logic          last;

  assign last      = (32'(w) == 32'(words) - 1);
  assign in_ready  = (state == S_SKIP) || (state == S_MAIN && out_ready);
  assign out_valid = (state == S_MAIN) && in_valid;
  assign busy      = (state != S_IDLE);

  always_comb begin
    for (int i = 0; i < PM; i++)
      out_data[i] = sat_dw(64'(in_data[i]) + 64'(skip[w][i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; w <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin state <= S_SKIP; w <= '0; end
        S_SKIP: if (in_valid) begin
          if (last) begin w <= '0; state <= S_MAIN; end
          else w <= w + 1'b1;
        end
        S_MAIN: if (in_valid && out_ready) begin
          if (last) begin w <= '0; state <= S_IDLE; done <= 1'b1; end
          else w <= w + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_SKIP && in_valid) skip[w] <= in_data;
  end

endmodule
