// gelu_unit: piecewise-linear GELU on LOP elements per cycle.
//
// The source replaces GELU by a piecewise-linear approximation and processes 16 elements in
// parallel (level of parallelism, LoP = 16); it does not list the segments. This unit uses 16
// segments of width 0.5 on [-4, 4): the breakpoint values are GELU(-4 + 0.5*i) in Q8.8
// (rounded), and between breakpoints the output is interpolated linearly with a shift (the
// segment width is a power of two, so no divider is needed). Below -4 the output is 0, from 4
// on it is x itself. Segment placement is this design's choice.
//
// Interface: valid/ready streams of vec_t (Q8.8 lanes), one register stage: the result of an
// input beat appears one clock after it is accepted; in_ready = !out_valid || out_ready.
module gelu_unit
  import chosen_pkg::*;
#(
  parameter int LOP = PM
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  vec_t  in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output vec_t  out_data
);

  // GELU(-4 + 0.5*i) * 256, i = 0..16
  localparam logic signed [15:0] BP [17] = '{
    16'sd0, 16'sd0, -16'sd1, -16'sd4, -16'sd12, -16'sd26, -16'sd41, -16'sd39, 16'sd0,
    16'sd89, 16'sd215, 16'sd358, 16'sd500, 16'sd636, 16'sd767, 16'sd896, 16'sd1024 };

  function automatic data_t gelu_pwl(data_t x);
    logic signed [31:0] u, y0, y1, y;
    int unsigned idx;
    if (x < -16'sd1024) return '0;
    if (x >= 16'sd1024) return x;
    u   = 32'(x) + 32'sd1024;          // 0 .. 2047
    idx = 32'(u >>> 7);                // segment 0..15
    y0  = 32'(BP[idx]);
    y1  = 32'(BP[idx + 1]);
    y   = y0 + (((y1 - y0) * (u & 32'sd127)) >>> 7);
    return data_t'(y[15:0]);
  endfunction

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LOP; i++) out_data[i] <= gelu_pwl(in_data[i]);
    end
  end

endmodule
