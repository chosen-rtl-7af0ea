// pe: one processing element of the 1D PE array.
//
// A PE holds PM compute units (multiply-accumulate lanes, DSPs on the FPGA) that work on one
// PM-element vector of a row of B and one scalar of A per cycle: acc[slot][col][i] +=
// a[slot] * b[i] for i = 0..PM-1. It owns ROWS rows of the C tile (ROWS = ceil(Tn/Pn)) and
// keeps their partial sums in a local accumulator memory of ROWS x MW vectors, MW = Tm/PM.
// The A scalars of its rows live in a two-entry (ping-pong) register file so the next k step
// can be loaded while the current one is being computed.
//
// The division of work (Pn PEs of Pm units, Tn x Tm output tile, one k step at a time) follows
// the source; the ping-pong A registers, the single-cycle read-modify-write of the accumulator
// and the combinational drain read port are this design's choices.
//
// Timing: a_wr_* writes take effect at the next clock. mac_en performs one vector MAC per cycle
// (clear = 1 starts a fresh sum instead of accumulating). rd_data is combinational on rd_slot
// and rd_col.
module pe
  import chosen_pkg::*;
#(
  parameter int ROWS = 3,
  parameter int MW   = 192
) (
  input  logic                         clk,
  input  logic                         a_wr_en,
  input  logic                         a_wr_buf,
  input  logic [$clog2(ROWS+1)-1:0]    a_wr_slot,
  input  data_t                        a_wr_data,
  input  logic                         mac_en,
  input  logic                         mac_clear,
  input  logic                         mac_buf,
  input  logic [$clog2(ROWS+1)-1:0]    mac_slot,
  input  logic [$clog2(MW+1)-1:0]      mac_col,
  input  vec_t                         mac_b,
  input  logic [$clog2(ROWS+1)-1:0]    rd_slot,
  input  logic [$clog2(MW+1)-1:0]      rd_col,
  output logic [PM-1:0][ACC_W-1:0]     rd_data
);

  data_t                      a_reg [2][ROWS];
  logic [PM-1:0][ACC_W-1:0]   acc [ROWS*MW];

  always_ff @(posedge clk) begin
    if (a_wr_en) a_reg[a_wr_buf][a_wr_slot] <= a_wr_data;
  end

  logic [$clog2(ROWS*MW+1)-1:0] mac_addr, rd_addr;
  assign mac_addr = ($bits(mac_addr))'(mac_slot) * ($bits(mac_addr))'(MW) + ($bits(mac_addr))'(mac_col);
  assign rd_addr  = ($bits(rd_addr))'(rd_slot) * ($bits(rd_addr))'(MW) + ($bits(rd_addr))'(rd_col);

  logic [PM-1:0][ACC_W-1:0] mac_new;
  always_comb begin
    for (int i = 0; i < PM; i++) begin
      logic signed [ACC_W-1:0] av, bv, prod, base;
      av   = ACC_W'(a_reg[mac_buf][mac_slot]);
      bv   = ACC_W'(mac_b[i]);
      prod = av * bv;
      base = mac_clear ? '0 : signed'(acc[mac_addr][i]);
      mac_new[i] = base + prod;
    end
  end

  always_ff @(posedge clk) begin
    if (mac_en) acc[mac_addr] <= mac_new;
  end

  assign rd_data = acc[rd_addr];

endmodule
