// a_tile_buffer: on-chip buffer (Block/Ultra RAM) that holds the A tile of a matrix product.
//
// The A tile is TN rows by up to KMAX columns. Because every matrix is stored column-split over
// the BN DDR banks, one A row arrives as BN parts, one from each bank, in parallel. The buffer is
// therefore built from BN sub-memories, one per column part, each with its own write port, so
// all banks can be written in the same cycle. Sub-memory b holds, for every row, the PART_W
// beats of columns [b*k_dim/BN, (b+1)*k_dim/BN).
//
// The read side feeds the PE array one A scalar per cycle: rd_en with (bank, row, word, lane)
// returns that element on rd_data at the next clock; rd_data holds its value while rd_en is low
// (like a BRAM output register). The buffer and its sizes are this design's reading of the
// "Buffers" block and the on-chip memory level named by the source; KMAX is an assumption.
module a_tile_buffer
  import chosen_pkg::*;
#(
  parameter int TN   = 212,
  parameter int KMAX = 3072
) (
  input  logic                                 clk,
  input  logic [BN-1:0]                        wr_en,
  input  logic [BN-1:0][15:0]                  wr_row,
  input  logic [BN-1:0][15:0]                  wr_word,
  input  vec_t [BN-1:0]                        wr_data,
  input  logic                                 rd_en,
  input  logic [$clog2(BN)-1:0]                rd_bank,
  input  logic [15:0]                          rd_row,
  input  logic [15:0]                          rd_word,
  input  logic [$clog2(PM)-1:0]                rd_lane,
  output data_t                                rd_data
);

  localparam int PART_W = KMAX / BN / PM;
  localparam int DEPTH  = TN * PART_W;
  localparam int AW     = $clog2(DEPTH);

  vec_t  rd_vec [BN];
  logic [AW-1:0] rd_addr;
  assign rd_addr = AW'(32'(rd_row) * PART_W + 32'(rd_word));

  for (genvar b = 0; b < BN; b++) begin : g_part
    vec_t mem [DEPTH];
    logic [AW-1:0] wa;
    assign wa = AW'(32'(wr_row[b]) * PART_W + 32'(wr_word[b]));
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wa] <= wr_data[b];
      if (rd_en && rd_bank == b) rd_vec[b] <= mem[rd_addr];
    end
  end

  logic [$clog2(BN)-1:0] bank_q;
  logic [$clog2(PM)-1:0] lane_q;
  always_ff @(posedge clk) begin
    if (rd_en) begin
      bank_q <= rd_bank;
      lane_q <= rd_lane;
    end
  end
  assign rd_data = rd_vec[bank_q][lane_q];

endmodule
