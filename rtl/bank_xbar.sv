// bank_xbar: interconnect between the BN DDR bank ports and the BN computing kernels.
//
// Data placement follows the source: every matrix is split column-wise over the banks, and the
// schedule decides which kernel works on which bank's data in each round.
//   route = RT_DIRECT, rd_rot = r: kernel k reads from bank (k + r) mod BN. r = 0 is the plain
//     mapping of the row-wise (GELU, matrix B rows) and head-wise (softmax) schedules; the
//     LayerNorm schedule steps r through 0..BN-1, so that in round r kernel k reads its row's
//     part from bank (k + r) mod BN and all banks stay busy.
//   route = RT_BCAST: the read data of bank b goes to A-buffer port b of every kernel (the A
//     tile of a matrix product is needed by all kernels). These ports have no back-pressure.
//   Writes: bank b takes the results of kernel (b - wr_rot) mod BN, and only while the
//     controller holds wr_open[b] (used to keep LayerNorm write-back rounds apart).
// Words are unpacked into element vectors toward the kernels and packed again toward the banks.
// Purely combinational. The crossbar as a block is this design's reading of the source's
// schedules (Fig. 3); the source does not describe the interconnect itself.
// The broadcast A outputs are plain wires from the bank read data (unpacking only selects bits),
// so a synthesis report lists those outputs as driven straight by inputs; that is intended.
module bank_xbar
  import chosen_pkg::*;
(
  input  route_e                 route,
  input  logic [$clog2(BN)-1:0]  rd_rot,
  input  logic [$clog2(BN)-1:0]  wr_rot,
  input  logic [BN-1:0]          wr_open,
  // bank side
  input  logic [BN-1:0]          b_rd_valid,
  output logic [BN-1:0]          b_rd_ready,
  input  word_t [BN-1:0]         b_rd_data,
  output logic [BN-1:0]          b_wr_valid,
  input  logic [BN-1:0]          b_wr_ready,
  output word_t [BN-1:0]         b_wr_data,
  // kernel side
  output logic [BN-1:0]          k_in_valid,
  input  logic [BN-1:0]          k_in_ready,
  output vec_t [BN-1:0]          k_in_data,
  output logic [BN-1:0]          k_a_valid,
  output vec_t [BN-1:0]          k_a_data,
  input  logic [BN-1:0]          k_out_valid,
  output logic [BN-1:0]          k_out_ready,
  input  vec_t [BN-1:0]          k_out_data
);

  localparam int BW = $clog2(BN);

  always_comb begin
    for (int k = 0; k < BN; k++) begin
      logic [BW-1:0] src, dst;
      src = BW'(k) + rd_rot;
      dst = BW'(k) + wr_rot;
      k_in_valid[k]  = (route == RT_DIRECT) && b_rd_valid[src];
      k_in_data[k]   = unpack_word(b_rd_data[src]);
      k_a_valid[k]   = (route == RT_BCAST) && b_rd_valid[k];
      k_a_data[k]    = unpack_word(b_rd_data[k]);
      k_out_ready[k] = b_wr_ready[dst] && wr_open[dst];
    end
    for (int b = 0; b < BN; b++) begin
      logic [BW-1:0] kin, kout;
      kin  = BW'(b) - rd_rot;
      kout = BW'(b) - wr_rot;
      b_rd_ready[b] = (route == RT_BCAST) ? 1'b1 : k_in_ready[kin];
      b_wr_valid[b] = k_out_valid[kout] && wr_open[b];
      b_wr_data[b]  = pack_word(k_out_data[kout]);
    end
  end

endmodule
