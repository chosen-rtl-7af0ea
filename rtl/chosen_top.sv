// chosen_top: multi-kernel Vision Transformer accelerator with one computing kernel per DDR bank.
//
// Structure (after the source's overview figure): a controller & scheduler, BN = 4 computing
// kernels and BN DDR memory banks. Every matrix is stored split column-wise over the banks, so
// each bank holds one column part of every row and all banks can stream full 512-bit bursts in
// parallel. A crossbar (bank_xbar) pairs banks with kernels as the static schedule asks:
// kernel k <-> bank k for row-wise and head-wise operations, a rotating pairing for LayerNorm,
// and a broadcast of the A tile to all kernels for matrix products.
//
// The DDR banks (with their memory controllers) and the host link are outside this design:
// each bank appears as a simplified AXI-like port: a read request channel (rq_*: address and
// burst length in 512-bit words), a read data channel with back-pressure (rd_*), and a write
// channel with address, data and back-pressure (wr_*). The host loads the operation list
// through prog_* and pulses start; done pulses after the OP_END entry is reached;
// kernel_busy shows which kernels are working.
//
// The source's main configuration uses Pn = 102, Pm = 16, Tn = 212, Tm = 3072 (DeiT-B) and
// these are the parameter defaults. The source reports eight kernels for its DeiT-B build while
// its overview figure and its schedules show four, one per bank; this design follows the
// figure and the schedules (NUM_KERNELS = BN = 4).
module chosen_top
  import chosen_pkg::*;
#(
  parameter int PN         = 102,
  parameter int TN         = 212,
  parameter int TM         = 3072,
  parameter int KMAX       = 3072,
  parameter int SM_WORDS   = 13,
  parameter int LN_WORDS   = 48,
  parameter int PROG_DEPTH = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host side
  input  logic                          prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t                        prog_data,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic  [BN-1:0]                kernel_busy,
  // DDR bank ports
  output logic  [BN-1:0]                rq_valid,
  input  logic  [BN-1:0]                rq_ready,
  output addr_t [BN-1:0]                rq_addr,
  output logic  [BN-1:0][LEN_W-1:0]     rq_len,
  input  logic  [BN-1:0]                rd_valid,
  output logic  [BN-1:0]                rd_ready,
  input  word_t [BN-1:0]                rd_data,
  output logic  [BN-1:0]                wr_valid,
  input  logic  [BN-1:0]                wr_ready,
  output addr_t [BN-1:0]                wr_addr,
  output word_t [BN-1:0]                wr_data
);

  localparam int BW = $clog2(BN);

  logic              k_start;
  kcfg_t             k_cfg;
  route_e            route;
  logic [BW-1:0]     rd_rot, wr_rot;
  logic [BN-1:0]     wr_open;

  logic [BN-1:0]     k_in_valid, k_in_ready, k_a_valid, k_out_valid, k_out_ready;
  vec_t [BN-1:0]     k_in_data, k_a_data, k_out_data;
  logic [BN-1:0]     k_done;
  // k_done is not needed by the controller, which counts result words per bank instead.

  controller #(.PROG_DEPTH(PROG_DEPTH)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .prog_we   (prog_we),
    .prog_addr (prog_addr),
    .prog_data (prog_data),
    .start     (start),
    .busy      (busy),
    .done      (done),
    .k_start   (k_start),
    .k_cfg     (k_cfg),
    .route     (route),
    .rd_rot    (rd_rot),
    .wr_rot    (wr_rot),
    .wr_open   (wr_open),
    .rq_valid  (rq_valid),
    .rq_ready  (rq_ready),
    .rq_addr   (rq_addr),
    .rq_len    (rq_len),
    .rd_beat   (rd_valid & rd_ready),
    .wr_beat   (wr_valid & wr_ready),
    .wr_addr   (wr_addr)
  );

  bank_xbar u_xbar (
    .route       (route),
    .rd_rot      (rd_rot),
    .wr_rot      (wr_rot),
    .wr_open     (wr_open),
    .b_rd_valid  (rd_valid),
    .b_rd_ready  (rd_ready),
    .b_rd_data   (rd_data),
    .b_wr_valid  (wr_valid),
    .b_wr_ready  (wr_ready),
    .b_wr_data   (wr_data),
    .k_in_valid  (k_in_valid),
    .k_in_ready  (k_in_ready),
    .k_in_data   (k_in_data),
    .k_a_valid   (k_a_valid),
    .k_a_data    (k_a_data),
    .k_out_valid (k_out_valid),
    .k_out_ready (k_out_ready),
    .k_out_data  (k_out_data)
  );

  for (genvar k = 0; k < BN; k++) begin : g_kernel
    computing_kernel #(
      .PN(PN), .TN(TN), .TM(TM), .KMAX(KMAX), .SM_WORDS(SM_WORDS), .LN_WORDS(LN_WORDS)
    ) u_kernel (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (k_start),
      .cfg       (k_cfg),
      .busy      (kernel_busy[k]),
      .done      (k_done[k]),
      .in_valid  (k_in_valid[k]),
      .in_ready  (k_in_ready[k]),
      .in_data   (k_in_data[k]),
      .a_valid   (k_a_valid),
      .a_data    (k_a_data),
      .out_valid (k_out_valid[k]),
      .out_ready (k_out_ready[k]),
      .out_data  (k_out_data[k])
    );
  end

endmodule
