// ddr_bank_model: behavioural model of one DDR4 bank behind its memory controller (not
// synthesizable, for simulation only). The real bank and controller are board and vendor parts.
//
// Port: the simplified AXI-like bank port of chosen_top. Read requests (rq_*) queue up, up to
// QDEPTH of them; LAT cycles after a burst becomes the oldest one its rq_len words are returned
// on rd_* in address order, holding rd_valid and rd_data while rd_ready is low. Writes (wr_*) complete on
// the valid/ready handshake. With STALL_PCT > 0 the model randomly inserts idle read cycles and
// drops wr_ready, to exercise back-pressure. Testbenches reach the contents through mem[].
module ddr_bank_model
  import chosen_pkg::*;
#(
  parameter int DEPTH     = 4096,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 0,
  parameter int QDEPTH    = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rq_valid,
  output logic             rq_ready,
  input  addr_t            rq_addr,
  input  logic [LEN_W-1:0] rq_len,
  output logic             rd_valid,
  input  logic             rd_ready,
  output word_t            rd_data,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  addr_t            wr_addr,
  input  word_t            wr_data
);

  word_t mem [DEPTH];

  logic             active;
  addr_t            addr;
  logic [LEN_W-1:0] left;
  int               lat;
  addr_t            q_addr [$];
  logic [LEN_W-1:0] q_len  [$];

  assign rq_ready = rst_n && (q_addr.size() < QDEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; addr <= '0; left <= '0; lat <= 0; rd_valid <= 1'b0; rd_data <= '0;
    end else begin
      if (rq_valid && rq_ready) begin
        assert (32'(rq_addr) + 32'(rq_len) <= DEPTH) else $error("bank read out of range");
        q_addr.push_back(rq_addr);
        q_len.push_back(rq_len);
      end
      if (!active && q_addr.size() > 0) begin
        active <= 1'b1; addr <= q_addr.pop_front(); left <= q_len.pop_front(); lat <= LAT;
      end
      if (rd_valid && rd_ready) rd_valid <= 1'b0;
      if (active && (!rd_valid || rd_ready)) begin
        if (lat > 0) lat <= lat - 1;
        else if (left != 0 && ($urandom_range(99) >= STALL_PCT)) begin
          rd_valid <= 1'b1;
          rd_data  <= mem[addr[$clog2(DEPTH)-1:0]];
          addr     <= addr + 1;
          left     <= left - 1;
          if (left == 1) active <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    wr_ready <= ($urandom_range(99) >= STALL_PCT);
    if (wr_valid && wr_ready) begin
      assert (32'(wr_addr) < DEPTH) else $error("bank write out of range");
      mem[wr_addr[$clog2(DEPTH)-1:0]] <= wr_data;
    end
  end

endmodule
