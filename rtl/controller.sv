// controller: the controller and scheduler of the accelerator.
//
// The source schedules everything statically: the compiler fixes, for each operation, which
// row parts are read from which DDR bank and which kernel works on them. This block runs such a
// schedule. A host writes the operation list (instr_t entries, ended by OP_END) into the program
// memory, then pulses start; the controller runs the entries in order and pulses done.
//
// For each operation it starts all kernels with the same configuration and then issues reads in
// rounds, one burst per bank per round (a burst is one row part of one bank, so reads are full
// bursts of consecutive 512-bit words):
//   OP_GELU      (Fig. 3 "Gelu")     : round r = row r; kernel k reads bank k.
//   OP_SOFTMAX   (Fig. 3 "Softmax")  : the same row is read reps = ceil(Nh/BN) times, once per
//                                      head slice held by the bank (3 rounds per row for 12 heads).
//   OP_LAYERNORM (Fig. 3 "LayerNorm"): rows are taken BN at a time; in round c kernel k reads
//                                      the part of row k held by bank (k + c) mod BN, so each
//                                      kernel collects a whole row in BN rounds and no bank idles.
//   OP_ADD       : per row, the skip part (src1) and then the main part (src0).
//   OP_MATMUL    : first the A tile, row by row, every bank's part broadcast to all kernels;
//                  then row k of B, kernel k's column part from bank k, for k = 0..k_dim-1.
//   OP_HMATMUL   : head-wise product (the source's cost model gives head-wise products
//                  ceil(heads / kernels) rounds, i.e. each kernel takes the heads its bank
//                  holds): as OP_MATMUL, but the A rows come from each kernel's own bank
//                  (direct routing), one head slice per entry (src0 points at the slice).
// A round waits for all data of the previous round only where the routing changes (every
// LayerNorm round, and between the A and B phases of a matrix product). Writes have one address
// generator per bank that follows the same pattern; LayerNorm results are written back in
// rounds, rotated like the reads, with wr_open holding each bank to its round. An operation is
// finished when every bank has taken all its result words.
//
// The instruction format, the round structure and the handshakes are this design's choices;
// the bank/kernel pairings follow the source's text and Fig. 3. The route output uses two of the
// four codes of its 2-bit type, so its upper bit is constant 0.
module controller
  import chosen_pkg::*;
#(
  parameter int PROG_DEPTH = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // program load and run control
  input  logic                         prog_we,
  input  logic [$clog2(PROG_DEPTH)-1:0] prog_addr,
  input  instr_t                       prog_data,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // kernels
  output logic                         k_start,
  output kcfg_t                        k_cfg,
  // crossbar
  output route_e                       route,
  output logic [$clog2(BN)-1:0]        rd_rot,
  output logic [$clog2(BN)-1:0]        wr_rot,
  output logic [BN-1:0]                wr_open,
  // bank read requests
  output logic [BN-1:0]                rq_valid,
  input  logic [BN-1:0]                rq_ready,
  output addr_t [BN-1:0]               rq_addr,
  output logic [BN-1:0][LEN_W-1:0]     rq_len,
  // bank traffic seen by the controller
  input  logic [BN-1:0]                rd_beat,
  input  logic [BN-1:0]                wr_beat,
  output addr_t [BN-1:0]               wr_addr
);

  localparam int BW = $clog2(BN);
  localparam int PW = $clog2(PROG_DEPTH);

  instr_t prog [PROG_DEPTH];
  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_data;
  end

  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_LOAD, C_ISSUE, C_DRAIN, C_NEXT} cstate_e;
  cstate_e state;

  logic [PW-1:0] pc;
  instr_t        ins;
  logic [31:0]   rr, rtot;           // read rounds
  logic [31:0]   r_row, r_sub, r_sub_n;  // rr = r_row * r_sub_n + r_sub
  logic [31:0]   outst [BN];         // requested but not yet delivered beats per bank
  logic          all_idle;

  always_comb begin
    all_idle = 1'b1;
    for (int b = 0; b < BN; b++) if (outst[b] != 0) all_idle = 1'b0;
  end

  // ---------------- read round generation ----------------
  logic          r_sync;
  route_e        r_route;
  logic [BW-1:0] r_rot;
  addr_t         r_addr [BN];
  logic [LEN_W-1:0] r_len;
  always_comb begin
    r_sub_n = 32'd1;
    if (ins.k.op == OP_SOFTMAX)   r_sub_n = 32'(ins.k.reps);
    if (ins.k.op == OP_LAYERNORM) r_sub_n = BN;
    if (ins.k.op == OP_ADD)       r_sub_n = 32'd2;
  end

  always_comb begin
    r_sync  = 1'b0;
    r_route = RT_DIRECT;
    r_rot   = '0;
    r_len   = LEN_W'(ins.k.words);
    for (int b = 0; b < BN; b++) r_addr[b] = ins.src0;
    case (ins.k.op)
      OP_GELU:
        for (int b = 0; b < BN; b++) r_addr[b] = ins.src0 + r_row * ins.src0_stride;
      OP_ADD:       // skip part first, then main part
        for (int b = 0; b < BN; b++)
          r_addr[b] = r_sub[0] ? ins.src0 + r_row * ins.src0_stride
                               : ins.src1 + r_row * ins.src1_stride;
      OP_SOFTMAX:   // head slice r_sub of row r_row
        for (int b = 0; b < BN; b++)
          r_addr[b] = ins.src0 + r_row * ins.src0_stride + r_sub * 32'(ins.k.words);
      OP_LAYERNORM: begin   // round r_sub of row group r_row
        r_sync = 1'b1;
        r_rot  = BW'(r_sub);
        for (int b = 0; b < BN; b++)
          r_addr[b] = ins.src0 + (r_row * BN + 32'(BW'(BW'(b) - BW'(r_sub)))) * ins.src0_stride;
      end
      OP_MATMUL, OP_HMATMUL:
        if (rr < 32'(ins.k.n_rows)) begin
          r_route = (ins.k.op == OP_MATMUL) ? RT_BCAST : RT_DIRECT;
          r_len   = LEN_W'(ins.k.a_words);
          for (int b = 0; b < BN; b++) r_addr[b] = ins.src0 + rr * ins.src0_stride;
        end else begin
          r_sync = (rr == 32'(ins.k.n_rows));
          for (int b = 0; b < BN; b++)
            r_addr[b] = ins.src1 + (rr - 32'(ins.k.n_rows)) * ins.src1_stride;
        end
      default: ;
    endcase
  end

  // ---------------- write address generation ----------------
  logic [31:0] w_items, w_sub_n;
  logic [31:0] wrow [BN], wsub [BN], wword [BN];
  logic [31:0] wround;                 // LayerNorm write round
  logic [BN-1:0] bank_fin, round_fin;
  always_comb begin
    w_items = 32'(ins.k.n_rows);
    w_sub_n = 32'd1;
    if (ins.k.op == OP_SOFTMAX)   w_sub_n = 32'(ins.k.reps);
    if (ins.k.op == OP_LAYERNORM) w_sub_n = BN;
    for (int b = 0; b < BN; b++) begin
      logic [31:0] item;
      logic [BW-1:0] kk;
      item = wrow[b] * w_sub_n + wsub[b];
      kk   = BW'(b) - BW'(wsub[b]);
      bank_fin[b]  = (item >= (ins.k.op == OP_LAYERNORM ? w_items : w_items * w_sub_n));
      round_fin[b] = (item > wround);
      case (ins.k.op)
        OP_SOFTMAX:   wr_addr[b] = ins.dst + wrow[b] * ins.dst_stride + wsub[b] * 32'(ins.k.words) + wword[b];
        OP_LAYERNORM: wr_addr[b] = ins.dst + (wrow[b] * BN + 32'(kk)) * ins.dst_stride + wword[b];
        default:      wr_addr[b] = ins.dst + wrow[b] * ins.dst_stride + wword[b];
      endcase
      if (ins.k.op == OP_LAYERNORM) wr_open[b] = (state inside {C_LOAD, C_ISSUE, C_DRAIN}) && !bank_fin[b] && !round_fin[b];
      else                          wr_open[b] = (state inside {C_LOAD, C_ISSUE, C_DRAIN}) && !bank_fin[b];
    end
  end
  assign wr_rot = (ins.k.op == OP_LAYERNORM) ? BW'(wround) : '0;

  // ---------------- kernel configuration ----------------
  always_comb begin
    k_cfg = ins.k;
    if (ins.k.op == OP_LAYERNORM) begin
      k_cfg.n_rows = 16'(32'(ins.k.n_rows) / BN);     // rows per kernel
      k_cfg.words  = 16'(32'(ins.k.words) * BN);      // a whole row
    end
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; ins <= '0; rr <= '0; rtot <= '0; r_row <= '0; r_sub <= '0;
      done <= 1'b0; k_start <= 1'b0; route <= RT_DIRECT; rd_rot <= '0;
      rq_valid <= '0; rq_addr <= '0; rq_len <= '0; wround <= '0;
      for (int b = 0; b < BN; b++) begin
        outst[b] <= '0; wrow[b] <= '0; wsub[b] <= '0; wword[b] <= '0;
      end
    end else begin
      done    <= 1'b0;
      k_start <= 1'b0;
      // outstanding read beats
      for (int b = 0; b < BN; b++)
        outst[b] <= outst[b] + ((rq_valid[b] && rq_ready[b]) ? 32'(rq_len[b]) : 32'd0)
                             - (rd_beat[b] ? 32'd1 : 32'd0);
      // read requests leave one by one per bank
      for (int b = 0; b < BN; b++)
        if (rq_valid[b] && rq_ready[b]) rq_valid[b] <= 1'b0;
      // write address generators
      for (int b = 0; b < BN; b++)
        if (wr_beat[b]) begin
          if (wword[b] == 32'(ins.k.words) - 1) begin
            wword[b] <= '0;
            if (wsub[b] == w_sub_n - 1) begin wsub[b] <= '0; wrow[b] <= wrow[b] + 1; end
            else wsub[b] <= wsub[b] + 1;
          end else wword[b] <= wword[b] + 1;
        end
      if (ins.k.op == OP_LAYERNORM && (&round_fin) && !(&bank_fin)) wround <= wround + 1;

      case (state)
        C_IDLE: if (start) begin pc <= '0; state <= C_FETCH; end
        C_FETCH: begin
          ins <= prog[pc];
          rr  <= '0; r_row <= '0; r_sub <= '0;
          wround <= '0;
          for (int b = 0; b < BN; b++) begin wrow[b] <= '0; wsub[b] <= '0; wword[b] <= '0; end
          if (prog[pc].k.op == OP_END) begin
            state <= C_IDLE; done <= 1'b1;
          end else begin
            k_start <= 1'b1;
            case (prog[pc].k.op)
              OP_ADD:     rtot <= 32'(prog[pc].k.n_rows) * 2;
              OP_SOFTMAX: rtot <= 32'(prog[pc].k.n_rows) * 32'(prog[pc].k.reps);
              OP_MATMUL, OP_HMATMUL: rtot <= 32'(prog[pc].k.n_rows) + 32'(prog[pc].k.k_dim);
              default:    rtot <= 32'(prog[pc].k.n_rows);
            endcase
            state <= C_LOAD;
          end
        end
        C_LOAD: if (!r_sync || all_idle) begin
          route  <= r_route;
          rd_rot <= r_rot;
          for (int b = 0; b < BN; b++) begin
            rq_addr[b] <= r_addr[b];
            rq_len[b]  <= r_len;
          end
          rq_valid <= '1;
          state    <= C_ISSUE;
        end
        C_ISSUE: if ((rq_valid & ~rq_ready) == '0) begin
          if (rr == rtot - 1) state <= C_DRAIN;
          else begin
            rr <= rr + 1;
            if (r_sub == r_sub_n - 1) begin r_sub <= '0; r_row <= r_row + 1; end
            else r_sub <= r_sub + 1;
            state <= C_LOAD;
          end
        end
        C_DRAIN: if (&bank_fin) state <= C_NEXT;
        C_NEXT: begin pc <= pc + 1'b1; state <= C_FETCH; end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

endmodule
