// pe_array: the 1D array of PN processing elements that computes one Tn x Tm tile of C = A x B.
//
// Work is split as in the source's cost model: each of the PN PEs owns ROWS = ceil(TN/PN) rows
// of the tile and each PE applies PM multiply-accumulate lanes to one PM-wide vector of a B row,
// so one k step costs ROWS * m_words cycles (m_words = m_cols/PM) and a tile costs
// k_dim * ROWS * m_words cycles, i.e. Tn*Tm*k/(Pn*Pm) when the sizes divide.
//
// For every k step the array takes the k-th column of the A tile (n_rows scalars, one per cycle,
// distributed to the PE that owns the row) and the k-th row of the B tile (m_words vectors, one
// per cycle). Both go into ping-pong buffers, so the next step is loaded while the current one is
// computed. Loading n_rows scalars one per cycle hides behind ROWS*m_words compute cycles only
// while PN <= Tm/PM, which is the source's constraint "Pn < Tm/Pm, ensuring that data for the
// next round of computation is already distributed to all PEs". After the last step the tile is
// drained row by row, each value rounded down by FRAC bits and saturated to DW bits.
//
// Interface: start (one cycle) with n_rows <= TN, m_words <= TM/PM, k_dim >= 1 held stable for
// the whole tile; a_*, b_* and c_* are valid/ready streams; done pulses after the last C beat.
// Distribution by a shared bus with a PE select (rather than a shift chain) is this design's
// choice.
module pe_array
  import chosen_pkg::*;
#(
  parameter int PN = 102,
  parameter int TN = 212,
  parameter int TM = 3072
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_rows,
  input  logic [15:0] m_words,
  input  logic [15:0] k_dim,
  input  logic        a_valid,
  output logic        a_ready,
  input  data_t       a_data,
  input  logic        b_valid,
  output logic        b_ready,
  input  vec_t        b_data,
  output logic        c_valid,
  input  logic        c_ready,
  output vec_t        c_data,
  output logic        busy,
  output logic        done
);

  localparam int ROWS = (TN + PN - 1) / PN;
  localparam int MW   = TM / PM;
  localparam int SW   = $clog2(ROWS + 1);
  localparam int CW   = $clog2(MW + 1);
  localparam int PW   = $clog2(PN + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  // ---------------- loader ----------------
  logic        lbuf;
  logic [1:0]  full;
  logic [15:0] kl, la_cnt, lb_cnt;
  logic [PW-1:0] a_pe;
  logic [SW-1:0] a_slot;
  vec_t        b_buf [2][MW];

  logic load_ok, a_hs, b_hs, step_loaded;
  assign load_ok     = (state == S_RUN) && !full[lbuf] && (kl < k_dim);
  assign a_ready     = load_ok && (la_cnt < n_rows);
  assign b_ready     = load_ok && (lb_cnt < m_words);
  assign a_hs        = a_valid && a_ready;
  assign b_hs        = b_valid && b_ready;
  assign step_loaded = load_ok && (la_cnt == n_rows) && (lb_cnt == m_words);

  // ---------------- compute ----------------
  logic        cbuf;
  logic [15:0] kc;
  logic [SW-1:0] c_slot;
  logic [CW-1:0] c_col;
  logic        mac_en, step_done;
  assign mac_en    = (state == S_RUN) && full[cbuf];
  assign step_done = mac_en && (c_slot == SW'(ROWS - 1)) && (32'(c_col) == 32'(m_words) - 1);

  // ---------------- drain ----------------
  logic [15:0]   d_row;
  logic [PW-1:0] d_pe;
  logic [SW-1:0] d_slot;
  logic [CW-1:0] d_col;
  logic [PM-1:0][ACC_W-1:0] pe_rd [PN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lbuf <= 1'b0; full <= '0; kl <= '0; la_cnt <= '0; lb_cnt <= '0; a_pe <= '0; a_slot <= '0;
      cbuf <= 1'b0; kc <= '0; c_slot <= '0; c_col <= '0;
      d_row <= '0; d_pe <= '0; d_slot <= '0; d_col <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          lbuf <= 1'b0; full <= '0; kl <= '0; la_cnt <= '0; lb_cnt <= '0; a_pe <= '0; a_slot <= '0;
          cbuf <= 1'b0; kc <= '0; c_slot <= '0; c_col <= '0;
        end
        S_RUN: begin
          // loader
          if (a_hs) begin
            la_cnt <= la_cnt + 1'b1;
            if (a_slot == SW'(ROWS - 1)) begin a_slot <= '0; a_pe <= a_pe + 1'b1; end
            else a_slot <= a_slot + 1'b1;
          end
          if (b_hs) lb_cnt <= lb_cnt + 1'b1;
          if (step_loaded) begin
            full[lbuf] <= 1'b1;
            lbuf <= ~lbuf;
            kl <= kl + 1'b1;
            la_cnt <= '0; lb_cnt <= '0; a_pe <= '0; a_slot <= '0;
          end
          // compute
          if (mac_en) begin
            if (c_slot == SW'(ROWS - 1)) begin
              c_slot <= '0;
              c_col  <= c_col + 1'b1;
            end else c_slot <= c_slot + 1'b1;
          end
          if (step_done) begin
            full[cbuf] <= 1'b0;
            cbuf  <= ~cbuf;
            kc    <= kc + 1'b1;
            c_col <= '0;
            if (kc == k_dim - 1) begin
              state <= S_DRAIN;
              d_row <= '0; d_pe <= '0; d_slot <= '0; d_col <= '0;
            end
          end
        end
        S_DRAIN: if (c_valid && c_ready) begin
          if (32'(d_col) == 32'(m_words) - 1) begin
            d_col <= '0;
            d_row <= d_row + 1'b1;
            if (d_slot == SW'(ROWS - 1)) begin d_slot <= '0; d_pe <= d_pe + 1'b1; end
            else d_slot <= d_slot + 1'b1;
            if (d_row == n_rows - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else d_col <= d_col + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (b_hs) b_buf[lbuf][lb_cnt[CW-1:0]] <= b_data;
  end

  vec_t mac_b;
  assign mac_b = b_buf[cbuf][c_col];

  for (genvar p = 0; p < PN; p++) begin : g_pe
    pe #(.ROWS(ROWS), .MW(MW)) u_pe (
      .clk       (clk),
      .a_wr_en   (a_hs && (a_pe == PW'(p))),
      .a_wr_buf  (lbuf),
      .a_wr_slot (a_slot),
      .a_wr_data (a_data),
      .mac_en    (mac_en),
      .mac_clear (kc == 16'd0),
      .mac_buf   (cbuf),
      .mac_slot  (c_slot),
      .mac_col   (c_col),
      .mac_b     (mac_b),
      .rd_slot   (d_slot),
      .rd_col    (d_col),
      .rd_data   (pe_rd[p])
    );
  end

  always_comb begin
    for (int i = 0; i < PM; i++)
      c_data[i] = sat_dw(64'(signed'(pe_rd[d_pe][i])) >>> FRAC);
  end

  assign c_valid = (state == S_DRAIN);
  assign busy    = (state != S_IDLE);

endmodule
