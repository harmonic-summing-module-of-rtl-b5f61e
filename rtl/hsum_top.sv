// hsum_top: harmonic-summing module for one half filter-output plane, in the
// MultipleHP-R organisation (reordered input, all harmonic planes at once).
//
// Data flow: the reordered FOP streams in N_LPCC points per clock into
// rfop_buffer, one work-group (N_COL columns of all rows) at a time, with the
// next work-group loading while the previous one is computed. hp_calc steps
// through the work-items of each buffered work-group, gathers the stretched
// values and adds them into the N_HP harmonic planes, N_PWI points per clock.
// The points pass through channel_fifo to cand_detect, which compares each
// sum with its row threshold and keeps the last N_CAND candidates per plane.
// No harmonic plane is ever stored: every sum is dropped after detection.
// When all work-groups are done and the channel is empty, the candidate lists
// stream out and done pulses.
//
// The defaults are the configuration the paper evaluates with candidate
// detection: half an FOP of 42 rows x 2^21 channels, 8 harmonic planes, 200
// candidates per plane, 16 columns per work-group, 4 points per work-item,
// 8 points loaded per clock (1344 words per work-group, 168 clocks to load
// and 168 clocks to compute each work-group). The run control, the stream
// handshakes and the threshold loading port are this design's choices.
//
// Interface: write thresholds through ta_* while idle; start (one clock)
// with num_wg work-groups (N_CHAN/N_COL for a whole half plane); feed
// rfop_valid/rfop_ready/rfop_data at any time (the buffer accepts up to two
// work-groups ahead); read cand_valid/cand_ready/cand_data/cand_plane; done
// pulses after the last candidate. cand_count/cand_total give stored and
// found candidates per plane; stall_buf counts clocks the calculation waited
// for input.
//
// Reset: rst_n clears the registers asynchronously and also disables the
// assertions while it is low, so lint tools see it used both ways; this is
// intended and no flip-flop takes it as a synchronous input.
module hsum_top
  import hsum_pkg::*;
#(
  parameter int N_HP   = 8,
  parameter int N_ROWS = 42,
  parameter int N_CHAN = 2097152,
  parameter int N_CAND = 200,
  parameter int N_COL  = 16,
  parameter int N_PWI  = 4,
  localparam int RW       = $clog2(N_ROWS),
  localparam int CW       = $clog2(N_CHAN),
  localparam int HW       = (N_HP > 1) ? $clog2(N_HP) : 1,
  localparam int IW       = $clog2(N_CAND + 1),
  localparam int GW       = $clog2(N_CHAN / N_COL + 1),
  localparam int S_WG     = wg_items(N_ROWS, N_COL, N_PWI),
  localparam int N_LPCC   = lpcc_opt(N_ROWS, N_COL, N_HP, N_PWI),
  localparam int WG_WORDS = N_LPCC * S_WG
) (
  input  logic          clk,
  input  logic          rst_n,
  // thresholds
  input  logic          ta_we,
  input  logic [HW-1:0] ta_plane,
  input  logic [RW-1:0] ta_row,
  input  logic [31:0]   ta_data,
  // run control
  input  logic          start,
  input  logic [GW-1:0] num_wg,
  output logic          busy,
  output logic          done,
  // reordered FOP stream
  input  logic          rfop_valid,
  output logic          rfop_ready,
  input  logic [31:0]   rfop_data [N_LPCC],
  // candidate lists
  output logic          cand_valid,
  input  logic          cand_ready,
  output cand_t         cand_data,
  output logic [HW-1:0] cand_plane,
  output logic [IW-1:0] cand_count [N_HP],
  output logic [31:0]   cand_total [N_HP],
  output logic [31:0]   stall_buf
);

  localparam int AW     = $clog2(WG_WORDS);
  localparam int N_RD   = N_PWI * N_HP;
  localparam int DEPTH  = 16;
  localparam int ITEM_W = N_PWI * (RW + CW + 32 * N_HP);

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_SEND} state_t;
  state_t state;

  logic              buf_avail, buf_release;
  logic [AW-1:0]     buf_addr [N_RD];
  logic [31:0]       buf_data [N_RD];
  logic              hp_busy, hp_valid;
  logic [RW-1:0]     hp_row [N_PWI];
  logic [CW-1:0]     hp_col [N_PWI];
  logic [31:0]       hp_hp  [N_PWI][N_HP];
  logic [ITEM_W-1:0] f_din, f_dout;
  logic              f_empty, f_full;
  logic [4:0]        f_free;
  logic [RW-1:0]     d_row [N_PWI];
  logic [CW-1:0]     d_col [N_PWI];
  logic [31:0]       d_hp  [N_PWI][N_HP];
  logic              d_valid, send, send_busy, calc_start;

  assign calc_start = start && (state == S_IDLE);

  rfop_buffer #(.N_LPCC(N_LPCC), .WG_WORDS(WG_WORDS), .N_RD(N_RD))
    u_buf (.clk(clk), .rst_n(rst_n), .in_valid(rfop_valid), .in_ready(rfop_ready),
           .in_data(rfop_data), .rd_avail(buf_avail), .rd_addr(buf_addr),
           .rd_data(buf_data), .rd_release(buf_release));

  hp_calc #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_COL(N_COL), .N_PWI(N_PWI), .N_CHAN(N_CHAN))
    u_calc (.clk(clk), .rst_n(rst_n), .start(calc_start), .num_wg(num_wg), .busy(hp_busy),
            .buf_avail(buf_avail), .buf_addr(buf_addr), .buf_data(buf_data),
            .buf_release(buf_release), .out_space({1'b0, f_free}), .out_valid(hp_valid),
            .out_row(hp_row), .out_col(hp_col), .out_hp(hp_hp), .stall_buf(stall_buf));

  // Pack / unpack the channel word: per lane {row, col, hp[0..N_HP-1]}.
  always_comb begin
    for (int q = 0; q < N_PWI; q++) begin
      f_din[q*(RW+CW+32*N_HP) +: RW] = hp_row[q];
      f_din[q*(RW+CW+32*N_HP) + RW +: CW] = hp_col[q];
      for (int k = 0; k < N_HP; k++)
        f_din[q*(RW+CW+32*N_HP) + RW + CW + 32*k +: 32] = hp_hp[q][k];
      d_row[q] = f_dout[q*(RW+CW+32*N_HP) +: RW];
      d_col[q] = f_dout[q*(RW+CW+32*N_HP) + RW +: CW];
      for (int k = 0; k < N_HP; k++)
        d_hp[q][k] = f_dout[q*(RW+CW+32*N_HP) + RW + CW + 32*k +: 32];
    end
  end

  channel_fifo #(.W(ITEM_W), .DEPTH(DEPTH))
    u_chan (.clk(clk), .rst_n(rst_n), .push(hp_valid), .din(f_din), .pop(d_valid),
            .dout(f_dout), .empty(f_empty), .full(f_full), .free(f_free));

  // The detection part takes one channel word per clock.
  assign d_valid = !f_empty;

  cand_detect #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_PWI(N_PWI), .N_CAND(N_CAND), .N_CHAN(N_CHAN))
    u_det (.clk(clk), .rst_n(rst_n), .clear(calc_start), .ta_we(ta_we), .ta_plane(ta_plane),
           .ta_row(ta_row), .ta_data(ta_data), .in_valid(d_valid), .in_row(d_row),
           .in_col(d_col), .in_hp(d_hp), .send(send), .send_busy(send_busy),
           .out_valid(cand_valid), .out_ready(cand_ready), .out_cand(cand_data),
           .out_plane(cand_plane), .count(cand_count), .total(cand_total));

  assign send = (state == S_CALC) && !hp_busy && f_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (calc_start) state <= S_CALC;
        S_CALC: if (send) state <= S_SEND;
        S_SEND: if (!send_busy) begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_no_chan_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                       hp_valid |-> !f_full);

endmodule
