// hp_calc: harmonic-plane calculation part (the NDRange part of the
// MultipleHP-R kernel).
//
// The half FOP (N_ROWS rows, N_CHAN columns) is split into work-groups of
// N_COL columns. Each work-group has N_ROWS*N_COL/N_PWI work-items and each
// work-item computes N_PWI points of all N_HP harmonic planes. Once the
// work-group's reordered points are in the local buffer, this block issues
// one work-item per clock: for each of its N_PWI points it gathers the N_HP
// stretched values from the buffer (stretch_addr gives the addresses), holds
// them for one clock and passes them through a harmonic_sum adder chain. The
// points of a work-group are taken column-major (work-item w covers
// flattened points N_PWI*w .. N_PWI*w+N_PWI-1, point p being row p % N_ROWS
// of column p / N_ROWS); this mapping, the one-item-per-clock sequencer that
// stands in for the OpenCL NDRange, and the stall rule are this design's
// choices.
//
// Interface: start (one clock, with num_wg work-groups to process) begins a
// run; busy stays high until the last point has left. buf_avail/buf_addr/
// buf_data/buf_release talk to rfop_buffer; buf_release pulses with the
// gather of the last work-item of a work-group. A work-item is issued only
// when out_space (free entries of the output channel) covers every point
// still in the pipeline. out_valid/out_row/out_col/out_hp deliver N_PWI
// points per clock, N_HP clocks after issue. stall_buf counts clocks spent
// waiting for a full buffer during a run.
module hp_calc
  import hsum_pkg::*;
#(
  parameter int N_HP   = 8,
  parameter int N_ROWS = 42,
  parameter int N_COL  = 16,
  parameter int N_PWI  = 4,
  parameter int N_CHAN = 2097152,
  localparam int RW       = $clog2(N_ROWS),
  localparam int CW       = $clog2(N_CHAN),
  localparam int NWG_MAX  = N_CHAN / N_COL,
  localparam int GW       = $clog2(NWG_MAX + 1),
  localparam int S_WG     = wg_items(N_ROWS, N_COL, N_PWI),
  localparam int N_LPCC   = lpcc_opt(N_ROWS, N_COL, N_HP, N_PWI),
  localparam int WG_WORDS = N_LPCC * S_WG,
  localparam int AW       = $clog2(WG_WORDS),
  localparam int N_RD     = N_PWI * N_HP
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [GW-1:0]     num_wg,
  output logic              busy,
  input  logic              buf_avail,
  output logic [AW-1:0]     buf_addr [N_RD],
  input  logic [31:0]       buf_data [N_RD],
  output logic              buf_release,
  input  logic [5:0]        out_space,
  output logic              out_valid,
  output logic [RW-1:0]     out_row [N_PWI],
  output logic [CW-1:0]     out_col [N_PWI],
  output logic [31:0]       out_hp  [N_PWI][N_HP],
  output logic [31:0]       stall_buf
);

  localparam int PIPE = N_HP;          // gather register + N_HP-1 adders
  localparam int WIW  = $clog2(S_WG + 1);

  logic              issuing;
  logic [GW-1:0]     wg, wg_total;
  logic [WIW-1:0]    wi;
  logic [RW-1:0]     lrow [N_PWI];
  logic [CW-1:0]     lcol [N_PWI];      // column within the work-group
  logic [CW-1:0]     col0;
  logic              issue, last_wi;
  logic [$clog2(PIPE+2)-1:0] inflight;

  // Gather stage registers.
  logic              g_valid;
  logic [RW-1:0]     g_row [N_PWI];
  logic [CW-1:0]     g_col [N_PWI];
  logic [31:0]       g_sp  [N_PWI][N_HP];

  logic              lane_valid [N_PWI];

  assign col0    = CW'(wg) * CW'(N_COL);
  assign last_wi = (int'(wi) == S_WG - 1);
  assign issue   = issuing && buf_avail && (int'(out_space) > int'(inflight));
  assign buf_release = issue && last_wi;

  for (genvar q = 0; q < N_PWI; q++) begin : g_lane_addr
    logic [AW-1:0] a [N_HP];
    stretch_addr #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_COL(N_COL), .N_CHAN(N_CHAN),
                   .WG_WORDS(WG_WORDS))
      u_addr (.col0(col0), .row(lrow[q]), .col(col0 + lcol[q]), .addr(a));
    for (genvar k = 0; k < N_HP; k++) begin : g_k
      assign buf_addr[q*N_HP + k] = a[k];
    end
  end

  // Work-item sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      wg       <= '0;
      wg_total <= '0;
      wi       <= '0;
      stall_buf <= '0;
      for (int q = 0; q < N_PWI; q++) begin
        lrow[q] <= RW'(q % N_ROWS);
        lcol[q] <= CW'(q / N_ROWS);
      end
    end else begin
      if (start && !busy) begin
        issuing   <= (num_wg != '0);
        wg        <= '0;
        wg_total  <= num_wg;
        wi        <= '0;
        stall_buf <= '0;
        for (int q = 0; q < N_PWI; q++) begin
          lrow[q] <= RW'(q % N_ROWS);
          lcol[q] <= CW'(q / N_ROWS);
        end
      end else if (issue) begin
        if (last_wi) begin
          wi <= '0;
          for (int q = 0; q < N_PWI; q++) begin
            lrow[q] <= RW'(q % N_ROWS);
            lcol[q] <= CW'(q / N_ROWS);
          end
          wg <= wg + 1'b1;
          if (wg + 1'b1 == wg_total) issuing <= 1'b0;
        end else begin
          wi <= wi + 1'b1;
          for (int q = 0; q < N_PWI; q++) begin
            if (int'(lrow[q]) + N_PWI >= N_ROWS) begin
              lrow[q] <= RW'(int'(lrow[q]) + N_PWI - N_ROWS);
              lcol[q] <= lcol[q] + 1'b1;
            end else begin
              lrow[q] <= RW'(int'(lrow[q]) + N_PWI);
            end
          end
        end
      end else if (issuing && !buf_avail) begin
        stall_buf <= stall_buf + 1'b1;
      end
    end
  end

  // Gather register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) g_valid <= 1'b0;
    else        g_valid <= issue;
  end
  always_ff @(posedge clk) begin
    if (issue)
      for (int q = 0; q < N_PWI; q++) begin
        g_row[q] <= lrow[q];
        g_col[q] <= col0 + lcol[q];
        for (int k = 0; k < N_HP; k++) g_sp[q][k] <= buf_data[q*N_HP + k];
      end
  end

  // Adder chains, one per lane.
  for (genvar q = 0; q < N_PWI; q++) begin : g_lane_sum
    logic [RW+CW-1:0] t;
    harmonic_sum #(.N_HP(N_HP), .TAG_W(RW+CW))
      u_sum (.clk(clk), .rst_n(rst_n), .in_valid(g_valid), .sp(g_sp[q]),
             .in_tag({g_row[q], g_col[q]}), .out_valid(lane_valid[q]),
             .hp(out_hp[q]), .out_tag(t));
    assign out_row[q] = t[RW+CW-1:CW];
    assign out_col[q] = t[CW-1:0];
  end
  assign out_valid = lane_valid[0];

  // Points in flight between issue and the output channel.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + $bits(inflight)'(issue) - $bits(inflight)'(out_valid);
  end

  assign busy = issuing || (inflight != '0);

endmodule
