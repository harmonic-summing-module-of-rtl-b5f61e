// tb_hsum_cfg: the harmonic-summing module in its other evaluated setting,
// 64 columns per work-group and 8 points per work-item.
//
// The same checks as tb_hsum_top, on a top built with N_COL=64, N_PWI=8 over
// 1024 channels (16 work-groups). The derived sizes are checked against the
// published ones: 16 points per clock after rounding to a power of two (13
// before), 336 work-items per work-group and a 5376-word bank. Three runs:
// full-rate input with the 336-clocks-per-work-group throughput check,
// randomly throttled input and output, and a zero-threshold run in which
// every candidate list overflows. Candidate lists and counts are compared
// word by word with a software model that forms each harmonic sum in double
// precision and rounds it once to single precision per addition.
module tb_hsum_cfg;
  import hsum_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_HP     = 8;
  localparam int N_ROWS   = 42;
  localparam int N_CHAN   = 1024;
  localparam int N_CAND   = 16;
  localparam int N_COL    = 64;
  localparam int N_PWI    = 8;
  localparam int RW       = $clog2(N_ROWS);
  localparam int CW       = $clog2(N_CHAN);
  localparam int HW       = $clog2(N_HP);
  localparam int IW       = $clog2(N_CAND + 1);
  localparam int GW       = $clog2(N_CHAN / N_COL + 1);
  localparam int S_WG     = wg_items(N_ROWS, N_COL, N_PWI);
  localparam int N_LPCC   = lpcc_opt(N_ROWS, N_COL, N_HP, N_PWI);
  localparam int WG_WORDS = N_LPCC * S_WG;
  localparam int NWG      = N_CHAN / N_COL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          ta_we = 0;
  logic [HW-1:0] ta_plane;
  logic [RW-1:0] ta_row;
  logic [31:0]   ta_data;
  logic          start = 0;
  logic [GW-1:0] num_wg;
  logic          busy, done;
  logic          rfop_valid = 0, rfop_ready;
  logic [31:0]   rfop_data [N_LPCC];
  logic          cand_valid, cand_ready = 1;
  cand_t         cand_data;
  logic [HW-1:0] cand_plane;
  logic [IW-1:0] cand_count [N_HP];
  logic [31:0]   cand_total [N_HP];
  logic [31:0]   stall_buf;

  hsum_top #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_CHAN(N_CHAN), .N_CAND(N_CAND),
             .N_COL(N_COL), .N_PWI(N_PWI))
    dut (.*);

  int checks = 0, failures = 0;
  int n_backpressure = 0, n_overlap = 0, n_wait_input = 0, n_padding = 0;
  int n_overflow = 0, n_out_stall = 0;
  int seed;
  int throttle_in = 0, throttle_out = 0;

  logic [31:0] thr [N_HP][N_ROWS];
  cand_t       exp_list [N_HP][$];
  int          exp_total [N_HP];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  always @(negedge clk) if (rst_n) begin
    if (rfop_valid && !rfop_ready) n_backpressure++;
    if (rfop_valid && rfop_ready && dut.u_calc.issue) n_overlap++;
    if (cand_valid && !cand_ready) n_out_stall++;
  end

  // Reordered-FOP stream for work-groups 0..nwg-1.
  task automatic stream_rfop(input int nwg);
    logic [31:0] words [$];
    int col0, c, n;
    for (int w = 0; w < nwg; w++) begin
      words.delete();
      col0 = w * N_COL;
      for (int k = 1; k <= N_HP; k++)
        for (int cc = 0; cc < seg_cols(N_COL, k); cc++)
          for (int rr = 0; rr < seg_rows(N_ROWS, k); rr++) begin
            c = col0 / k + cc;
            words.push_back((c < N_CHAN) ? fop_val(rr, c, seed) : 32'd0);
          end
      n = words.size();
      while (words.size() < WG_WORDS) begin
        words.push_back(32'h7FC0_DEAD);
        n_padding++;
      end
      for (int b = 0; b < WG_WORDS / N_LPCC; b++) begin
        @(negedge clk);
        while (throttle_in != 0 && ($urandom % 3) == 0) begin
          rfop_valid = 0;
          @(negedge clk);
        end
        rfop_valid = 1;
        for (int l = 0; l < N_LPCC; l++) rfop_data[l] = words[b * N_LPCC + l];
        while (!rfop_ready) @(negedge clk);
      end
    end
    @(negedge clk);
    rfop_valid = 0;
  endtask

  // Software model of the whole run, in the design's processing order.
  task automatic build_expected(input int nwg);
    logic [31:0] h;
    real acc;
    int p, r, c;
    cand_t e;
    for (int k = 0; k < N_HP; k++) begin
      exp_list[k].delete();
      exp_total[k] = 0;
    end
    for (int w = 0; w < nwg; w++)
      for (int wi = 0; wi < S_WG; wi++)
        for (int q = 0; q < N_PWI; q++) begin
          p = wi * N_PWI + q;
          r = p % N_ROWS;
          c = w * N_COL + p / N_ROWS;
          h = 32'd0;
          for (int k = 1; k <= N_HP; k++) begin
            h = (k == 1) ? fop_val(r, c, seed) : ref_add(h, fop_val(r / k, c / k, seed));
            if (to_real(h) > to_real(thr[k-1][r])) begin
              e.cl1 = (32'(r) << 24) | (32'(k - 1) << 21) | 32'(c);
              e.cl2 = h;
              exp_list[k-1].push_back(e);
              if (exp_list[k-1].size() > N_CAND) void'(exp_list[k-1].pop_front());
              exp_total[k-1]++;
            end
          end
        end
  endtask

  task automatic load_thresholds(input bit zero);
    for (int k = 0; k < N_HP; k++)
      for (int r = 0; r < N_ROWS; r++) begin
        thr[k][r] = zero ? 32'd0 : to_f32((k + 1) * 1.45 + 0.004 * r);
        @(negedge clk);
        ta_we = 1; ta_plane = HW'(k); ta_row = RW'(r); ta_data = thr[k][r];
        @(negedge clk);
        ta_we = 0;
      end
  endtask

  // Collect the candidate stream and compare.
  task automatic collect_and_check();
    int idx [N_HP];
    for (int k = 0; k < N_HP; k++) idx[k] = 0;
    while (!done) begin
      @(negedge clk);
      if (throttle_out != 0) cand_ready = (($urandom % 2) == 0);
      else                   cand_ready = 1;
      if (cand_valid && cand_ready) begin
        if (idx[cand_plane] < exp_list[cand_plane].size())
          check(cand_data == exp_list[cand_plane][idx[cand_plane]],
                $sformatf("plane %0d entry %0d: got %h/%h want %h/%h", cand_plane,
                          idx[cand_plane], cand_data.cl1, cand_data.cl2,
                          exp_list[cand_plane][idx[cand_plane]].cl1,
                          exp_list[cand_plane][idx[cand_plane]].cl2));
        else
          check(1'b0, "extra candidate");
        idx[cand_plane]++;
      end
    end
    cand_ready = 1;
    for (int k = 0; k < N_HP; k++) begin
      check(idx[k] == exp_list[k].size(), $sformatf("plane %0d count %0d want %0d", k, idx[k],
                                                    exp_list[k].size()));
      check(int'(cand_total[k]) == exp_total[k], $sformatf("plane %0d total %0d want %0d", k,
                                                      cand_total[k], exp_total[k]));
      check(int'(cand_count[k]) == exp_list[k].size(), "stored count");
      if (exp_total[k] > N_CAND) n_overflow++;
    end
  endtask

  task automatic run(input int nwg, input bit early, input bit zero_thr);
    int t0, t1;
    load_thresholds(zero_thr);
    build_expected(nwg);
    num_wg = GW'(nwg);
    fork
      stream_rfop(nwg);
      begin
        if (early) repeat (3 * WG_WORDS / N_LPCC) @(posedge clk);
        @(negedge clk);
        start = 1;
        t0 = $time;
        @(negedge clk);
        start = 0;
        wait (dut.state == 2'd2);
        t1 = $time;
        $display("run: %0d work-groups, %0d clocks to calculate, stall_buf=%0d", nwg,
                 (t1 - t0) / 10, stall_buf);
        if (stall_buf != 0) n_wait_input++;
        if (early && throttle_in == 0)
          // Two work-groups are preloaded, the rest stream at N_LPCC words per
          // clock: one work-group per S_WG clocks plus the pipeline latency.
          check((t1 - t0) / 10 <= nwg * S_WG + N_HP + 8,
                $sformatf("throughput: %0d clocks for %0d work-groups", (t1 - t0) / 10, nwg));
        collect_and_check();
      end
    join
  endtask

  initial begin
    check(N_LPCC == 16, $sformatf("points per clock %0d, want 16", N_LPCC));
    check(lpcc_general(N_ROWS, N_COL, N_HP, N_PWI) == 13, "points per clock before rounding, want 13");
    check(S_WG == 336, $sformatf("work-items per work-group %0d, want 336", S_WG));
    check(WG_WORDS == 5376, $sformatf("bank size %0d, want 5376", WG_WORDS));
    seed = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(NWG, 1'b1, 1'b0);
    seed = 7; throttle_in = 1; throttle_out = 1;
    run(NWG / 2, 1'b0, 1'b0);
    seed = 3; throttle_in = 0; throttle_out = 0;
    run(3, 1'b0, 1'b1);
    $display("mechanisms: backpressure=%0d overlap=%0d wait_input=%0d padding=%0d overflow=%0d out_stall=%0d",
             n_backpressure, n_overlap, n_wait_input, n_padding, n_overflow, n_out_stall);
    check(n_backpressure > 0, "input back-pressure never happened");
    check(n_overlap > 0, "loading never overlapped computing");
    check(n_wait_input > 0, "calculation never waited for input");
    check(n_padding > 0, "no padding streamed");
    check(n_overflow > 0, "no candidate list overflowed");
    check(n_out_stall > 0, "output never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
