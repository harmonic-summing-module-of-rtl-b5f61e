// tb_hp_calc: drives the harmonic-plane calculation with a model of the
// work-group buffer (built from fop_val in the reordered layout) and checks
// every output point: its row, its channel and all N_HP harmonic sums, in
// the work-item order. Run 1 keeps a buffer always ready and checks the rate
// (S_WG clocks per work-group plus the pipeline latency) and that stall_buf
// stays 0; run 2 withholds the buffer and the output space at random and
// checks that nothing leaves while out_space is 0 and the pipeline is empty,
// and that the waiting clocks are counted.
module tb_hp_calc;
  import hsum_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_HP = 8, N_ROWS = 42, N_COL = 16, N_PWI = 4, N_CHAN = 256;
  localparam int S_WG = wg_items(N_ROWS, N_COL, N_PWI);
  localparam int WG_WORDS = lpcc_opt(N_ROWS, N_COL, N_HP, N_PWI) * S_WG;
  localparam int N_RD = N_PWI * N_HP;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        start = 0, busy, buf_avail = 0, buf_release, out_valid;
  logic [4:0]  num_wg;
  logic [10:0] buf_addr [N_RD];
  logic [31:0] buf_data [N_RD];
  logic [5:0]  out_space = 16;
  logic [5:0]  out_row [N_PWI];
  logic [7:0]  out_col [N_PWI];
  logic [31:0] out_hp [N_PWI][N_HP];
  logic [31:0] stall_buf;
  logic [31:0] wgmem [WG_WORDS];
  int checks = 0, failures = 0, cur_wg = 0, n_out = 0, n_rel = 0, space0 = 0;
  int seed = 5;

  hp_calc #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_COL(N_COL), .N_PWI(N_PWI), .N_CHAN(N_CHAN))
    dut (.*);

  always_comb for (int n = 0; n < N_RD; n++) buf_data[n] = wgmem[buf_addr[n]];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic fill(input int w);
    int a;
    for (int i = 0; i < WG_WORDS; i++) wgmem[i] = 32'h7FC0_DEAD;
    for (int k = 1; k <= N_HP; k++) begin
      a = seg_base(N_ROWS, N_COL, k);
      for (int cc = 0; cc < seg_cols(N_COL, k); cc++)
        for (int rr = 0; rr < seg_rows(N_ROWS, k); rr++)
          wgmem[a++] = fop_val(rr, (w * N_COL) / k + cc, seed);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: point n_out*N_PWI+q of the run, in work-item order.
  always @(negedge clk) if (rst_n && out_valid) begin
    int p, w, r, c;
    logic [31:0] h;
    for (int q = 0; q < N_PWI; q++) begin
      p = n_out * N_PWI + q;
      w = p / (N_ROWS * N_COL);
      r = (p % (N_ROWS * N_COL)) % N_ROWS;
      c = w * N_COL + (p % (N_ROWS * N_COL)) / N_ROWS;
      check(int'(out_row[q]) == r && int'(out_col[q]) == c,
            $sformatf("point %0d at r%0d c%0d, want r%0d c%0d", p, out_row[q], out_col[q], r, c));
      for (int k = 1; k <= N_HP; k++) begin
        h = (k == 1) ? fop_val(r, c, seed) : ref_add(h, fop_val(r / k, c / k, seed));
        check(out_hp[q][k-1] == h, $sformatf("point %0d plane %0d", p, k));
      end
    end
    n_out++;
    check(space0 < N_HP + 2, "output while out_space was 0");
  end

  // Buffer model: a release moves to the next work-group.
  always @(negedge clk) begin
    if (out_space == 0) space0++;
    else                space0 = 0;
  end

  task automatic run(input int nwg, input bit throttle);
    int t0;
    n_out = 0; n_rel = 0;
    cur_wg = 0;
    fill(0);
    @(negedge clk);
    num_wg = 5'(nwg);
    start = 1;
    buf_avail = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (busy) begin
      @(negedge clk);
      if (throttle)
        out_space = ($urandom % 8 == 0) ? 6'd0 : ((space0 > 0 && space0 < 20) ? 6'd0 : 6'd16);
      #1;
      if (buf_release) begin
        // The gather at this edge still reads the old work-group.
        @(posedge clk);
        #1;
        n_rel++;
        cur_wg++;
        fill(cur_wg);
        if (throttle || cur_wg == nwg) begin
          buf_avail = 0;
          if (throttle) repeat ($urandom % 30) @(posedge clk);
          #1 buf_avail = (cur_wg < nwg);
        end
      end
    end
    out_space = 16;
    check(n_out * N_PWI == nwg * S_WG * N_PWI, $sformatf("%0d items out", n_out));
    check(n_rel == nwg, "releases");
    if (!throttle) begin
      check(($time - t0) / 10 <= nwg * S_WG + N_HP + 3,
            $sformatf("rate: %0d clocks for %0d work-groups", ($time - t0) / 10, nwg));
      check(stall_buf == 0, "stall_buf without stalls");
    end else begin
      check(stall_buf > 0, "no buffer wait counted");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(N_CHAN / N_COL, 1'b0);
    seed = 9;
    run(6, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
