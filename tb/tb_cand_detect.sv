// tb_cand_detect: loads random thresholds, feeds random points (random
// rows and channels, sums around the thresholds, random gaps), then reads
// the candidate lists out with a randomly stalling consumer. A queue model
// per plane (last N_CAND, lanes in order) gives the expected CL1/CL2 words,
// found and stored counts; the read-out order (plane 1 first, oldest first)
// and the plane tag are checked too.
module tb_cand_detect;
  import hsum_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_HP = 8, N_ROWS = 42, N_PWI = 4, N_CAND = 8, N_CHAN = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        clear = 0, ta_we = 0, in_valid = 0, send = 0, send_busy;
  logic [2:0]  ta_plane, out_plane;
  logic [5:0]  ta_row;
  logic [31:0] ta_data;
  logic [5:0]  in_row [N_PWI];
  logic [9:0]  in_col [N_PWI];
  logic [31:0] in_hp [N_PWI][N_HP];
  logic        out_valid, out_ready = 0;
  cand_t       out_cand;
  logic [3:0]  count [N_HP];
  logic [31:0] total [N_HP];
  logic [31:0] thr [N_HP][N_ROWS];
  cand_t       q [N_HP][$];
  int          tot [N_HP];
  int checks = 0, failures = 0, n_stall = 0;

  cand_detect #(.N_HP(N_HP), .N_ROWS(N_ROWS), .N_PWI(N_PWI), .N_CAND(N_CAND),
                .N_CHAN(N_CHAN)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cand_t e;
    int idx [N_HP];
    int last_plane;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_HP; k++) begin
      q[k].delete();
      tot[k] = 0;
      idx[k] = 0;
      for (int r = 0; r < N_ROWS; r++) begin
        @(negedge clk);
        thr[k][r] = to_f32(1.0 + 0.25 * k + 0.01 * r);
        ta_we = 1; ta_plane = 3'(k); ta_row = 6'(r); ta_data = thr[k][r];
      end
    end
    @(negedge clk);
    ta_we = 0;
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int n = 0; n < 600; n++) begin
      in_valid = ($urandom % 4) != 0;
      for (int l = 0; l < N_PWI; l++) begin
        in_row[l] = 6'($urandom % N_ROWS);
        in_col[l] = 10'($urandom);
        for (int k = 0; k < N_HP; k++)
          in_hp[l][k] = to_f32(to_real(thr[k][in_row[l]]) * (0.9 + 0.0001 * ($urandom % 1300)));
      end
      // Model (lane order = arrival order).
      if (in_valid)
        for (int k = 0; k < N_HP; k++)
          for (int l = 0; l < N_PWI; l++)
            if (to_real(in_hp[l][k]) > to_real(thr[k][in_row[l]])) begin
              e.cl1 = (32'(in_row[l]) << 24) | (32'(k) << 21) | 32'(in_col[l]);
              e.cl2 = in_hp[l][k];
              q[k].push_back(e);
              if (q[k].size() > N_CAND) void'(q[k].pop_front());
              tot[k]++;
            end
      @(negedge clk);
    end
    in_valid = 0;
    for (int k = 0; k < N_HP; k++) begin
      check(int'(total[k]) == tot[k], $sformatf("total %0d", k));
      check(int'(count[k]) == q[k].size(), $sformatf("count %0d", k));
    end
    send = 1;
    @(negedge clk);
    send = 0;
    last_plane = 0;
    while (send_busy) begin
      out_ready = ($urandom % 3) != 0;
      if (out_valid && !out_ready) n_stall++;
      if (out_valid && out_ready) begin
        check(int'(out_plane) >= last_plane, "plane order");
        last_plane = int'(out_plane);
        check(idx[out_plane] < q[out_plane].size(), "extra entry");
        if (idx[out_plane] < q[out_plane].size())
          check(out_cand == q[out_plane][idx[out_plane]],
                $sformatf("plane %0d entry %0d", out_plane, idx[out_plane]));
        idx[out_plane]++;
      end
      @(negedge clk);
    end
    for (int k = 0; k < N_HP; k++) check(idx[k] == q[k].size(), "all entries read");
    check(n_stall > 0, "no stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
