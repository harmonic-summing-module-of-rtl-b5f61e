// tb_stretch_addr: builds a work-group array in the reordered layout with
// each word holding the FOP coordinates it came from, then checks for every
// point of several work-groups and every plane k that the address the block
// returns holds FOP(floor(r/k), floor(j/k)). Also checks the segment sizes
// against the published work-group layout (672, 840, 924, 968, 1004, 1032,
// 1056, 1068 cumulative points; 8 points per clock, 1344 words).
module tb_stretch_addr;
  import hsum_pkg::*;
  localparam int N_HP = 8, N_ROWS = 42, N_COL = 16, N_CHAN = 2097152, WG_WORDS = 1344;
  logic [20:0] col0, col;
  logic [5:0]  row;
  logic [10:0] addr [N_HP];
  int          tagmem [WG_WORDS];
  int checks = 0, failures = 0;
  int cum [8] = '{672, 840, 924, 968, 1004, 1032, 1056, 1068};

  stretch_addr dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 1; k <= 8; k++) begin
      checks++;
      if (seg_base(N_ROWS, N_COL, k + 1) != cum[k-1]) failures++;
    end
    checks++;
    if (lpcc_opt(N_ROWS, N_COL, N_HP, 4) * wg_items(N_ROWS, N_COL, 4) != 1344) failures++;
    for (int t = 0; t < 12; t++) begin
      int w, a;
      w = (t < 8) ? t : int'($urandom % (N_CHAN / N_COL));
      // Fill: word = row * 2^22 + column of the FOP value stored there.
      for (int i = 0; i < WG_WORDS; i++) tagmem[i] = -1;
      for (int k = 1; k <= N_HP; k++) begin
        a = seg_base(N_ROWS, N_COL, k);
        for (int cc = 0; cc < seg_cols(N_COL, k); cc++)
          for (int rr = 0; rr < seg_rows(N_ROWS, k); rr++)
            tagmem[a++] = rr * (1 << 22) + (w * N_COL) / k + cc;
      end
      col0 = 21'(w * N_COL);
      for (int c = 0; c < N_COL; c++)
        for (int r = 0; r < N_ROWS; r++) begin
          col = col0 + 21'(c);
          row = 6'(r);
          #1;
          for (int k = 1; k <= N_HP; k++) begin
            checks++;
            if (tagmem[addr[k-1]] != (r / k) * (1 << 22) + (w * N_COL + c) / k) begin
              failures++;
              if (failures < 10) $display("FAIL wg %0d r %0d c %0d k %0d addr %0d", w, r, c, k, addr[k-1]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
