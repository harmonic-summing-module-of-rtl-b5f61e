// tb_threshold_array: writes a distinct threshold to every (plane, row) in a
// random order, then reads all rows on all lanes and compares with a copy
// kept by the testbench; also checks that an out-of-range row reads zero.
module tb_threshold_array;
  localparam int N_HP = 8, N_ROWS = 42, N_PWI = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        we = 0;
  logic [2:0]  wr_plane;
  logic [5:0]  wr_row;
  logic [31:0] wr_data;
  logic [5:0]  rd_row [N_PWI];
  logic [31:0] thr [N_PWI][N_HP];
  logic [31:0] model [N_HP][N_ROWS];
  int checks = 0, failures = 0;

  threshold_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < N_PWI; q++) rd_row[q] = 0;
    for (int n = 0; n < 3 * N_HP * N_ROWS; n++) begin
      int k, r;
      k = (n < N_HP * N_ROWS) ? n / N_ROWS : $urandom % N_HP;
      r = (n < N_HP * N_ROWS) ? n % N_ROWS : $urandom % N_ROWS;
      @(negedge clk);
      we = 1; wr_plane = 3'(k); wr_row = 6'(r); wr_data = $urandom;
      model[k][r] = wr_data;
    end
    @(negedge clk);
    we = 0;
    for (int r = 0; r < N_ROWS; r++) begin
      for (int q = 0; q < N_PWI; q++) rd_row[q] = 6'((r + 11 * q) % N_ROWS);
      #1;
      for (int q = 0; q < N_PWI; q++)
        for (int k = 0; k < N_HP; k++) begin
          checks++;
          if (thr[q][k] !== model[k][(r + 11 * q) % N_ROWS]) failures++;
        end
    end
    rd_row[0] = 6'd50;
    #1;
    checks++;
    if (thr[0][0] !== 32'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
