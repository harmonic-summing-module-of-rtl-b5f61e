// tb_rfop_buffer: streams work-groups whose words encode (work-group, word
// address), with random input gaps, while a reader waits for rd_avail,
// checks random gathers on every read port, and releases the bank after a
// random delay. Checks that both banks are used in turn, that in_ready falls
// while both banks are full and that no word is lost or misplaced.
module tb_rfop_buffer;
  localparam int N_LPCC = 4, WG_WORDS = 32, N_RD = 4, NWG = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid = 0, in_ready, rd_avail, rd_release = 0;
  logic [31:0] in_data [N_LPCC];
  logic [4:0]  rd_addr [N_RD];
  logic [31:0] rd_data [N_RD];
  int checks = 0, failures = 0, n_bp = 0;

  rfop_buffer #(.N_LPCC(N_LPCC), .WG_WORDS(WG_WORDS), .N_RD(N_RD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (in_valid && !in_ready) n_bp++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int w = 0; w < NWG; w++)
        for (int b = 0; b < WG_WORDS / N_LPCC; b++) begin
          @(negedge clk);
          while ($urandom % 4 == 0) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          for (int l = 0; l < N_LPCC; l++) in_data[l] = w * 1000 + b * N_LPCC + l;
          while (!in_ready) @(negedge clk);
        end
      for (int w = 0; w < NWG; w++) begin
        @(negedge clk);
        rd_release = 0;
        while (!rd_avail) @(negedge clk);
        repeat ($urandom % ((w < 10) ? 40 : 4)) @(negedge clk);
        for (int t = 0; t < 8; t++) begin
          for (int n = 0; n < N_RD; n++) rd_addr[n] = 5'($urandom);
          #1;
          for (int n = 0; n < N_RD; n++) begin
            checks++;
            if (rd_data[n] != w * 1000 + int'(rd_addr[n])) begin
              failures++;
              if (failures < 10) $display("FAIL wg %0d addr %0d: %0d", w, rd_addr[n], rd_data[n]);
            end
          end
        end
        @(negedge clk);
        rd_release = 1;
      end
    join
    @(negedge clk);
    rd_release = 0;
    checks++;
    if (n_bp == 0) failures++;
    checks++;
    if (rd_avail) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
