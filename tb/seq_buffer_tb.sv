// seq_buffer_tb: fills a T=5, N_CH=3 trial buffer with random rows, with
// gaps in wr_valid, checks full rises after exactly T rows and that further
// writes are refused, then reads every step and checks the forward port gives
// row t and the reversed port row T-1-t. After release it fills a second
// trial and checks that the new rows are returned.
module seq_buffer_tb;
  localparam int T = 5, N = 3, DW = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, full, release_buf;
  logic signed [DW-1:0] wr_row [N];
  logic [$clog2(T)-1:0] rd_t;
  logic signed [DW-1:0] fwd_row [N];
  logic signed [DW-1:0] bwd_row [N];
  logic signed [DW-1:0] ref_rows [T][N];

  seq_buffer #(.T(T), .N_CH(N), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill_and_check();
    int t = 0;
    while (t < T) begin
      wr_valid = $urandom_range(1);
      for (int c = 0; c < N; c++) wr_row[c] = DW'($urandom);
      #1;
      checks++; if (full) failures++;
      @(posedge clk);
      if (wr_valid) begin
        for (int c = 0; c < N; c++) ref_rows[t][c] = wr_row[c];
        t++;
      end
      @(negedge clk);
    end
    wr_valid = 0;
    checks++; if (!full || wr_ready) failures++;
    // a refused write must not change the contents
    wr_valid = 1;
    for (int c = 0; c < N; c++) wr_row[c] = 16'h7777;
    @(negedge clk);
    wr_valid = 0;
    for (int s = 0; s < T; s++) begin
      rd_t = $clog2(T)'(s);
      #1;
      for (int c = 0; c < N; c++) begin
        checks += 2;
        if (fwd_row[c] != ref_rows[s][c]) failures++;
        if (bwd_row[c] != ref_rows[T-1-s][c]) failures++;
      end
    end
  endtask

  initial begin
    wr_valid = 0; release_buf = 0; rd_t = 0;
    for (int c = 0; c < N; c++) wr_row[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fill_and_check();
    release_buf = 1;
    @(negedge clk);
    release_buf = 0;
    checks++; if (full || !wr_ready) failures++;
    fill_and_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
