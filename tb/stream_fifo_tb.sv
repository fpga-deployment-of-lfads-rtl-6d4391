// stream_fifo_tb: random valid/ready traffic through a DEPTH=4 FIFO of 12-bit
// beats, checked against a queue. It checks order and content of every beat,
// that in_ready falls exactly when DEPTH beats are stored, that out_valid is
// low when empty, and that a beat written into an empty FIFO appears on the
// output one cycle later.
module stream_fifo_tb;
  localparam int W = 12, D = 4;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency: one beat into the empty FIFO
    checks++; if (out_valid) failures++;
    in_valid = 1; in_data = 12'h5a5;
    @(negedge clk);
    in_valid = 0;
    checks++; if (!out_valid || out_data != 12'h5a5) failures++;
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    checks++; if (out_valid) failures++;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      in_valid  = ($urandom_range(99) < (cyc < 1500 ? 70 : 30));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(99) < (cyc < 1500 ? 30 : 70));
      #1;
      checks++;
      if (in_ready != (q.size() < D)) failures++;
      if (q.size() == D) n_full++;
      if (q.size() == 0) n_empty++;
      checks++;
      if (out_valid != (q.size() > 0)) failures++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin
          failures++;
          if (failures < 10) $display("FAIL data %h exp %h", out_data, q[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks++; if (n_full == 0 || n_empty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
