// dense_mac_tb: a 5-input, 3-output dense layer with PAR=2 (so NK=3 MAC
// cycles). Random weights and biases are loaded through the write port; then
// random input vectors are applied and y is compared with the reference
// dense layer. The done pulse must rise on the NK+1 = 4th clock edge after the
// edge that samples start,
// busy must be high in between, and y must hold until the next start. A
// second phase uses large weights so that results saturate at both ends.
module dense_mac_tb;
  import lfads_ref_pkg::*;
  localparam int NI = 5, NO = 3, PAR = 2, DW = 16, DI = 6, WW = 16, WI = 6;
  localparam int DF = DW - DI, WF = WW - WI, NK = (NI + PAR - 1) / PAR;
  int checks = 0, failures = 0, n_sat = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, wr_en, wr_bias;
  logic signed [DW-1:0] x [NI];
  logic signed [DW-1:0] y [NO];
  logic [7:0] wr_in, wr_out;
  logic signed [WW-1:0] wr_data;
  vec_t w, b, xv, yr;

  dense_mac #(.N_IN(NI), .N_OUT(NO), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(longint lim);
    w = new[NI*NO]; b = new[NO];
    for (int i = 0; i < NI; i++)
      for (int o = 0; o < NO; o++) begin
        w[i*NO+o] = rnd_range(lim);
        wr_en = 1; wr_bias = 0; wr_in = 8'(i); wr_out = 8'(o); wr_data = WW'(w[i*NO+o]);
        @(negedge clk);
      end
    for (int o = 0; o < NO; o++) begin
      b[o] = rnd_range(lim);
      wr_en = 1; wr_bias = 1; wr_in = 0; wr_out = 8'(o); wr_data = WW'(b[o]);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic run_one(longint xlim);
    int lat = 0;
    xv = new[NI];
    for (int i = 0; i < NI; i++) begin
      xv[i] = rnd_range(xlim);
      x[i] = DW'(xv[i]);
    end
    yr = dense(w, b, xv, NI, NO, DF, WF, DW);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < NI; i++) x[i] = DW'($urandom);   // input is latched
    while (!done) begin
      checks++; if (lat < NK && !busy) failures++;
      lat++;
      @(negedge clk);
      if (lat > 50) break;
    end
    lat++;
    checks++;
    // lat counts the clock edges from the one that samples start to the one
    // that raises done, both included: NK MAC cycles + 1 output cycle + 1
    if (lat != NK + 2) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
    repeat ($urandom_range(3)) @(negedge clk);
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (longint'(y[o]) != yr[o]) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d]=%0d exp %0d", o, y[o], yr[o]);
      end
      if (yr[o] == 32767 || yr[o] == -32768) n_sat++;
    end
  endtask

  initial begin
    start = 0; wr_en = 0; wr_bias = 0; wr_in = 0; wr_out = 0; wr_data = 0;
    for (int i = 0; i < NI; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load(400);
    repeat (40) run_one(3000);
    load(32767);
    repeat (20) run_one(32767);
    checks++; if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
