// gru_cell_tb: a GRU cell with 5 inputs and 4 units (PAR=2, so the input
// dense takes 3 MAC cycles and the recurrent dense 2). Random kernels and
// biases are loaded into both dense engines; the state is initialised with a
// random vector, then 12 steps with random inputs are run and the state is
// compared after every step with the reference GRU step (gates z, r, h; reset
// after the recurrent dense; hard sigmoid/tanh). The done pulse must rise on
// the max(3,2)+2 = 5th clock edge after the edge that samples start. Weights
// are large enough that the gates reach both clamp levels.
module gru_cell_tb;
  import lfads_ref_pkg::*;
  localparam int NI = 5, NU = 4, PAR = 2, DW = 16, DI = 6, WW = 16, WI = 6;
  localparam int DF = DW - DI, WF = WW - WI;
  localparam int NK = ((NI + PAR - 1) / PAR > (NU + PAR - 1) / PAR) ? (NI + PAR - 1) / PAR
                                                                     : (NU + PAR - 1) / PAR;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init, start, busy, done, wx_en, ws_en, w_bias;
  logic signed [DW-1:0] s_init [NU];
  logic signed [DW-1:0] x [NI];
  logic signed [DW-1:0] s [NU];
  logic [7:0] w_in, w_out;
  logic signed [WW-1:0] w_data;
  vec_t wx, bx, ws, bs, xv, sv;

  gru_cell #(.N_IN(NI), .N_UNITS(NU), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(bit rec, int ni, output vec_t w, output vec_t b);
    w = new[ni*3*NU]; b = new[3*NU];
    for (int i = 0; i < ni; i++)
      for (int o = 0; o < 3*NU; o++) begin
        w[i*3*NU+o] = rnd_range(900);
        wx_en = !rec; ws_en = rec; w_bias = 0; w_in = 8'(i); w_out = 8'(o);
        w_data = WW'(w[i*3*NU+o]);
        @(negedge clk);
      end
    for (int o = 0; o < 3*NU; o++) begin
      b[o] = rnd_range(900);
      wx_en = !rec; ws_en = rec; w_bias = 1; w_in = 0; w_out = 8'(o); w_data = WW'(b[o]);
      @(negedge clk);
    end
    wx_en = 0; ws_en = 0;
  endtask

  initial begin
    init = 0; start = 0; wx_en = 0; ws_en = 0; w_bias = 0; w_in = 0; w_out = 0; w_data = 0;
    for (int i = 0; i < NI; i++) x[i] = '0;
    for (int u = 0; u < NU; u++) s_init[u] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load(0, NI, wx, bx);
    load(1, NU, ws, bs);
    sv = new[NU];
    for (int u = 0; u < NU; u++) begin
      sv[u] = rnd_range(1024);
      s_init[u] = DW'(sv[u]);
    end
    init = 1;
    @(negedge clk);
    init = 0;
    for (int u = 0; u < NU; u++) begin
      checks++; if (longint'(s[u]) != sv[u]) failures++;
    end
    for (int step = 0; step < 12; step++) begin
      automatic int lat = 0;
      xv = new[NI];
      for (int i = 0; i < NI; i++) begin
        xv[i] = rnd_range(3000);
        x[i] = DW'(xv[i]);
      end
      sv = gru_step(wx, bx, ws, bs, xv, sv, NI, NU, DF, WF, DW);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done && lat < 50) begin
        lat++;
        @(negedge clk);
      end
      lat++;
      checks++;
      if (lat != NK + 3) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
      for (int u = 0; u < NU; u++) begin
        checks++;
        if (longint'(s[u]) != sv[u]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d s[%0d]=%0d exp %0d", step, u, s[u], sv[u]);
        end
      end
      repeat ($urandom_range(2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
