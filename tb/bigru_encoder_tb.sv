// bigru_encoder_tb: a bidirectional encoder over a T=4 step trial of 3
// channels with 3 units per direction. The testbench plays the trial buffer:
// it returns row rd_t and row T-1-rd_t combinationally. Two trials with random
// spike counts are encoded; h_cat must equal the reference forward final state
// followed by the reference backward final state (backward cell run over the
// reversed sequence), and the encoder must finish in T*(NK+4)+1 = 25 cycles.
module bigru_encoder_tb;
  import lfads_ref_pkg::*;
  localparam int T = 4, NI = 3, NU = 3, PAR = 2, DW = 16, DI = 6, WW = 16, WI = 6;
  localparam int DF = DW - DI, WF = WW - WI, NK = (NU + PAR - 1) / PAR;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, wfx_en, wfs_en, wbx_en, wbs_en, w_bias;
  logic [$clog2(T)-1:0] rd_t;
  logic signed [DW-1:0] fwd_row [NI];
  logic signed [DW-1:0] bwd_row [NI];
  logic signed [DW-1:0] h_cat [2*NU];
  logic [7:0] w_in, w_out;
  logic signed [WW-1:0] w_data;
  logic signed [DW-1:0] trial [T][NI];
  vec_t wfx, bfx, wfs, bfs, wbx, bbx, wbs, bbs;

  bigru_encoder #(.T(T), .N_IN(NI), .N_UNITS(NU), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW),
                  .WI(WI)) dut (.*);

  always #5 clk = ~clk;

  always_comb for (int c = 0; c < NI; c++) begin
    fwd_row[c] = trial[rd_t][c];
    bwd_row[c] = trial[T-1-int'(rd_t)][c];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int which, int ni, output vec_t w, output vec_t b);
    w = new[ni*3*NU]; b = new[3*NU];
    for (int k = 0; k <= ni; k++)
      for (int o = 0; o < 3*NU; o++) begin
        {wfx_en, wfs_en, wbx_en, wbs_en} = 4'b1000 >> which;
        w_bias = (k == ni); w_in = 8'(k); w_out = 8'(o);
        if (k < ni) begin w[k*3*NU+o] = rnd_range(700); w_data = WW'(w[k*3*NU+o]); end
        else        begin b[o] = rnd_range(700);        w_data = WW'(b[o]); end
        @(negedge clk);
      end
    {wfx_en, wfs_en, wbx_en, wbs_en} = '0;
  endtask

  initial begin
    start = 0; {wfx_en, wfs_en, wbx_en, wbs_en} = '0; w_bias = 0; w_in = 0; w_out = 0;
    w_data = 0;
    for (int t = 0; t < T; t++) for (int c = 0; c < NI; c++) trial[t][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load(0, NI, wfx, bfx);
    load(1, NU, wfs, bfs);
    load(2, NI, wbx, bbx);
    load(3, NU, wbs, bbs);
    for (int trl = 0; trl < 2; trl++) begin
      automatic vec_t sf = new[NU], sb = new[NU], xv = new[NI];
      automatic int cyc = 0;
      for (int t = 0; t < T; t++)
        for (int c = 0; c < NI; c++) trial[t][c] = DW'($urandom_range(3) << DF);
      for (int t = 0; t < T; t++) begin
        for (int c = 0; c < NI; c++) xv[c] = longint'(trial[t][c]);
        sf = gru_step(wfx, bfx, wfs, bfs, xv, sf, NI, NU, DF, WF, DW);
        for (int c = 0; c < NI; c++) xv[c] = longint'(trial[T-1-t][c]);
        sb = gru_step(wbx, bbx, wbs, bbs, xv, sb, NI, NU, DF, WF, DW);
      end
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done && cyc < 500) begin
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (cyc != T * (NK + 4) + 1) begin
        failures++;
        $display("FAIL encoder cycles %0d", cyc);
      end
      for (int u = 0; u < NU; u++) begin
        checks += 2;
        if (longint'(h_cat[u]) != sf[u]) failures++;
        if (longint'(h_cat[NU+u]) != sb[u]) failures++;
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
