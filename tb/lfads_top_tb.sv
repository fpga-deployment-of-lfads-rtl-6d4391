// lfads_top_tb: end-to-end test of the LFADS inference top at reduced sizes
// (T=6 steps, 5 channels, 4+4 encoder units, latent and decoder size 4,
// 2 factors, FIFO depth 2). All nine layers get random weights through the
// load port. Three trials with random spike counts are streamed in back to
// back while the output side applies random backpressure; every output beat
// is compared with the reference model (factors and log rates bit-exact,
// rates against exp() within tolerance). It counts, and requires at least
// once, each control mechanism: input backpressure from a full trial buffer,
// output backpressure stalling the rate stage, the decoder waiting for the
// factor layer, encoding of one trial overlapping the decoding of the
// previous one, and a latent vector waiting for the decoder to become free.
module lfads_top_tb;
  import lfads_ref_pkg::*;
  localparam int T = 6, NCH = 5, NE = 4, ND = 4, NF = 2, FD = 2;
  localparam int DW = 16, DI = 6, WW = 16, WI = 6, DF = DW - DI, WF = WW - WI;
  localparam int NTRIAL = 3;
  int checks = 0, failures = 0;
  int n_in_bp = 0, n_out_stall = 0, n_dec_wait = 0, n_overlap = 0, n_lat_wait = 0, n_done = 0;

  logic clk = 0, rst_n = 0;
  logic w_en, w_bias;
  logic [3:0] w_layer;
  logic [7:0] w_in, w_out;
  logic signed [WW-1:0] w_data;
  logic in_valid, in_ready, out_valid, out_ready, trial_done;
  logic signed [DW-1:0] in_data [NCH];
  logic signed [DW-1:0] out_factor [NF];
  logic signed [DW-1:0] out_lograte [NCH];
  logic signed [DW-1:0] out_rate [NCH];

  lfads_top #(.T(T), .N_CH(NCH), .N_ENC(NE), .N_DEC(ND), .N_FAC(NF),
              .FIFO_DEPTH(FD)) dut (.*);

  lfads_model m;
  vec_t trials [NTRIAL];

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready)                      n_in_bp++;
    if (dut.rat_res && !dut.push_ready)             n_out_stall++;
    if (dut.dec_new && !dut.fac_start)              n_dec_wait++;
    if (dut.enc_busy && dut.dec_active)             n_overlap++;
    if (dut.lat_res && dut.dec_active)              n_lat_wait++;
    if (trial_done)                                 n_done++;
  end

  task automatic load_weights();
    for (int l = 0; l < 9; l++) begin
      for (int i = 0; i < m.n_in[l]; i++)
        for (int o = 0; o < m.n_out[l]; o++) begin
          w_en = 1; w_layer = 4'(l); w_bias = 0; w_in = 8'(i); w_out = 8'(o);
          w_data = WW'(m.w[l][i*m.n_out[l] + o]);
          @(negedge clk);
        end
      for (int o = 0; o < m.n_out[l]; o++) begin
        w_en = 1; w_layer = 4'(l); w_bias = 1; w_in = 0; w_out = 8'(o);
        w_data = WW'(m.b[l][o]);
        @(negedge clk);
      end
    end
    w_en = 0;
  endtask

  // input driver: all trials back to back
  initial begin
    in_valid = 0;
    for (int c = 0; c < NCH; c++) in_data[c] = '0;
    wait (rst_n);
    wait (m != null && m.w[8].size() != 0);
    @(negedge clk);
    while (!w_en) @(negedge clk);
    while (w_en) @(negedge clk);
    for (int k = 0; k < NTRIAL; k++)
      for (int t = 0; t < T; t++) begin
        in_valid = 1;
        for (int c = 0; c < NCH; c++) in_data[c] = DW'(trials[k][t*NCH + c]);
        #1;
        while (!in_ready) @(negedge clk);   // taken at the next rising edge
        @(negedge clk);
      end
    in_valid = 0;
  end

  initial begin
    w_en = 0; w_layer = 0; w_bias = 0; w_in = 0; w_out = 0; w_data = 0; out_ready = 0;
    m = new(T, NCH, NE, ND, ND, NF, DW, DF, WF);
    m.init_weights();
    for (int k = 0; k < NTRIAL; k++) begin
      trials[k] = new[T*NCH];
      foreach (trials[k][i]) trials[k][i] = longint'($urandom_range(3)) << DF;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load_weights();
    for (int k = 0; k < NTRIAL; k++) begin
      m.run(trials[k]);
      if (k == 0) begin
        // hold the output stream off long enough to back up into the decoder
        wait (out_valid);
        repeat (80) @(negedge clk);
      end
      for (int t = 0; t < T; t++) begin
        // random backpressure, heavier on the first trial
        out_ready = ($urandom_range(99) < (k == 0 ? 15 : 60));
        #1;
        while (!(out_valid && out_ready)) begin
          @(negedge clk);
          out_ready = ($urandom_range(99) < (k == 0 ? 15 : 60));
          #1;
        end
        for (int i = 0; i < NF; i++) begin
          checks++;
          if (longint'(out_factor[i]) != m.fac[t*NF + i]) begin
            failures++;
            if (failures < 10) $display("FAIL trial %0d t %0d f[%0d]=%0d exp %0d", k, t, i,
                                        out_factor[i], m.fac[t*NF + i]);
          end
        end
        for (int c = 0; c < NCH; c++) begin
          checks += 2;
          if (longint'(out_lograte[c]) != m.logr[t*NCH + c]) begin
            failures++;
            if (failures < 10) $display("FAIL trial %0d t %0d logr[%0d]=%0d exp %0d", k, t, c,
                                        out_lograte[c], m.logr[t*NCH + c]);
          end
          if (!exp_ok(m.logr[t*NCH + c], longint'(out_rate[c]), DF, DW)) failures++;
        end
        @(negedge clk);
        out_ready = 0;
      end
    end
    repeat (5) @(negedge clk);
    checks++; if (n_done != NTRIAL) failures++;
    checks++; if (out_valid) failures++;
    $display("mechanisms: in_backpressure=%0d out_stall=%0d dec_wait=%0d overlap=%0d lat_wait=%0d trials=%0d",
             n_in_bp, n_out_stall, n_dec_wait, n_overlap, n_lat_wait, n_done);
    checks += 5;
    if (n_in_bp == 0)     failures++;
    if (n_out_stall == 0) failures++;
    if (n_dec_wait == 0)  failures++;
    if (n_overlap == 0)   failures++;
    if (n_lat_wait == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
