// lfads_qat_tb: one complete trial through the LFADS inference top at the
// model's full sizes (73 steps, 70 channels, 64+64 encoder units, 64 decoder
// units, 4 factors) in the 10-bit quantisation-aware format: activations and
// state <10,3>, weights and biases <10,1>. Only the number-format parameters
// of the top are overridden. Random weights within the <10,1> range and one
// trial of random spike counts (0..3) are used; all 73 output beats are
// compared with the reference model (at least half of the log rates must be
// unsaturated and differ from channel 0), and the latency bound of 8394 cycles
// (41.97 us at 200 MHz) is checked as for the 16-bit build.
module lfads_qat_tb;
  import lfads_ref_pkg::*;
  localparam int T = lfads_pkg::T_D, NCH = lfads_pkg::N_CH_D, NE = lfads_pkg::N_ENC_D;
  localparam int ND = lfads_pkg::N_DEC_D, NF = lfads_pkg::N_FAC_D;
  localparam int DW = 10, DI = 3;
  localparam int WW = 10, WI = 1, DF = DW - DI, WF = WW - WI;
  localparam int LAT_LIMIT = 8394;   // 41.97 us at 200 MHz
  int checks = 0, failures = 0, n_varied = 0;
  longint cyc = 0, t_last_in = 0, t_first_in = 0, t_last_out = 0;

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

  lfads_top #(.DW(DW), .DI(DI), .WW(WW), .WI(WI)) dut (.*);

  lfads_model m;
  vec_t trial;

  always #2.5 clk = ~clk;   // 200 MHz
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_en = 0; w_layer = 0; w_bias = 0; w_in = 0; w_out = 0; w_data = 0;
    in_valid = 0; out_ready = 1;
    for (int c = 0; c < NCH; c++) in_data[c] = '0;
    m = new(T, NCH, NE, ND, ND, NF, DW, DF, WF);
    m.WW = WW;
    m.init_weights();
    trial = new[T*NCH];
    foreach (trial[i]) trial[i] = longint'($urandom_range(3)) << DF;
    m.run(trial);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
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
    fork
      begin
        for (int t = 0; t < T; t++) begin
          in_valid = 1;
          for (int c = 0; c < NCH; c++) in_data[c] = DW'(trial[t*NCH + c]);
          #0.1;
          while (!in_ready) @(negedge clk);
          if (t == 0) t_first_in = cyc;
          if (t == T - 1) t_last_in = cyc;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int t = 0; t < T; t++) begin
          #0.1;
          while (!out_valid) @(negedge clk);
          for (int i = 0; i < NF; i++) begin
            checks++;
            if (longint'(out_factor[i]) != m.fac[t*NF + i]) begin
              failures++;
              if (failures < 10) $display("FAIL t %0d f[%0d]=%0d exp %0d", t, i,
                                          out_factor[i], m.fac[t*NF + i]);
            end
          end
          for (int c = 0; c < NCH; c++) begin
            checks += 2;
            if (longint'(out_lograte[c]) != m.logr[t*NCH + c]) begin
              failures++;
              if (failures < 10) $display("FAIL t %0d logr[%0d]=%0d exp %0d", t, c,
                                          out_lograte[c], m.logr[t*NCH + c]);
            end
            if (!exp_ok(m.logr[t*NCH + c], longint'(out_rate[c]), DF, DW)) failures++;
            if (out_lograte[c] != out_lograte[0] && out_lograte[c] != {1'b0, {(DW-1){1'b1}}} &&
                out_lograte[c] != {1'b1, {(DW-1){1'b0}}}) n_varied++;
          end
          if (t == T - 1) t_last_out = cyc;
          @(negedge clk);
        end
      end
    join
    $display("latency: last input to last output %0d cycles, first input to last output %0d cycles (%0.2f us at 200 MHz)",
             t_last_out - t_last_in, t_last_out - t_first_in, real'(t_last_out - t_first_in) * 0.005);
    checks++;
    if (t_last_out - t_first_in > LAT_LIMIT) failures++;
    // the random model must produce varied, unsaturated log rates
    $display("unsaturated log rates differing from channel 0: %0d of %0d", n_varied, T*NCH);
    checks++;
    if (n_varied < T*NCH/2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
