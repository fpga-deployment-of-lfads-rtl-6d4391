// seq_buffer: trial buffer with a forward and a reversed read port.
//
// The bidirectional encoder needs the whole trial before its backward
// direction can start, because that direction begins at the last time step.
// This buffer collects one trial, T arrays of N_CH values, from the input
// stream (one array per accepted beat, written at an internal pointer), then
// raises full. While full it refuses more writes; rd_t selects a time step
// and the buffer returns row rd_t on fwd_row and row T-1-rd_t on bwd_row in
// the same cycle (combinational read), which is the sequence reversal of the
// bidirectional wrapper. release empties it for the next trial.
// Reversal by address and stream-to-array conversion follow the model; the
// single-buffer organisation and the release pulse are this design's choice.
module seq_buffer #(
  parameter int unsigned T    = 73,
  parameter int unsigned N_CH = 70,
  parameter int unsigned DW   = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_valid,
  output logic                    wr_ready,
  input  logic signed [DW-1:0]    wr_row [N_CH],
  output logic                    full,
  input  logic                    release_buf,
  input  logic [$clog2(T)-1:0]    rd_t,
  output logic signed [DW-1:0]    fwd_row [N_CH],
  output logic signed [DW-1:0]    bwd_row [N_CH]
);
  localparam int unsigned TW = $clog2(T);

  logic signed [DW-1:0] mem [T][N_CH];
  logic [TW:0]          wr_ptr;

  assign full     = (wr_ptr == (TW+1)'(T));
  assign wr_ready = !full;

  wire [TW-1:0] bwd_t = TW'(T - 1) - rd_t;

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      fwd_row[c] = mem[rd_t][c];
      bwd_row[c] = mem[bwd_t][c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      wr_ptr <= '0;
    else if (release_buf)            wr_ptr <= '0;
    else if (wr_valid && wr_ready)   wr_ptr <= wr_ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready && !release_buf)
      for (int c = 0; c < N_CH; c++) mem[wr_ptr[TW-1:0]][c] <= wr_row[c];
  end

  a_rd_in_range: assert property (@(posedge clk) disable iff (!rst_n) full |-> rd_t < TW'(T));
endmodule
