// stream_fifo: synchronous FIFO for a stream beat with a valid/ready handshake.
//
// One beat is one time step of an "array of streams": every channel's value
// for that step, packed side by side into WIDTH bits, so all channels move in
// lock step. A beat is taken when in_valid && in_ready and given when
// out_valid && out_ready. The FIFO is a circular buffer of DEPTH registers
// with read and write pointers and an occupancy counter; out_data is read
// straight from the head entry, so a write becomes visible one cycle later and
// a full FIFO accepts no beat even if it is being read in that cycle.
// Streams turned into FIFOs follow the model's IO-stream style; the depth and
// the handshake are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 1120,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= nxt(wr_ptr);
      if (pop)  rd_ptr <= nxt(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // Handshake rules: nothing is popped from an empty FIFO and the count
  // never passes the depth.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_valid_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0);
endmodule
