// Spike buffer: a DEPTH x WIDTH memory with one write port and one read port
// with a registered output, used for the tile buffer (input spikes of every
// time step of a sequence), the PE buffer (two-entry ping-pong holding the
// PE's slice of the current time step) and the output buffer (output spikes
// of every time step).
//
// Timing: a write in cycle k is visible to a read issued in cycle k+1; a
// read issued in cycle k (rd_en) returns rd_data in cycle k+1 with
// rd_valid=1.  The memory itself is not reset; rd_valid is.
// The buffers are only named in the published design; their organisation is
// this design's own choice.
module spike_buffer #(
  parameter int unsigned DEPTH = 20,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst) rd_valid <= 1'b0;
    else     rd_valid <= rd_en;
  end

  a_wr_addr : assert property (@(posedge clk) disable iff (rst) wr_en |-> 32'(wr_addr) < DEPTH);
  a_rd_addr : assert property (@(posedge clk) disable iff (rst) rd_en |-> 32'(rd_addr) < DEPTH);

endmodule
