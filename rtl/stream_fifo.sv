// stream_fifo: first-in first-out buffer for a valid/ready stream. Sized to
// a whole feature map it is the on-chip skip-connection buffer of the U-Net:
// the encoder writes a level's output into it while the decoder of the same
// level reads it back much later. Smaller instances are the on-chip buffers
// between the fast fabric and the slow off-chip memory in skip_offchip.
//
// How it works: a circular array with read and write pointers and an
// occupancy count. The output is read straight from the array (first-word
// fall-through). The skip buffer depth is this design's choice: the paper
// does not give buffer sizes; a full feature map guarantees that the encoder
// never waits for the decoder, so the two branches cannot deadlock.
// Interface: valid/ready in and out, W bits; `level` is the occupancy.
// Timing: one write and one read per cycle; a beat written in one cycle can
// be read in the next.
module stream_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  assign in_ready  = level < LW'(DEPTH);
  assign out_valid = level != '0;
  assign out_data  = mem[rd_ptr];

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; level <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      level <= level + LW'(push) - LW'(pop);
    end
  end

  // Handshake rules.
  assert property (@(posedge clk) disable iff (!rst_n) !(level == '0 && pop));
  assert property (@(posedge clk) disable iff (!rst_n) level <= LW'(DEPTH));

endmodule
