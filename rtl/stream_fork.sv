// stream_fork: copies every beat of one valid/ready stream to two consumers.
// In the U-Net it splits the output of each encoder stage into the path that
// goes on to max pooling and the skip connection that waits for the decoder.
//
// How it works: a "taken" flag per output remembers that a consumer already
// accepted the current beat; the input beat is retired once both have it, so
// neither consumer has to wait for the other in the same cycle.
// Interface: one stream in, two out, all W bits wide. Timing: no latency,
// combinational valid/ready, one beat per cycle when both consumers accept.
// Both output data buses are the input data wired through; only the
// handshakes carry logic.
module stream_fork #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         a_valid,
  input  logic         a_ready,
  output logic [W-1:0] a_data,
  output logic         b_valid,
  input  logic         b_ready,
  output logic [W-1:0] b_data
);
  logic a_taken, b_taken;

  assign a_valid  = in_valid && !a_taken;
  assign b_valid  = in_valid && !b_taken;
  assign a_data   = in_data;
  assign b_data   = in_data;
  assign in_ready = (a_taken || a_ready) && (b_taken || b_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_taken <= 1'b0;
      b_taken <= 1'b0;
    end else if (in_valid && in_ready) begin
      a_taken <= 1'b0;
      b_taken <= 1'b0;
    end else begin
      if (a_valid && a_ready) a_taken <= 1'b1;
      if (b_valid && b_ready) b_taken <= 1'b1;
    end
  end

endmodule
