// maxpool2x2: 2 x 2 max pooling with stride 2 on a raster-order pixel stream
// of CH int8 channels (W x H in, W/2 x H/2 out), the U-Net's downsampling.
//
// How it works: on even rows the maximum of each horizontal pixel pair is
// kept in a buffer of W/2 entries; on odd rows the pair maximum is combined
// with the buffered one and the result leaves as one output pixel. The
// maximum is taken per channel on signed values.
//
// Interface: valid/ready stream in and out, channel c in bits [8c +: 8].
// Timing: accepts one pixel per cycle; an output pixel follows one cycle
// after the fourth pixel of its 2 x 2 block (registered output). The row
// buffer is this design's choice; the paper only names the operation.
module maxpool2x2 #(
  parameter int unsigned CH = 4,
  parameter int unsigned W  = 256,
  parameter int unsigned H  = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [CH*8-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [CH*8-1:0]  out_data
);
  localparam int unsigned RW = $clog2(H + 1);
  localparam int unsigned CW = $clog2(W + 1);

  logic [CH*8-1:0] rowbuf [W/2];
  logic [CH*8-1:0] hold;           // left pixel of the current pair
  logic [RW-1:0]   row;
  logic [CW-1:0]   col;

  function automatic logic [CH*8-1:0] vmax(input logic [CH*8-1:0] a, input logic [CH*8-1:0] b);
    logic [CH*8-1:0] r;
    for (int c = 0; c < int'(CH); c++)
      r[c*8 +: 8] = ($signed(a[c*8 +: 8]) > $signed(b[c*8 +: 8])) ? a[c*8 +: 8] : b[c*8 +: 8];
    return r;
  endfunction

  wire emit = row[0] && col[0];   // bottom-right pixel of a block
  assign in_ready = !emit || !out_valid || out_ready;

  logic [CH*8-1:0] pair_max;
  assign pair_max = vmax(hold, in_data);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (!col[0]) hold <= in_data;
      else if (!row[0]) rowbuf[int'(col) >> 1] <= pair_max;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; col <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_data  <= vmax(rowbuf[int'(col) >> 1], pair_max);
        end
        if (col == CW'(W - 1)) begin
          col <= '0;
          row <= (row == RW'(H - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
