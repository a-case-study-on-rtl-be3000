// sliding_window: turns a raster-order pixel stream into a stream of K x K
// neighbourhoods ("windows") for a same-size convolution with zero padding
// of (K-1)/2 pixels on every border.
//
// How it works: incoming pixels are written into a ring of K+1 row buffers
// (row r goes to slot r mod (K+1)). The window centred on output position
// (orow, ocol) is presented as soon as the last input pixel it needs,
// (min(orow+P, H-1), min(ocol+P, W-1)), has been written. Input is held off
// while it would overwrite a row the current window still needs. Positions
// outside the frame read as zero. After the last window of a frame the
// counters return to zero and the next frame may enter; input of a new frame
// waits until the previous frame's windows have all been taken.
//
// Interface: valid/ready stream in (one pixel of CH int8 channels per beat,
// channel c in bits [8c +: 8]) and valid/ready stream out; the window is
// flattened as win_data[((ky*K + kx)*CH + c)*8 +: 8]. The consumer keeps
// win_ready low for as many cycles as it needs the window.
//
// Timing: one input pixel per cycle while space allows; the first window of a
// frame appears P rows and P+1 pixels after the frame starts. The window is
// read combinationally from the row buffers. The row-buffer ring and the
// frame-by-frame hand-over are this design's choices; the paper states only
// that layers stream and start as soon as their inputs are available.
module sliding_window #(
  parameter int unsigned CH = 4,
  parameter int unsigned W  = 256,
  parameter int unsigned H  = 256,
  parameter int unsigned K  = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [CH*8-1:0]      in_data,
  output logic                 win_valid,
  input  logic                 win_ready,
  output logic [K*K*CH*8-1:0]  win_data
);
  localparam int unsigned P     = (K - 1) / 2;
  localparam int unsigned SLOTS = K + 1;
  localparam int unsigned NPIX  = W * H;
  localparam int unsigned RW    = $clog2(H + 1);
  localparam int unsigned CW    = $clog2(W + 1);
  localparam int unsigned NW    = $clog2(NPIX + 1);

  logic [CH*8-1:0] rows [SLOTS][W];

  logic [RW-1:0] irow;       // row of the next input pixel
  logic [CW-1:0] icol;
  logic [NW-1:0] in_cnt;     // pixels written in this frame
  logic [RW-1:0] orow;       // centre of the current window
  logic [CW-1:0] ocol;

  // Linear index of the last input pixel the current window needs.
  logic [NW-1:0] need_idx;
  always_comb begin
    int unsigned nr, nc;
    nr = (int'(orow) + int'(P) > int'(H) - 1) ? H - 1 : int'(orow) + P;
    nc = (int'(ocol) + int'(P) > int'(W) - 1) ? W - 1 : int'(ocol) + P;
    need_idx = NW'(nr * W + nc);
  end

  assign win_valid = in_cnt > need_idx;
  // Row irow goes to slot irow mod SLOTS; it may not overwrite row orow-P.
  assign in_ready  = (in_cnt < NW'(NPIX)) && (int'(irow) < int'(orow) + int'(P) + 2);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) rows[int'(irow) % int'(SLOTS)][int'(icol)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irow <= '0; icol <= '0; in_cnt <= '0;
      orow <= '0; ocol <= '0;
    end else begin
      if (in_valid && in_ready) begin
        in_cnt <= in_cnt + 1'b1;
        if (icol == CW'(W - 1)) begin
          icol <= '0;
          irow <= irow + 1'b1;
        end else begin
          icol <= icol + 1'b1;
        end
      end
      if (win_valid && win_ready) begin
        if (ocol == CW'(W - 1)) begin
          ocol <= '0;
          if (orow == RW'(H - 1)) begin
            // Frame complete: hand the buffers to the next frame.
            orow <= '0; irow <= '0; icol <= '0; in_cnt <= '0;
          end else begin
            orow <= orow + 1'b1;
          end
        end else begin
          ocol <= ocol + 1'b1;
        end
      end
    end
  end

  // Window assembly with zero padding.
  always_comb begin
    for (int ky = 0; ky < int'(K); ky++) begin
      for (int kx = 0; kx < int'(K); kx++) begin
        int r, c;
        r = int'(orow) + ky - int'(P);
        c = int'(ocol) + kx - int'(P);
        if (r < 0 || r >= int'(H) || c < 0 || c >= int'(W))
          win_data[(ky*K + kx)*CH*8 +: CH*8] = '0;
        else
          win_data[(ky*K + kx)*CH*8 +: CH*8] = rows[r % SLOTS][c];
      end
    end
  end

endmodule
