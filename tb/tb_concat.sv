// tb_concat: self-checking test of concat. Two numbered streams arrive with
// independent random gaps under random back-pressure; every output pixel must
// hold the a-stream channels in its low channels and the b-stream channels
// above them, with the two streams kept in step.
module tb_concat;
  localparam int CA = 2, CB = 3, N = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  logic [CA*8-1:0] a_data;
  logic [CB*8-1:0] b_data;
  logic [(CA+CB)*8-1:0] out_data;

  concat #(.CA(CA), .CB(CB)) dut (.*);

  int checks = 0, failures = 0, ai = 0, bi = 0, oi = 0;
  logic ga = 0, gb = 0, go_ = 0;

  function automatic logic [CA*8-1:0] va(int i); return (CA*8)'(i * 31 + 5); endfunction
  function automatic logic [CB*8-1:0] vb(int i); return (CB*8)'(i * 977 + 1); endfunction

  always_comb begin
    a_valid = rst_n && ga && ai < N;
    b_valid = rst_n && gb && bi < N;
    a_data = va(ai);
    b_data = vb(bi);
    out_ready = go_;
  end

  always @(posedge clk) begin
    bit fa, fb;
    if (!(a_valid && !a_ready)) ga <= $urandom_range(0, 2) != 0;
    if (!(b_valid && !b_ready)) gb <= $urandom_range(0, 3) != 0;
    go_ <= $urandom_range(0, 2) != 0;
    fa = a_valid && a_ready;
    fb = b_valid && b_ready;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== {vb(oi), va(oi)}) begin failures++; if (failures < 4) $display("oi %0d got %h exp %h ai %0d bi %0d", oi, out_data, {vb(oi), va(oi)}, ai, bi); end
      oi++;
    end
    if (fa) ai <= ai + 1;
    if (fb) bi <= bi + 1;
    if (rst_n) begin
      checks++;
      if (ai != bi) failures++;   // the two inputs advance together
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (oi == N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
