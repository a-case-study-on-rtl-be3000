// tb_unet_top: end-to-end test of the streaming U-Net. Two copies of the
// accelerator, one keeping the skip connections on chip and one sending them
// to off-chip memory, are loaded with the same random weights and constants
// through the configuration bus and run the same two images from behavioural
// AXI memories with random wait states. Every class score each copy writes
// back is compared with the bit-exact reference model (unet_ref_pkg). The
// test also counts that the mechanisms of the design actually occur: output
// back-pressure from memory, stalls inside the layer pipeline, the on-chip
// skip buffers filling, and skip traffic to and from off-chip memory; one
// that never happens counts as a failure. The frame time is checked against
// the expected bound of about H*W*C/PE cycles plus pipeline fill.
// Reduced size (C = 2, 32 x 32 pixels) keeps the run short; tb_unet_full
// runs the default configuration.
module tb_unet_top;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int C = 2, H = 32, W = 32, IN_CH = 3, NCLS = 2, PE = 1, BURST = 4;
  localparam int NPIX = H * W, SKIP_DW = (C << (LEVELS - 1)) * 8, FRAMES = 2;
  localparam logic [31:0] SRC = 32'h0010_0000, DST = 32'h0020_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic start = 0;
  logic [31:0] skip_base [LEVELS];
  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUTs
  for (genvar d = 0; d < 2; d++) begin : g_dut
    logic busy, done;
    logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
    logic [31:0] araddr, rdata, awaddr, wdata;
    logic [7:0] arlen, awlen;
    logic [2:0] arsize, awsize;
    logic [1:0] arburst, rresp, awburst, bresp;
    logic [3:0] wstrb;
    logic              sk_awvalid [LEVELS], sk_awready [LEVELS], sk_wvalid [LEVELS], sk_wready [LEVELS];
    logic              sk_wlast [LEVELS], sk_bvalid [LEVELS], sk_bready [LEVELS];
    logic              sk_arvalid [LEVELS], sk_arready [LEVELS], sk_rvalid [LEVELS], sk_rready [LEVELS], sk_rlast [LEVELS];
    logic [31:0]       sk_awaddr [LEVELS], sk_araddr [LEVELS];
    logic [7:0]        sk_awlen [LEVELS], sk_arlen [LEVELS];
    logic [2:0]        sk_awsize [LEVELS], sk_arsize [LEVELS];
    logic [1:0]        sk_awburst [LEVELS], sk_arburst [LEVELS], sk_bresp [LEVELS], sk_rresp [LEVELS];
    logic [SKIP_DW-1:0] sk_wdata [LEVELS], sk_rdata [LEVELS];
    logic [SKIP_DW/8-1:0] sk_wstrb [LEVELS];

    unet_top #(.C(C), .H(H), .W(W), .IN_CH(IN_CH), .NCLS(NCLS), .PE(PE),
               .SKIP_OFFCHIP(d == 1), .BURST(BURST)) u_top (
      .clk, .rst_n, .cfg, .start, .src_base(SRC), .dst_base(DST), .skip_base, .busy, .done,
      .in_arvalid(arvalid), .in_arready(arready), .in_araddr(araddr), .in_arlen(arlen),
      .in_arsize(arsize), .in_arburst(arburst), .in_rvalid(rvalid), .in_rready(rready),
      .in_rdata(rdata), .in_rresp(rresp), .in_rlast(rlast),
      .out_awvalid(awvalid), .out_awready(awready), .out_awaddr(awaddr), .out_awlen(awlen),
      .out_awsize(awsize), .out_awburst(awburst), .out_wvalid(wvalid), .out_wready(wready),
      .out_wdata(wdata), .out_wstrb(wstrb), .out_wlast(wlast), .out_bvalid(bvalid),
      .out_bready(bready), .out_bresp(bresp),
      .sk_awvalid, .sk_awready, .sk_awaddr, .sk_awlen, .sk_awsize, .sk_awburst,
      .sk_wvalid, .sk_wready, .sk_wdata, .sk_wstrb, .sk_wlast, .sk_bvalid, .sk_bready, .sk_bresp,
      .sk_arvalid, .sk_arready, .sk_araddr, .sk_arlen, .sk_arsize, .sk_arburst,
      .sk_rvalid, .sk_rready, .sk_rdata, .sk_rresp, .sk_rlast);

    // Image and result memory, shared by the input and output DMA.
    axi_mem_model #(.DW(32)) u_mem (
      .clk, .rst_n, .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
      .bvalid, .bready, .bresp, .arvalid, .arready, .araddr, .arlen,
      .rvalid, .rready, .rdata, .rresp, .rlast);

    // One memory per skip connection, as wide as that level's pixels.
    for (genvar l = 0; l < LEVELS; l++) begin : g_skmem
      localparam int DW = (C << l) * 8;
      logic [DW-1:0] rd;
      axi_mem_model #(.DW(DW)) u_skmem (
        .clk, .rst_n, .awvalid(sk_awvalid[l]), .awready(sk_awready[l]), .awaddr(sk_awaddr[l]),
        .awlen(sk_awlen[l]), .wvalid(sk_wvalid[l]), .wready(sk_wready[l]),
        .wdata(sk_wdata[l][DW-1:0]), .wlast(sk_wlast[l]), .bvalid(sk_bvalid[l]),
        .bready(sk_bready[l]), .bresp(sk_bresp[l]), .arvalid(sk_arvalid[l]),
        .arready(sk_arready[l]), .araddr(sk_araddr[l]), .arlen(sk_arlen[l]),
        .rvalid(sk_rvalid[l]), .rready(sk_rready[l]), .rdata(rd), .rresp(sk_rresp[l]),
        .rlast(sk_rlast[l]));
      assign sk_rdata[l] = SKIP_DW'(rd);
    end

    // Mechanism counters.
    longint out_stalls = 0, conv_stalls = 0, in_stalls = 0, done_cnt = 0;
    always @(posedge clk) begin
      if (rst_n) begin
        if (wvalid && !wready) out_stalls++;
        if (rvalid && !rready) in_stalls++;
        if (u_top.g_enc[0].u_dconv.u_conv0.in_valid && !u_top.g_enc[0].u_dconv.u_conv0.in_ready)
          conv_stalls++;
        if (done) done_cnt++;
      end
    end
  end

  // On-chip skip buffer occupancy (copy 0 only).
  int skip_peak [LEVELS];
  for (genvar l = 0; l < LEVELS; l++) begin : g_peak
    always @(posedge clk)
      if (rst_n && int'(g_dut[0].u_top.g_skip[l].g_on.u_skip.level) > skip_peak[l])
        skip_peak[l] = int'(g_dut[0].u_top.g_skip[l].g_on.u_skip.level);
  end

  // ---------------------------------------------------------------- stimulus
  unet_ref ref_model;
  iq_t img, scores;

  task automatic cfg_write(int layer, int addr, int data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(layer); cfg.addr = CFG_ADDR_W'(addr); cfg.wdata = data;
  endtask

  task automatic load_config();
    foreach (ref_model.wts[id]) begin
      for (int i = 0; i < ref_model.wts[id].size(); i++) cfg_write(id, i, ref_model.wts[id][i]);
      for (int c = 0; c < ref_model.mult[id].size(); c++) begin
        cfg_write(id, (1 << (CFG_ADDR_W - 1)) + c, ref_model.mult[id][c]);
        cfg_write(id, (1 << (CFG_ADDR_W - 1)) + ref_model.mult[id].size() + c, ref_model.offs[id][c]);
      end
      cfg_write(id, (1 << (CFG_ADDR_W - 1)) + 2 * ref_model.mult[id].size(), ref_model.shift[id]);
    end
    @(negedge clk);
    cfg = '0;
  endtask

  longint t_start, t_done [2];
  int sat_cnt = 0, zero_cnt = 0;

  initial begin
    cfg = '0;
    for (int l = 0; l < LEVELS; l++) begin
      skip_base[l] = 32'h0100_0000 * (l + 1);
      skip_peak[l] = 0;
    end
    ref_model = new(C, H, W, IN_CH, NCLS, LEVELS);
    ref_model.make_all();
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_config();
    for (int f = 0; f < FRAMES; f++) begin
      img = {};
      for (int p = 0; p < NPIX; p++) begin
        logic [31:0] word;
        word = '0;
        for (int c = 0; c < IN_CH; c++) begin
          int v;
          v = int'($urandom_range(0, 127));
          img.push_back(v);
          word[c*8 +: 8] = 8'(v);
        end
        g_dut[0].u_mem.write_word(longint'(SRC) + 4 * p, word);
        g_dut[1].u_mem.write_word(longint'(SRC) + 4 * p, word);
      end
      scores = ref_model.run(img);
      @(negedge clk);
      start = 1;
      t_start = $time;
      @(negedge clk);
      start = 0;
      fork
        begin wait (g_dut[0].done); t_done[0] = $time; end
        begin wait (g_dut[1].done); t_done[1] = $time; end
      join
      @(negedge clk);
      for (int d = 0; d < 2; d++) begin
        int errs;
        errs = 0;
        for (int p = 0; p < NPIX; p++) begin
          logic [31:0] word;
          word = (d == 0) ? g_dut[0].u_mem.read_word(longint'(DST) + 4 * p)
                          : g_dut[1].u_mem.read_word(longint'(DST) + 4 * p);
          for (int k = 0; k < NCLS; k++) begin
            checks++;
            if (int'($signed(word[k*8 +: 8])) != scores[p * NCLS + k]) begin
              failures++;
              errs++;
              if (errs < 4) $display("copy %0d frame %0d pixel %0d class %0d: got %0d exp %0d",
                                     d, f, p, k, $signed(word[k*8 +: 8]), scores[p * NCLS + k]);
            end
          end
        end
        $display("frame %0d copy %0d (%s skips): %0d cycles", f, d, d ? "off-chip" : "on-chip",
                 (t_done[d] - t_start) / 10);
        checks++;
        // Bound: the full-resolution convolutions need C/PE cycles per pixel;
        // allow that twice over plus a pipeline fill of 64 rows.
        if ((t_done[d] - t_start) / 10 > longint'(2 * NPIX * C / PE + 64 * W * C)) begin
          failures++;
          $display("frame time above bound");
        end
      end
      foreach (scores[i]) begin
        if (scores[i] == 127 || scores[i] == -128) sat_cnt++;
        if (scores[i] == 0) zero_cnt++;
      end
    end
    repeat (4) @(posedge clk);
    // Mechanism coverage.
    begin
      int sk_w, sk_r, exp_skip;
      sk_w = g_dut[1].g_skmem[0].u_skmem.writes + g_dut[1].g_skmem[1].u_skmem.writes
           + g_dut[1].g_skmem[2].u_skmem.writes + g_dut[1].g_skmem[3].u_skmem.writes;
      sk_r = g_dut[1].g_skmem[0].u_skmem.reads + g_dut[1].g_skmem[1].u_skmem.reads
           + g_dut[1].g_skmem[2].u_skmem.reads + g_dut[1].g_skmem[3].u_skmem.reads;
      exp_skip = 0;
      for (int l = 0; l < LEVELS; l++) exp_skip += FRAMES * (NPIX >> (2 * l));
      $display("mechanisms: output back-pressure %0d/%0d cycles, input back-pressure %0d/%0d, first-conv input stalls %0d/%0d",
               g_dut[0].out_stalls, g_dut[1].out_stalls, g_dut[0].in_stalls, g_dut[1].in_stalls,
               g_dut[0].conv_stalls, g_dut[1].conv_stalls);
      $display("mechanisms: on-chip skip peaks %0d %0d %0d %0d, off-chip skip beats written %0d read %0d (expected %0d)",
               skip_peak[0], skip_peak[1], skip_peak[2], skip_peak[3], sk_w, sk_r, exp_skip);
      $display("scores: %0d saturated, %0d zero of %0d", sat_cnt, zero_cnt, FRAMES * NPIX * NCLS);
      checks += 9;
      if (g_dut[0].out_stalls == 0 || g_dut[1].out_stalls == 0) failures++;
      if (g_dut[0].conv_stalls == 0 || g_dut[1].conv_stalls == 0) failures++;
      if (g_dut[0].in_stalls == 0 || g_dut[1].in_stalls == 0) failures++;
      for (int l = 0; l < LEVELS; l++) if (skip_peak[l] == 0) failures++;
      if (sk_w != exp_skip || sk_r != exp_skip) failures++;
      if (g_dut[0].done_cnt != FRAMES || g_dut[1].done_cnt != FRAMES) failures++;
      // The scores must not be degenerate (all saturated or all zero).
      checks++;
      if (sat_cnt + zero_cnt > FRAMES * NPIX * NCLS * 9 / 10) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
