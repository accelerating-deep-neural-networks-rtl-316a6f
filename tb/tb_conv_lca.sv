// tb_conv_lca: end-to-end test of the convolutional accelerator at its
// default sizes.
//
// Runs a sequence of layers through conv_lca, each taken from main-memory
// models that stall the AXI4 channels at random: one layer per kernel size
// (3, 5, 7, 9, 11) with padding, strides above one, several input channels
// and filter counts that leave a partly filled last group of MAC engines;
// a layer with large values that drives the outputs into saturation; the
// first convolution of the CNN_s classifier (64x64x1 input, 32 filters,
// 3x3 kernel, same padding) at full size; and a layer with an unsupported
// kernel size that must be rejected. Every output word is compared with a
// reference convolution computed here in 64-bit integers. Buffers are placed
// so that bursts have to split at 4 KB boundaries. The run also counts how
// often each mechanism of the design was exercised and fails if one never was.
module tb_conv_lca;
  import cnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // DUT ports
  logic start = 1'b0, busy, done, err;
  conv_cfg_t cfg;
  logic in_ar_valid, in_ar_ready, in_r_valid, in_r_ready;
  logic w_ar_valid, w_ar_ready, w_r_valid, w_r_ready;
  logic out_aw_valid, out_aw_ready, out_w_valid, out_w_ready, out_b_valid, out_b_ready;
  axi_ax_t in_ar, w_ar, out_aw, nul_ax;
  axi_r_t  in_r, w_r, nul_r;
  axi_w_t  out_w, nul_w;
  axi_b_t  out_b, nul_b;
  logic    nul_rdy0, nul_rdy1, nul_rdy2, nul_v0, nul_v1, nul_v2, nul_v3, nul_v4, nul_v5;
  assign nul_ax = '0;
  assign nul_w  = '0;

  conv_lca dut (.*);

  localparam int unsigned MEMW = 1 << 18;
  // Input and weights are read through their own ports; outputs written.
  axi_mem_model #(.WORDS(MEMW), .STALL_PCT(25)) u_min (
    .clk, .rst_n, .ar_valid(in_ar_valid), .ar_ready(in_ar_ready), .ar(in_ar),
    .r_valid(in_r_valid), .r_ready(in_r_ready), .r(in_r),
    .aw_valid(1'b0), .aw_ready(nul_rdy0), .aw(nul_ax), .w_valid(1'b0), .w_ready(nul_v0), .w(nul_w),
    .b_valid(nul_v1), .b_ready(1'b1), .b(nul_b));
  axi_mem_model #(.WORDS(MEMW), .STALL_PCT(25)) u_mw (
    .clk, .rst_n, .ar_valid(w_ar_valid), .ar_ready(w_ar_ready), .ar(w_ar),
    .r_valid(w_r_valid), .r_ready(w_r_ready), .r(w_r),
    .aw_valid(1'b0), .aw_ready(nul_rdy1), .aw(nul_ax), .w_valid(1'b0), .w_ready(nul_v2), .w(nul_w),
    .b_valid(nul_v3), .b_ready(1'b1), .b());
  axi_mem_model #(.WORDS(MEMW), .STALL_PCT(25)) u_mo (
    .clk, .rst_n, .ar_valid(1'b0), .ar_ready(nul_rdy2), .ar(nul_ax),
    .r_valid(nul_v4), .r_ready(1'b1), .r(nul_r),
    .aw_valid(out_aw_valid), .aw_ready(out_aw_ready), .aw(out_aw),
    .w_valid(out_w_valid), .w_ready(out_w_ready), .w(out_w),
    .b_valid(out_b_valid), .b_ready(out_b_ready), .b(out_b));
  assign nul_v5 = 1'b0;

  // Mechanism counters.
  int n_ext [5] = '{0, 0, 0, 0, 0};
  int n_pad = 0, n_stride = 0, n_multi_ch = 0, n_partial_grp = 0, n_multi_grp = 0;
  int n_sat = 0, n_reject = 0, n_overlap = 0;
  always @(posedge clk)
    if ((w_ar_valid || w_r_valid) && (out_aw_valid || out_w_valid)) n_overlap++;

  // Watchdog.
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rnd(int unsigned span);
    return 32'($signed(32'($urandom % (2 * span + 1))) - $signed(span));
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // Runs one layer: fills the memories, starts the DUT, checks all outputs.
  task automatic run_layer(int h, int w, int c, int f, int k, int s, int p, int span_x, int span_w,
                           addr_t ib, addr_t wb, addr_t ob);
    int ho, wo;
    longint t0;
    ho = (h + 2*p - k) / s + 1;
    wo = (w + 2*p - k) / s + 1;
    for (int i = 0; i < h*w*c; i++)   u_min.mem[(ib >> 2) + i] = rnd(span_x);
    for (int i = 0; i < f*c*k*k; i++) u_mw.mem[(wb >> 2) + i]  = rnd(span_w);
    for (int i = 0; i <= f*ho*wo; i++) u_mo.mem[(ob >> 2) + i] = 32'hDEAD_BEEF;
    cfg = '{in_base: ib, w_base: wb, out_base: ob, in_h: 12'(h), in_w: 12'(w), in_c: 12'(c),
            n_filt: 12'(f), out_h: 12'(ho), out_w: 12'(wo), k: 4'(k), stride: 4'(s), pad: 4'(p)};
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t0 = cycles;
    do @(posedge clk); while (!done);
    $display("layer %0dx%0dx%0d k=%0d s=%0d p=%0d f=%0d: %0d cycles", h, w, c, k, s, p, f, cycles - t0);
    check(!err, "err raised on a valid layer");
    for (int fi = 0; fi < f; fi++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          longint acc;
          logic signed [31:0] exp_v, got;
          acc = 0;
          for (int ci = 0; ci < c; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix;
                iy = oy*s - p + ky; ix = ox*s - p + kx;
                if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                  acc += longint'($signed(u_min.mem[(ib >> 2) + (ci*h + iy)*w + ix])) *
                         longint'($signed(u_mw.mem[(wb >> 2) + ((fi*c + ci)*k + ky)*k + kx]));
              end
          acc = acc >>> FRAC_BITS;
          if (acc > 64'sh7FFF_FFFF)       begin exp_v = 32'sh7FFF_FFFF; n_sat++; end
          else if (acc < -64'sh8000_0000) begin exp_v = 32'sh8000_0000; n_sat++; end
          else                               exp_v = 32'(acc);
          got = u_mo.mem[(ob >> 2) + (fi*ho + oy)*wo + ox];
          check(got == exp_v, $sformatf("f=%0d oy=%0d ox=%0d got %h exp %h", fi, oy, ox, got, exp_v));
        end
    // Nothing written past the last output.
    check(u_mo.mem[(ob >> 2) + f*ho*wo] == 32'hDEAD_BEEF, "write past the output");
    if (k >= 3 && k <= 11) n_ext[(k - 3) / 2]++;
    if (p > 0) n_pad++;
    if (s > 1) n_stride++;
    if (c > 1) n_multi_ch++;
    if (f % NUM_MAC != 0) n_partial_grp++;
    if (f > NUM_MAC) n_multi_grp++;
  endtask

  initial begin
    longint t0;
    cfg = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    //        h   w   c  f   k  s  p  span_x   span_w   in_base      w_base       out_base
    run_layer( 8,  8, 2, 6,  3, 1, 1, 1 << 18, 1 << 16, 32'h0000_0FE8, 32'h0000_1FF4, 32'h0000_2FC0);
    run_layer( 9,  7, 1, 4,  5, 2, 2, 1 << 18, 1 << 16, 32'h0001_0FF8, 32'h0001_1FE0, 32'h0001_2FFC);
    run_layer(10, 10, 3, 5,  7, 1, 3, 1 << 18, 1 << 16, 32'h0002_0000, 32'h0002_2000, 32'h0002_4000);
    run_layer(12, 12, 1, 2,  9, 1, 0, 1 << 18, 1 << 16, 32'h0003_0FC0, 32'h0003_1F00, 32'h0003_2F80);
    run_layer(13, 13, 2, 3, 11, 3, 5, 1 << 18, 1 << 16, 32'h0004_0FF0, 32'h0004_1FF0, 32'h0004_2FF0);
    run_layer( 6,  6, 1, 4,  3, 1, 1, 1 << 30, 1 << 30, 32'h0005_0000, 32'h0005_1000, 32'h0005_2000);
    // CNN_s first convolution: 64x64x1 ROI, 32 filters of 3x3, same padding.
    run_layer(64, 64, 1, 32, 3, 1, 1, 1 << 18, 1 << 16, 32'h0010_0FF0, 32'h0011_0000, 32'h0012_0000);

    // Unsupported kernel size: rejected at once with err.
    cfg.k = 4'd4;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t0 = cycles;
    do @(posedge clk); while (!done && cycles - t0 < 10);
    check(done && err, "k=4 layer not rejected");
    if (done && err) n_reject++;

    check(u_min.violations == 0 && u_mw.violations == 0 && u_mo.violations == 0, "AXI4 rule violated");

    // Every mechanism must have happened.
    for (int i = 0; i < 5; i++) check(n_ext[i] > 0, $sformatf("extractor %0dx%0d never used", 3 + 2*i, 3 + 2*i));
    check(n_pad > 0, "no zero padding");
    check(n_stride > 0, "no stride above one");
    check(n_multi_ch > 0, "no multi-channel layer");
    check(n_partial_grp > 0, "no partly filled filter group");
    check(n_multi_grp > 0, "no layer with several filter groups");
    check(n_sat > 0, "no saturation");
    check(n_reject > 0, "no rejected layer");
    check(n_overlap > 0, "store never overlapped the next weight load");
    check(u_min.n_4k + u_mw.n_4k + u_mo.n_4k > 0, "no burst split at 4 KB");
    check(u_min.n_r_stall + u_mw.n_r_stall > 0, "no read stall");
    check(u_mo.n_w_stall > 0, "no write stall");
    $display("mechanisms: ext=%0d/%0d/%0d/%0d/%0d pad=%0d stride=%0d multich=%0d partial=%0d multigrp=%0d sat=%0d reject=%0d overlap=%0d 4k=%0d rstall=%0d wstall=%0d",
             n_ext[0], n_ext[1], n_ext[2], n_ext[3], n_ext[4], n_pad, n_stride, n_multi_ch, n_partial_grp,
             n_multi_grp, n_sat, n_reject, n_overlap, u_min.n_4k + u_mw.n_4k + u_mo.n_4k,
             u_min.n_r_stall + u_mw.n_r_stall, u_mo.n_w_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
