// tb_conv_ctrl: runs the controller against simple models of the engines
// (prefetch, patch extractor and store engines that answer after random
// delays) and checks the order and contents of every command it issues for a
// layer with two filter groups (7x6x2 input, 6 filters, 5x5 kernel, stride 2,
// padding 2): the input and weight loads, each window start (channel base and
// top-left corner), each weight chunk address, the first/last flags of the
// MAC engines, each Output PLM write address, each store of a group, that the
// next group's weight load starts together with the store, and that done
// comes once without err. It then checks that layers too large for the
// memories or with an unsupported kernel size are rejected.
module tb_conv_ctrl;
  import cnn_pkg::*;
  localparam int unsigned IN_AW = $clog2(IN_DEPTH / IN_BANKS), OUT_AW = $clog2(OUT_DEPTH), W_AW = $clog2(W_DEPTH);
  localparam int unsigned BW = $clog2(NUM_MAC);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, busy, done, err;
  conv_cfg_t cfg;
  logic pin_start, pin_done = 1'b0, pin_err = 1'b0, pw_start, pw_done = 1'b0, pw_err = 1'b0;
  addr_t pin_base, pw_base, st_base;
  logic [19:0] pin_n, pw_n;
  logic [7:0] kk;
  logic [W_AW-1:0] n_chunk, w_rd_addr;
  logic [11:0] n_chan, in_h, in_w;
  logic [3:0] k;
  logic pe_start, pe_valid = 1'b0, pe_ready, w_rd_en, mac_en, mac_first, mac_last, o_wr_en;
  logic [IN_AW-1:0] pe_c_base, in_wb;
  logic signed [15:0] pe_iy0, pe_ix0;
  logic [7:0] mac_chunk;
  logic [OUT_AW-1:0] o_wr_addr;
  logic st_start, st_done = 1'b0, st_err = 1'b0;
  logic [BW:0] st_nplanes;
  logic [OUT_AW:0] st_plane;

  conv_ctrl dut (.*);

  // Observed command streams.
  longint ev_pin[$], ev_pw[$], ev_pe[$], ev_wrd[$], ev_mac[$], ev_owr[$], ev_st[$];
  int n_pw_with_st = 0, n_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (pin_start) ev_pin.push_back({pin_base, 12'(pin_n)});
    if (pw_start)  ev_pw.push_back({pw_base, 12'(pw_n)});
    if (pw_start && st_start) n_pw_with_st++;
    if (pe_start)  ev_pe.push_back({32'(pe_c_base), 16'(pe_iy0), 16'(pe_ix0)});
    if (w_rd_en)   ev_wrd.push_back(longint'(w_rd_addr));
    if (mac_en)    ev_mac.push_back({mac_first, mac_last, mac_chunk});
    if (o_wr_en)   ev_owr.push_back(longint'(o_wr_addr));
    if (st_start)  ev_st.push_back({st_base, 8'(st_nplanes), 16'(st_plane)});
    if (done)      n_done++;
  end

  // Engine models.
  initial forever begin
    @(posedge clk);
    if (pin_start) fork begin repeat (2 + $urandom % 20) @(posedge clk); pin_done <= 1'b1; @(posedge clk); pin_done <= 1'b0; end join_none
    if (pw_start)  fork begin repeat (2 + $urandom % 20) @(posedge clk); pw_done <= 1'b1; @(posedge clk); pw_done <= 1'b0; end join_none
    if (st_start)  fork begin repeat (2 + $urandom % 20) @(posedge clk); st_done <= 1'b1; @(posedge clk); st_done <= 1'b0; end join_none
  end
  initial forever begin
    @(posedge clk);
    if (pe_start) begin
      repeat (1 + $urandom % 10) @(posedge clk);
      pe_valid <= 1'b1;
      do @(posedge clk); while (!pe_ready);
      pe_valid <= 1'b0;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %h exp %h", what, got, exp_v);
    end
  endtask

  task automatic run(conv_cfg_t c);
    @(negedge clk); cfg = c; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    int h, w, c, f, kz, s, p, ho, wo, nch, g, i;
    addr_t ib, wb, ob;
    h = 7; w = 6; c = 2; f = 6; kz = 5; s = 2; p = 2;
    ho = (h + 2*p - kz) / s + 1; wo = (w + 2*p - kz) / s + 1;
    nch = (kz*kz + N_MUL - 1) / N_MUL;
    ib = 32'h1000; wb = 32'h2000; ob = 32'h3000;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run('{in_base: ib, w_base: wb, out_base: ob, in_h: 12'(h), in_w: 12'(w), in_c: 12'(c),
          n_filt: 12'(f), out_h: 12'(ho), out_w: 12'(wo), k: 4'(kz), stride: 4'(s), pad: 4'(p)});
    checks++; if (err) failures++;
    expect_eq(n_done, 1, "done pulses");
    expect_eq(ev_pin.size(), 1, "input loads");
    if (ev_pin.size() > 0) expect_eq(ev_pin[0], {ib, 12'(h*w*c)}, "input load");
    expect_eq(ev_pw.size(), 2, "weight loads");
    if (ev_pw.size() > 1) begin
      expect_eq(ev_pw[0], {wb, 12'(4*c*kz*kz)}, "weight load group 0");
      expect_eq(ev_pw[1], {wb + 32'(4*4*c*kz*kz), 12'(2*c*kz*kz)}, "weight load group 1");
    end
    expect_eq(n_pw_with_st, 1, "next weight load started with the store");
    expect_eq(ev_pe.size(), 2*ho*wo*c, "window starts");
    expect_eq(ev_wrd.size(), 2*ho*wo*c*nch, "weight reads");
    expect_eq(ev_mac.size(), 2*ho*wo*c*nch, "MAC cycles");
    expect_eq(ev_owr.size(), 2*ho*wo, "Output PLM writes");
    i = 0;
    for (g = 0; g < 2; g++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++)
          for (int ci = 0; ci < c; ci++) begin
            if (ev_pe.size() > 0)
              expect_eq(ev_pe.pop_front(), {32'(ci*h*((w + IN_BANKS - 1) / IN_BANKS)), 16'(oy*s - p), 16'(ox*s - p)}, "window");
            for (int t = 0; t < nch; t++) begin
              if (ev_wrd.size() > 0) expect_eq(ev_wrd.pop_front(), ci*nch + t, "weight address");
              if (ev_mac.size() > 0)
                expect_eq(ev_mac.pop_front(), {(ci == 0 && t == 0), (ci == c-1 && t == nch-1), 8'(t)}, "MAC flags");
            end
            if (ci == c - 1 && ev_owr.size() > 0) expect_eq(ev_owr.pop_front(), oy*wo + ox, "Output PLM address");
          end
    expect_eq(ev_st.size(), 2, "stores");
    if (ev_st.size() > 1) begin
      expect_eq(ev_st[0], {ob, 8'(4), 16'(ho*wo)}, "store group 0");
      expect_eq(ev_st[1], {ob + 32'(4*4*ho*wo), 8'(2), 16'(ho*wo)}, "store group 1");
    end
    // Rejected layers: too large for the Input PLM, unsupported kernel size.
    ev_pin.delete();
    run('{in_base: ib, w_base: wb, out_base: ob, in_h: 12'(64), in_w: 12'(64), in_c: 12'(2),
          n_filt: 12'(4), out_h: 12'(62), out_w: 12'(62), k: 4'(3), stride: 4'(1), pad: 4'(0)});
    checks++; if (!err) begin failures++; $display("FAIL: oversized input accepted"); end
    run('{in_base: ib, w_base: wb, out_base: ob, in_h: 12'(8), in_w: 12'(8), in_c: 12'(1),
          n_filt: 12'(4), out_h: 12'(5), out_w: 12'(5), k: 4'(4), stride: 4'(1), pad: 4'(0)});
    checks++; if (!err) begin failures++; $display("FAIL: k=4 accepted"); end
    expect_eq(ev_pin.size(), 0, "no load for rejected layers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
