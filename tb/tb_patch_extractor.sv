// tb_patch_extractor: drives the patch extractor bank from a behavioural
// column-banked Input PLM (registered read; pixel (c,y,x) sits in bank x mod 16
// at row address (c*h + y)*wb + x/16) holding a random multi-channel image. For
// every kernel size and many random windows, inside the image and overlapping
// its borders, it checks the KxK patch against the image (zero outside), that
// the entries beyond K*K are zero, that patch_valid rises exactly K+2 cycles
// after start (one row per cycle), and that it stays valid until patch_ready.
module tb_patch_extractor;
  import cnn_pkg::*;
  localparam int unsigned NB = IN_BANKS, BD = IN_DEPTH / IN_BANKS;
  localparam int unsigned AW = $clog2(BD);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] k = 4'd3;
  logic start = 1'b0, rd_en, busy, patch_valid, patch_ready = 1'b0;
  logic [AW-1:0] c_base = '0, wb = '0, rd_row;
  logic signed [15:0] rd_x0;
  logic signed [15:0] iy0 = '0, ix0 = '0;
  logic [11:0] in_h = '0, in_w = '0;
  data_t rd_data [NB];
  data_t patch [MAX_KK];
  data_t img [IN_DEPTH];
  data_t bank [NB][BD];

  patch_extractor_bank dut (.*);

  // behavioural banked memory: bank b returns the column of the segment
  // starting at rd_x0 that falls in bank b
  always @(posedge clk) if (rd_en)
    for (int b = 0; b < NB; b++) begin
      int xb;
      xb = int'(rd_x0) + ((b - int'(rd_x0)) % int'(NB) + int'(NB)) % int'(NB);
      rd_data[b] <= bank[b][(int'(rd_row) + (xb >>> 4)) % BD];
    end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h, w, c, wbk;
    h = 23; w = 19; c = 3;
    wbk = (w + NB - 1) / NB;
    for (int i = 0; i < IN_DEPTH; i++) img[i] = $urandom;
    for (int b = 0; b < NB; b++) for (int i = 0; i < BD; i++) bank[b][i] = $urandom;
    for (int ci = 0; ci < c; ci++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
      bank[x % NB][(ci*h + y)*wbk + x / NB] = img[ci*h*w + y*w + x];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int kk = 3; kk <= 11; kk += 2) begin
      for (int n = 0; n < 60; n++) begin
        int ci, y0, x0, lat;
        ci = $urandom % c;
        y0 = int'($urandom % (h + kk)) - kk + 1 - (n % 2);
        x0 = int'($urandom % (w + kk)) - kk + 1;
        @(negedge clk);
        k = 4'(kk); in_h = 12'(h); in_w = 12'(w); wb = AW'(wbk);
        c_base = AW'(ci * h * wbk); iy0 = 16'(y0); ix0 = 16'(x0);
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        lat = 1;
        while (!patch_valid && lat < 200) begin @(negedge clk); lat++; end
        checks++;
        if (lat != kk + 2) begin failures++; $display("FAIL k=%0d latency %0d", kk, lat); end
        // hold a few cycles before accepting
        repeat ($urandom % 3) begin
          @(negedge clk);
          checks++;
          if (!patch_valid) begin failures++; if (failures < 10) $display("FAIL k=%0d valid dropped", kk); end
        end
        for (int i = 0; i < MAX_KK; i++) begin
          data_t e;
          int iy, ix;
          iy = y0 + i / kk; ix = x0 + i % kk;
          if (i >= kk*kk) e = '0;
          else if (iy < 0 || iy >= h || ix < 0 || ix >= w) e = '0;
          else e = img[ci*h*w + iy*w + ix];
          checks++;
          if (patch[i] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d i=%0d got %h exp %h", kk, i, patch[i], e);
          end
        end
        patch_ready = 1'b1;
        @(negedge clk);
        patch_ready = 1'b0;
        checks++;
        if (patch_valid || busy) begin failures++; if (failures < 10) $display("FAIL k=%0d still valid", kk); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
