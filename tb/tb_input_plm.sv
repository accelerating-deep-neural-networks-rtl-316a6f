// tb_input_plm: streams random images of several shapes into the column-banked
// Input PLM (in main-memory order, with idle cycles in between), then issues
// random row-segment reads, with segments starting left of the image and
// running past its right edge, and checks that every bank returns the pixel of
// its column, one cycle after rd_en. A 64x64 image fills the memory exactly.
module tb_input_plm;
  import cnn_pkg::*;
  localparam int unsigned NB = IN_BANKS, BD = IN_DEPTH / IN_BANKS;
  localparam int unsigned AW = $clog2(BD);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_start = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [11:0] in_w = '0;
  logic [AW-1:0] wb = '0, rd_row = '0;
  logic signed [15:0] rd_x0 = '0;
  data_t wr_data = '0;
  data_t rd_data [NB];
  data_t img [IN_DEPTH];

  input_plm dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int h, int w, int c);
    int wbk;
    wbk = (w + NB - 1) / NB;
    @(negedge clk); wr_start = 1'b1; in_w = 12'(w); wb = AW'(wbk);
    @(negedge clk); wr_start = 1'b0;
    for (int i = 0; i < h*w*c; i++) begin
      img[i] = $urandom;
      wr_en = 1'b1; wr_data = img[i];
      @(negedge clk);
      if ($urandom % 5 == 0) begin wr_en = 1'b0; @(negedge clk); end
    end
    wr_en = 1'b0;
    for (int n = 0; n < 500; n++) begin
      int ci, y, x0;
      ci = $urandom % c; y = $urandom % h;
      x0 = int'($urandom % (w + 10)) - 10;
      rd_en = 1'b1; rd_row = AW'((ci*h + y) * wbk); rd_x0 = 16'(x0);
      @(negedge clk);
      rd_en = 1'b0;
      for (int b = 0; b < NB; b++) begin
        int xb;
        xb = x0 + ((b - x0) % NB + NB) % NB;
        if (xb >= 0 && xb < w) begin
          checks++;
          if (rd_data[b] !== img[(ci*h + y)*w + xb]) begin
            failures++;
            if (failures < 10) $display("FAIL %0dx%0dx%0d c=%0d y=%0d x=%0d bank %0d", h, w, c, ci, y, xb, b);
          end
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64, 64, 1);
    run(7, 19, 3);
    run(10, 10, 3);
    run(5, 33, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
