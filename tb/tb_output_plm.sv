// tb_output_plm: writes NUM_MAC words per cycle (one per bank) at every
// address, then reads every bank and address in random order and checks the
// word returned one cycle after rd_en.
module tb_output_plm;
  import cnn_pkg::*;
  localparam int unsigned NB = NUM_MAC, DEPTH = OUT_DEPTH;
  localparam int unsigned AW = $clog2(DEPTH), BW = $clog2(NB);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [BW-1:0] rd_bank = '0;
  data_t wr_data [NB];
  data_t rd_data;
  data_t ref_mem [NB][DEPTH];

  output_plm dut (.*);

  initial begin
    repeat (20 * NB * DEPTH) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) wr_data[b] = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(i);
      for (int b = 0; b < NB; b++) begin ref_mem[b][i] = $urandom; wr_data[b] = ref_mem[b][i]; end
    end
    @(negedge clk); wr_en = 1'b0;
    for (int n = 0; n < 2 * DEPTH; n++) begin
      int a, b;
      a = $urandom % DEPTH; b = $urandom % NB;
      rd_en = 1'b1; rd_addr = AW'(a); rd_bank = BW'(b);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== ref_mem[b][a]) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d addr %0d got %h exp %h", b, a, rd_data, ref_mem[b][a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
