// tb_weights_plm: streams the weights of NUM_MAC filters in main-memory order
// [f][c][ky][kx] into the Weights PLM for every supported kernel size, then
// reads every chunk address and checks that lane j of group f holds weight
// chunk*N_MUL + j of channel c of filter f (lanes past K*K are not checked).
module tb_weights_plm;
  import cnn_pkg::*;
  localparam int unsigned AW = $clog2(W_DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_start = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [7:0] kk = '0;
  logic [AW-1:0] n_chunk = '0, rd_addr = '0;
  logic [11:0] n_chan = '0;
  data_t wr_data = '0;
  data_t rd_data [NUM_MAC][N_MUL];
  data_t ref_w [NUM_MAC][8][MAX_KK];

  weights_plm dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 3; k <= 11; k += 2) begin
      int c, nch;
      nch = (k*k + N_MUL - 1) / N_MUL;
      c = (k <= 5) ? 8 : 2;          // c * nch must fit W_DEPTH
      @(negedge clk);
      wr_start = 1'b1; kk = 8'(k*k); n_chunk = AW'(nch); n_chan = 12'(c);
      @(negedge clk);
      wr_start = 1'b0;
      for (int f = 0; f < NUM_MAC; f++)
        for (int ci = 0; ci < c; ci++)
          for (int i = 0; i < k*k; i++) begin
            ref_w[f][ci][i] = $urandom;
            wr_en = 1'b1; wr_data = ref_w[f][ci][i];
            @(negedge clk);
            // an idle cycle now and then must not advance the address
            if ($urandom % 4 == 0) begin wr_en = 1'b0; @(negedge clk); end
          end
      wr_en = 1'b0;
      for (int ci = 0; ci < c; ci++)
        for (int t = 0; t < nch; t++) begin
          rd_en = 1'b1; rd_addr = AW'(ci*nch + t);
          @(negedge clk);
          rd_en = 1'b0;
          for (int f = 0; f < NUM_MAC; f++)
            for (int j = 0; j < N_MUL; j++)
              if (t*N_MUL + j < k*k) begin
                checks++;
                if (rd_data[f][j] !== ref_w[f][ci][t*N_MUL + j]) begin
                  failures++;
                  if (failures < 10) $display("FAIL k=%0d f=%0d c=%0d t=%0d j=%0d", k, f, ci, t, j);
                end
              end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
