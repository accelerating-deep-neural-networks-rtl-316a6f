// tb_mac_engine: feeds random patches and weight chunks to one MAC engine for
// every kernel size and 1 to 3 input channels, the weights of lanes beyond
// K*K being random garbage that must be masked, and compares each output
// pixel with sat32(sum(patch*w) >>> 16) computed here in 64-bit integers.
// Some pixels use large values to reach both saturation limits. out_valid must
// come exactly one cycle after the last chunk.
module tb_mac_engine;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_sat = 0;
  logic en = 1'b0, first = 1'b0, last = 1'b0;
  logic [7:0] chunk = '0, kk = '0;
  data_t patch [MAX_KK];
  data_t w [N_MUL];
  logic out_valid;
  data_t out_data;

  mac_engine dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < MAX_KK; i++) patch[i] = '0;
    for (int j = 0; j < N_MUL; j++) w[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      int k, nch, nc, big;
      longint acc;
      data_t exp_v;
      k = 3 + 2 * ($urandom % 5);
      nch = (k*k + N_MUL - 1) / N_MUL;
      nc = 1 + $urandom % 3;
      big = (n % 5 == 0);
      acc = 0;
      for (int c = 0; c < nc; c++) begin
        @(negedge clk);
        en = 1'b0;
        kk = 8'(k*k);
        for (int i = 0; i < MAX_KK; i++)
          patch[i] = (i < k*k) ? (big ? 32'($signed($urandom) >>> 8) : 32'($signed($urandom % 32'h80000) - 32'sh40000)) : '0;
        for (int t = 0; t < nch; t++) begin
          @(negedge clk);
          en = 1'b1; chunk = 8'(t);
          first = (c == 0 && t == 0);
          last = (c == nc - 1 && t == nch - 1);
          for (int j = 0; j < N_MUL; j++) begin
            w[j] = big ? 32'($signed($urandom) >>> 8) : 32'($signed($urandom % 32'h20000) - 32'sh10000);
            if (t*N_MUL + j < k*k) acc += longint'(patch[t*N_MUL + j]) * longint'(w[j]);
          end
        end
      end
      @(negedge clk);
      en = 1'b0; last = 1'b0; first = 1'b0;
      for (int j = 0; j < N_MUL; j++) w[j] = $urandom;   // garbage after the pixel
      acc = acc >>> FRAC_BITS;
      if (acc > 64'sh7FFF_FFFF)       begin exp_v = 32'sh7FFF_FFFF; n_sat++; end
      else if (acc < -64'sh8000_0000) begin exp_v = 32'sh8000_0000; n_sat++; end
      else                               exp_v = 32'(acc);
      checks++;
      if (!out_valid || out_data !== exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d k=%0d valid=%0b got %h exp %h", n, k, out_valid, out_data, exp_v);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
