// tb_prefetch_engine: reads blocks of words of several lengths and start
// addresses (some crossing 4 KB boundaries) from a stalling memory model and
// checks every delivered word and index, that each word arrives exactly once,
// that done comes after the last one, that no AXI4 rule is broken and that
// the number of read bursts is the minimum the 16-beat and 4 KB limits allow.
module tb_prefetch_engine;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 1'b0, busy, done, err;
  addr_t base = '0;
  logic [19:0] n_words = '0;
  logic ar_valid, ar_ready, r_valid, r_ready, wr_en;
  axi_ax_t ar;
  axi_r_t r;
  logic [19:0] wr_idx;
  data_t wr_data;
  logic v0, v1, v2, v3;
  axi_b_t bb;
  int got [int];

  prefetch_engine dut (.*);
  axi_mem_model #(.WORDS(1 << 14), .STALL_PCT(30)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid(1'b0), .aw_ready(v0), .aw('0), .w_valid(1'b0), .w_ready(v1), .w('0),
    .b_valid(v2), .b_ready(1'b1), .b(bb));
  assign v3 = 1'b0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (wr_en) begin
    checks++;
    if (got.exists(int'(wr_idx)) || wr_data !== u_mem.mem[((base >> 2) + wr_idx) % (1 << 14)]) begin
      failures++;
      if (failures < 10) $display("FAIL idx %0d data %h", wr_idx, wr_data);
    end
    got[int'(wr_idx)] = 1;
  end

  function automatic int min_bursts(addr_t a, int n);
    int cnt = 0;
    while (n > 0) begin
      int l;
      l = (4096 - int'(a[11:0])) / 4;
      if (l > 16) l = 16;
      if (l > n) l = n;
      a += addr_t'(l * 4); n -= l; cnt++;
    end
    return cnt;
  endfunction

  task automatic run(addr_t b, int n);
    int ar0;
    got.delete();
    ar0 = u_mem.n_ar;
    @(negedge clk); start = 1'b1; base = b; n_words = 20'(n);
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (got.size() != n || busy) begin failures++; $display("FAIL: %0d of %0d words", got.size(), n); end
    checks++;
    if (u_mem.n_ar - ar0 != min_bursts(b, n)) begin
      failures++; $display("FAIL: %0d bursts, expected %0d", u_mem.n_ar - ar0, min_bursts(b, n));
    end
  endtask

  initial begin
    for (int i = 0; i < (1 << 14); i++) u_mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(32'h0000_0FF0, 40);
    run(32'h0000_2000, 16);
    run(32'h0000_1FFC, 1);
    run(32'h0000_3F00, 300);
    run(32'h0000_0104, 17);
    checks++;
    if (u_mem.violations != 0 || err) failures++;
    checks++;
    if (u_mem.n_4k == 0) begin failures++; $display("FAIL: no 4 KB split seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
