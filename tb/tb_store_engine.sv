// tb_store_engine: a behavioural Output PLM (registered read, like the real
// one) feeds the store engine, which writes into a stalling memory model.
// For several plane counts, plane sizes and base addresses (some crossing
// 4 KB boundaries) it checks that plane b word i lands at base + 4*(b*plane+i),
// that nothing is written past the end, that done comes only after all
// responses, and that no AXI4 rule is broken.
module tb_store_engine;
  import cnn_pkg::*;
  localparam int unsigned NB = NUM_MAC, DEPTH = 256;
  localparam int unsigned AW = $clog2(DEPTH), BW = $clog2(NB);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 1'b0, busy, done, err;
  addr_t base = '0;
  logic [BW:0] n_planes = '0;
  logic [AW:0] plane = '0;
  logic rd_en;
  logic [BW-1:0] rd_bank;
  logic [AW-1:0] rd_addr;
  data_t rd_data;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_ax_t aw;
  axi_w_t w;
  axi_b_t b;
  logic v0, v1;
  axi_r_t rr;
  data_t plm [NB][DEPTH];

  store_engine #(.DEPTH(DEPTH)) dut (.*);
  axi_mem_model #(.WORDS(1 << 14), .STALL_PCT(30)) u_mem (
    .clk, .rst_n, .ar_valid(1'b0), .ar_ready(v0), .ar('0), .r_valid(v1), .r_ready(1'b1), .r(rr),
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready, .b);

  always @(posedge clk) if (rd_en) rd_data <= plm[rd_bank][rd_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(addr_t a, int np, int pl);
    for (int i = 0; i <= np * pl; i++) u_mem.mem[(a >> 2) + i] = 32'hDEAD_BEEF;
    for (int bk = 0; bk < NB; bk++) for (int i = 0; i < DEPTH; i++) plm[bk][i] = $urandom;
    @(negedge clk); start = 1'b1; base = a; n_planes = (BW+1)'(np); plane = (AW+1)'(pl);
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (u_mem.b_pend != 0 || u_mem.wq.size() != 0) begin failures++; $display("FAIL: done before all responses"); end
    for (int bk = 0; bk < np; bk++)
      for (int i = 0; i < pl; i++) begin
        checks++;
        if (u_mem.mem[(a >> 2) + bk*pl + i] !== plm[bk][i]) begin
          failures++;
          if (failures < 10) $display("FAIL plane %0d word %0d", bk, i);
        end
      end
    checks++;
    if (u_mem.mem[(a >> 2) + np*pl] !== 32'hDEAD_BEEF) begin failures++; $display("FAIL: write past end"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(32'h0000_0FC0, 4, 64);
    run(32'h0000_1FF8, 3, 37);
    run(32'h0000_2000, 1, 1);
    run(32'h0000_3004, 2, 256);
    checks++;
    if (u_mem.violations != 0 || err) failures++;
    checks++;
    if (u_mem.n_w_stall == 0 || u_mem.n_4k == 0) begin failures++; $display("FAIL: no stall or 4 KB split"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
