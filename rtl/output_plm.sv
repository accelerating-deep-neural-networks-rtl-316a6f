// output_plm: Output private local memory of the accelerator.
//
// One bank per MAC engine. When the engines finish an output pixel they write
// their NUM_MAC results in the same cycle, each into its own bank at the pixel
// index, so the banks share the write address. The store engine reads one
// word per cycle (bank and address), with the data registered one cycle after
// rd_en. A bank holds one full output map (OUT_DEPTH pixels); the host-side
// layout [f][oy][ox] is rebuilt by the store engine.
// Banking per engine follows the stacked banks of the block diagram; depth and
// port arrangement are this design's choices. The contents are not reset.
module output_plm #(
  parameter int unsigned NBANK = cnn_pkg::NUM_MAC,
  parameter int unsigned DEPTH = cnn_pkg::OUT_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  cnn_pkg::data_t      wr_data [NBANK],
  input  logic                rd_en,
  input  logic [BW-1:0]       rd_bank,
  input  logic [AW-1:0]       rd_addr,
  output cnn_pkg::data_t      rd_data
);
  cnn_pkg::data_t bank_q [NBANK];
  logic [BW-1:0]  bank_sel_q;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    cnn_pkg::data_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= wr_data[b];
      if (rd_en && rd_bank == BW'(b)) bank_q[b] <= mem[rd_addr];
    end
  end

  always_ff @(posedge clk) if (rd_en) bank_sel_q <= rd_bank;
  assign rd_data = bank_q[bank_sel_q];
endmodule
