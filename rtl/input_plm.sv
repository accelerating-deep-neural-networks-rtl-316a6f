// input_plm: Input private local memory of the accelerator.
//
// Holds the input feature maps of the layer being computed. The memory is split
// into NBANK banks, interleaved by column: pixel (c, y, x) is in bank
// x mod NBANK, at address (c*in_h + y)*wb + x/NBANK, where wb = ceil(in_w/NBANK)
// is the number of words a row occupies in each bank. Any NBANK consecutive
// pixels of a row are therefore in different banks, so a patch extractor can
// read a whole window row (up to 11 pixels) in one cycle.
//
// Write side: the input prefetch engine streams the maps in main-memory order
// [c][y][x]. wr_start (with in_w and wb of the layer) resets the address
// generator; each wr_en word goes to the next pixel, so no division is needed.
// Read side: rd_en with the bank address of a row (rd_row = (c*in_h + y)*wb)
// and the signed column x0 of the segment. Bank b is read at the column x of
// the segment [x0, x0+NBANK-1] with x mod NBANK = b. rd_data[b] is registered,
// valid the cycle after rd_en. Columns below zero read an arbitrary word, which
// the extractor replaces by zero padding.
// The banked memory follows the stacked banks of the block diagram; the
// interleaving, the bank count and the depth (one 64x64 single-channel ROI)
// are this design's choices. The contents are not reset.
module input_plm #(
  parameter int unsigned DEPTH = cnn_pkg::IN_DEPTH,
  parameter int unsigned NBANK = cnn_pkg::IN_BANKS,
  parameter int unsigned BD    = DEPTH / NBANK,     // words per bank
  parameter int unsigned AW    = $clog2(BD),
  parameter int unsigned XW    = $clog2(NBANK)
) (
  input  logic                clk,
  input  logic                rst_n,
  // write address generator
  input  logic                wr_start,
  input  logic [11:0]         in_w,
  input  logic [AW-1:0]       wb,
  input  logic                wr_en,
  input  cnn_pkg::data_t      wr_data,
  // row-segment read
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_row,
  input  logic signed [15:0]  rd_x0,
  output cnn_pkg::data_t      rd_data [NBANK]
);
  logic [11:0]   x_q;      // column of the next word written
  logic [AW-1:0] row_q;    // bank address of its row

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; row_q <= '0;
    end else if (wr_start) begin
      x_q <= '0; row_q <= '0;
    end else if (wr_en) begin
      if (x_q == in_w - 12'd1) begin
        x_q   <= '0;
        row_q <= row_q + wb;
      end else begin
        x_q <= x_q + 12'd1;
      end
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    cnn_pkg::data_t     mem [BD];
    logic [XW-1:0]      off;
    logic signed [15:0] xb;
    logic [AW-1:0]      ra;
    // the column of the segment that falls in this bank: x0 + ((b - x0) mod NBANK)
    assign off = XW'(b) - rd_x0[XW-1:0];
    assign xb  = rd_x0 + $signed({{(16-XW){1'b0}}, off});
    assign ra = rd_row + AW'(xb >>> XW);
    always_ff @(posedge clk) begin
      if (wr_en && !wr_start && x_q[XW-1:0] == XW'(b))
        mem[row_q + AW'(x_q >> XW)] <= wr_data;
      if (rd_en) rd_data[b] <= mem[ra];
    end
  end
endmodule
