// patch_extractor: gathers one KxK window of one input channel from the
// banked Input PLM, for one fixed kernel size K.
//
// On start (accepted when idle) it receives the bank address of row 0 of the
// channel plane (c_base = c*in_h*wb), the words per bank row wb, and the signed
// top-left input coordinate of the window (iy0, ix0 = output coordinate *
// stride - pad). It then reads the window one row per cycle: the Input PLM
// returns NBANK consecutive columns starting at ix0, one per bank, and the
// extractor picks column ix0+kx from bank (ix0+kx) mod NBANK. Rows above or
// below the image are not read, and any position outside the in_h x in_w image
// becomes zero, which implements zero padding. Read data returns one cycle
// after the request. patch_valid rises K+2 cycles after the start cycle and
// the patch (row-major) is held until patch_ready; then the extractor is idle
// again.
// A separate extractor per kernel size, picked at run time, follows the paper;
// the row-per-cycle schedule over the banked memory and the zero padding are
// this design's choices.
module patch_extractor #(
  parameter int unsigned K     = 3,
  parameter int unsigned NBANK = cnn_pkg::IN_BANKS,
  parameter int unsigned AW    = $clog2(cnn_pkg::IN_DEPTH / cnn_pkg::IN_BANKS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [AW-1:0]          c_base,
  input  logic [AW-1:0]          wb,
  input  logic signed [15:0]     iy0,
  input  logic signed [15:0]     ix0,
  input  logic [11:0]            in_h,
  input  logic [11:0]            in_w,
  output logic                   rd_en,
  output logic [AW-1:0]          rd_row,
  output logic signed [15:0]     rd_x0,
  input  cnn_pkg::data_t         rd_data [NBANK],
  output logic                   busy,
  output logic                   patch_valid,
  input  logic                   patch_ready,
  output cnn_pkg::data_t         patch [K*K]
);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned XW = $clog2(NBANK);

  logic               walking_q;
  logic [KW-1:0]      ky_q;
  logic signed [15:0] iy_q, ix0_q;
  logic signed [31:0] row_q;       // signed bank address of row iy_q
  logic               row_inb;
  logic               pend_q, pend_inb_q;
  logic [KW-1:0]      pend_ky_q;

  assign row_inb = (iy_q >= 0) && (iy_q < $signed({4'b0, in_h}));
  assign rd_en   = walking_q && row_inb;
  assign rd_row  = AW'(row_q);
  assign rd_x0   = ix0_q;
  assign busy    = walking_q || pend_q || patch_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      walking_q <= 1'b0; ky_q <= '0; iy_q <= '0; ix0_q <= '0; row_q <= '0;
      pend_q <= 1'b0; pend_inb_q <= 1'b0; pend_ky_q <= '0; patch_valid <= 1'b0;
    end else begin
      if (start && !busy) begin
        walking_q <= 1'b1;
        ky_q      <= '0;
        iy_q      <= iy0;
        ix0_q     <= ix0;
        row_q     <= $signed({1'b0, 31'(c_base)}) + 32'(iy0) * $signed({1'b0, 31'(wb)});
      end else if (walking_q) begin
        if (ky_q == KW'(K - 1)) walking_q <= 1'b0;
        ky_q  <= ky_q + 1'b1;
        iy_q  <= iy_q + 16'sd1;
        row_q <= row_q + $signed({1'b0, 31'(wb)});
      end
      // Row data (or padding zeros) lands one cycle later.
      pend_q     <= walking_q;
      pend_inb_q <= row_inb;
      pend_ky_q  <= ky_q;
      if (pend_q && pend_ky_q == KW'(K - 1)) patch_valid <= 1'b1;
      else if (patch_valid && patch_ready)  patch_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (pend_q) begin
      for (int kx = 0; kx < K; kx++) begin
        logic signed [15:0] x;
        x = ix0_q + 16'(kx);
        if (pend_inb_q && x >= 0 && x < $signed({4'b0, in_w}))
          patch[int'(pend_ky_q) * K + kx] <= rd_data[x[XW-1:0]];
        else
          patch[int'(pend_ky_q) * K + kx] <= '0;
      end
    end
  end
endmodule
