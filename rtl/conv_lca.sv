// conv_lca: configurable convolutional loosely-coupled accelerator (top).
//
// Computes one convolutional layer per run, out of main memory and back:
//   input prefetch engine  -> Input PLM (16 column banks) -> patch extractor
//                             bank (3x3..11x11), one window row per cycle
//   weight prefetch engine -> Weights PLM (one bank group per MAC engine)
//   patch + weights        -> NUM_MAC MAC engines, one filter each
//   MAC results            -> Output PLM -> store engine -> main memory
// under the control of conv_ctrl. The host writes cfg (a conv_cfg_t: buffer
// addresses, input size and channels, filter count, output size, kernel size,
// stride and padding), pulses start, and waits for done; err reports a layer
// that does not fit or a bus error. Each of the three DMA engines owns an
// AXI4 master port (read-only for input and weights, write-only for output)
// with 32-bit data, INCR bursts and no IDs; the ports are to be joined to the
// system interconnect outside this block.
// Data are 32-bit fixed point with 16 fractional bits; the layer computes
//   out[f][oy][ox] = sat32( (sum_c sum_ky sum_kx in[c][oy*s-p+ky][ox*s-p+kx]
//                                              * w[f][c][ky][kx]) >>> 16 )
// with zero outside the input, and no bias or activation.
// The block structure (two prefetch engines, three PLMs, a patch extractor per
// kernel size, several MAC engines, AXI4 to the rest of the chip) follows the
// paper's accelerator; sizes, protocols and scheduling are this design's.
module conv_lca #(
  parameter int unsigned NUM_MAC   = cnn_pkg::NUM_MAC,
  parameter int unsigned N_MUL     = cnn_pkg::N_MUL,
  parameter int unsigned IN_DEPTH  = cnn_pkg::IN_DEPTH,
  parameter int unsigned IN_BANKS  = cnn_pkg::IN_BANKS,
  parameter int unsigned OUT_DEPTH = cnn_pkg::OUT_DEPTH,
  parameter int unsigned W_DEPTH   = cnn_pkg::W_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host configuration
  input  logic                 start,
  input  cnn_pkg::conv_cfg_t   cfg,
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  // AXI4 read master: input feature maps
  output logic                 in_ar_valid,
  input  logic                 in_ar_ready,
  output cnn_pkg::axi_ax_t     in_ar,
  input  logic                 in_r_valid,
  output logic                 in_r_ready,
  input  cnn_pkg::axi_r_t      in_r,
  // AXI4 read master: weights
  output logic                 w_ar_valid,
  input  logic                 w_ar_ready,
  output cnn_pkg::axi_ax_t     w_ar,
  input  logic                 w_r_valid,
  output logic                 w_r_ready,
  input  cnn_pkg::axi_r_t      w_r,
  // AXI4 write master: output maps
  output logic                 out_aw_valid,
  input  logic                 out_aw_ready,
  output cnn_pkg::axi_ax_t     out_aw,
  output logic                 out_w_valid,
  input  logic                 out_w_ready,
  output cnn_pkg::axi_w_t      out_w,
  input  logic                 out_b_valid,
  output logic                 out_b_ready,
  input  cnn_pkg::axi_b_t      out_b
);
  import cnn_pkg::*;

  localparam int unsigned IN_AW  = $clog2(IN_DEPTH / IN_BANKS);
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH);
  localparam int unsigned W_AW   = $clog2(W_DEPTH);
  localparam int unsigned BW     = (NUM_MAC > 1) ? $clog2(NUM_MAC) : 1;
  localparam int unsigned CW     = 20;

  // controller <-> engines
  logic               pin_start, pin_done, pin_err, pw_start, pw_done, pw_err;
  addr_t              pin_base, pw_base, st_base;
  logic [CW-1:0]      pin_n, pw_n;
  logic [7:0]         kk;
  logic [W_AW-1:0]    n_chunk;
  logic [11:0]        n_chan, in_h, in_w;
  logic [3:0]         k;
  logic               pe_start, pe_valid, pe_ready, pe_busy;
  logic [IN_AW-1:0]   pe_c_base, in_wb;
  logic signed [15:0] pe_iy0, pe_ix0;
  logic               w_rd_en;
  logic [W_AW-1:0]    w_rd_addr;
  logic               mac_en, mac_first, mac_last;
  logic [7:0]         mac_chunk;
  logic               o_wr_en;
  logic [OUT_AW-1:0]  o_wr_addr;
  logic               st_start, st_done, st_err, st_busy;
  logic [BW:0]        st_nplanes;
  logic [OUT_AW:0]    st_plane;

  // memory ports
  logic               in_wr_en, w_wr_en, in_rd_en;
  logic [CW-1:0]      in_wr_idx, w_wr_idx;   // the PLMs keep their own write addresses
  data_t              in_wr_data, w_wr_data;
  data_t              in_rd_data [IN_BANKS];
  logic [IN_AW-1:0]   in_rd_row;
  logic signed [15:0] in_rd_x0;
  data_t              w_data   [NUM_MAC][N_MUL];
  data_t              patch    [MAX_KK];
  data_t              mac_out  [NUM_MAC];
  logic [NUM_MAC-1:0] mac_valid;
  logic               o_rd_en;
  logic [BW-1:0]      o_rd_bank;
  logic [OUT_AW-1:0]  o_rd_addr;
  data_t              o_rd_data;
  logic               pin_busy, pw_busy;

  conv_ctrl #(
    .NUM_MAC(NUM_MAC), .N_MUL(N_MUL), .IN_DEPTH(IN_DEPTH), .IN_BANKS(IN_BANKS), .OUT_DEPTH(OUT_DEPTH),
    .W_DEPTH(W_DEPTH), .CW(CW)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .err,
    .pin_start, .pin_base, .pin_n, .pin_done, .pin_err,
    .pw_start, .pw_base, .pw_n, .pw_done, .pw_err, .kk, .n_chunk, .n_chan,
    .k, .in_h, .in_w, .in_wb, .pe_start, .pe_c_base, .pe_iy0, .pe_ix0, .pe_valid, .pe_ready,
    .w_rd_en, .w_rd_addr, .mac_en, .mac_first, .mac_last, .mac_chunk,
    .o_wr_en, .o_wr_addr,
    .st_start, .st_base, .st_nplanes, .st_plane, .st_done, .st_err
  );

  prefetch_engine #(.CW(CW)) u_pf_in (
    .clk, .rst_n, .start(pin_start), .base(pin_base), .n_words(pin_n),
    .busy(pin_busy), .done(pin_done), .err(pin_err),
    .ar_valid(in_ar_valid), .ar_ready(in_ar_ready), .ar(in_ar),
    .r_valid(in_r_valid), .r_ready(in_r_ready), .r(in_r),
    .wr_en(in_wr_en), .wr_idx(in_wr_idx), .wr_data(in_wr_data)
  );

  prefetch_engine #(.CW(CW)) u_pf_w (
    .clk, .rst_n, .start(pw_start), .base(pw_base), .n_words(pw_n),
    .busy(pw_busy), .done(pw_done), .err(pw_err),
    .ar_valid(w_ar_valid), .ar_ready(w_ar_ready), .ar(w_ar),
    .r_valid(w_r_valid), .r_ready(w_r_ready), .r(w_r),
    .wr_en(w_wr_en), .wr_idx(w_wr_idx), .wr_data(w_wr_data)
  );

  input_plm #(.DEPTH(IN_DEPTH), .NBANK(IN_BANKS)) u_in_plm (
    .clk, .rst_n, .wr_start(pin_start), .in_w, .wb(in_wb),
    .wr_en(in_wr_en), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_row(in_rd_row), .rd_x0(in_rd_x0), .rd_data(in_rd_data)
  );

  weights_plm #(.NGROUP(NUM_MAC), .NLANE(N_MUL), .DEPTH(W_DEPTH)) u_w_plm (
    .clk, .rst_n, .wr_start(pw_start), .kk, .n_chunk, .n_chan,
    .wr_en(w_wr_en), .wr_data(w_wr_data),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_data)
  );

  patch_extractor_bank #(.NBANK(IN_BANKS), .AW(IN_AW)) u_pe (
    .clk, .rst_n, .k, .start(pe_start), .c_base(pe_c_base), .wb(in_wb), .iy0(pe_iy0), .ix0(pe_ix0),
    .in_h, .in_w, .rd_en(in_rd_en), .rd_row(in_rd_row), .rd_x0(in_rd_x0), .rd_data(in_rd_data),
    .busy(pe_busy), .patch_valid(pe_valid), .patch_ready(pe_ready), .patch
  );

  for (genvar m = 0; m < NUM_MAC; m++) begin : g_mac
    mac_engine #(.N_MUL(N_MUL)) u_mac (
      .clk, .rst_n, .en(mac_en), .first(mac_first), .last(mac_last), .chunk(mac_chunk),
      .kk, .patch, .w(w_data[m]), .out_valid(mac_valid[m]), .out_data(mac_out[m])
    );
  end

  output_plm #(.NBANK(NUM_MAC), .DEPTH(OUT_DEPTH)) u_out_plm (
    .clk, .wr_en(o_wr_en), .wr_addr(o_wr_addr), .wr_data(mac_out),
    .rd_en(o_rd_en), .rd_bank(o_rd_bank), .rd_addr(o_rd_addr), .rd_data(o_rd_data)
  );

  store_engine #(.NBANK(NUM_MAC), .DEPTH(OUT_DEPTH), .CW(CW)) u_st (
    .clk, .rst_n, .start(st_start), .base(st_base), .n_planes(st_nplanes), .plane(st_plane),
    .busy(st_busy), .done(st_done), .err(st_err),
    .rd_en(o_rd_en), .rd_bank(o_rd_bank), .rd_addr(o_rd_addr), .rd_data(o_rd_data),
    .aw_valid(out_aw_valid), .aw_ready(out_aw_ready), .aw(out_aw),
    .w_valid(out_w_valid), .w_ready(out_w_ready), .w(out_w),
    .b_valid(out_b_valid), .b_ready(out_b_ready), .b(out_b)
  );

  // The controller writes the Output PLM exactly when the engines deliver.
  a_mac_align: assert property (@(posedge clk) disable iff (!rst_n) o_wr_en == mac_valid[0]);
  // The extractor is idle whenever the controller starts it.
  a_pe_idle: assert property (@(posedge clk) disable iff (!rst_n) pe_start |-> !pe_busy);
endmodule
