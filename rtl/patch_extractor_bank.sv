// patch_extractor_bank: the Patch Extractor block of the accelerator.
//
// Holds one patch_extractor per supported kernel size (3x3, 5x5, 7x7, 9x9,
// 11x11). The layer's kernel size k selects which one is enabled; only that
// one receives start and drives the Input PLM row-read port, and its KxK patch is
// presented row-major in the first k*k entries of the MAX_KK-entry patch
// output, the rest being zero. For an unsupported k nothing is enabled (the
// controller rejects such a layer). Timing is that of patch_extractor.
// The set of fixed-size extractors chosen at run time follows the paper; the
// odd sizes in between 5x5 and 11x11 are this design's reading of the "..." in
// the block diagram.
module patch_extractor_bank #(
  parameter int unsigned NBANK = cnn_pkg::IN_BANKS,
  parameter int unsigned AW    = $clog2(cnn_pkg::IN_DEPTH / cnn_pkg::IN_BANKS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             k,
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
  output cnn_pkg::data_t         patch [cnn_pkg::MAX_KK]
);
  import cnn_pkg::*;

  logic [NUM_PE-1:0]   pe_rd_en, pe_busy, pe_valid;
  logic [AW-1:0]       pe_rd_row [NUM_PE];
  logic signed [15:0]  pe_rd_x0  [NUM_PE];
  data_t               pe_patch   [NUM_PE][MAX_KK];
  int unsigned         sel;

  assign sel  = pe_index(k);

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    localparam int unsigned KG = 3 + 2 * g;
    data_t p [KG*KG];
    patch_extractor #(.K(KG), .NBANK(NBANK), .AW(AW)) u_pe (
      .clk, .rst_n,
      .start       (start && sel == g),
      .c_base, .wb, .iy0, .ix0, .in_h, .in_w,
      .rd_en       (pe_rd_en[g]),
      .rd_row      (pe_rd_row[g]),
      .rd_x0       (pe_rd_x0[g]),
      .rd_data,
      .busy        (pe_busy[g]),
      .patch_valid (pe_valid[g]),
      .patch_ready (patch_ready && sel == g),
      .patch       (p)
    );
    for (genvar i = 0; i < MAX_KK; i++) begin : g_pad
      if (i < KG*KG) begin : g_in
        assign pe_patch[g][i] = p[i];
      end else begin : g_zero
        assign pe_patch[g][i] = '0;
      end
    end
  end

  always_comb begin
    rd_en       = 1'b0;
    rd_row      = '0;
    rd_x0       = '0;
    busy        = 1'b0;
    patch_valid = 1'b0;
    for (int i = 0; i < MAX_KK; i++) patch[i] = '0;
    for (int g = 0; g < NUM_PE; g++) begin
      if (sel == g) begin
        rd_en       = pe_rd_en[g];
        rd_row      = pe_rd_row[g];
        rd_x0       = pe_rd_x0[g];
        busy        = pe_busy[g];
        patch_valid = pe_valid[g];
        for (int i = 0; i < MAX_KK; i++) patch[i] = pe_patch[g][i];
      end
    end
  end
endmodule
