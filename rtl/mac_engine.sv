// mac_engine: one Multiply-and-Accumulate engine.
//
// Each engine computes the output pixels of one filter. A KxK patch (row-major
// in a MAX_KK vector) is consumed in chunks of N_MUL elements: in a cycle with
// en high, lane j multiplies patch[chunk*N_MUL + j] by weight w[j]; lanes whose
// element index is K*K or beyond are masked to zero. An adder tree sums the
// N_MUL products and the sum goes into a wide accumulator, which first clears
// (the chunk is the first of an output pixel) and, on last, produces the
// output pixel. Products are exact (Q32.32 for the 16.16 data words); the
// output is the accumulator shifted right by FRAC_BITS (toward minus
// infinity) and saturated to 32 bits. out_valid/out_data are registered and
// appear the cycle after the en cycle that carried last. No bias or
// activation is applied.
// Multipliers, adder tree and accumulator per engine follow the paper and its
// block diagram; N_MUL = 9, the chunking, the rounding and the saturation are
// this design's choices.
module mac_engine #(
  parameter int unsigned N_MUL     = cnn_pkg::N_MUL,
  parameter int unsigned MAX_KK    = cnn_pkg::MAX_KK,
  parameter int unsigned FRAC_BITS = cnn_pkg::FRAC_BITS,
  parameter int unsigned ACC_W     = 72,
  parameter int unsigned CHW       = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  first,
  input  logic                  last,
  input  logic [CHW-1:0]        chunk,
  input  logic [7:0]            kk,
  input  cnn_pkg::data_t        patch [MAX_KK],
  input  cnn_pkg::data_t        w     [N_MUL],
  output logic                  out_valid,
  output cnn_pkg::data_t        out_data
);
  import cnn_pkg::*;

  typedef logic signed [2*DATA_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]    acc_t;

  prod_t prod [N_MUL];
  acc_t  sum, acc_q, acc_next, shifted;

  // Multipliers: lane j takes element chunk*N_MUL + j.
  always_comb begin
    for (int j = 0; j < N_MUL; j++) begin
      int unsigned e;
      e = int'(chunk) * N_MUL + j;
      if (e < int'(kk) && e < MAX_KK) prod[j] = patch[e] * w[j];
      else                            prod[j] = '0;
    end
  end

  // Adder tree over the lanes.
  adder_tree #(.N(N_MUL), .IN_W(2*DATA_W), .OUT_W(ACC_W)) u_tree (.in(prod), .sum(sum));

  assign acc_next = (first ? acc_t'(0) : acc_q) + sum;
  assign shifted  = acc_next >>> FRAC_BITS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= en && last;
      if (en) begin
        acc_q <= acc_next;
        if (last) begin
          if (shifted > acc_t'(32'sh7FFF_FFFF))       out_data <= 32'sh7FFF_FFFF;
          else if (shifted < -acc_t'(33'sh8000_0000)) out_data <= 32'sh8000_0000;
          else                                        out_data <= data_t'(shifted);
        end
      end
    end
  end
endmodule
