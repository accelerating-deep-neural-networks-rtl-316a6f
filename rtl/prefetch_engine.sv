// prefetch_engine: AXI4 read DMA that fills a private local memory.
//
// On start it reads n_words consecutive 32-bit words beginning at byte
// address base (which must be 4-byte aligned) and delivers them in order on
// wr_en/wr_idx/wr_data, where wr_idx counts from 0. Read bursts are INCR,
// at most MAX_BURST beats, and never cross a 4 KB boundary, as AXI4 requires.
// Read requests are issued back to back while data returns, so several bursts
// can be outstanding; R is always accepted (the PLMs take one word per cycle).
// done pulses for one cycle after the last beat; err is set if any beat
// returned a non-OKAY response and stays set until the next start.
// start is ignored while busy.
// The engine itself (a prefetch engine per AXI4 port in front of the input
// and weight memories) follows the block diagram; burst sizes and the
// interface are this design's choices.
module prefetch_engine #(
  parameter int unsigned MAX_BURST = cnn_pkg::MAX_BURST,
  parameter int unsigned CW        = 20            // width of the word count
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cnn_pkg::addr_t     base,
  input  logic [CW-1:0]      n_words,
  output logic               busy,
  output logic               done,
  output logic               err,
  // AXI4 read address and data channels
  output logic               ar_valid,
  input  logic               ar_ready,
  output cnn_pkg::axi_ax_t   ar,
  input  logic               r_valid,
  output logic               r_ready,
  input  cnn_pkg::axi_r_t    r,
  // PLM write port
  output logic               wr_en,
  output logic [CW-1:0]      wr_idx,
  output cnn_pkg::data_t     wr_data
);
  import cnn_pkg::*;

  addr_t         req_addr_q;
  logic [CW-1:0] req_left_q;   // words not yet requested
  logic [CW-1:0] rcv_cnt_q;    // words received
  logic [CW-1:0] total_q;

  // Length of the next burst: limited by MAX_BURST, the words left and the
  // distance to the next 4 KB boundary.
  logic [10:0]   to_4k;
  logic [CW-1:0] blen;
  always_comb begin
    to_4k = 11'((13'h1000 - {1'b0, req_addr_q[11:0]}) >> 2);
    blen  = req_left_q;
    if (blen > CW'(MAX_BURST)) blen = CW'(MAX_BURST);
    if (blen > CW'(to_4k))     blen = CW'(to_4k);
  end

  assign ar_valid = busy && (req_left_q != '0);
  assign ar.addr  = req_addr_q;
  assign ar.len   = 8'(blen - 1'b1);
  assign ar.size  = AXI_SIZE_4;
  assign ar.burst = AXI_INCR;
  assign r_ready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; err <= 1'b0;
      req_addr_q <= '0; req_left_q <= '0; rcv_cnt_q <= '0; total_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy       <= (n_words != '0);
          done       <= (n_words == '0);
          err        <= 1'b0;
          req_addr_q <= base;
          req_left_q <= n_words;
          total_q    <= n_words;
          rcv_cnt_q  <= '0;
        end
      end else begin
        if (ar_valid && ar_ready) begin
          req_addr_q <= req_addr_q + (addr_t'(blen) << 2);
          req_left_q <= req_left_q - blen;
        end
        if (r_valid) begin
          rcv_cnt_q <= rcv_cnt_q + 1'b1;
          if (r.resp != AXI_OKAY) err <= 1'b1;
          if (rcv_cnt_q == total_q - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign wr_en   = busy && r_valid;
  assign wr_idx  = rcv_cnt_q;
  assign wr_data = r.data;

  // AXI4 rule: a request, once valid, stays valid and unchanged until accepted.
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n) ar_valid && !ar_ready |=> ar_valid && $stable(ar);
  endproperty
  a_ar_stable: assert property (p_ar_stable);
endmodule
