// store_engine: AXI4 write DMA that copies the Output PLM to main memory.
//
// On start it writes n_planes output maps of plane words each, taken from
// Output PLM banks 0..n_planes-1, to consecutive words from byte address base
// (4-byte aligned), which gives the [f][oy][ox] layout of the filters in the
// current group. Bursts are INCR, at most MAX_BURST beats, never crossing a
// 4 KB boundary. Each burst sends its AW, then its W beats; write responses
// are counted as they come back and done pulses once all have arrived. A
// two-entry buffer between the PLM (one cycle read latency) and the W channel
// keeps one beat per cycle while W is ready. err reports a non-OKAY response.
// start is ignored while busy.
// The write path out of the Output PLM to an AXI4 port follows the block
// diagram; everything about how it is done is this design's choice.
module store_engine #(
  parameter int unsigned NBANK     = cnn_pkg::NUM_MAC,
  parameter int unsigned DEPTH     = cnn_pkg::OUT_DEPTH,
  parameter int unsigned MAX_BURST = cnn_pkg::MAX_BURST,
  parameter int unsigned AW        = $clog2(DEPTH),
  parameter int unsigned BW        = (NBANK > 1) ? $clog2(NBANK) : 1,
  parameter int unsigned CW        = 20
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cnn_pkg::addr_t     base,
  input  logic [BW:0]        n_planes,   // 1 .. NBANK
  input  logic [AW:0]        plane,      // words per plane, 1 .. DEPTH
  output logic               busy,
  output logic               done,
  output logic               err,
  // Output PLM read port
  output logic               rd_en,
  output logic [BW-1:0]      rd_bank,
  output logic [AW-1:0]      rd_addr,
  input  cnn_pkg::data_t     rd_data,
  // AXI4 write channels
  output logic               aw_valid,
  input  logic               aw_ready,
  output cnn_pkg::axi_ax_t   aw,
  output logic               w_valid,
  input  logic               w_ready,
  output cnn_pkg::axi_w_t    w,
  input  logic               b_valid,
  output logic               b_ready,
  input  cnn_pkg::axi_b_t    b
);
  import cnn_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_WAITB} state_e;
  state_e state_q;

  addr_t         addr_q;
  logic [CW-1:0] left_q;      // words not yet covered by an AW
  logic [CW-1:0] rd_left_q;   // words not yet read from the PLM
  logic [7:0]    beat_q;      // beat inside the current burst
  logic [7:0]    len_q;       // current burst length - 1
  logic [15:0]   b_pend_q;    // bursts sent whose response is pending
  logic [AW:0]   plane_q;

  // Burst length for the next AW.
  logic [10:0]   to_4k;
  logic [CW-1:0] blen;
  always_comb begin
    to_4k = 11'((13'h1000 - {1'b0, addr_q[11:0]}) >> 2);
    blen  = left_q;
    if (blen > CW'(MAX_BURST)) blen = CW'(MAX_BURST);
    if (blen > CW'(to_4k))     blen = CW'(to_4k);
  end

  // Two-entry buffer fed by PLM reads.
  data_t      buf_q [2];
  logic       wp_q, rp_q;
  logic [1:0] cnt_q;
  logic       rd_pend_q;     // a read issued last cycle returns now
  logic       push, pop;

  assign pop   = w_valid && w_ready;
  assign push  = rd_pend_q;
  assign rd_en = (state_q != S_IDLE) && (rd_left_q != '0) &&
                 ({1'b0, cnt_q} + {2'b0, rd_pend_q} - {2'b0, pop} < 3'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= 1'b0; rp_q <= 1'b0; cnt_q <= '0; rd_pend_q <= 1'b0;
      rd_bank <= '0; rd_addr <= '0; rd_left_q <= '0;
    end else begin
      rd_pend_q <= rd_en;
      if (push) begin
        buf_q[wp_q] <= rd_data;
        wp_q        <= ~wp_q;
      end
      if (pop) rp_q <= ~rp_q;
      cnt_q <= cnt_q + {1'b0, push} - {1'b0, pop};
      if (state_q == S_IDLE && start) begin
        rd_bank   <= '0;
        rd_addr   <= '0;
        rd_left_q <= CW'(n_planes) * CW'(plane);
      end else if (rd_en) begin
        rd_left_q <= rd_left_q - 1'b1;
        if ({1'b0, rd_addr} == plane_q - 1'b1) begin
          rd_addr <= '0;
          rd_bank <= rd_bank + 1'b1;
        end else begin
          rd_addr <= rd_addr + 1'b1;
        end
      end
    end
  end

  assign aw_valid = (state_q == S_AW);
  assign aw.addr  = addr_q;
  assign aw.len   = 8'(blen - 1'b1);
  assign aw.size  = AXI_SIZE_4;
  assign aw.burst = AXI_INCR;
  assign w_valid  = (state_q == S_W) && (cnt_q != '0);
  assign w.data   = buf_q[rp_q];
  assign w.strb   = 4'hF;
  assign w.last   = (beat_q == len_q);
  assign b_ready  = 1'b1;
  assign busy     = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; done <= 1'b0; err <= 1'b0;
      addr_q <= '0; left_q <= '0; beat_q <= '0; len_q <= '0; b_pend_q <= '0; plane_q <= '0;
    end else begin
      done <= 1'b0;
      if (b_valid && state_q != S_IDLE && b.resp != AXI_OKAY) err <= 1'b1;
      b_pend_q <= b_pend_q + 16'(aw_valid && aw_ready) - 16'(b_valid && state_q != S_IDLE);
      case (state_q)
        S_IDLE: if (start) begin
          plane_q    <= plane;
          addr_q     <= base;
          left_q     <= CW'(n_planes) * CW'(plane);
          err        <= 1'b0;
          b_pend_q   <= '0;
          state_q    <= (n_planes == '0 || plane == '0) ? S_IDLE : S_AW;
          done       <= (n_planes == '0 || plane == '0);
        end
        S_AW: if (aw_ready) begin
          len_q   <= 8'(blen - 1'b1);
          beat_q  <= '0;
          addr_q  <= addr_q + (addr_t'(blen) << 2);
          left_q  <= left_q - blen;
          state_q <= S_W;
        end
        S_W: if (pop) begin
          beat_q <= beat_q + 8'd1;
          if (w.last) state_q <= (left_q == '0) ? S_WAITB : S_AW;
        end
        S_WAITB: if (b_pend_q == 16'(b_valid)) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  property p_aw_stable;
    @(posedge clk) disable iff (!rst_n) aw_valid && !aw_ready |=> aw_valid && $stable(aw);
  endproperty
  a_aw_stable: assert property (p_aw_stable);
  property p_w_stable;
    @(posedge clk) disable iff (!rst_n) w_valid && !w_ready |=> w_valid && $stable(w);
  endproperty
  a_w_stable: assert property (p_w_stable);
endmodule
