// axi_mem_model: behavioural AXI4 slave memory for the testbenches (not
// synthesizable). Stands in for main memory behind the system interconnect.
//
// A word array mem[WORDS]; byte address a maps to word (a >> 2) mod WORDS.
// Read side: requests are queued and answered in order, one burst after the
// other. Write side: AW requests are queued, W beats are written in order, and
// one OKAY response per burst is returned. When STALL_PCT > 0, ar_ready,
// r_valid, aw_ready, w_ready and b_valid are withheld at random, that percent
// of the cycles. The model checks the rules the masters must follow (INCR,
// 4-byte beats, aligned, no 4 KB crossing, wlast on the right beat, payload
// stable while waiting) and counts violations, bursts that end on a 4 KB
// boundary before MAX_BURST beats, and stall cycles.
module axi_mem_model #(
  parameter int unsigned WORDS     = 1 << 18,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ar_valid,
  output logic                ar_ready,
  input  cnn_pkg::axi_ax_t    ar,
  output logic                r_valid,
  input  logic                r_ready,
  output cnn_pkg::axi_r_t     r,
  input  logic                aw_valid,
  output logic                aw_ready,
  input  cnn_pkg::axi_ax_t    aw,
  input  logic                w_valid,
  output logic                w_ready,
  input  cnn_pkg::axi_w_t     w,
  output logic                b_valid,
  input  logic                b_ready,
  output cnn_pkg::axi_b_t     b
);
  import cnn_pkg::*;

  logic [31:0] mem [WORDS];

  int violations = 0;
  int n_ar = 0, n_aw = 0, n_4k = 0, n_r_stall = 0, n_w_stall = 0;

  axi_ax_t rq[$];
  axi_ax_t wq[$];
  int      r_beat = 0, w_beat = 0, b_pend = 0;
  logic    r_go, b_go;

  function automatic bit stall();
    return STALL_PCT != 0 && ($urandom % 100) < STALL_PCT;
  endfunction

  function automatic void check_ax(axi_ax_t a, string what);
    int unsigned last_byte;
    last_byte = a.addr[11:0] + (int'(a.len) + 1) * 4 - 1;
    if (a.burst != AXI_INCR || a.size != AXI_SIZE_4 || a.addr[1:0] != 2'b00 || last_byte > 4095) begin
      violations++;
      $display("axi_mem_model: bad %s addr=%h len=%0d", what, a.addr, a.len);
    end
    if (last_byte == 4095 && a.len != 8'(MAX_BURST - 1)) n_4k++;
  endfunction

  function automatic int widx(addr_t a);
    return int'((a >> 2) % WORDS);
  endfunction

  assign r_valid = rst_n && rq.size() != 0 && r_go;
  assign r.data  = (rq.size() != 0) ? mem[widx(rq[0].addr + 32'(r_beat * 4))] : '0;
  assign r.resp  = AXI_OKAY;
  assign r.last  = (rq.size() != 0) && (r_beat == int'(rq[0].len));
  assign b_valid = rst_n && b_pend != 0 && b_go;
  assign b.resp  = AXI_OKAY;

  axi_ax_t ar_prev, aw_prev;
  axi_w_t  w_prev;
  logic    ar_wait = 1'b0, aw_wait = 1'b0, w_wait = 1'b0;

  always @(posedge clk) begin
    if (!rst_n) begin
      ar_ready <= 1'b0; aw_ready <= 1'b0; w_ready <= 1'b0; r_go <= 1'b0; b_go <= 1'b0;
      rq.delete(); wq.delete(); r_beat <= 0; w_beat <= 0; b_pend <= 0;
      ar_wait <= 1'b0; aw_wait <= 1'b0; w_wait <= 1'b0;
    end else begin
      ar_ready <= !stall();
      aw_ready <= !stall();
      w_ready  <= !stall();
      r_go     <= !stall();
      b_go     <= !stall();
      // stability of waiting payloads
      if (ar_wait && (!ar_valid || ar != ar_prev)) violations++;
      if (aw_wait && (!aw_valid || aw != aw_prev)) violations++;
      if (w_wait  && (!w_valid  || w  != w_prev))  violations++;
      ar_wait <= ar_valid && !ar_ready; ar_prev <= ar;
      aw_wait <= aw_valid && !aw_ready; aw_prev <= aw;
      w_wait  <= w_valid  && !w_ready;  w_prev  <= w;
      if (ar_valid && ar_ready) begin
        check_ax(ar, "AR");
        rq.push_back(ar);
        n_ar++;
      end
      if (rq.size() != 0 && !r_valid) n_r_stall++;
      if (r_valid && r_ready) begin
        if (r_beat == int'(rq[0].len)) begin
          r_beat <= 0;
          void'(rq.pop_front());
        end else begin
          r_beat <= r_beat + 1;
        end
      end
      if (aw_valid && aw_ready) begin
        check_ax(aw, "AW");
        wq.push_back(aw);
        n_aw++;
      end
      if (w_valid && !w_ready) n_w_stall++;
      if (w_valid && w_ready) begin
        if (wq.size() == 0) begin
          violations++;
          $display("axi_mem_model: W beat before its AW");
        end else begin
          mem[widx(wq[0].addr + 32'(w_beat * 4))] <= w.data;
          if (w.strb != 4'hF || w.last != (w_beat == int'(wq[0].len))) violations++;
          if (w_beat == int'(wq[0].len)) begin
            w_beat <= 0;
            void'(wq.pop_front());
          end else begin
            w_beat <= w_beat + 1;
          end
        end
      end
      b_pend <= b_pend + ((w_valid && w_ready && w.last) ? 1 : 0) - ((b_valid && b_ready) ? 1 : 0);
    end
  end
endmodule
