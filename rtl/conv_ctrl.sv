// conv_ctrl: run-time configured controller of the convolutional accelerator.
//
// On start it latches the layer configuration (conv_cfg_t), derives the sizes
// it needs (K*K, chunks per patch, words per plane) and rejects a layer that
// does not fit the memories or uses an unsupported kernel size (err with
// done). Otherwise it runs the layer in groups of NUM_MAC filters:
//
//   LOAD     both prefetch engines start together: the input maps into the
//            Input PLM and the weights of group 0 into the Weights PLM.
//   COMPUTE  for each output pixel (oy, ox) and input channel c: start the
//            extractor selected by k on the window at (oy*stride-pad,
//            ox*stride-pad) of channel c (row c*in_h*wb of the column-banked
//            Input PLM, wb = ceil(in_w/IN_BANKS)), wait for the patch, then feed it to all MAC
//            engines in n_chunk consecutive cycles, reading the matching
//            weight chunk each cycle (one cycle ahead of the engines). The
//            engines write the pixel into the Output PLM two cycles after the
//            last chunk of the last channel.
//   STORE    the store engine writes the group's maps out while the weight
//            prefetch engine already loads the next group's weights; both
//            must finish before the next COMPUTE.
//
// Cycles per output pixel and group: in_c * (k + 4 + n_chunk).
// The input maps are loaded once per layer and reused by all groups.
// Run-time configurability, the choice of extractor by kernel size and the
// load/compute/store structure around the PLMs follow the paper; the
// sequencing, the group-by-group schedule and the overlap of store with the
// next weight load are this design's choices.
module conv_ctrl #(
  parameter int unsigned NUM_MAC   = cnn_pkg::NUM_MAC,
  parameter int unsigned N_MUL     = cnn_pkg::N_MUL,
  parameter int unsigned IN_DEPTH  = cnn_pkg::IN_DEPTH,
  parameter int unsigned IN_BANKS  = cnn_pkg::IN_BANKS,
  parameter int unsigned OUT_DEPTH = cnn_pkg::OUT_DEPTH,
  parameter int unsigned W_DEPTH   = cnn_pkg::W_DEPTH,
  parameter int unsigned IN_AW     = $clog2(IN_DEPTH / IN_BANKS),  // Input PLM bank address
  parameter int unsigned OUT_AW    = $clog2(OUT_DEPTH),
  parameter int unsigned W_AW      = $clog2(W_DEPTH),
  parameter int unsigned BW        = (NUM_MAC > 1) ? $clog2(NUM_MAC) : 1,
  parameter int unsigned CW        = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  cnn_pkg::conv_cfg_t   cfg,
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  // input prefetch engine
  output logic                 pin_start,
  output cnn_pkg::addr_t       pin_base,
  output logic [CW-1:0]        pin_n,
  input  logic                 pin_done,
  input  logic                 pin_err,
  // weight prefetch engine and Weights PLM address generator
  output logic                 pw_start,
  output cnn_pkg::addr_t       pw_base,
  output logic [CW-1:0]        pw_n,
  input  logic                 pw_done,
  input  logic                 pw_err,
  output logic [7:0]           kk,
  output logic [W_AW-1:0]      n_chunk,
  output logic [11:0]          n_chan,
  // patch extractors
  output logic [3:0]           k,
  output logic [11:0]          in_h,
  output logic [11:0]          in_w,
  output logic                 pe_start,
  output logic [IN_AW-1:0]     in_wb,
  output logic [IN_AW-1:0]     pe_c_base,
  output logic signed [15:0]   pe_iy0,
  output logic signed [15:0]   pe_ix0,
  input  logic                 pe_valid,
  output logic                 pe_ready,
  // Weights PLM read
  output logic                 w_rd_en,
  output logic [W_AW-1:0]      w_rd_addr,
  // MAC engines (aligned with the weight read data)
  output logic                 mac_en,
  output logic                 mac_first,
  output logic                 mac_last,
  output logic [7:0]           mac_chunk,
  // Output PLM write (aligned with the MAC results)
  output logic                 o_wr_en,
  output logic [OUT_AW-1:0]    o_wr_addr,
  // store engine
  output logic                 st_start,
  output cnn_pkg::addr_t       st_base,
  output logic [BW:0]          st_nplanes,
  output logic [OUT_AW:0]      st_plane,
  input  logic                 st_done,
  input  logic                 st_err
);
  import cnn_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_PSTART, S_PWAIT, S_MACS, S_REL, S_DRAIN, S_STORE, S_SWAIT
  } state_e;
  state_e state_q;

  conv_cfg_t      cfg_q;
  logic [CW-1:0]  fw_q;          // weight words per filter = in_c * k*k
  logic [CW-1:0]  plane_in_q;    // in_h * in_w
  logic [CW-1:0]  plane_b_q;     // in_h * wb: bank words of one channel plane
  logic [IN_AW-1:0] wb_q;        // ceil(in_w / IN_BANKS): bank words of one row
  logic [CW-1:0]  plane_out_q;   // out_h * out_w
  logic [11:0]    fb_q;          // first filter of the current group
  addr_t          w_off_q, o_off_q;
  logic           pin_seen_q, pw_seen_q, st_seen_q;

  // loop state
  logic [11:0]        oy_q, ox_q, c_q;
  logic [7:0]         t_q;
  logic signed [15:0] iy0_q, ix0_q;
  logic [IN_AW-1:0]   cbase_q;
  logic [W_AW-1:0]    wrow_q;
  logic [OUT_AW-1:0]  pix_q;
  logic [1:0]         drain_q;

  // Derived values from the configuration presented with start.
  logic [7:0]     kk_c;
  logic [7:0]     nch_c;
  logic [CW-1:0]  in_words_c, plane_out_c, fw_c, wwords_c, wb_c;
  logic           bad_c;
  always_comb begin
    kk_c        = 8'(cfg.k) * 8'(cfg.k);
    nch_c       = 8'((int'(kk_c) + N_MUL - 1) / N_MUL);
    wb_c        = (CW'(cfg.in_w) + CW'(IN_BANKS - 1)) >> $clog2(IN_BANKS);
    in_words_c  = CW'(cfg.in_h) * wb_c * CW'(cfg.in_c);   // words per bank
    plane_out_c = CW'(cfg.out_h) * CW'(cfg.out_w);
    fw_c        = CW'(cfg.in_c) * CW'(kk_c);
    wwords_c    = CW'(cfg.in_c) * CW'(nch_c);
    bad_c = (pe_index(cfg.k) >= NUM_PE) || cfg.stride == '0 ||
            cfg.in_h == '0 || cfg.in_w == '0 || cfg.in_c == '0 || cfg.n_filt == '0 ||
            cfg.out_h == '0 || cfg.out_w == '0 ||
            in_words_c > CW'(IN_DEPTH / IN_BANKS) || plane_out_c > CW'(OUT_DEPTH) ||
            wwords_c > CW'(W_DEPTH);
  end

  // Filters in the current and the next group.
  logic [11:0] left_now, left_next;
  logic        more_groups;
  assign left_now    = cfg_q.n_filt - fb_q;
  assign more_groups = left_now > 12'(NUM_MAC);
  assign left_next   = left_now - 12'(NUM_MAC);

  assign busy     = (state_q != S_IDLE);
  assign kk       = 8'(cfg_q.k) * 8'(cfg_q.k);
  assign n_chunk  = W_AW'((int'(kk) + N_MUL - 1) / N_MUL);
  assign n_chan   = cfg_q.in_c;
  assign k        = cfg_q.k;
  assign in_h     = cfg_q.in_h;
  assign in_w     = cfg_q.in_w;
  assign in_wb    = wb_q;

  assign pe_start  = (state_q == S_PSTART);
  assign pe_c_base = cbase_q;
  assign pe_iy0    = iy0_q;
  assign pe_ix0    = ix0_q;
  assign pe_ready  = (state_q == S_REL);
  assign w_rd_en   = (state_q == S_MACS);
  assign w_rd_addr = wrow_q + W_AW'(t_q);

  assign pin_base = cfg_q.in_base;
  assign pin_n    = plane_in_q * CW'(cfg_q.in_c);

  assign st_base    = cfg_q.out_base + o_off_q;
  assign st_nplanes = more_groups ? (BW+1)'(NUM_MAC) : (BW+1)'(left_now);
  assign st_plane   = (OUT_AW+1)'(plane_out_q);

  // Weight prefetch: group 0 while in LOAD, group g+1 while in SWAIT (the
  // start pulse is registered, so it is seen one state later).
  always_comb begin
    if (state_q == S_SWAIT) begin
      pw_base = cfg_q.w_base + w_off_q + (addr_t'(NUM_MAC) * addr_t'(fw_q) << 2);
      pw_n    = CW'(left_next > 12'(NUM_MAC) ? 12'(NUM_MAC) : left_next) * fw_q;
    end else begin
      pw_base = cfg_q.w_base;
      pw_n    = CW'(cfg_q.n_filt > 12'(NUM_MAC) ? 12'(NUM_MAC) : cfg_q.n_filt) * fw_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; done <= 1'b0; err <= 1'b0; cfg_q <= '0;
      fw_q <= '0; plane_in_q <= '0; plane_b_q <= '0; wb_q <= '0; plane_out_q <= '0; fb_q <= '0; w_off_q <= '0; o_off_q <= '0;
      pin_seen_q <= 1'b0; pw_seen_q <= 1'b0; st_seen_q <= 1'b0;
      pin_start <= 1'b0; pw_start <= 1'b0; st_start <= 1'b0;
      oy_q <= '0; ox_q <= '0; c_q <= '0; t_q <= '0; iy0_q <= '0; ix0_q <= '0;
      cbase_q <= '0; wrow_q <= '0; pix_q <= '0; drain_q <= '0;
    end else begin
      done      <= 1'b0;
      pin_start <= 1'b0;
      pw_start  <= 1'b0;
      st_start  <= 1'b0;
      if (pin_done) pin_seen_q <= 1'b1;
      if (pw_done)  pw_seen_q  <= 1'b1;
      if (st_done)  st_seen_q  <= 1'b1;
      if (busy && (pin_err || pw_err || st_err)) err <= 1'b1;
      case (state_q)
        S_IDLE: if (start) begin
          cfg_q       <= cfg;
          fw_q        <= fw_c;
          plane_in_q  <= CW'(cfg.in_h) * CW'(cfg.in_w);
          plane_b_q   <= CW'(cfg.in_h) * wb_c;
          wb_q        <= IN_AW'(wb_c);
          plane_out_q <= plane_out_c;
          fb_q        <= '0;
          w_off_q     <= '0;
          o_off_q     <= '0;
          pin_seen_q  <= 1'b0;
          pw_seen_q   <= 1'b0;
          err         <= bad_c;
          if (bad_c) begin
            done <= 1'b1;
          end else begin
            pin_start <= 1'b1;
            pw_start  <= 1'b1;
            state_q   <= S_LOAD;
          end
        end
        S_LOAD: if (pin_seen_q && pw_seen_q) begin
          oy_q <= '0; ox_q <= '0; c_q <= '0; t_q <= '0;
          iy0_q <= -16'(cfg_q.pad); ix0_q <= -16'(cfg_q.pad);
          cbase_q <= '0; wrow_q <= '0; pix_q <= '0;
          state_q <= S_PSTART;
        end
        S_PSTART: state_q <= S_PWAIT;
        S_PWAIT:  if (pe_valid) begin
          t_q     <= '0;
          state_q <= S_MACS;
        end
        S_MACS: begin
          if (t_q == 8'(n_chunk) - 8'd1) state_q <= S_REL;
          else                            t_q <= t_q + 8'd1;
        end
        S_REL: begin
          state_q <= S_PSTART;
          if (c_q != cfg_q.in_c - 12'd1) begin
            c_q     <= c_q + 12'd1;
            cbase_q <= cbase_q + IN_AW'(plane_b_q);
            wrow_q  <= wrow_q + n_chunk;
          end else begin
            c_q     <= '0;
            cbase_q <= '0;
            wrow_q  <= '0;
            pix_q   <= pix_q + 1'b1;
            if (ox_q != cfg_q.out_w - 12'd1) begin
              ox_q  <= ox_q + 12'd1;
              ix0_q <= ix0_q + 16'(cfg_q.stride);
            end else begin
              ox_q  <= '0;
              ix0_q <= -16'(cfg_q.pad);
              if (oy_q != cfg_q.out_h - 12'd1) begin
                oy_q  <= oy_q + 12'd1;
                iy0_q <= iy0_q + 16'(cfg_q.stride);
              end else begin
                drain_q <= '0;
                state_q <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          drain_q <= drain_q + 2'd1;
          if (drain_q == 2'd2) state_q <= S_STORE;
        end
        S_STORE: begin
          st_start  <= 1'b1;
          st_seen_q <= 1'b0;
          pw_seen_q <= 1'b0;
          pw_start  <= more_groups;
          state_q   <= S_SWAIT;
        end
        S_SWAIT: if (st_seen_q && (pw_seen_q || !more_groups)) begin
          if (more_groups) begin
            fb_q    <= fb_q + 12'(NUM_MAC);
            w_off_q <= w_off_q + (addr_t'(NUM_MAC) * addr_t'(fw_q) << 2);
            o_off_q <= o_off_q + (addr_t'(NUM_MAC) * addr_t'(plane_out_q) << 2);
            oy_q <= '0; ox_q <= '0; c_q <= '0; t_q <= '0;
            iy0_q <= -16'(cfg_q.pad); ix0_q <= -16'(cfg_q.pad);
            cbase_q <= '0; wrow_q <= '0; pix_q <= '0;
            state_q <= S_PSTART;
          end else begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // MAC control, one cycle behind the weight read; Output PLM write one more.
  logic [OUT_AW-1:0] pix_d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_en <= 1'b0; mac_first <= 1'b0; mac_last <= 1'b0; mac_chunk <= '0;
      pix_d1 <= '0; o_wr_en <= 1'b0; o_wr_addr <= '0;
    end else begin
      mac_en    <= (state_q == S_MACS);
      mac_first <= (c_q == '0) && (t_q == '0);
      mac_last  <= (c_q == cfg_q.in_c - 12'd1) && (t_q == 8'(n_chunk) - 8'd1);
      mac_chunk <= t_q;
      pix_d1    <= pix_q;
      o_wr_en   <= mac_en && mac_last;
      o_wr_addr <= pix_d1;
    end
  end
endmodule
