// weights_plm: Weights private local memory of the accelerator.
//
// Each MAC engine owns a group of N_MUL sub-banks, so that every cycle it can
// read the N_MUL weights that meet the N_MUL multipliers. Weight i of the KxK
// kernel of channel c of the engine's filter sits in sub-bank (i mod N_MUL) at
// address c*n_chunk + i/N_MUL, where n_chunk = ceil(K*K/N_MUL) is the number
// of chunks a patch is split into.
//
// Write side: the weight prefetch engine streams the weights of up to NUM_MAC
// filters in main-memory order [f][c][ky][kx]. wr_start (with kk, n_chunk and
// n_chan of the layer) resets the address generator; each wr_en word then goes
// to the next position, so no division is needed.
// Read side: one address for all engines and sub-banks; rd_data is registered
// (valid the cycle after rd_en).
// The four groups of stacked banks follow the block diagram; the mapping and
// the sizes are this design's choices. Lanes of the last chunk beyond K*K keep
// stale data and are masked by the MAC engine.
module weights_plm #(
  parameter int unsigned NGROUP = cnn_pkg::NUM_MAC,
  parameter int unsigned NLANE  = cnn_pkg::N_MUL,
  parameter int unsigned DEPTH  = cnn_pkg::W_DEPTH,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write address generator
  input  logic              wr_start,
  input  logic [7:0]        kk,        // K*K
  input  logic [AW-1:0]     n_chunk,   // ceil(K*K / NLANE)
  input  logic [11:0]       n_chan,    // input channels
  input  logic              wr_en,
  input  cnn_pkg::data_t    wr_data,
  // read port
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output cnn_pkg::data_t    rd_data [NGROUP][NLANE]
);
  localparam int unsigned GW = (NGROUP > 1) ? $clog2(NGROUP) : 1;
  localparam int unsigned LW = (NLANE > 1) ? $clog2(NLANE) : 1;

  logic [GW:0]     grp_q;    // one extra bit: writes beyond NGROUP filters are dropped
  logic [11:0]     chan_q;
  logic [7:0]      elem_q;   // index i inside the KxK kernel
  logic [LW-1:0]   lane_q;
  logic [AW-1:0]   chunk_q;  // i / NLANE
  logic [AW-1:0]   cbase_q;  // chan * n_chunk

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_q <= '0; chan_q <= '0; elem_q <= '0; lane_q <= '0; chunk_q <= '0; cbase_q <= '0;
    end else if (wr_start) begin
      grp_q <= '0; chan_q <= '0; elem_q <= '0; lane_q <= '0; chunk_q <= '0; cbase_q <= '0;
    end else if (wr_en) begin
      if (elem_q == kk - 8'd1) begin
        elem_q  <= '0;
        lane_q  <= '0;
        chunk_q <= '0;
        if (chan_q == n_chan - 12'd1) begin
          chan_q  <= '0;
          cbase_q <= '0;
          grp_q   <= grp_q + 1'b1;
        end else begin
          chan_q  <= chan_q + 12'd1;
          cbase_q <= cbase_q + n_chunk;
        end
      end else begin
        elem_q <= elem_q + 8'd1;
        if (lane_q == LW'(NLANE - 1)) begin
          lane_q  <= '0;
          chunk_q <= chunk_q + 1'b1;
        end else begin
          lane_q <= lane_q + 1'b1;
        end
      end
    end
  end

  for (genvar g = 0; g < NGROUP; g++) begin : g_grp
    for (genvar l = 0; l < NLANE; l++) begin : g_lane
      cnn_pkg::data_t mem [DEPTH];
      always_ff @(posedge clk) begin
        if (wr_en && !wr_start && grp_q == (GW+1)'(g) && lane_q == LW'(l))
          mem[cbase_q + chunk_q] <= wr_data;
        if (rd_en) rd_data[g][l] <= mem[rd_addr];
      end
    end
  end
endmodule
