// graphleap_top: the GraphLeap Vision-GNN accelerator core.
//
// Two engines work on the same layer input at the same time. The Graph
// Construction Engine (gce) builds the kNN graph that the NEXT layer will use
// from X(l), while the Feature Update Engine (fue) turns X(l) into X(l+1)
// with the graph built one stage earlier. Graphs reach the FUE through an
// edge FIFO and a two-stage look-ahead edge buffer; weights reach it through
// a double-buffered weight store filled from HBM by a prefetcher while the
// previous layer computes. layer_scheduler runs the stages and resynchronises
// the units at each layer boundary.
//
// Buffers: two ping-pong feature buffers (feature_banks, H = 16 banks
// interleaved by node index, two read ports: port 0 for the GCE, port 1 for
// the FUE or the host), the edge buffer, the weight buffer, and the FUE's
// private scratchpads.
//
// Host side (this design's choice of interface): while idle, the host writes
// X(0) into feature buffer 0 through host_wr_* and reads the result from
// buffer (num_layers mod 2) through host_rd_* (one cycle latency), both in
// feature_banks word format (gl_pkg::fb_addr). cfg_* set the run: number of
// blocks, nodes N, channels D (a multiple of 16), dilation and activation.
// Weights for layer l are a block of gl_pkg::wl_off(D, t, dh, 10) words at
// HBM word address l * that size, read through hbm_req_*/hbm_rsp_*.
// The convolutional stem, positional embedding, pyramid down-sampling,
// normalisation and classifier head are not part of this core.
module graphleap_top
  import gl_pkg::*;
#(
  parameter int P_N     = 32,      // node lanes (Table I)
  parameter int P_D     = 32,      // channel lanes (Table I)
  parameter int H       = 16,      // heads = feature banks (Table I)
  parameter int K       = 9,       // neighbours per node
  parameter int DIL_MAX = 2,       // largest kNN dilation
  parameter int N_MAX   = 3136,    // largest node count
  parameter int D_MAX   = 768,     // largest channel count
  parameter int DEPTH   = 1024,    // words per feature bank
  parameter int N_BUF   = 2,       // look-ahead buffer stages (Table I)
  parameter int LW      = 8,
  parameter int IW      = $clog2(N_MAX),
  parameter int CHUNKS_MAX = (D_MAX + P_D - 1) / P_D,
  parameter int WDEPTH  = CHUNKS_MAX * (10 * D_MAX + 2 * (D_MAX / H) + 8)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // run control
  input  logic                              cfg_start,
  input  logic [LW-1:0]                     cfg_layers,
  input  logic [IW:0]                       cfg_nodes,
  input  logic [15:0]                       cfg_dim,
  input  logic [$clog2(DIL_MAX+1)-1:0]      cfg_dil,
  input  act_e                              cfg_act,
  output logic                              busy,
  output logic                              done,
  // host feature access (idle only)
  input  logic [H-1:0]                      host_wr_en,
  input  logic [H-1:0][$clog2(DEPTH)-1:0]   host_wr_addr,
  input  feat_t [H-1:0][P_D-1:0]            host_wr_data,
  input  logic [H-1:0]                      host_rd_en,
  input  logic [H-1:0][$clog2(DEPTH)-1:0]   host_rd_addr,
  output feat_t [H-1:0][P_D-1:0]            host_rd_data,
  // HBM weight read channel
  output logic                              hbm_req_valid,
  input  logic                              hbm_req_ready,
  output logic [31:0]                       hbm_req_addr,
  input  logic                              hbm_rsp_valid,
  input  feat_t [P_D-1:0]                   hbm_rsp_data,
  // statistics
  output logic [31:0]                       stat_gce_bound,
  output logic [31:0]                       stat_fue_bound,
  output logic [31:0]                       stat_pf_bound,
  output logic [31:0]                       stat_conflicts,
  output logic [31:0]                       stat_gce_stalls,
  output logic [LW-1:0]                     stat_graphs
);
  localparam int NB  = H;
  localparam int FAW = $clog2(DEPTH);
  localparam int WAW = $clog2(WDEPTH);

  // ------------------------------------------------------------ scheduler
  logic [LW-1:0] layer;
  logic x_cur, e_wr_stage, e_rd_stage, w_rd_half;
  logic gce_start, gce_done, gce_busy, fue_start, fue_done, fue_busy;
  logic pf_start, pf_half, pf_done, pf_busy;
  logic [31:0] pf_base, words_per_layer;
  logic fifo_empty;
  logic [15:0] t_cfg, dh_cfg;

  assign t_cfg  = 16'((int'(cfg_dim) + P_D - 1) / P_D);
  assign dh_cfg = 16'(int'(cfg_dim) / H);
  assign words_per_layer = 32'(wl_off(cfg_dim, t_cfg, dh_cfg, 10));

  layer_scheduler #(.LW(LW)) u_sched (
    .clk, .rst_n,
    .start (cfg_start), .num_layers (cfg_layers), .words_per_layer,
    .busy, .done,
    .layer, .x_cur, .e_wr_stage, .e_rd_stage, .w_rd_half,
    .gce_start, .gce_done, .gce_drained (fifo_empty),
    .fue_start, .fue_done,
    .pf_start, .pf_base, .pf_half, .pf_done,
    .gce_bound (stat_gce_bound), .fue_bound (stat_fue_bound), .pf_bound (stat_pf_bound),
    .graphs_built (stat_graphs)
  );

  // ------------------------------------------------------ feature buffers
  logic [1:0][1:0][NB-1:0]          xb_rd_en;
  logic [1:0][1:0][NB-1:0][FAW-1:0] xb_rd_addr;
  feat_t [1:0][1:0][NB-1:0][P_D-1:0] xb_rd_data;
  logic [1:0][NB-1:0]               xb_wr_en;
  logic [1:0][NB-1:0][FAW-1:0]      xb_wr_addr;
  feat_t [1:0][NB-1:0][P_D-1:0]     xb_wr_data;

  logic [NB-1:0]           g_rd_en, fx_rd_en, fx_wr_en;
  logic [NB-1:0][FAW-1:0]  g_rd_addr, fx_rd_addr, fx_wr_addr;
  feat_t [NB-1:0][P_D-1:0] fx_wr_data;
  logic                    host_sel;

  assign host_sel = cfg_layers[0];   // buffer holding X(num_layers)

  always_comb begin
    xb_rd_en   = '0;
    xb_rd_addr = '0;
    xb_wr_en   = '0;
    xb_wr_addr = '0;
    xb_wr_data = '0;
    if (busy) begin
      xb_rd_en[x_cur][0]   = g_rd_en;
      xb_rd_addr[x_cur][0] = g_rd_addr;
      xb_rd_en[x_cur][1]   = fx_rd_en;
      xb_rd_addr[x_cur][1] = fx_rd_addr;
      xb_wr_en[~x_cur]     = fx_wr_en;
      xb_wr_addr[~x_cur]   = fx_wr_addr;
      xb_wr_data[~x_cur]   = fx_wr_data;
    end else begin
      xb_wr_en[0]          = host_wr_en;
      xb_wr_addr[0]        = host_wr_addr;
      xb_wr_data[0]        = host_wr_data;
      xb_rd_en[host_sel][1]   = host_rd_en;
      xb_rd_addr[host_sel][1] = host_rd_addr;
    end
  end

  logic host_sel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_sel_q <= 1'b0;
    else        host_sel_q <= host_sel;
  end
  assign host_rd_data = xb_rd_data[host_sel_q][1];

  for (genvar x = 0; x < 2; x++) begin : g_xbuf
    feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(DEPTH), .NRD(2)) u_xbuf (
      .clk,
      .rd_en (xb_rd_en[x]), .rd_addr (xb_rd_addr[x]), .rd_data (xb_rd_data[x]),
      .wr_en (xb_wr_en[x]), .wr_addr (xb_wr_addr[x]), .wr_data (xb_wr_data[x])
    );
  end

  // ------------------------------------------------------------------ GCE
  logic                 g_out_valid, g_out_ready;
  logic [IW-1:0]        g_out_node;
  logic [K-1:0][IW-1:0] g_out_nbrs;

  gce #(.P_N(P_N), .P_D(P_D), .NB(NB), .CHUNKS_MAX(CHUNKS_MAX), .N_MAX(N_MAX),
        .K(K), .DIL_MAX(DIL_MAX), .DEPTH(DEPTH)) u_gce (
    .clk, .rst_n,
    .start (gce_start), .n_nodes (cfg_nodes),
    .n_tiles (($clog2(CHUNKS_MAX+1))'(t_cfg)), .dil (cfg_dil),
    .busy (gce_busy), .done (gce_done),
    .fb_rd_en (g_rd_en), .fb_rd_addr (g_rd_addr), .fb_rd_data (xb_rd_data[x_cur][0]),
    .out_valid (g_out_valid), .out_ready (g_out_ready),
    .out_node (g_out_node), .out_nbrs (g_out_nbrs),
    .stall_cycles (stat_gce_stalls)
  );

  // ------------------------------------------- edge FIFO and edge buffer
  localparam int EW = IW * (K + 1);
  logic          e_valid;
  logic [EW-1:0] e_data;
  logic [$clog2(P_N+1)-1:0] fifo_count;

  sync_fifo #(.WIDTH(EW), .DEPTH(P_N)) u_efifo (
    .clk, .rst_n,
    .in_valid (g_out_valid), .in_ready (g_out_ready), .in_data ({g_out_nbrs, g_out_node}),
    .out_valid (e_valid), .out_ready (1'b1), .out_data (e_data),
    .count (fifo_count)
  );
  assign fifo_empty = (fifo_count == '0);

  logic                          er_en;
  logic [$clog2(N_BUF)-1:0]      er_stage;
  logic [IW-1:0]                 er_tile;
  logic [P_N-1:0][K-1:0][IW-1:0] er_nbrs;

  edge_buffer #(.P_N(P_N), .N_MAX(N_MAX), .K(K), .N_BUF(N_BUF)) u_ebuf (
    .clk,
    .wr_en (e_valid), .wr_stage (($clog2(N_BUF))'(e_wr_stage)),
    .wr_node (e_data[IW-1:0]), .wr_nbrs (e_data[EW-1:IW]),
    .rd_en (er_en), .rd_stage (er_stage), .rd_tile (er_tile), .rd_nbrs (er_nbrs)
  );

  // ------------------------------------------------------ weight path
  logic                    wb_wr_en, wb_wr_half;
  logic [WAW-1:0]          wb_wr_addr;
  feat_t [P_D-1:0]         wb_wr_data;
  logic                    w_rd_en, b_rd_en;
  logic [WAW-1:0]          w_rd_addr, b_rd_addr;
  feat_t [P_D-1:0]         w_rd_data, b_rd_data;

  weight_prefetch #(.P_D(P_D), .DEPTH(WDEPTH)) u_pf (
    .clk, .rst_n,
    .start (pf_start), .hbm_base (pf_base),
    .n_words (($clog2(WDEPTH+1))'(words_per_layer)), .half (pf_half),
    .busy (pf_busy), .done (pf_done),
    .hbm_req_valid, .hbm_req_ready, .hbm_req_addr, .hbm_rsp_valid, .hbm_rsp_data,
    .wb_wr_en, .wb_wr_half, .wb_wr_addr, .wb_wr_data
  );

  weight_buffer #(.P_D(P_D), .DEPTH(WDEPTH)) u_wbuf (
    .clk,
    .wr_en (wb_wr_en), .wr_half (wb_wr_half), .wr_addr (wb_wr_addr), .wr_data (wb_wr_data),
    .rd_half (w_rd_half),
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .b_rd_en, .b_rd_addr, .b_rd_data
  );

  // ------------------------------------------------------------------ FUE
  logic [6:1][31:0] phase_cycles;

  fue #(.P_N(P_N), .P_D(P_D), .NB(NB), .H(H), .K(K), .N_MAX(N_MAX), .D_MAX(D_MAX),
        .DEPTH(DEPTH), .N_BUF(N_BUF), .WDEPTH(WDEPTH)) u_fue (
    .clk, .rst_n,
    .start (fue_start), .n_nodes (cfg_nodes), .d (cfg_dim), .act (cfg_act),
    .e_stage (($clog2(N_BUF))'(e_rd_stage)),
    .busy (fue_busy), .done (fue_done),
    .xin_rd_en (fx_rd_en), .xin_rd_addr (fx_rd_addr), .xin_rd_data (xb_rd_data[x_cur][1]),
    .xout_wr_en (fx_wr_en), .xout_wr_addr (fx_wr_addr), .xout_wr_data (fx_wr_data),
    .e_rd_en (er_en), .e_rd_stage (er_stage), .e_rd_tile (er_tile), .e_rd_nbrs (er_nbrs),
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .b_rd_en, .b_rd_addr, .b_rd_data,
    .phase_cycles,
    .conflict_cycles (stat_conflicts)
  );

  logic unused;
  assign unused = gce_busy ^ fue_busy ^ pf_busy ^ (|phase_cycles) ^ (|layer);
endmodule
