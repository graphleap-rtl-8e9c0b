// gce: Graph Construction Engine.
//
// Builds the dilated kNN graph of N node features (Sec. IV-B, Algorithm 2).
// P_N distance PEs each own one query node of a tile of P_N nodes, so each PE
// handles ceil(N/P_N) nodes over the whole graph. Per query tile:
//   LOAD  every PE's query vector is copied from the feature banks into its
//         local tile store (NB banks read per cycle);
//   SCAN  every candidate j = 0..N-1 is read one p_D-element tile per cycle
//         and broadcast to all PEs, which accumulate squared distances and
//         keep the K*dil nearest in their selectors;
//   FLUSH the pipeline empties and the P_N finished lists are copied to an
//         output register bank, freeing the PEs for the next tile.
// The output bank is drained one node per cycle into the edge stream while
// the next tile is scanned, so the N*K/P_N term of the paper's T_GCE model
// hides behind the scan. The scan costs ceil(N/P_N) * N * ceil(D/P_D) cycles,
// the paper's first T_GCE term. A node is its own nearest candidate
// (distance 0), so list entry 0 is normally the node itself, as in Fig. 3.
//
// Interface: start (one cycle) with n_nodes, n_tiles (= ceil(D/P_D)) and dil;
// busy until the last list has left; done pulses once. fb_* is a read port on
// the feature banks (one cycle latency). out_* is a valid/ready stream of
// (node, K neighbour indices). stall_cycles counts cycles a finished tile
// waited for the output bank to drain.
module gce
  import gl_pkg::*;
#(
  parameter int P_N        = 32,
  parameter int P_D        = 32,
  parameter int NB         = 16,
  parameter int CHUNKS_MAX = 24,
  parameter int N_MAX      = 3136,
  parameter int K          = 9,
  parameter int DIL_MAX    = 2,
  parameter int DEPTH      = 1024,
  parameter int IW         = $clog2(N_MAX)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [IW:0]                   n_nodes,
  input  logic [$clog2(CHUNKS_MAX+1)-1:0] n_tiles,
  input  logic [$clog2(DIL_MAX+1)-1:0]  dil,
  output logic                          busy,
  output logic                          done,
  // feature bank read port
  output logic [NB-1:0]                 fb_rd_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0] fb_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]       fb_rd_data,
  // edge stream
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [IW-1:0]                 out_node,
  output logic [K-1:0][IW-1:0]          out_nbrs,
  output logic [31:0]                   stall_cycles
);
  localparam int SUBS = P_N / NB;            // bank reads per query tile tile
  localparam int CW   = $clog2(CHUNKS_MAX);
  localparam int FLUSH_CYC = 4;              // bank + 2 PE stages + selector

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SCAN, S_FLUSH, S_HAND, S_DRAIN} state_e;
  state_e state;

  logic [IW:0]   qbase;                      // first node of the query tile
  logic [IW:0]   cand;                       // candidate j
  logic [CW-1:0] chunk;
  logic [$clog2(SUBS+1)-1:0] sub;
  logic [3:0]    fcnt;
  logic [IW:0]   n_r;
  logic [CW:0]   t_r;

  // delayed controls aligned with fb_rd_data
  logic            ld_v;
  logic [CW-1:0]   ld_c;
  logic [$clog2(SUBS+1)-1:0] ld_sub;
  logic            sc_v, sc_first, sc_last;
  logic [CW-1:0]   sc_c;
  logic [IW-1:0]   sc_idx;
  logic [$clog2(NB)-1:0] sc_bank;

  logic            pe_clear;
  logic [P_N-1:0][K-1:0][IW-1:0]    pe_nbr;
  logic [P_N-1:0][K-1:0][DISTW-1:0] pe_dist;

  // output register bank
  logic [P_N-1:0][K-1:0][IW-1:0] obank;
  logic [IW:0]                   obase;
  logic [$clog2(P_N+1)-1:0]      optr;
  logic                          ofull;

  assign busy = (state != S_IDLE) || ofull;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      qbase    <= '0;
      cand     <= '0;
      chunk    <= '0;
      sub      <= '0;
      fcnt     <= '0;
      n_r      <= '0;
      t_r      <= '0;
      pe_clear <= 1'b0;
      stall_cycles <= '0;
    end else begin
      pe_clear <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n_r      <= n_nodes;
          t_r      <= (CW+1)'(n_tiles);
          qbase    <= '0;
          chunk    <= '0;
          sub      <= '0;
          pe_clear <= 1'b1;
          state    <= S_LOAD;
          stall_cycles <= '0;
        end
        S_LOAD: begin
          if (int'(sub) == SUBS-1) begin
            sub <= '0;
            if (int'(chunk) == int'(t_r) - 1) begin
              chunk <= '0;
              cand  <= '0;
              state <= S_SCAN;
            end else chunk <= chunk + 1'b1;
          end else sub <= sub + 1'b1;
        end
        S_SCAN: begin
          if (int'(chunk) == int'(t_r) - 1) begin
            chunk <= '0;
            if (cand == n_r - 1'b1) begin
              fcnt  <= '0;
              state <= S_FLUSH;
            end else cand <= cand + 1'b1;
          end else chunk <= chunk + 1'b1;
        end
        S_FLUSH: begin
          fcnt <= fcnt + 1'b1;
          if (int'(fcnt) == FLUSH_CYC) state <= S_HAND;
        end
        S_HAND: begin
          if (!ofull) begin
            if (qbase + (IW+1)'(P_N) >= n_r) state <= S_IDLE;
            else begin
              qbase    <= qbase + (IW+1)'(P_N);
              pe_clear <= 1'b1;
              state    <= S_LOAD;
            end
          end else stall_cycles <= stall_cycles + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ bank reads
  always_comb begin
    fb_rd_en   = '0;
    fb_rd_addr = '0;
    if (state == S_LOAD) begin
      for (int b = 0; b < NB; b++) begin
        fb_rd_en[b]   = 1'b1;
        fb_rd_addr[b] = $clog2(DEPTH)'(fb_addr(int'(qbase) + int'(sub) * NB + b,
                                               int'(chunk), int'(t_r), NB));
      end
    end else if (state == S_SCAN) begin
      for (int b = 0; b < NB; b++) begin
        if (int'(cand) % NB == b) begin
          fb_rd_en[b]   = 1'b1;
          fb_rd_addr[b] = $clog2(DEPTH)'(fb_addr(int'(cand), int'(chunk), int'(t_r), NB));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_v <= 1'b0; ld_c <= '0; ld_sub <= '0;
      sc_v <= 1'b0; sc_first <= 1'b0; sc_last <= 1'b0; sc_c <= '0; sc_idx <= '0;
      sc_bank <= '0;
    end else begin
      ld_v     <= (state == S_LOAD);
      ld_c     <= chunk;
      ld_sub   <= sub;
      sc_v     <= (state == S_SCAN);
      sc_first <= (chunk == '0);
      sc_last  <= (int'(chunk) == int'(t_r) - 1);
      sc_c     <= chunk;
      sc_idx   <= IW'(cand);
      sc_bank  <= $clog2(NB)'(int'(cand) % NB);
    end
  end

  // ------------------------------------------------------------- PE array
  for (genvar p = 0; p < P_N; p++) begin : g_pe
    dist_pe #(.P_D(P_D), .CHUNKS_MAX(CHUNKS_MAX), .K(K), .DIL_MAX(DIL_MAX), .IW(IW)) u_pe (
      .clk, .rst_n,
      .q_we     (ld_v && (int'(ld_sub) == p / NB)),
      .q_chunk  (ld_c),
      .q_data   (fb_rd_data[p % NB]),
      .c_valid  (sc_v),
      .c_chunk  (sc_c),
      .c_first  (sc_first),
      .c_last   (sc_last),
      .c_idx    (sc_idx),
      .c_data   (fb_rd_data[sc_bank]),
      .clear    (pe_clear),
      .dil,
      .nbr_idx  (pe_nbr[p]),
      .nbr_dist (pe_dist[p])
    );
  end

  // -------------------------------------------------------- output drain
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obank <= '0;
      obase <= '0;
      optr  <= '0;
      ofull <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == S_HAND && !ofull) begin
        obank <= pe_nbr;
        obase <= qbase;
        optr  <= '0;
        ofull <= 1'b1;
      end else if (ofull && (out_ready || !out_valid)) begin
        if (int'(optr) == P_N - 1 || obase + (IW+1)'(optr) + 1'b1 >= n_r) begin
          ofull <= 1'b0;
          if (obase + (IW+1)'(P_N) >= n_r) done <= 1'b1;
        end else optr <= optr + 1'b1;
      end
    end
  end

  assign out_valid = ofull && (obase + (IW+1)'(optr) < n_r);
  assign out_node  = IW'(obase + (IW+1)'(optr));
  assign out_nbrs  = obank[optr[$clog2(P_N)-1:0]];

endmodule
