// gather_module: Gather Module (GM) with its aggregator mesh.
//
// For each tile of P_N target nodes the GM reads the nodes' neighbour lists
// from the look-ahead edge buffer into per-lane index registers (the "edge
// index FIFOs" of Fig. 3), then, one p_D-channel feature tile at a time,
// every lane fetches its own centre feature u_i followed by its K neighbour
// features u_j through the crossbar from the NB interleaved feature banks.
// Lanes advance independently: a lane that loses a bank conflict retries the
// next cycle while the others go on. The aggregator mesh folds the returned
// words into m_i = max_j (u_j - u_i). When every lane is finished the P_N
// message tiles are written to the message buffer (P_N/NB cycles) and the
// next channel tile starts. Edge features are never stored: only indices and
// the running maxima exist, as the paper requires.
//
// Interface: start with n_nodes, n_tiles (channel tiles) and e_stage (edge
// buffer stage holding the graph of this layer); done pulses at the end.
// Ports to the edge buffer, the feature banks holding U and the message
// buffer write port. conflict_cycles counts cycles with a refused request.
module gather_module
  import gl_pkg::*;
#(
  parameter int P_N        = 32,
  parameter int P_D        = 32,
  parameter int NB         = 16,
  parameter int K          = 9,
  parameter int N_MAX      = 3136,
  parameter int CHUNKS_MAX = 24,
  parameter int DEPTH      = 1024,
  parameter int N_BUF      = 2,
  parameter int IW         = $clog2(N_MAX)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [IW:0]                        n_nodes,
  input  logic [$clog2(CHUNKS_MAX+1)-1:0]    n_tiles,
  input  logic [$clog2(N_BUF)-1:0]           e_stage,
  output logic                               busy,
  output logic                               done,
  // edge buffer read port
  output logic                               e_rd_en,
  output logic [$clog2(N_BUF)-1:0]           e_rd_stage,
  output logic [IW-1:0]                      e_rd_tile,
  input  logic [P_N-1:0][K-1:0][IW-1:0]      e_rd_nbrs,
  // feature bank read port (U)
  output logic [NB-1:0]                      fb_rd_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0]   fb_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]            fb_rd_data,
  // message buffer write port
  output logic [NB-1:0]                      m_wr_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0]   m_wr_addr,
  output feat_t [NB-1:0][P_D-1:0]            m_wr_data,
  output logic [31:0]                        conflict_cycles
);
  localparam int SUBS = P_N / NB;
  localparam int SW   = $clog2(K + 2);
  localparam int CW   = $clog2(CHUNKS_MAX);

  typedef enum logic [2:0] {G_IDLE, G_EREAD, G_ELATCH, G_RUN, G_WAIT, G_WRITE} gstate_e;
  gstate_e state;

  logic [IW:0]   n_r, tbase;
  logic [CW:0]   t_r;
  logic [CW-1:0] chunk;
  logic [$clog2(N_BUF)-1:0] stage_r;
  logic [P_N-1:0][K-1:0][IW-1:0] nbr;
  logic [P_N-1:0][SW-1:0]        step;     // next step to request, 0 = centre
  logic [P_N-1:0][SW-1:0]        gstep_q;  // step of the word returning now
  logic [P_N-1:0]                lane_done;
  logic [1:0]                    wcnt;
  logic [$clog2(SUBS+1)-1:0]     wsub;

  logic [P_N-1:0]                    req, gnt, lane_valid;
  logic [P_N-1:0][$clog2(NB)-1:0]    req_bank;
  logic [P_N-1:0][$clog2(DEPTH)-1:0] req_addr;
  feat_t [P_N-1:0][P_D-1:0]          lane_data, msg;
  logic                              conflict;

  assign busy = (state != G_IDLE);

  always_comb begin
    for (int l = 0; l < P_N; l++) begin
      int node;
      node = (step[l] == '0) ? int'(tbase) + l
                             : int'(nbr[l][(step[l] == '0) ? 0 : int'(step[l]) - 1]);
      lane_done[l] = (int'(step[l]) == K + 1) || (int'(tbase) + l >= int'(n_r));
      req[l]       = (state == G_RUN) && !lane_done[l];
      req_bank[l]  = $clog2(NB)'(node % NB);
      req_addr[l]  = $clog2(DEPTH)'(fb_addr(node, int'(chunk), int'(t_r), NB));
    end
  end

  gather_xbar #(.P_N(P_N), .NB(NB), .P_D(P_D), .DEPTH(DEPTH)) u_xbar (
    .clk, .rst_n,
    .req, .req_bank, .req_addr, .gnt, .conflict,
    .fb_rd_en, .fb_rd_addr, .fb_rd_data,
    .lane_valid, .lane_data
  );

  // a lane is finished once its last request has been granted
  logic [P_N-1:0] lane_fin;
  always_comb begin
    for (int l = 0; l < P_N; l++)
      lane_fin[l] = lane_done[l] || (gnt[l] && int'(step[l]) == K);
  end

  logic [P_N-1:0] ctr_we, nbr_we, nbr_first;
  always_comb begin
    for (int l = 0; l < P_N; l++) begin
      ctr_we[l]    = lane_valid[l] && (gstep_q[l] == '0);
      nbr_we[l]    = lane_valid[l] && (gstep_q[l] != '0);
      nbr_first[l] = (int'(gstep_q[l]) == 1);
    end
  end

  aggregator_mesh #(.P_N(P_N), .P_D(P_D)) u_mesh (
    .clk, .rst_n,
    .ctr_we, .nbr_we, .nbr_first,
    .in_data (lane_data),
    .msg
  );

  assign e_rd_en    = (state == G_EREAD);
  assign e_rd_stage = stage_r;
  assign e_rd_tile  = IW'(int'(tbase) / P_N);

  always_comb begin
    m_wr_en   = '0;
    m_wr_addr = '0;
    m_wr_data = '0;
    if (state == G_WRITE) begin
      for (int b = 0; b < NB; b++) begin
        m_wr_en[b]   = (int'(tbase) + int'(wsub) * NB + b < int'(n_r));
        m_wr_addr[b] = $clog2(DEPTH)'(fb_addr(int'(tbase) + int'(wsub) * NB + b,
                                              int'(chunk), int'(t_r), NB));
        m_wr_data[b] = msg[int'(wsub) * NB + b];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= G_IDLE;
      n_r     <= '0;
      t_r     <= '0;
      tbase   <= '0;
      chunk   <= '0;
      stage_r <= '0;
      nbr     <= '0;
      step    <= '0;
      gstep_q <= '0;
      wcnt    <= '0;
      wsub    <= '0;
      done    <= 1'b0;
      conflict_cycles <= '0;
    end else begin
      done    <= 1'b0;
      gstep_q <= step;
      if (conflict) conflict_cycles <= conflict_cycles + 1;
      case (state)
        G_IDLE: if (start) begin
          n_r     <= n_nodes;
          t_r     <= (CW+1)'(n_tiles);
          stage_r <= e_stage;
          tbase   <= '0;
          chunk   <= '0;
          conflict_cycles <= '0;
          state   <= G_EREAD;
        end
        G_EREAD:  state <= G_ELATCH;
        G_ELATCH: begin
          nbr   <= e_rd_nbrs;
          step  <= '0;
          state <= G_RUN;
        end
        G_RUN: begin
          for (int l = 0; l < P_N; l++) if (gnt[l]) step[l] <= step[l] + 1'b1;
          if (&lane_fin) begin
            wcnt  <= '0;
            state <= G_WAIT;
          end
        end
        G_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd2) begin
            wsub  <= '0;
            state <= G_WRITE;
          end
        end
        G_WRITE: begin
          if (int'(wsub) == SUBS - 1) begin
            step <= '0;
            if (int'(chunk) == int'(t_r) - 1) begin
              chunk <= '0;
              if (tbase + (IW+1)'(P_N) >= n_r) begin
                done  <= 1'b1;
                state <= G_IDLE;
              end else begin
                tbase <= tbase + (IW+1)'(P_N);
                state <= G_EREAD;
              end
            end else begin
              chunk <= chunk + 1'b1;
              state <= G_RUN;
            end
          end else wsub <= wsub + 1'b1;
        end
        default: state <= G_IDLE;
      endcase
    end
  end
endmodule
