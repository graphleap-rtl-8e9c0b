// fue: Feature Update Engine.
//
// Runs one GraphLeap ViG block, X(l) -> X(l+1), with the graph G(l) that the
// GCE built one stage earlier (Eqs. 7-11 of the paper):
//   phase 1  U  = X W_in + b_in                       (Grapher FC_in)
//   phase 2  M  = max_{j in G(l)(i)} (u_j - u_i)       (Gather Module + mesh)
//   phase 3  T  = act([U, M] W_agg + b_agg)           (multi-head graph conv,
//                                                      W_x / W_m per head)
//   phase 4  Y  = T W_out + b_out + X                 (FC_out + residual)
//   phase 5  Hd = act(Y W_1 + b_1)                    (FFN FC1, D -> 4D)
//   phase 6  X' = Hd W_2 + b_2 + Y                    (FFN FC2 + residual)
// Phases 1 and 3-4 form the Graph Convolution Module, phase 2 the Gather
// Module, phases 5-6 the FFN Module; all linear layers share one mlp_engine
// and its systolic array, as the paper prescribes. U, M, T, Y and the FFN
// hidden Hd live in private scratch feature banks; X(l) and X(l+1) are the
// ping-pong feature buffers outside, reached through xin_* and xout_*.
// Phases run one after the other (this design's choice: the paper does not
// say how the FUE stages overlap inside a layer). Weight addresses follow
// gl_pkg::wl_off.
//
// Interface: start with n_nodes, d (channels, a multiple of H), act and
// e_stage; done pulses after phase 6. phase_cycles[p] counts the cycles of
// each phase; conflict_cycles the gather's bank-conflict cycles.
module fue
  import gl_pkg::*;
#(
  parameter int P_N        = 32,
  parameter int P_D        = 32,
  parameter int NB         = 16,
  parameter int H          = 16,
  parameter int K          = 9,
  parameter int N_MAX      = 3136,
  parameter int D_MAX      = 768,
  parameter int DEPTH      = 1024,
  parameter int N_BUF      = 2,
  parameter int WDEPTH     = 186816,
  parameter int IW         = $clog2(N_MAX)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [IW:0]                       n_nodes,
  input  logic [15:0]                       d,
  input  act_e                              act,
  input  logic [$clog2(N_BUF)-1:0]          e_stage,
  output logic                              busy,
  output logic                              done,
  // X(l) read port and X(l+1) write port
  output logic [NB-1:0]                     xin_rd_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0]  xin_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]           xin_rd_data,
  output logic [NB-1:0]                     xout_wr_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0]  xout_wr_addr,
  output feat_t [NB-1:0][P_D-1:0]           xout_wr_data,
  // edge buffer read port
  output logic                              e_rd_en,
  output logic [$clog2(N_BUF)-1:0]          e_rd_stage,
  output logic [IW-1:0]                     e_rd_tile,
  input  logic [P_N-1:0][K-1:0][IW-1:0]     e_rd_nbrs,
  // weight buffer read ports
  output logic                              w_rd_en,
  output logic [$clog2(WDEPTH)-1:0]         w_rd_addr,
  input  feat_t [P_D-1:0]                   w_rd_data,
  output logic                              b_rd_en,
  output logic [$clog2(WDEPTH)-1:0]         b_rd_addr,
  input  feat_t [P_D-1:0]                   b_rd_data,
  output logic [6:1][31:0]                  phase_cycles,
  output logic [31:0]                       conflict_cycles
);
  localparam int HDEPTH     = 4 * DEPTH;
  localparam int AW         = $clog2(HDEPTH);
  localparam int FAW        = $clog2(DEPTH);
  localparam int WAW        = $clog2(WDEPTH);
  localparam int CHUNKS_MAX = (D_MAX + P_D - 1) / P_D;

  typedef enum logic [2:0] {F_IDLE, F_P1, F_P2, F_P3, F_P4, F_P5, F_P6} fstate_e;
  fstate_e state;
  logic    launch;        // start the phase just entered

  logic [IW:0] n_r;
  logic [15:0] d_r, t_r, dh_r;
  act_e        act_r;
  logic [$clog2(N_BUF)-1:0] es_r;

  // ------------------------------------------------------------- jobs
  mlp_job_t job;
  always_comb begin
    job = '0;
    job.n_nodes    = 16'(n_r);
    job.in_ch      = d_r;
    job.in_tiles_a = 8'(t_r);
    job.in_tiles_b = 8'(t_r);
    job.out_ch     = d_r;
    job.out_tiles  = 8'(t_r);
    job.dh         = dh_r;
    job.src_b      = BUF_NONE;
    job.res_buf    = BUF_NONE;
    job.act        = ACT_NONE;
    case (state)
      F_P1: begin
        job.src_a  = BUF_XIN;  job.dst = BUF_U;
        job.w_base = 24'(wl_off(d_r, t_r, dh_r, 0));
        job.b_base = 24'(wl_off(d_r, t_r, dh_r, 5));
      end
      F_P3: begin
        job.grouped = 1'b1;
        job.src_a  = BUF_U;    job.src_b = BUF_M;   job.dst = BUF_T;
        job.act    = act_r;
        job.w_base = 24'(wl_off(d_r, t_r, dh_r, 1));
        job.b_base = 24'(wl_off(d_r, t_r, dh_r, 6));
      end
      F_P4: begin
        job.src_a  = BUF_T;    job.dst = BUF_Y;
        job.res_en = 1'b1;     job.res_buf = BUF_XIN;
        job.w_base = 24'(wl_off(d_r, t_r, dh_r, 2));
        job.b_base = 24'(wl_off(d_r, t_r, dh_r, 7));
      end
      F_P5: begin
        job.src_a  = BUF_Y;    job.dst = BUF_HID;
        job.out_ch = 16'(4 * int'(d_r));
        job.out_tiles = 8'(4 * int'(t_r));
        job.act    = act_r;
        job.w_base = 24'(wl_off(d_r, t_r, dh_r, 3));
        job.b_base = 24'(wl_off(d_r, t_r, dh_r, 8));
      end
      default: begin   // F_P6
        job.src_a  = BUF_HID;  job.dst = BUF_XOUT;
        job.in_ch  = 16'(4 * int'(d_r));
        job.in_tiles_a = 8'(4 * int'(t_r));
        job.res_en = 1'b1;     job.res_buf = BUF_Y;
        job.w_base = 24'(wl_off(d_r, t_r, dh_r, 4));
        job.b_base = 24'(wl_off(d_r, t_r, dh_r, 9));
      end
    endcase
  end

  // scratch-buffer ports
  logic [NB-1:0]           u_rd_en, m_rd_en, t_rd_en, y_rd_en, h_rd_en;
  logic [NB-1:0][FAW-1:0]  u_rd_addr, m_rd_addr, t_rd_addr, y_rd_addr;
  logic [NB-1:0][AW-1:0]   h_rd_addr;
  feat_t [NB-1:0][P_D-1:0] u_rd_data, m_rd_data, t_rd_data, y_rd_data, h_rd_data;
  logic [NB-1:0]           u_wr_en, mm_wr_en, t_wr_en, y_wr_en, h_wr_en;
  logic [NB-1:0][FAW-1:0]  s_wr_addr, mm_wr_addr;
  feat_t [NB-1:0][P_D-1:0] mm_wr_data;

  // ----------------------------------------------------------- engines
  logic m_start, m_busy, m_done;
  buf_e op_sel, op_sel_q;
  logic [NB-1:0]          op_rd_en, res_rd_en, m_wr_en;
  logic [NB-1:0][AW-1:0]  op_rd_addr, res_rd_addr, m_wr_addr;
  feat_t [NB-1:0][P_D-1:0] op_rd_data, res_rd_data, m_wr_data;
  logic [31:0] mac_cycles;
  mlp_job_t    job_q;

  assign m_start = launch && (state != F_P2);

  mlp_engine #(.P_N(P_N), .P_D(P_D), .NB(NB), .AW(AW), .WAW(WAW),
               .OP_TILES(4 * CHUNKS_MAX)) u_mlp (
    .clk, .rst_n,
    .start (m_start), .job, .busy (m_busy), .done (m_done),
    .op_sel, .op_rd_en, .op_rd_addr, .op_rd_data,
    .res_rd_en, .res_rd_addr, .res_rd_data,
    .wr_en (m_wr_en), .wr_addr (m_wr_addr), .wr_data (m_wr_data),
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .b_rd_en, .b_rd_addr, .b_rd_data,
    .mac_cycles
  );

  logic g_start, g_busy, g_done;
  logic [NB-1:0]           g_rd_en, gm_wr_en;
  logic [NB-1:0][FAW-1:0]  g_rd_addr, gm_wr_addr;
  feat_t [NB-1:0][P_D-1:0] gm_wr_data;

  assign g_start = launch && (state == F_P2);

  gather_module #(.P_N(P_N), .P_D(P_D), .NB(NB), .K(K), .N_MAX(N_MAX),
                  .CHUNKS_MAX(CHUNKS_MAX), .DEPTH(DEPTH), .N_BUF(N_BUF)) u_gm (
    .clk, .rst_n,
    .start (g_start), .n_nodes (n_r), .n_tiles (($clog2(CHUNKS_MAX+1))'(t_r)),
    .e_stage (es_r), .busy (g_busy), .done (g_done),
    .e_rd_en, .e_rd_stage, .e_rd_tile, .e_rd_nbrs,
    .fb_rd_en (g_rd_en), .fb_rd_addr (g_rd_addr), .fb_rd_data (u_rd_data),
    .m_wr_en (gm_wr_en), .m_wr_addr (gm_wr_addr), .m_wr_data (gm_wr_data),
    .conflict_cycles
  );

  // ---------------------------------------------------- scratch buffers
  // read-port and write-port steering by the running job
  function automatic logic [NB-1:0] pick_en(input buf_e b, input buf_e sel,
                                            input logic [NB-1:0] en);
    return (b == sel) ? en : '0;
  endfunction


  always_comb begin
    for (int b = 0; b < NB; b++) s_wr_addr[b] = FAW'(m_wr_addr[b]);
    // U: gather in phase 2, operand otherwise
    if (state == F_P2) begin
      u_rd_en   = g_rd_en;
      u_rd_addr = g_rd_addr;
    end else begin
      u_rd_en = pick_en(BUF_U, op_sel, op_rd_en);
      for (int b = 0; b < NB; b++) u_rd_addr[b] = FAW'(op_rd_addr[b]);
    end
    m_rd_en = pick_en(BUF_M, op_sel, op_rd_en);
    t_rd_en = pick_en(BUF_T, op_sel, op_rd_en);
    h_rd_en = pick_en(BUF_HID, op_sel, op_rd_en);
    h_rd_addr = op_rd_addr;
    // Y is an operand in phase 5 and the residual in phase 6
    if (job_q.res_en && job_q.res_buf == BUF_Y) begin
      y_rd_en = res_rd_en;
      for (int b = 0; b < NB; b++) y_rd_addr[b] = FAW'(res_rd_addr[b]);
    end else begin
      y_rd_en = pick_en(BUF_Y, op_sel, op_rd_en);
      for (int b = 0; b < NB; b++) y_rd_addr[b] = FAW'(op_rd_addr[b]);
    end
    for (int b = 0; b < NB; b++) begin
      m_rd_addr[b] = FAW'(op_rd_addr[b]);
      t_rd_addr[b] = FAW'(op_rd_addr[b]);
    end
    // X(l): operand in phase 1, residual in phase 4
    if (job_q.res_en && job_q.res_buf == BUF_XIN) begin
      xin_rd_en = res_rd_en;
      for (int b = 0; b < NB; b++) xin_rd_addr[b] = FAW'(res_rd_addr[b]);
    end else begin
      xin_rd_en = pick_en(BUF_XIN, op_sel, op_rd_en);
      for (int b = 0; b < NB; b++) xin_rd_addr[b] = FAW'(op_rd_addr[b]);
    end
    // writes
    u_wr_en    = pick_en(BUF_U,    job_q.dst, m_wr_en);
    t_wr_en    = pick_en(BUF_T,    job_q.dst, m_wr_en);
    y_wr_en    = pick_en(BUF_Y,    job_q.dst, m_wr_en);
    h_wr_en    = pick_en(BUF_HID,  job_q.dst, m_wr_en);
    xout_wr_en = pick_en(BUF_XOUT, job_q.dst, m_wr_en);
    xout_wr_addr = s_wr_addr;
    xout_wr_data = m_wr_data;
    mm_wr_en   = gm_wr_en;
    mm_wr_addr = gm_wr_addr;
    mm_wr_data = gm_wr_data;
    // operand and residual data return one cycle after the read
    case (op_sel_q)
      BUF_XIN: op_rd_data = xin_rd_data;
      BUF_U:   op_rd_data = u_rd_data;
      BUF_M:   op_rd_data = m_rd_data;
      BUF_T:   op_rd_data = t_rd_data;
      BUF_Y:   op_rd_data = y_rd_data;
      default: op_rd_data = h_rd_data;
    endcase
    res_rd_data = (job_q.res_buf == BUF_Y) ? y_rd_data : xin_rd_data;
  end

  feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(DEPTH), .NRD(1)) u_ubuf (
    .clk, .rd_en (u_rd_en), .rd_addr (u_rd_addr), .rd_data (u_rd_data),
    .wr_en (u_wr_en), .wr_addr (s_wr_addr), .wr_data (m_wr_data));
  feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(DEPTH), .NRD(1)) u_mbuf (
    .clk, .rd_en (m_rd_en), .rd_addr (m_rd_addr), .rd_data (m_rd_data),
    .wr_en (mm_wr_en), .wr_addr (mm_wr_addr), .wr_data (mm_wr_data));
  feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(DEPTH), .NRD(1)) u_tbuf (
    .clk, .rd_en (t_rd_en), .rd_addr (t_rd_addr), .rd_data (t_rd_data),
    .wr_en (t_wr_en), .wr_addr (s_wr_addr), .wr_data (m_wr_data));
  feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(DEPTH), .NRD(1)) u_ybuf (
    .clk, .rd_en (y_rd_en), .rd_addr (y_rd_addr), .rd_data (y_rd_data),
    .wr_en (y_wr_en), .wr_addr (s_wr_addr), .wr_data (m_wr_data));
  feature_banks #(.NB(NB), .P_D(P_D), .DEPTH(HDEPTH), .NRD(1)) u_hbuf (
    .clk, .rd_en (h_rd_en), .rd_addr (h_rd_addr), .rd_data (h_rd_data),
    .wr_en (h_wr_en), .wr_addr (m_wr_addr), .wr_data (m_wr_data));

  // ---------------------------------------------------------- sequencing
  assign busy = (state != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE; launch <= 1'b0; n_r <= '0; d_r <= '0; t_r <= '0; dh_r <= '0;
      act_r <= ACT_NONE; es_r <= '0; done <= 1'b0; op_sel_q <= BUF_NONE; job_q <= '0;
      phase_cycles <= '0;
    end else begin
      launch   <= 1'b0;
      done     <= 1'b0;
      op_sel_q <= op_sel;
      if (launch) job_q <= job;
      if (state != F_IDLE) phase_cycles[int'(state)] <= phase_cycles[int'(state)] + 1;
      case (state)
        F_IDLE: if (start) begin
          n_r   <= n_nodes;
          d_r   <= d;
          t_r   <= 16'((int'(d) + P_D - 1) / P_D);
          dh_r  <= 16'(int'(d) / H);
          act_r <= act;
          es_r  <= e_stage;
          phase_cycles <= '0;
          state <= F_P1;
          launch <= 1'b1;
        end
        F_P2: if (g_done) begin state <= F_P3; launch <= 1'b1; end
        F_P6: if (m_done) begin state <= F_IDLE; done <= 1'b1; end
        default: if (m_done) begin state <= fstate_e'(int'(state) + 1); launch <= 1'b1; end
      endcase
    end
  end

  logic unused;
  assign unused = m_busy ^ g_busy ^ (|mac_cycles);
endmodule
