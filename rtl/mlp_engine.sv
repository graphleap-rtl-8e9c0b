// mlp_engine: sequencer of the shared MLP compute fabric.
//
// Every linear layer of the Feature Update Engine (W_in, the multi-head
// graph convolution [x, m] W_agg, W_out, FFN W_1 and W_2) runs on the one
// P_N x P_D systolic array through this engine, as the paper's "shared
// systolic MLP compute fabric". A job (gl_pkg::mlp_job_t) names the operand
// buffers, weight and bias addresses, activation, residual and destination.
//
// For each tile of P_N nodes the engine copies the nodes' input features into
// an operand scratchpad (one P_N x P_D word per input tile, P_N/NB bank reads
// per word), then for each tile of P_D output channels streams one input
// channel per cycle into the array together with the matching weight row.
//   dense   : channels 0..in_ch-1, weight row k at w_base + k*out_tiles + oc.
//   grouped : the paper's W_agg split into W_x and W_m per head (Sec. IV-C2).
//             Output tile oc only needs the heads its columns belong to, so
//             only those heads' x channels and then m channels are streamed;
//             W_agg is stored compactly as 2*dh rows of D columns (the
//             2D/H x D shape of Fig. 2), and a weight is forced to zero where
//             the channel's head differs from the column's head. This is the
//             "fused accumulation without physically concatenating" of the
//             paper: x and m come from two buffers into one accumulation.
// When the array reports a finished tile, the drain adds the bias, shifts by
// FRAC and saturates, applies the activation (act_unit), adds the residual if
// asked, zeroes columns >= out_ch and writes P_N/NB bank words per cycle.
//
// Timing: tiles stream back to back; a tile's last channel is held back
// until P_N + P_D cycles after the previous tile's (array result hold time).
// Drain takes P_N/NB + 2 cycles per tile. done pulses when the last tile of
// the job has been written.
module mlp_engine
  import gl_pkg::*;
#(
  parameter int P_N      = 32,
  parameter int P_D      = 32,
  parameter int NB       = 16,
  parameter int AW       = 12,    // feature-buffer word address width
  parameter int WAW      = 16,    // weight-buffer word address width
  parameter int OP_TILES = 96     // operand scratchpad depth in p_D tiles
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  mlp_job_t                 job,
  output logic                     busy,
  output logic                     done,
  // operand read port
  output buf_e                     op_sel,
  output logic [NB-1:0]            op_rd_en,
  output logic [NB-1:0][AW-1:0]    op_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]  op_rd_data,
  // residual read port
  output logic [NB-1:0]            res_rd_en,
  output logic [NB-1:0][AW-1:0]    res_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]  res_rd_data,
  // destination write port
  output logic [NB-1:0]            wr_en,
  output logic [NB-1:0][AW-1:0]    wr_addr,
  output feat_t [NB-1:0][P_D-1:0]  wr_data,
  // weight buffer: weight rows and bias tiles
  output logic                     w_rd_en,
  output logic [WAW-1:0]           w_rd_addr,
  input  feat_t [P_D-1:0]          w_rd_data,
  output logic                     b_rd_en,
  output logic [WAW-1:0]           b_rd_addr,
  input  feat_t [P_D-1:0]          b_rd_data,
  output logic [31:0]              mac_cycles
);
  localparam int SUBS = P_N / NB;
  localparam int GAP  = P_N + P_D;
  localparam int LPD  = $clog2(P_D);
  localparam int OTW  = $clog2(OP_TILES);

  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_LWAIT, M_SETUP, M_FEED, M_FLUSH} mstate_e;
  mstate_e state;

  mlp_job_t j;
  logic [15:0] nbase;          // first node of the tile
  logic [7:0]  lchunk;         // operand load: tile index (over a then b)
  logic [$clog2(SUBS+1)-1:0] lsub;
  logic [7:0]  oc;             // output tile
  logic [15:0] c0;             // first column of the output tile
  logic [15:0] h0_lo;          // first channel of the first head of this tile
  logic [15:0] hk_lo;          // first channel of the current head
  logic [15:0] kk;             // channel inside the head (grouped) or k (dense)
  logic        part;           // grouped: 0 = x (src a), 1 = m (src b)
  logic [7:0]  gapcnt;
  logic        seen_last;

  // --------------------------------------------------------- operand store
  feat_t [P_N-1:0][P_D-1:0] opbuf [OP_TILES];
  logic                     ld_v;
  logic [OTW-1:0]           ld_c;
  logic [$clog2(SUBS+1)-1:0] ld_s;

  always_ff @(posedge clk) begin
    if (ld_v) begin
      for (int b = 0; b < NB; b++) opbuf[ld_c][int'(ld_s) * NB + b] <= op_rd_data[b];
    end
  end

  logic [7:0] tiles_total;
  assign tiles_total = j.grouped ? (j.in_tiles_a + j.in_tiles_b) : j.in_tiles_a;

  always_comb begin
    op_sel     = (int'(lchunk) < int'(j.in_tiles_a)) ? j.src_a : j.src_b;
    op_rd_en   = '0;
    op_rd_addr = '0;
    if (state == M_LOAD) begin
      for (int b = 0; b < NB; b++) begin
        op_rd_en[b] = 1'b1;
        if (int'(lchunk) < int'(j.in_tiles_a))
          op_rd_addr[b] = AW'(fb_addr(int'(nbase) + int'(lsub) * NB + b, int'(lchunk),
                                      int'(j.in_tiles_a), NB));
        else
          op_rd_addr[b] = AW'(fb_addr(int'(nbase) + int'(lsub) * NB + b,
                                      int'(lchunk) - int'(j.in_tiles_a), int'(j.in_tiles_b), NB));
      end
    end
  end

  // --------------------------------------------------------------- feeding
  // current channel k and its position in the operand store
  logic [15:0]    k_abs;
  logic [OTW-1:0] k_tile;
  logic [LPD-1:0] k_off;
  logic           el_last, el_first;
  logic [15:0]    col_end;      // one past the last real column of the tile
  logic           can_issue;

  always_comb begin
    col_end = (c0 + 16'(P_D) < j.out_ch) ? c0 + 16'(P_D) : j.out_ch;
    if (j.grouped) begin
      k_abs  = hk_lo + kk;
      k_tile = OTW'((part ? int'(j.in_tiles_a) : 0) + (int'(k_abs) >> LPD));
      el_first = !part && (hk_lo == h0_lo) && (kk == '0);
      el_last  = part && (kk == j.dh - 1'b1) && (hk_lo + j.dh >= col_end);
    end else begin
      k_abs  = kk;
      k_tile = OTW'(int'(k_abs) >> LPD);
      el_first = (kk == '0);
      el_last  = (kk == j.in_ch - 1'b1);
    end
    k_off = k_abs[LPD-1:0];
    can_issue = !el_last || !seen_last || (int'(gapcnt) >= GAP);
  end

  logic issue;
  assign issue = (state == M_FEED) && can_issue;

  // weight row address and head mask
  always_comb begin
    w_rd_en   = issue;
    if (j.grouped)
      w_rd_addr = WAW'(int'(j.w_base) + (int'(kk) + (part ? int'(j.dh) : 0)) * int'(j.out_tiles) + int'(oc));
    else
      w_rd_addr = WAW'(int'(j.w_base) + int'(kk) * int'(j.out_tiles) + int'(oc));
  end

  // registered array inputs (the weight arrives from the buffer one cycle later)
  logic                f_v, f_first, f_last;
  feat_t [P_N-1:0]     f_a;
  logic  [P_D-1:0]     f_mask;
  feat_t [P_D-1:0]     arr_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_v <= 1'b0; f_first <= 1'b0; f_last <= 1'b0; f_a <= '0; f_mask <= '0;
    end else begin
      f_v     <= issue;
      f_first <= el_first;
      f_last  <= el_last;
      for (int n = 0; n < P_N; n++) f_a[n] <= opbuf[k_tile][n][k_off];
      for (int d = 0; d < P_D; d++) begin
        if (j.grouped)
          f_mask[d] <= (c0 + 16'(d) >= hk_lo) && (c0 + 16'(d) < hk_lo + j.dh);
        else
          f_mask[d] <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int d = 0; d < P_D; d++) arr_w[d] = f_mask[d] ? w_rd_data[d] : feat_t'(0);
  end

  logic                      arr_ov;
  acc_t [P_N-1:0][P_D-1:0]   arr_res;

  systolic_array #(.P_N(P_N), .P_D(P_D)) u_array (
    .clk, .rst_n,
    .in_valid (f_v),
    .in_first (f_first),
    .in_last  (f_last),
    .a        (f_a),
    .w        (arr_w),
    .out_valid(arr_ov),
    .res      (arr_res)
  );

  // ------------------------------------------------- tile bookkeeping queue
  localparam int QD = 4;
  logic [QD-1:0][15:0] q_nbase;
  logic [QD-1:0][7:0]  q_oc;
  logic [1:0]          q_wp, q_rp;
  logic [2:0]          q_cnt;

  // ----------------------------------------------------------------- drain
  acc_t [P_N-1:0][P_D-1:0] dreg;
  logic [15:0]             d_nbase;
  logic [7:0]              d_oc;
  logic [2:0]              d_step;   // 0 idle, 1 bias wait, 2.. sub pipeline
  logic                    d_busy;
  logic [$clog2(SUBS+1)-1:0] d_sub_rq;   // sub being requantised
  logic                    a_in_v;
  feat_t [NB*P_D-1:0]      a_in, a_out;
  logic                    a_out_v;
  logic [$clog2(SUBS+1)-1:0] w_sub;
  feat_t [P_D-1:0]         bias_q;

  assign b_rd_en   = arr_ov;
  assign a_in_v    = (d_step == 3'd2);
  assign b_rd_addr = WAW'(int'(j.b_base) + int'(q_oc[q_rp]));

  // requantise one sub-group of NB lanes
  always_comb begin
    for (int b = 0; b < NB; b++)
      for (int d = 0; d < P_D; d++)
        a_in[b*P_D + d] = requant(dreg[int'(d_sub_rq) * NB + b][d], bias_q[d]);
  end

  act_unit #(.P_D(NB*P_D)) u_act (
    .clk, .rst_n,
    .mode     (j.act),
    .in_valid (a_in_v),
    .x        (a_in),
    .out_valid(a_out_v),
    .y        (a_out)
  );

  always_comb begin
    res_rd_en   = '0;
    res_rd_addr = '0;
    if (a_in_v && j.res_en) begin
      for (int b = 0; b < NB; b++) begin
        res_rd_en[b]   = 1'b1;
        res_rd_addr[b] = AW'(fb_addr(int'(d_nbase) + int'(d_sub_rq) * NB + b, int'(d_oc),
                                     int'(j.out_tiles), NB));
      end
    end
  end

  always_comb begin
    wr_en   = '0;
    wr_addr = '0;
    wr_data = '0;
    if (a_out_v) begin
      for (int b = 0; b < NB; b++) begin
        wr_en[b]   = (int'(d_nbase) + int'(w_sub) * NB + b < int'(j.n_nodes));
        wr_addr[b] = AW'(fb_addr(int'(d_nbase) + int'(w_sub) * NB + b, int'(d_oc),
                                 int'(j.out_tiles), NB));
        for (int d = 0; d < P_D; d++) begin
          if (int'(d_oc) * P_D + d >= int'(j.out_ch)) wr_data[b][d] = '0;
          else if (j.res_en) wr_data[b][d] = sat_add(a_out[b*P_D + d], res_rd_data[b][d]);
          else               wr_data[b][d] = a_out[b*P_D + d];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dreg <= '0; d_nbase <= '0; d_oc <= '0; d_step <= '0; d_sub_rq <= '0;
      w_sub <= '0; bias_q <= '0; d_busy <= 1'b0;
    end else begin
      w_sub  <= d_sub_rq;
      if (arr_ov) begin
        dreg    <= arr_res;
        d_nbase <= q_nbase[q_rp];
        d_oc    <= q_oc[q_rp];
        d_step  <= 3'd1;
        d_busy  <= 1'b1;
      end else if (d_step == 3'd1) begin
        bias_q   <= b_rd_data;
        d_sub_rq <= '0;
        d_step   <= 3'd2;
      end else if (d_step == 3'd2) begin
        if (int'(d_sub_rq) == SUBS - 1) d_step <= 3'd3;
        else d_sub_rq <= d_sub_rq + 1'b1;
      end else if (d_step == 3'd3) begin
        d_step <= 3'd4;
      end else if (d_step == 3'd4) begin
        d_step <= 3'd0;
        d_busy <= 1'b0;
      end
    end
  end

  // --------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE; j <= '0; nbase <= '0; lchunk <= '0; lsub <= '0; oc <= '0;
      c0 <= '0; h0_lo <= '0; hk_lo <= '0; kk <= '0; part <= 1'b0; gapcnt <= '0;
      seen_last <= 1'b0; ld_v <= 1'b0; ld_c <= '0; ld_s <= '0; done <= 1'b0;
      q_nbase <= '0; q_oc <= '0; q_wp <= '0; q_rp <= '0; q_cnt <= '0;
      mac_cycles <= '0;
    end else begin
      done <= 1'b0;
      ld_v <= (state == M_LOAD);
      ld_c <= OTW'(lchunk);
      ld_s <= lsub;
      if (gapcnt != 8'hff) gapcnt <= gapcnt + 1'b1;
      if (issue) mac_cycles <= mac_cycles + 1;
      // queue: push at a tile's last channel, pop when its result appears
      if (issue && el_last) begin
        q_nbase[q_wp] <= nbase;
        q_oc[q_wp]    <= oc;
        q_wp          <= q_wp + 1'b1;
        gapcnt        <= '0;
        seen_last     <= 1'b1;
      end
      if (arr_ov) q_rp <= q_rp + 1'b1;
      q_cnt <= q_cnt + 3'(issue && el_last) - 3'(arr_ov);

      case (state)
        M_IDLE: if (start) begin
          j      <= job;
          nbase  <= '0;
          lchunk <= '0;
          lsub   <= '0;
          seen_last <= 1'b0;
          mac_cycles <= '0;
          state  <= M_LOAD;
        end
        M_LOAD: begin
          if (int'(lsub) == SUBS - 1) begin
            lsub <= '0;
            if (lchunk == tiles_total - 1'b1) begin
              lchunk <= '0;
              state  <= M_LWAIT;
            end else lchunk <= lchunk + 1'b1;
          end else lsub <= lsub + 1'b1;
        end
        M_LWAIT: begin
          oc    <= '0;
          c0    <= '0;
          h0_lo <= '0;
          hk_lo <= '0;
          kk    <= '0;
          part  <= 1'b0;
          state <= j.grouped ? M_SETUP : M_FEED;
        end
        M_SETUP: begin
          // move h0_lo to the head holding column c0
          if (h0_lo + j.dh <= c0) h0_lo <= h0_lo + j.dh;
          else begin
            hk_lo <= h0_lo;
            kk    <= '0;
            part  <= 1'b0;
            state <= M_FEED;
          end
        end
        M_FEED: if (can_issue) begin
          if (el_last) begin
            // next output tile, or next node tile, or finish
            if (oc == j.out_tiles - 1'b1) begin
              if (int'(nbase) + P_N >= int'(j.n_nodes)) state <= M_FLUSH;
              else begin
                nbase <= nbase + 16'(P_N);
                state <= M_LOAD;
              end
            end else begin
              oc    <= oc + 1'b1;
              c0    <= c0 + 16'(P_D);
              kk    <= '0;
              part  <= 1'b0;
              state <= j.grouped ? M_SETUP : M_FEED;
            end
          end else if (j.grouped) begin
            if (kk == j.dh - 1'b1) begin
              kk <= '0;
              if (hk_lo + j.dh >= col_end) begin
                hk_lo <= h0_lo;
                part  <= 1'b1;
              end else hk_lo <= hk_lo + j.dh;
            end else kk <= kk + 1'b1;
          end else kk <= kk + 1'b1;
        end
        M_FLUSH: begin
          if (q_cnt == '0 && !d_busy && !arr_ov && !f_v) begin
            done  <= 1'b1;
            state <= M_IDLE;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign busy = (state != M_IDLE);

endmodule
