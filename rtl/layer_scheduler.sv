// layer_scheduler: stage controller of the GraphLeap look-ahead pipeline.
//
// Runs the schedule of Fig. 4 / Sec. IV-G with the graph used by layer l
// built from the features of the layer before, G(l) = G(X(l-1)), and the
// first graph bootstrapped from the input, G(0) = G(X(0)):
//   SETUP  prefetch W(0), b(0) into weight half 0;
//   BOOT   GCE builds G(0) from X(0) into edge stage 0, prefetch W(1);
//   LAYER l = 0..L-1, all three concurrently:
//          FUE  X(l) -> X(l+1) with G(l) (edge stage l%2), W(l) (half l%2);
//          GCE  builds G(l+1) from X(l) into edge stage (l+1)%2 (not for the
//               last layer);
//          prefetch W(l+1) into half (l+1)%2 (l >= 1; W(1) came in BOOT);
//          the stage ends when every unit launched in it has finished
//          (the T_sync resynchronisation of the paper).
// X(l) sits in feature buffer l%2, X(l+1) is written to the other one.
// The paper writes G(l) = G(U(l-1)) in Eq. (10) and Algorithm 1, but
// G(l) = G(X(l-1)) in Sec. II-C and Fig. 4; this design follows the hardware
// description (Fig. 4), where the GCE reads the same input features as the
// FUE. Fig. 4 shows weights prefetched two stages ahead, which needs three
// weight buffers; the text ("layer l+1 while layer l is used") and
// N_buf = 2 are followed instead.
//
// Stall accounting: gce_bound counts cycles in which the FUE had finished a
// stage and waited for the GCE, fue_bound the reverse, pf_bound cycles in
// which both waited for the weight prefetch.
module layer_scheduler
  import gl_pkg::*;
#(
  parameter int LW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] num_layers,
  input  logic [31:0]   words_per_layer,
  output logic          busy,
  output logic          done,
  // current stage
  output logic [LW-1:0] layer,
  output logic          x_cur,        // feature buffer holding X(l)
  output logic          e_wr_stage,
  output logic          e_rd_stage,
  output logic          w_rd_half,
  // unit handshakes
  output logic          gce_start,
  input  logic          gce_done,
  input  logic          gce_drained,  // edge FIFO empty
  output logic          fue_start,
  input  logic          fue_done,
  output logic          pf_start,
  output logic [31:0]   pf_base,
  output logic          pf_half,
  input  logic          pf_done,
  // statistics
  output logic [31:0]   gce_bound,
  output logic [31:0]   fue_bound,
  output logic [31:0]   pf_bound,
  output logic [LW-1:0] graphs_built
);
  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_BOOT, S_LAYER, S_NEXT} sstate_e;
  sstate_e state;

  logic [LW-1:0] L_r;
  logic g_pend, f_pend, p_pend;      // unit launched and not yet finished
  logic g_seen;                      // GCE done seen, waiting for FIFO drain
  logic launch;

  assign busy       = (state != S_IDLE);
  assign x_cur      = layer[0];
  assign e_rd_stage = layer[0];
  assign w_rd_half  = layer[0];
  assign e_wr_stage = (state == S_BOOT) ? 1'b0 : ~layer[0];

  logic g_need, p_need, f_need;
  always_comb begin
    g_need = 1'b0; p_need = 1'b0; f_need = 1'b0;
    pf_half = 1'b0;
    pf_base = '0;
    case (state)
      S_SETUP: begin
        p_need = 1'b1; pf_half = 1'b0; pf_base = '0;
      end
      S_BOOT: begin
        g_need = 1'b1;
        p_need = (L_r > 1);
        pf_half = 1'b1; pf_base = words_per_layer;
      end
      S_LAYER: begin
        f_need  = 1'b1;
        g_need  = (32'(layer) + 1 < 32'(L_r));
        p_need  = (layer >= 1) && (32'(layer) + 1 < 32'(L_r));
        pf_half = ~layer[0];
        pf_base = words_per_layer * (32'(layer) + 1);
      end
      default: ;
    endcase
  end

  assign gce_start = launch && g_need;
  assign fue_start = launch && f_need;
  assign pf_start  = launch && p_need;

  logic g_fin;
  assign g_fin = g_seen && gce_drained;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; L_r <= '0; layer <= '0; launch <= 1'b0; done <= 1'b0;
      g_pend <= 1'b0; f_pend <= 1'b0; p_pend <= 1'b0; g_seen <= 1'b0;
      gce_bound <= '0; fue_bound <= '0; pf_bound <= '0; graphs_built <= '0;
    end else begin
      launch <= 1'b0;
      done   <= 1'b0;
      if (launch) begin
        g_pend <= g_need;
        f_pend <= f_need;
        p_pend <= p_need;
        g_seen <= 1'b0;
        if (g_need) graphs_built <= graphs_built + 1'b1;
      end else begin
        if (gce_done) g_seen <= 1'b1;
        if (g_pend && g_fin) g_pend <= 1'b0;
        if (fue_done) f_pend <= 1'b0;
        if (pf_done)  p_pend <= 1'b0;
        if (state == S_LAYER || state == S_BOOT) begin
          if (!f_pend && g_pend)            gce_bound <= gce_bound + 1;
          if (f_pend && !g_pend)            fue_bound <= fue_bound + 1;
          if (!f_pend && !g_pend && p_pend) pf_bound  <= pf_bound + 1;
        end
      end
      case (state)
        S_IDLE: if (start) begin
          L_r   <= num_layers;
          layer <= '0;
          gce_bound <= '0; fue_bound <= '0; pf_bound <= '0; graphs_built <= '0;
          state  <= S_SETUP;
          launch <= 1'b1;
        end
        S_SETUP, S_BOOT, S_LAYER: if (!launch && !g_pend && !f_pend && !p_pend) begin
          if (state == S_SETUP) begin
            state  <= S_BOOT;
            launch <= 1'b1;
          end else if (state == S_BOOT) begin
            state  <= S_LAYER;
            launch <= 1'b1;
          end else state <= S_NEXT;
        end
        S_NEXT: begin
          if (32'(layer) + 1 >= 32'(L_r)) begin
            layer <= layer + 1'b1;
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            layer  <= layer + 1'b1;
            state  <= S_LAYER;
            launch <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
