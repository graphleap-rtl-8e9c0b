// weight_prefetch: streams one layer's weights and biases from HBM into the
// free half of the weight buffer (Fig. 4, "Prefetch W(l+1), b(l+1)").
//
// start gives the HBM word address of the layer's block, its length in
// p_D-element words and the destination half. Requests go out on a
// valid/ready address channel, at most MAX_OUT outstanding; responses come
// back in order on a valid-only data channel and are written to consecutive
// buffer addresses. done pulses after the last word is written. The HBM
// interface itself (a vendor block) is not part of this design; the request/
// response handshake here is this design's choice.
module weight_prefetch
  import gl_pkg::*;
#(
  parameter int P_D     = 32,
  parameter int DEPTH   = 186816,
  parameter int MAX_OUT = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [31:0]              hbm_base,
  input  logic [$clog2(DEPTH+1)-1:0] n_words,
  input  logic                     half,
  output logic                     busy,
  output logic                     done,
  // HBM read channel
  output logic                     hbm_req_valid,
  input  logic                     hbm_req_ready,
  output logic [31:0]              hbm_req_addr,
  input  logic                     hbm_rsp_valid,
  input  feat_t [P_D-1:0]          hbm_rsp_data,
  // weight buffer write port
  output logic                     wb_wr_en,
  output logic                     wb_wr_half,
  output logic [$clog2(DEPTH)-1:0] wb_wr_addr,
  output feat_t [P_D-1:0]          wb_wr_data
);
  localparam int CW = $clog2(DEPTH+1);
  logic [CW-1:0] n_r, sent, recv;
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  logic [31:0] base_r;
  logic half_r;

  assign busy          = (n_r != recv);
  assign hbm_req_valid = busy && (sent != n_r) && (int'(outst) < MAX_OUT);
  assign hbm_req_addr  = base_r + 32'(sent);
  assign wb_wr_en      = hbm_rsp_valid && busy;
  assign wb_wr_half    = half_r;
  assign wb_wr_addr    = $clog2(DEPTH)'(recv);
  assign wb_wr_data    = hbm_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_r <= '0; sent <= '0; recv <= '0; outst <= '0; base_r <= '0; half_r <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        n_r    <= n_words;
        sent   <= '0;
        recv   <= '0;
        outst  <= '0;
        base_r <= hbm_base;
        half_r <= half;
        if (n_words == '0) done <= 1'b1;
      end else begin
        if (hbm_req_valid && hbm_req_ready) sent <= sent + 1'b1;
        if (wb_wr_en) begin
          recv <= recv + 1'b1;
          if (recv + 1'b1 == n_r) done <= 1'b1;
        end
        outst <= outst + ($clog2(MAX_OUT+1))'(hbm_req_valid && hbm_req_ready)
                       - ($clog2(MAX_OUT+1))'(wb_wr_en);
      end
    end
  end

  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    hbm_rsp_valid |-> (outst != '0));
endmodule
