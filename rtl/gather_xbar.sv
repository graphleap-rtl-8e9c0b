// gather_xbar: request crossbar of the Gather Module.
//
// P_N lanes each ask for one feature word (bank, address) per cycle; NB
// banks each serve one request per cycle. Every bank grants the lowest-
// numbered lane that asks for it (fixed priority, this design's choice) and
// the lanes that lost keep their request up the next cycle: a bank conflict
// costs one cycle per extra request to the same bank. The paper names the
// crossbar and the i mod H bank mapping; the arbitration is not published.
//
// Timing: gnt is combinational in the request cycle; the granted lane sees
// lane_valid and its word in lane_data one cycle later (bank read latency).
// conflict is high in every cycle in which some request was not granted.
module gather_xbar
  import gl_pkg::*;
#(
  parameter int P_N   = 32,
  parameter int NB    = 16,
  parameter int P_D   = 32,
  parameter int DEPTH = 1024
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [P_N-1:0]                     req,
  input  logic [P_N-1:0][$clog2(NB)-1:0]     req_bank,
  input  logic [P_N-1:0][$clog2(DEPTH)-1:0]  req_addr,
  output logic [P_N-1:0]                     gnt,
  output logic                               conflict,
  output logic [NB-1:0]                      fb_rd_en,
  output logic [NB-1:0][$clog2(DEPTH)-1:0]   fb_rd_addr,
  input  feat_t [NB-1:0][P_D-1:0]            fb_rd_data,
  output logic [P_N-1:0]                     lane_valid,
  output feat_t [P_N-1:0][P_D-1:0]           lane_data
);
  logic [P_N-1:0][$clog2(NB)-1:0] lane_bank_q;

  always_comb begin
    gnt        = '0;
    fb_rd_en   = '0;
    fb_rd_addr = '0;
    for (int l = 0; l < P_N; l++) begin
      if (req[l] && !fb_rd_en[req_bank[l]]) begin
        gnt[l]                  = 1'b1;
        fb_rd_en[req_bank[l]]   = 1'b1;
        fb_rd_addr[req_bank[l]] = req_addr[l];
      end
    end
  end

  assign conflict = |(req & ~gnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_valid  <= '0;
      lane_bank_q <= '0;
    end else begin
      lane_valid  <= gnt;
      lane_bank_q <= req_bank;
    end
  end

  always_comb begin
    for (int l = 0; l < P_N; l++) lane_data[l] = fb_rd_data[lane_bank_q[l]];
  end

  // Each bank is granted to at most one lane per cycle.
  for (genvar b = 0; b < NB; b++) begin : g_chk
    logic [P_N-1:0] hits;
    always_comb begin
      for (int l = 0; l < P_N; l++) hits[l] = gnt[l] && (int'(req_bank[l]) == b);
    end
    a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hits));
  end

endmodule
