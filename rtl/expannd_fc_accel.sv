// expannd_fc_accel -- fully-connected layer accelerator with PoFx-based MACs.
//
// Computes y = ReLU(W x + b) for an OUT_DIM x IN_DIM weight matrix W, a bias
// vector b and a stream of input vectors x, in the weight-stationary style:
// weights and biases are moved in once and reused for every input vector.
// Weights travel as normalized posits, Posit(N-1, ES), which need one bit less
// than the N-bit posit they come from; arithmetic is plain fixed point.
//
// Structure: fc_ctrl sequences everything; weight_mem keeps the weights, one
// slot per MAC lane in every word; act_buf keeps the current input vector;
// LANES pofx_mac units each compute one neuron's dot product, one input per
// clock, and pass the 3M-bit sum through ReLU; an output register file
// collects the M-bit results, which leave on the output stream. The bias is
// handled as one more row of the weight matrix multiplied by an activation of
// exactly 1.0.
//
// STORE selects where PoFx conversion happens:
//   STORE_POSIT (default) weights stay Posit(N-1,ES) in weight_mem and every
//               MAC converts them at run time ("Move & Store");
//   STORE_FXP   one PoFx on the load path converts each weight as it arrives
//               and weight_mem keeps M-bit FxP words ("Move").
//
// Interfaces are AXI-Stream style (tvalid/tready/tdata/tlast), tdata padded to
// whole bytes (the padding bits above the posit in s_w_tdata are not read,
// which lint reports as unused bits):
//   s_w_*  weights: OUT_DIM*(IN_DIM+USE_BIAS) beats, neuron-major, each
//          neuron's IN_DIM weights then its bias, low N-1 bits of tdata used;
//   s_a_*  input activations: IN_DIM beats, signed FxP(M) with ACT_FRAC
//          fraction bits;
//   m_a_*  output activations: OUT_DIM beats, same format, tlast on the last.
// Status: weights_loaded_o, busy_o, and sticky flags for a PoFx underflow
// (a weight below 2^-(M-1) flushed to zero), a clipped ReLU output, and a
// misplaced tlast. Synchronous active-high reset.
//
// Latency of one input vector, with a source and sink that never stall:
// IN_DIM clocks to take the vector, GROUPS*(ROWS+2) clocks of compute
// (GROUPS = ceil(OUT_DIM/LANES), ROWS = IN_DIM+USE_BIAS), then OUT_DIM output
// beats; with the defaults 64 + 67 + 10 clocks. Lane count, bias handling, the
// schedule, the activation format and the stream framing are this design's
// choices; the converter, the MAC structure, the 64 x 10 layer, ReLU and the
// two storage modes follow the source.
module expannd_fc_accel
  import expannd_pkg::*;
#(
  parameter int unsigned N        = POSIT_N,
  parameter int unsigned ES       = POSIT_ES,
  parameter int unsigned M        = FXP_M,
  parameter int unsigned A_FRAC   = ACT_FRAC,
  parameter int unsigned NIN      = IN_DIM,
  parameter int unsigned NOUT     = OUT_DIM,
  parameter int unsigned LANES    = OUT_DIM,
  parameter bit          USE_BIAS = 1'b1,
  parameter store_mode_e STORE    = STORE_POSIT,
  // derived
  parameter int unsigned WDATA_W  = 8 * ((N - 1 + 7) / 8),
  parameter int unsigned ADATA_W  = 8 * ((M + 7) / 8)
) (
  input  logic               clk,
  input  logic               rst,
  // weight stream in
  input  logic [WDATA_W-1:0] s_w_tdata,
  input  logic               s_w_tvalid,
  input  logic               s_w_tlast,
  output logic               s_w_tready,
  // input activation stream in
  input  logic [ADATA_W-1:0] s_a_tdata,
  input  logic               s_a_tvalid,
  input  logic               s_a_tlast,
  output logic               s_a_tready,
  // output activation stream out
  output logic [ADATA_W-1:0] m_a_tdata,
  output logic               m_a_tvalid,
  output logic               m_a_tlast,
  input  logic               m_a_tready,
  // status
  output logic               weights_loaded_o,
  output logic               busy_o,
  output logic               pofx_of_seen_o,
  output logic               relu_sat_seen_o,
  output logic               protocol_err_o
);
  localparam int unsigned ROWS   = NIN + (USE_BIAS ? 1 : 0);
  localparam int unsigned GROUPS = (NOUT + LANES - 1) / LANES;
  localparam int unsigned DEPTH  = GROUPS * ROWS;
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned IAW    = (NIN > 1) ? $clog2(NIN) : 1;
  localparam int unsigned OW     = (NOUT > 1) ? $clog2(NOUT) : 1;
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam bit          CONVERT_IN_MAC = (STORE == STORE_POSIT);
  localparam int unsigned WW     = CONVERT_IN_MAC ? N - 1 : M;
  localparam logic signed [M-1:0] ONE = M'(1 << A_FRAC);

  // controller wires
  logic           wm_we, ab_we, rd_en, mac_en, mac_clr, bias_sel, cap;
  logic [AW-1:0]  wm_waddr, wm_raddr;
  logic [LW-1:0]  wm_wlane;
  logic [IAW-1:0] ab_waddr, ab_raddr;
  logic [GW-1:0]  cap_group;
  logic [OW-1:0]  o_idx;

  fc_ctrl #(
    .IN_DIM(NIN), .OUT_DIM(NOUT), .LANES(LANES), .USE_BIAS(USE_BIAS)
  ) u_ctrl (
    .clk, .rst,
    .w_valid_i(s_w_tvalid), .w_last_i(s_w_tlast), .w_ready_o(s_w_tready),
    .wm_we_o(wm_we), .wm_waddr_o(wm_waddr), .wm_wlane_o(wm_wlane),
    .a_valid_i(s_a_tvalid), .a_last_i(s_a_tlast), .a_ready_o(s_a_tready),
    .ab_we_o(ab_we), .ab_waddr_o(ab_waddr),
    .rd_en_o(rd_en), .wm_raddr_o(wm_raddr), .ab_raddr_o(ab_raddr),
    .mac_en_o(mac_en), .mac_clr_o(mac_clr), .bias_sel_o(bias_sel),
    .cap_o(cap), .cap_group_o(cap_group),
    .o_valid_o(m_a_tvalid), .o_last_o(m_a_tlast), .o_ready_i(m_a_tready),
    .o_idx_o(o_idx),
    .weights_loaded_o, .busy_o, .protocol_err_o
  );

  // weight load path: posit as is, or converted once by a PoFx
  logic [WW-1:0] wm_wdata;
  logic          load_of;
  if (CONVERT_IN_MAC) begin : g_store_posit
    assign wm_wdata = s_w_tdata[N-2:0];
    assign load_of  = 1'b0;
  end else begin : g_store_fxp
    logic signed [M-1:0] w_conv;
    logic                load_neg_one_unused;
    pofx #(.N(N), .ES(ES), .M(M)) u_load_pofx (
      .posit_i(s_w_tdata[N-2:0]), .fxp_o(w_conv), .of_o(load_of),
      .neg_one_o(load_neg_one_unused));
    assign wm_wdata = w_conv;
  end

  logic [LANES-1:0][WW-1:0] wm_rdata;
  weight_mem #(.WW(WW), .LANES(LANES), .DEPTH(DEPTH)) u_wmem (
    .clk, .we(wm_we), .waddr(wm_waddr), .wlane(wm_wlane), .wdata(wm_wdata),
    .re(rd_en), .raddr(wm_raddr), .rdata(wm_rdata));

  logic [M-1:0] ab_rdata;
  act_buf #(.W(M), .DEPTH(NIN)) u_abuf (
    .clk, .we(ab_we), .waddr(ab_waddr), .wdata(s_a_tdata[M-1:0]),
    .re(rd_en), .raddr(ab_raddr), .rdata(ab_rdata));

  // the bias row is multiplied by 1.0
  logic signed [M-1:0] mac_act;
  assign mac_act = bias_sel ? ONE : $signed(ab_rdata);

  logic signed [M-1:0] lane_act [LANES];
  logic [LANES-1:0]    lane_sat, lane_of;

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    logic signed [3*M-1:0] acc_unused;
    pofx_mac #(.N(N), .ES(ES), .M(M), .CONVERT(CONVERT_IN_MAC), .WW(WW)) u_mac (
      .clk, .rst, .clr(mac_clr), .en(mac_en), .w_i(wm_rdata[l]), .act_i(mac_act),
      .acc_o(acc_unused), .act_o(lane_act[l]), .sat_o(lane_sat[l]), .of_o(lane_of[l]));
  end

  // output activation register file
  logic [M-1:0] out_q [NOUT];
  always_ff @(posedge clk) begin
    if (cap) begin
      for (int l = 0; l < int'(LANES); l++) begin
        if (int'(cap_group) * int'(LANES) + l < int'(NOUT))
          out_q[int'(cap_group) * int'(LANES) + l] <= lane_act[l];
      end
    end
  end
  assign m_a_tdata = ADATA_W'($signed(out_q[o_idx]));

  // sticky event flags
  always_ff @(posedge clk) begin
    if (rst) begin
      pofx_of_seen_o  <= 1'b0;
      relu_sat_seen_o <= 1'b0;
    end else begin
      if ((mac_en && (|lane_of)) || (wm_we && load_of)) pofx_of_seen_o <= 1'b1;
      if (cap && (|lane_sat)) relu_sat_seen_o <= 1'b1;
    end
  end

  // stream rules: a beat offered is held until taken
  a_m_hold: assert property (@(posedge clk) disable iff (rst)
    (m_a_tvalid && !m_a_tready) |=> (m_a_tvalid && $stable(m_a_tdata) && $stable(m_a_tlast)));

endmodule
