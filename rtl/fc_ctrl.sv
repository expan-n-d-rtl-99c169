// fc_ctrl -- sequencer of the fully-connected layer accelerator.
//
// The accelerator is weight-stationary: the weights (and biases) of the layer
// are streamed in once, then any number of input activation vectors follow,
// each answered by a vector of output activations. This controller runs that
// schedule:
//
//   IDLE     waits; a weight beat has priority over an activation beat, and
//            activations are accepted only once a full weight set is loaded.
//   LOAD_W   accepts OUT_DIM * ROWS weight beats, neuron after neuron, each
//            neuron's IN_DIM weights followed by its bias (ROWS = IN_DIM +
//            USE_BIAS), and writes each to (group*ROWS + row, lane).
//   LOAD_A   accepts IN_DIM activation beats into the activation buffer.
//   COMPUTE  for each group of LANES neurons, reads one weight word and one
//            activation per clock for ROWS clocks. The memories answer a clock
//            later, so mac_en/mac_clr/bias_sel are issued one clock after the
//            address; mac_clr marks the first product of a dot product.
//   FLUSH    lets the last product enter the accumulators.
//   CAPTURE  the accumulators now hold complete sums: cap_o stores the ReLU
//            outputs of this group; then the next group, or DRAIN.
//   DRAIN    sends the OUT_DIM output activations, tlast on the last one.
//
// Timing: LOAD_A takes IN_DIM clocks at full input rate, each group ROWS + 2
// clocks, DRAIN OUT_DIM clocks when the sink never stalls; output back-pressure
// (o_ready_i low) simply holds DRAIN. A tlast that is missing or misplaced on
// either input stream sets the sticky protocol_err_o; the beat counts, not
// tlast, define the frame. The whole schedule is this design's own; the source
// only fixes the weight-stationary order and the streaming interfaces.
module fc_ctrl #(
  parameter int unsigned IN_DIM   = expannd_pkg::IN_DIM,
  parameter int unsigned OUT_DIM  = expannd_pkg::OUT_DIM,
  parameter int unsigned LANES    = expannd_pkg::OUT_DIM,
  parameter bit          USE_BIAS = 1'b1,
  // derived
  parameter int unsigned ROWS   = IN_DIM + (USE_BIAS ? 1 : 0),
  parameter int unsigned GROUPS = (OUT_DIM + LANES - 1) / LANES,
  parameter int unsigned DEPTH  = GROUPS * ROWS,
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int unsigned IAW    = (IN_DIM > 1) ? $clog2(IN_DIM) : 1,
  parameter int unsigned OW     = (OUT_DIM > 1) ? $clog2(OUT_DIM) : 1,
  parameter int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic           clk,
  input  logic           rst,
  // weight stream
  input  logic           w_valid_i,
  input  logic           w_last_i,
  output logic           w_ready_o,
  output logic           wm_we_o,
  output logic [AW-1:0]  wm_waddr_o,
  output logic [LW-1:0]  wm_wlane_o,
  // activation stream
  input  logic           a_valid_i,
  input  logic           a_last_i,
  output logic           a_ready_o,
  output logic           ab_we_o,
  output logic [IAW-1:0] ab_waddr_o,
  // memory reads and MAC control
  output logic           rd_en_o,
  output logic [AW-1:0]  wm_raddr_o,
  output logic [IAW-1:0] ab_raddr_o,
  output logic           mac_en_o,
  output logic           mac_clr_o,
  output logic           bias_sel_o,
  // output capture and stream
  output logic           cap_o,
  output logic [GW-1:0]  cap_group_o,
  output logic           o_valid_o,
  output logic           o_last_o,
  input  logic           o_ready_i,
  output logic [OW-1:0]  o_idx_o,
  // status
  output logic           weights_loaded_o,
  output logic           busy_o,
  output logic           protocol_err_o
);
  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_W, S_LOAD_A, S_COMPUTE, S_FLUSH, S_CAPTURE, S_DRAIN
  } state_e;

  state_e state;
  logic [AW-1:0]  row;      // row within the group (0 .. ROWS-1)
  logic [AW-1:0]  gbase;    // group * ROWS
  logic [GW-1:0]  group;
  logic [LW-1:0]  lane;
  logic [OW-1:0]  neuron;
  logic [IAW-1:0] aidx;
  logic [OW-1:0]  oidx;
  logic           v1, first1, bias1;

  localparam logic [AW-1:0] LAST_ROW = AW'(ROWS - 1);

  wire w_fire = (state == S_LOAD_W) && w_valid_i;
  wire a_fire = (state == S_LOAD_A) && a_valid_i;
  wire o_fire = (state == S_DRAIN) && o_ready_i;
  wire w_end  = (row == LAST_ROW) && (neuron == OW'(OUT_DIM - 1));
  wire a_end  = (aidx == IAW'(IN_DIM - 1));

  assign w_ready_o   = (state == S_LOAD_W);
  assign wm_we_o     = w_fire;
  assign wm_waddr_o  = gbase + row;
  assign wm_wlane_o  = lane;
  assign a_ready_o   = (state == S_LOAD_A);
  assign ab_we_o     = a_fire;
  assign ab_waddr_o  = aidx;
  assign rd_en_o     = (state == S_COMPUTE);
  assign wm_raddr_o  = gbase + row;
  assign ab_raddr_o  = IAW'(row);
  assign mac_en_o    = v1;
  assign mac_clr_o   = v1 & first1;
  assign bias_sel_o  = bias1;
  assign cap_o       = (state == S_CAPTURE);
  assign cap_group_o = group;
  assign o_valid_o   = (state == S_DRAIN);
  assign o_last_o    = (state == S_DRAIN) && (oidx == OW'(OUT_DIM - 1));
  assign o_idx_o     = oidx;
  assign busy_o      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state            <= S_IDLE;
      row              <= '0;
      gbase            <= '0;
      group            <= '0;
      lane             <= '0;
      neuron           <= '0;
      aidx             <= '0;
      oidx             <= '0;
      v1               <= 1'b0;
      first1           <= 1'b0;
      bias1            <= 1'b0;
      weights_loaded_o <= 1'b0;
      protocol_err_o   <= 1'b0;
    end else begin
      // read pipeline: control travels with the data one clock behind
      v1     <= (state == S_COMPUTE);
      first1 <= (state == S_COMPUTE) && (row == '0);
      bias1  <= (state == S_COMPUTE) && USE_BIAS && (row == LAST_ROW);

      unique case (state)
        S_IDLE: begin
          row    <= '0;
          gbase  <= '0;
          group  <= '0;
          lane   <= '0;
          neuron <= '0;
          aidx   <= '0;
          oidx   <= '0;
          if (w_valid_i) begin
            state            <= S_LOAD_W;
            weights_loaded_o <= 1'b0;
          end else if (a_valid_i && weights_loaded_o) begin
            state <= S_LOAD_A;
          end
        end

        S_LOAD_W: if (w_fire) begin
          if (w_last_i != w_end) protocol_err_o <= 1'b1;
          if (row == LAST_ROW) begin
            row    <= '0;
            neuron <= neuron + 1'b1;
            if (lane == LW'(LANES - 1)) begin
              lane  <= '0;
              group <= group + 1'b1;
              gbase <= gbase + AW'(ROWS);
            end else begin
              lane <= lane + 1'b1;
            end
            if (w_end) begin
              state            <= S_IDLE;
              weights_loaded_o <= 1'b1;
            end
          end else begin
            row <= row + 1'b1;
          end
        end

        S_LOAD_A: if (a_fire) begin
          if (a_last_i != a_end) protocol_err_o <= 1'b1;
          aidx <= aidx + 1'b1;
          if (a_end) begin
            state <= S_COMPUTE;
            row   <= '0;
            gbase <= '0;
            group <= '0;
          end
        end

        S_COMPUTE: begin
          if (row == LAST_ROW) state <= S_FLUSH;
          else                 row   <= row + 1'b1;
        end

        S_FLUSH: state <= S_CAPTURE;

        S_CAPTURE: begin
          row <= '0;
          if (group == GW'(GROUPS - 1)) begin
            state <= S_DRAIN;
            oidx  <= '0;
          end else begin
            group <= group + 1'b1;
            gbase <= gbase + AW'(ROWS);
            state <= S_COMPUTE;
          end
        end

        S_DRAIN: if (o_fire) begin
          oidx <= oidx + 1'b1;
          if (o_last_o) state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The output stream must hold its beat until it is taken.
  property p_o_hold;
    @(posedge clk) disable iff (rst) (o_valid_o && !o_ready_i) |=> (o_valid_o && $stable(o_idx_o));
  endproperty
  a_o_hold: assert property (p_o_hold);

endmodule
