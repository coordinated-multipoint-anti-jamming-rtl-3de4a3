// layer_ctrl: sequencer of one network inference (the "algorithm pipeline
// control" of the programmable-logic side).
//
// After start it walks the three layers in order. For each layer it issues,
// one per cycle and without bubbles, the beats of every output neuron:
// BEATS_l = ceil(width of the layer input / CPB) beats per neuron, neurons
// 0..OUT_l-1. Each issued beat names the weight row (a running counter, since
// weight_mem stores rows in issue order), the input row of the feature buffer
// (beat index), the bias (layer, neuron) and the activation: CReLU for layers
// 1 and 2, Sum+Abs for layer 3. A dense layer needs all outputs of the
// previous one, so after the last beat of a layer the controller waits for
// the core to return that layer's last result before it issues the next
// layer (layer barrier). The paper names this control block and describes
// parallel lanes and pipelining; the beat order, the barrier and the counters
// are this design's choices.
// Timing: with core latency LAT and one cycle of memory read latency, layer l
// takes BEATS_l*OUT_l + LAT + 1 cycles, so one inference takes
//     sum_l (BEATS_l*OUT_l) + 3*(LAT+1)  = 578 cycles at the default sizes.
// busy is high for exactly that many cycles; done pulses for one cycle at the
// end and cycles holds the count of the last run. start is ignored while busy.
module layer_ctrl
  import cvnn_pkg::*;
#(
  parameter int unsigned CPB   = CPB_DEF,
  parameter int unsigned N_IN  = N_IN_DEF,
  parameter int unsigned H1    = H1_DEF,
  parameter int unsigned H2    = H2_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned ROW_W = 10,
  parameter int unsigned NRN_W = 6,
  parameter int unsigned BT_W  = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             res_valid,     // core result strobe
  output logic             busy,
  output logic             done,
  output logic [31:0]      cycles,
  // issue port (one beat per cycle when issue_valid)
  output logic             issue_valid,
  output logic             issue_first,
  output logic             issue_last,
  output logic [1:0]       issue_layer,
  output logic [NRN_W-1:0] issue_neuron,
  output logic [BT_W-1:0]  issue_beat,
  output logic [ROW_W-1:0] issue_row,
  output act_mode_e        issue_mode
);
  localparam int unsigned B0 = ceil_div(N_IN, CPB);
  localparam int unsigned B1 = ceil_div(H1, CPB);
  localparam int unsigned B2 = ceil_div(H2, CPB);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e state;

  logic [1:0]       layer;
  logic [NRN_W-1:0] neuron;
  logic [BT_W-1:0]  beat;
  logic [ROW_W-1:0] row;
  logic [NRN_W:0]   res_cnt;
  logic [31:0]      cnt;

  logic [BT_W-1:0]  beats_l;   // beats per neuron of the current layer
  logic [NRN_W:0]   outs_l;    // neurons of the current layer

  always_comb begin
    unique case (layer)
      2'd0:    begin beats_l = BT_W'(B0); outs_l = (NRN_W+1)'(H1); end
      2'd1:    begin beats_l = BT_W'(B1); outs_l = (NRN_W+1)'(H2); end
      default: begin beats_l = BT_W'(B2); outs_l = (NRN_W+1)'(T);  end
    endcase
  end

  wire last_beat   = (beat == beats_l - BT_W'(1));
  wire last_neuron = ({1'b0, neuron} == outs_l - (NRN_W+1)'(1));
  wire layer_done  = res_valid && (res_cnt == outs_l - (NRN_W+1)'(1));

  assign busy         = (state != S_IDLE);
  assign issue_valid  = (state == S_ISSUE);
  assign issue_first  = (beat == '0);
  assign issue_last   = last_beat;
  assign issue_layer  = layer;
  assign issue_neuron = neuron;
  assign issue_beat   = beat;
  assign issue_row    = row;
  assign issue_mode   = (layer == 2'd2) ? ACT_SUMABS : ACT_CRELU;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      layer   <= '0;
      neuron  <= '0;
      beat    <= '0;
      row     <= '0;
      res_cnt <= '0;
      cnt     <= '0;
      cycles  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) cnt <= cnt + 32'd1;
      if (res_valid) res_cnt <= res_cnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state   <= S_ISSUE;
            layer   <= '0;
            neuron  <= '0;
            beat    <= '0;
            row     <= '0;
            res_cnt <= '0;
            cnt     <= '0;
          end
        end
        S_ISSUE: begin
          row <= row + 1'b1;
          if (last_beat) begin
            beat <= '0;
            if (last_neuron) begin
              neuron <= '0;
              state  <= S_WAIT;
            end else begin
              neuron <= neuron + 1'b1;
            end
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_WAIT: begin
          if (layer_done) begin
            res_cnt <= '0;
            if (layer == 2'd2) begin
              state  <= S_IDLE;
              done   <= 1'b1;
              cycles <= cnt + 32'd1;
            end else begin
              layer <= layer + 2'd1;
              state <= S_ISSUE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A result may only arrive for a layer that has been issued.
  a_res_when_busy: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> busy);
endmodule
