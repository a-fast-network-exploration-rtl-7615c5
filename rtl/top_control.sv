// top_control: the top control logic of the accelerator, a layer sequencer.
//
// It steps through the eight layers of the network table NET (kws_pkg::build_net). For each
// layer it selects the engine (convolution address generator, fully connected address generator
// or max-pooling block), sets the select of the two address multiplexers S1 and S2 (1 for the
// convolution generator, 0 for the fully connected one, as printed on the block diagram),
// pulses the engine's start, and waits until the engine is idle and the PE pipeline and the
// write-back have drained. Then it swaps the roles of the two activation memories (the output
// of this layer becomes the feature map of the next) and moves to the next layer. After the last
// layer it pulses `done`; `result_bank` names the memory that holds the network's output.
//
// It also throttles the PE pipeline: the last word of an output pixel is held back (adv low, a
// stall) while an earlier result is still in flight or the write-back still has more than
// PIPE_LAT+1 words to write, so that each result finds the write-back register free when it
// arrives PIPE_LAT cycles later. The sequencing follows the block diagram's description
// ("regulates the state machine and pipelines the order of execution"); the states, the bank
// swap and the stall rule are this design's choices.
//
// Counters: cycle_count counts the cycles from start to done, stall_count the stalled cycles.
module top_control
  import kws_pkg::*;
#(
  parameter net_cfg_t NET = build_net(4, 72, 8, 44, 13, 288, 144, 144, 288, 30)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  // engine status
  input  logic              conv_busy,
  input  logic              fc_busy,
  input  logic              pool_busy,
  input  logic              pipe_busy,      // PE pipeline or write-back still working
  input  logic              issue_valid,
  input  logic              issue_last,
  input  logic              inflight_last,  // a pixel's last word is in the PE pipeline
  input  logic [DIM_W-1:0]  wb_remaining,
  // layer control
  output layer_cfg_t        cfg,
  output logic              sel_conv,       // S1 and S2 select: 1 conv generator, 0 fc
  output logic              conv_start,
  output logic              fc_start,
  output logic              pool_start,
  output logic              pool_active,    // the max-pooling block owns the memories
  output logic              src_bank,       // activation memory read as the feature map
  output logic              adv,            // the selected generator may move on
  output logic              stall,
  // status
  output logic              busy,
  output logic              done,
  output logic              result_bank,
  output logic [31:0]       cycle_count,
  output logic [31:0]       stall_count
);

  typedef enum logic [1:0] {S_IDLE, S_LAYER_START, S_RUN, S_LAYER_END} state_e;
  state_e state;
  logic [$clog2(NUM_LAYERS)-1:0] layer;

  assign cfg         = NET[layer];
  assign sel_conv    = (cfg.kind == L_CONV);
  assign pool_active = (cfg.kind == L_POOL);
  assign busy        = (state != S_IDLE);

  logic engine_busy;
  assign engine_busy = conv_busy || fc_busy || pool_busy;

  assign stall = (state == S_RUN) && issue_valid && issue_last &&
                 (inflight_last || (wb_remaining > DIM_W'(PIPE_LAT + 1)));
  assign adv   = !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer       <= '0;
      src_bank    <= 1'b0;
      result_bank <= 1'b0;
      conv_start  <= 1'b0;
      fc_start    <= 1'b0;
      pool_start  <= 1'b0;
      done        <= 1'b0;
      cycle_count <= '0;
      stall_count <= '0;
    end else begin
      conv_start <= 1'b0;
      fc_start   <= 1'b0;
      pool_start <= 1'b0;
      done       <= 1'b0;
      if (busy) cycle_count <= cycle_count + 1;
      if (stall) stall_count <= stall_count + 1;
      case (state)
        S_IDLE: if (start) begin
          state       <= S_LAYER_START;
          layer       <= '0;
          src_bank    <= 1'b0;
          cycle_count <= '0;
          stall_count <= '0;
        end
        S_LAYER_START: begin
          conv_start <= (cfg.kind == L_CONV);
          fc_start   <= (cfg.kind == L_FC);
          pool_start <= (cfg.kind == L_POOL);
          state      <= S_RUN;
        end
        S_RUN: if (!conv_start && !fc_start && !pool_start && !engine_busy && !pipe_busy)
          state <= S_LAYER_END;
        S_LAYER_END: begin
          src_bank <= !src_bank;
          if (int'(layer) == NUM_LAYERS - 1) begin
            state       <= S_IDLE;
            done        <= 1'b1;
            result_bank <= !src_bank;
          end else begin
            layer <= layer + 1'b1;
            state <= S_LAYER_START;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
