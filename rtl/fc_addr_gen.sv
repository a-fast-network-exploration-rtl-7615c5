// fc_addr_gen: fully connected address generator.
//
// A fully connected layer runs on the same PE pipeline as a convolution: each PE computes one
// output neuron as a dot product over the whole input feature map. The generator walks the
// output-neuron tiles and, inside each, every input word k = 0 .. k_words-1 in storage order
// (pixel by pixel, M channels per word), so the flattening order of the input is the memory
// order. Feature-map address k; weight address w_base + tile*k_words + k; first/last mark the
// single "output pixel" 0 of each tile. The generator is named in the block diagram; the walk
// is this design's choice.
//
// Interface and timing as conv_addr_gen: `start` loads, `issue` is valid while busy and moves
// on when `adv` is high, `done` pulses after the last issue was accepted.
module fc_addr_gen
  import kws_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       adv,
  input  layer_cfg_t cfg,
  output issue_t     issue,
  output logic       busy,
  output logic       done
);

  logic [DIM_W-1:0] tile, k;
  logic last_k, last_tile;
  assign last_k    = (k == cfg.k_words - 1'b1);
  assign last_tile = (tile == cfg.tiles - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      tile <= '0;
      k    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        tile <= '0;
        k    <= '0;
      end else if (busy && adv) begin
        if (!last_k) k <= k + 1'b1;
        else begin
          k <= '0;
          if (!last_tile) tile <= tile + 1'b1;
          else begin
            tile <= '0;
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    issue          = '0;
    issue.valid    = busy;
    issue.pad_zero = 1'b0;
    issue.fm_addr  = ADDR_W'(k);
    issue.w_addr   = cfg.w_base + ADDR_W'(tile) * ADDR_W'(cfg.k_words) + ADDR_W'(k);
    issue.first    = (k == '0);
    issue.last     = last_k;
    issue.out_pix  = '0;
    issue.tile     = TILE_W'(tile);
  end

endmodule
