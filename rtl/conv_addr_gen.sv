// conv_addr_gen: convolution address generator.
//
// For a 3x3, stride-1 convolution layer it walks, outermost first: output-channel tile,
// output row oy, output column ox, kernel row ky, kernel column kx, input-channel word cg.
// Each step is one issue_t: the feature-map word at input pixel (oy+ky-pad, ox+kx-pad), word cg
// (flagged pad_zero when that pixel lies in the zero padding), the weight word
// w_base + tile*k_words + (3*ky+kx)*in_cg + cg for all banks, and first/last marks of the
// output pixel, whose index and tile travel along for the write-back. The block diagram names
// the generator; the loop order, with all kernel taps of one pixel back to back so that each PE
// finishes one output value at a time, is this design's choice.
//
// Interface: `start` (one cycle, with `cfg` stable during the whole layer) loads the counters;
// `issue` is then valid every cycle, and moves on in each cycle that `adv` is high. `done`
// pulses in the cycle after the last issue was accepted.
module conv_addr_gen
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

  logic [DIM_W-1:0] tile, oy, ox, cg;
  logic [1:0]       ky, kx;

  logic last_cg, last_tap, last_ox, last_oy, last_tile;
  assign last_cg   = (cg == cfg.in_cg - 1'b1);
  assign last_tap  = (ky == 2'd2) && (kx == 2'd2) && last_cg;
  assign last_ox   = (ox == cfg.out_w - 1'b1);
  assign last_oy   = (oy == cfg.out_h - 1'b1);
  assign last_tile = (tile == cfg.tiles - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      tile <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0; cg <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        tile <= '0; oy <= '0; ox <= '0; ky <= '0; kx <= '0; cg <= '0;
      end else if (busy && adv) begin
        if (!last_cg) cg <= cg + 1'b1;
        else begin
          cg <= '0;
          if (kx != 2'd2) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (ky != 2'd2) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (!last_ox) ox <= ox + 1'b1;
              else begin
                ox <= '0;
                if (!last_oy) oy <= oy + 1'b1;
                else begin
                  oy <= '0;
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
        end
      end
    end
  end

  // input pixel of this tap, in signed arithmetic so that the padding shows as -1 or in_h/in_w
  logic signed [DIM_W+1:0] iy, ix;
  logic                    in_pad;
  always_comb begin
    iy     = signed'({2'b00, oy}) + signed'({{DIM_W{1'b0}}, ky}) - signed'((DIM_W+2)'(cfg.pad));
    ix     = signed'({2'b00, ox}) + signed'({{DIM_W{1'b0}}, kx}) - signed'((DIM_W+2)'(cfg.pad));
    in_pad = (iy < 0) || (ix < 0) || (iy >= signed'({2'b00, cfg.in_h})) ||
             (ix >= signed'({2'b00, cfg.in_w}));

    issue          = '0;
    issue.valid    = busy;
    issue.pad_zero = in_pad;
    issue.fm_addr  = in_pad ? '0
                   : ADDR_W'((ADDR_W'(iy) * ADDR_W'(cfg.in_w) + ADDR_W'(ix)) * ADDR_W'(cfg.in_cg)
                             + ADDR_W'(cg));
    issue.w_addr   = cfg.w_base + ADDR_W'(tile) * ADDR_W'(cfg.k_words)
                   + (ADDR_W'(ky) * 3 + ADDR_W'(kx)) * ADDR_W'(cfg.in_cg) + ADDR_W'(cg);
    issue.first    = (ky == 2'd0) && (kx == 2'd0) && (cg == '0);
    issue.last     = last_tap;
    issue.out_pix  = ADDR_W'(oy) * ADDR_W'(cfg.out_w) + ADDR_W'(ox);
    issue.tile     = TILE_W'(tile);
  end

endmodule
