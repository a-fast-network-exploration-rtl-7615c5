// out_writeback: moves the P results of a PE-array pass into the output memory.
//
// When the PE array presents results (res_valid), the P values of q bits are captured in a
// shadow register together with the output pixel and tile they belong to. The register is then
// written out as P/M words of M lanes, one word per cycle, at address
// out_pix*out_cg + tile*(P/M) + j. Words past the layer's out_cg are skipped (a partly used last
// tile) and lanes of channels at or past out_c are written as zero, so the stored map never
// holds values of unused PEs. `remaining` tells the controller how many words are still to go;
// the controller only lets a new result arrive when the register is free again. The PE array
// in the block diagram writes "n x N" bits into an output memory whose width the text gives as
// M*q; this serialiser, which reconciles the two, is this design's choice.
//
// Timing: results captured at the end of the res_valid cycle; the first word is written in the
// next cycle, the last P/M cycles after the capture. A new capture may coincide with the
// cycle of the last word.
module out_writeback
  import kws_pkg::*;
#(
  parameter int Q = 4,
  parameter int M = 8,
  parameter int P = 72
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 res_valid,
  input  logic [P-1:0][Q-1:0]  res,
  input  logic [ADDR_W-1:0]    out_pix,
  input  logic [TILE_W-1:0]    tile,
  output logic                 wr_en,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [M*Q-1:0]       wr_data,
  output logic [DIM_W-1:0]     remaining
);

  localparam int WORDS = P / M;
  localparam int JW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic                active;
  logic [JW-1:0]       j;
  logic [P-1:0][Q-1:0] shadow;
  logic [ADDR_W-1:0]   pix_q;
  logic [TILE_W-1:0]   tile_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      j      <= '0;
      shadow <= '0;
      pix_q  <= '0;
      tile_q <= '0;
    end else begin
      if (active) begin
        if (j == JW'(WORDS - 1)) active <= 1'b0;
        j <= j + 1'b1;
      end
      if (res_valid) begin
        active <= 1'b1;
        j      <= '0;
        shadow <= res;
        pix_q  <= out_pix;
        tile_q <= tile;
      end
    end
  end

  logic [ADDR_W-1:0] word_idx;   // channel word within the output pixel
  always_comb begin
    word_idx = ADDR_W'(tile_q) * ADDR_W'(WORDS) + ADDR_W'(j);
    wr_en    = active && (word_idx < ADDR_W'(cfg.out_cg));
    wr_addr  = ADDR_W'(pix_q) * ADDR_W'(cfg.out_cg) + word_idx;
    for (int l = 0; l < M; l++) begin
      if (word_idx * ADDR_W'(M) + ADDR_W'(l) < ADDR_W'(cfg.out_c))
        wr_data[l*Q +: Q] = shadow[int'(j) * M + l];
      else
        wr_data[l*Q +: Q] = '0;
    end
    remaining = active ? DIM_W'(WORDS) - DIM_W'(j) : '0;
  end

  // A new result must not arrive while more than the current word is left to write.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> (remaining <= 1))
    else $error("out_writeback: result arrived while %0d words were still pending", remaining);

endmodule
