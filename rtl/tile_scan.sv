// tile_scan -- output pixel order of a layer pass.
//
// Visits the pixels of an h x w feature map in 8x8 spatial blocks (the
// paper tiles feature maps into 8x8 spatial blocks): blocks left to right,
// top to bottom, and inside a block row by row. Blocks at the right and bottom
// edge are cut to the map. 'clear' restarts at (0,0); 'adv' moves to the next
// pixel; 'is_last' is high while the current pixel is the final one.
module tile_scan
  import janeeye_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             adv,
  input  logic [DIM_W-1:0] h,
  input  logic [DIM_W-1:0] w,
  output logic [DIM_W-1:0] y,
  output logic [DIM_W-1:0] x,
  output logic             is_last
);

  logic [DIM_W-1:0] y0, x0;
  logic [2:0]       py, px;
  logic             row_end, blk_end, blkrow_end;

  assign y = y0 + DIM_W'(py);
  assign x = x0 + DIM_W'(px);
  assign row_end    = (px == 3'd7) || (x == w - 1'b1);
  assign blk_end    = row_end && ((py == 3'd7) || (y == h - 1'b1));
  assign blkrow_end = blk_end && ({1'b0, x0} + 9'd8 >= {1'b0, w});
  assign is_last    = blkrow_end && ({1'b0, y0} + 9'd8 >= {1'b0, h});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0 <= '0; x0 <= '0; py <= '0; px <= '0;
    end else if (clear) begin
      y0 <= '0; x0 <= '0; py <= '0; px <= '0;
    end else if (adv) begin
      if (!row_end) begin
        px <= px + 1'b1;
      end else begin
        px <= '0;
        if (!blk_end) begin
          py <= py + 1'b1;
        end else begin
          py <= '0;
          if (!blkrow_end) begin
            x0 <= x0 + DIM_W'(8);
          end else begin
            x0 <= '0;
            y0 <= is_last ? '0 : y0 + DIM_W'(8);
          end
        end
      end
    end
  end

endmodule
