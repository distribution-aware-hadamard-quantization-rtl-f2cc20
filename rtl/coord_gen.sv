// coord_gen: the coordinate generator. It walks a run of pixels of an
// IMG_W x IMG_H image in raster order and presents, for the current pixel,
// the signed ABITS-bit (x, y) coordinate that the input layer consumes and
// the pixel's raster index (used as the Result RAM address).
//
// Coordinates sample [-1, 1) on a centred uniform grid:
//   coord = floor((2*c + 1) * 2^(ABITS-1) / SIZE) - 2^(ABITS-1),
// i.e. c - 128 for a 256-pixel axis. The scaling is this design's choice; the
// paper only names the block.
//
// Interface: `start` loads first_pix/num_pix (num_pix >= 1); outputs are valid
// while `active` is high; `step` (while active) advances to the next pixel or,
// on the last one, clears `active`. Outputs are combinational from registered
// counters, so a step takes effect the next cycle.
module coord_gen #(
  parameter int unsigned IMG_W = 256,
  parameter int unsigned IMG_H = 256,
  parameter int unsigned ABITS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [31:0]             first_pix,
  input  logic [31:0]             num_pix,
  input  logic                    step,
  output logic                    active,
  output logic signed [ABITS-1:0] coord_x,
  output logic signed [ABITS-1:0] coord_y,
  output logic [31:0]             pix_idx,
  output logic                    last
);
  localparam int unsigned CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned RW = (IMG_H > 1) ? $clog2(IMG_H) : 1;
  localparam int HALF = 2 ** (ABITS - 1);

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic [31:0]   remaining;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col <= '0; row <= '0; pix_idx <= '0; remaining <= '0; active <= 1'b0;
    end else if (start) begin
      col       <= CW'(first_pix % IMG_W);
      row       <= RW'((first_pix / IMG_W) % IMG_H);
      pix_idx   <= first_pix;
      remaining <= num_pix;
      active    <= (num_pix != 0);
    end else if (step && active) begin
      remaining <= remaining - 32'd1;
      pix_idx   <= pix_idx + 32'd1;
      if (remaining == 32'd1) active <= 1'b0;
      if (32'(col) == IMG_W - 1) begin
        col <= '0;
        row <= (32'(row) == IMG_H - 1) ? '0 : row + RW'(1);
      end else begin
        col <= col + CW'(1);
      end
    end
  end

  assign last = (remaining == 32'd1);

  always_comb begin
    coord_x = ABITS'(((2 * int'(col) + 1) * HALF) / int'(IMG_W) - HALF);
    coord_y = ABITS'(((2 * int'(row) + 1) * HALF) / int'(IMG_H) - HALF);
  end
endmodule
