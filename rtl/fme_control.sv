// fme_control -- control part: the interlaced processing schedule of a CTU.
//
// After start the controller walks the 256 8x8 blocks of a 128x128 CTU in Z
// (Morton) order. For each block it runs every CU shape that contains the
// block, in the order 8x8, 16x8, 8x16, 16x16, 32x16, 16x32, 32x32, 64x32,
// 32x64, 64x64, 128x64, 64x128, 128x128, eight rows per shape, so the 8x8
// blocks of different CUs are interleaved. In quadtree-only mode only the five
// square shapes are run. For the current slot it works out the CU origin, the
// accumulator set of the Sum unit and whether the block is the first or the
// last of its CU in Z order (only the last one produces an FMV).
//
// The schedule itself -- Z order, thirteen shapes per block in that order,
// eight cycles per shape, FMV only on the CU's last block, the five-shape
// quadtree mode -- follows the source design. The streaming handshake
// (in_valid/in_ready, the source being told the block, shape and row it must
// present) is this implementation's.
//
// Interface and timing:
//  * start (while idle) latches qt_only and begins a CTU; in_ready is high
//    until the last row of the CTU has been accepted, then done pulses.
//  * A row is accepted on a cycle with in_valid && in_ready (fire). cur_bx,
//    cur_by, cur_shape and cur_row say which row that must be.
//  * The CU's IMV is sampled on row 0 of every slot.
//  * calc pulses with the eighth row of a slot; slot_cur then describes it.
//    slot_last is loaded on that cycle and held for at least eight cycles,
//    for the stages that finish the slot later.
module fme_control
  import fme_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       qt_only,
  input  logic       in_valid,
  input  imv_t       imv_x,
  input  imv_t       imv_y,
  output logic       in_ready,
  output logic       fire,
  output blk_coord_t cur_bx,
  output blk_coord_t cur_by,
  output shape_t     cur_shape,
  output logic [2:0] cur_row,
  output logic       calc,
  output slot_t      slot_cur,
  output slot_t      slot_last,
  output logic       done,
  output logic       mode_qt     // quadtree-only mode of the running CTU
);

  logic     busy;
  blk_idx_t blk;
  shape_t   shape;
  logic [2:0] row;
  imv_t     imv_x_r, imv_y_r;

  assign in_ready  = busy;
  assign fire      = in_valid && busy;
  assign cur_bx    = morton_x(blk);
  assign cur_by    = morton_y(blk);
  assign cur_shape = shape;
  assign cur_row   = row;
  assign calc      = fire && (row == 3'd7);

  // Next shape in the running mode.
  function automatic shape_t next_shape(shape_t s, logic qt);
    return qt ? shape_t'(s + 4'd3) : shape_t'(s + 4'd1);
  endfunction

  logic last_shape;
  assign last_shape = (shape == shape_t'(NSHAPE - 1));

  // Slot description of the current position.
  always_comb begin
    logic [2:0] lw, lh;
    blk_coord_t wm, hm;
    lw = shape_lw(shape);
    lh = shape_lh(shape);
    wm = blk_coord_t'((5'd1 << lw) - 5'd1);
    hm = blk_coord_t'((5'd1 << lh) - 5'd1);
    slot_cur.bx       = cur_bx;
    slot_cur.by       = cur_by;
    slot_cur.cu.shape = shape;
    slot_cur.cu.cu_x  = cur_bx & ~wm;
    slot_cur.cu.cu_y  = cur_by & ~hm;
    slot_cur.cu.imv_x = (row == 3'd0) ? imv_x : imv_x_r;
    slot_cur.cu.imv_y = (row == 3'd0) ? imv_y : imv_y_r;
    slot_cur.first    = ((cur_bx & wm) == '0) && ((cur_by & hm) == '0);
    slot_cur.last     = ((cur_bx & wm) == wm) && ((cur_by & hm) == hm);
    slot_cur.acc_idx  = shape_acc_base(shape) +
                        (shape_is_tall(shape) ? 5'(cur_bx[lw[1:0]]) : 5'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      blk       <= '0;
      shape     <= '0;
      row       <= '0;
      done      <= 1'b0;
      mode_qt   <= 1'b0;
      imv_x_r   <= '0;
      imv_y_r   <= '0;
      slot_last <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          mode_qt <= qt_only;
          blk     <= '0;
          shape   <= '0;
          row     <= '0;
        end
      end else if (fire) begin
        if (row == 3'd0) begin
          imv_x_r <= imv_x;
          imv_y_r <= imv_y;
        end
        row <= row + 3'd1;
        if (row == 3'd7) begin
          slot_last <= slot_cur;
          if (last_shape) begin
            shape <= '0;
            blk   <= blk + 8'd1;
            if (blk == blk_idx_t'(NBLK - 1)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            shape <= next_shape(shape, mode_qt);
          end
        end
      end
    end
  end

  a_shape_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> shape < shape_t'(NSHAPE) && (!mode_qt || shape_is_square(shape)));

endmodule
