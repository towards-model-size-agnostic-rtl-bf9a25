// glimpse_extractor -- image buffer and glimpse sensor of the recurrent
// attention model.
//
// The host writes the 28x28 8-bit image into the buffer. On 'start' the
// extractor takes NPATCHES square patches centred on 'loc': patch i covers
// PATCH*SCALE^i pixels per side and is reduced to PATCH x PATCH elements by
// averaging SCALE^i x SCALE^i pixel blocks, so the patches grow in size and
// drop in resolution as in the RAM glimpse sensor. Pixels outside the image
// count as 0. Each element is quantised to 2 bits (the top two bits of the
// block average), the precision the published design uses for the patch
// vector. Patch sizes (4x4, 2 patches, scale 2), the centring rule
// (top-left = loc - side/2) and the truncating quantiser are choices here.
// One pixel is read per cycle, so a glimpse takes
// PATCH^2 * sum_i SCALE^(2i) = 80 cycles; 'done' pulses the cycle after the
// last element is stored and 'patch' then holds element e in bits [2e+1:2e]
// (patch i elements i*16 .. i*16+15, row-major).
module glimpse_extractor
  import mbi_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // image buffer write port, address = row*28 + column
  input  logic                img_we,
  input  logic [9:0]          img_addr,
  input  logic [PIX_BITS-1:0] img_data,
  // glimpse request
  input  logic                start,
  input  loc_t                loc,
  output logic                busy,
  output logic                done,
  output logic [PATCH_W-1:0]  patch
);

  localparam int unsigned LS    = $clog2(SCALE);           // SCALE is a power of two
  localparam int unsigned ACC_W = PIX_BITS + 2 * LS * (NPATCHES - 1);
  localparam int unsigned PB    = $clog2(PATCH);
  localparam int unsigned PI_W  = (NPATCHES > 1) ? $clog2(NPATCHES) : 1;
  localparam int unsigned BW    = LS * (NPATCHES - 1) + 1; // block offset width

  logic [PIX_BITS-1:0] img [IMG*IMG];

  logic [PI_W-1:0]  pidx;
  logic [PB-1:0]    r, c;        // output element within the patch
  logic [BW-1:0]    dy, dx;      // pixel within the averaging block
  logic [ACC_W-1:0] acc;
  loc_t             cur_loc;

  // current pixel coordinates (signed)
  int               bsz, side, py, px;
  logic             in_img;
  logic [PIX_BITS-1:0] pix;
  logic [ACC_W-1:0] acc_n;
  logic [ACC_W-1:0] avg;
  logic             last_px, last_elem;

  always_comb begin
    bsz    = 1 << (LS * int'(pidx));
    side   = PATCH * bsz;
    py     = int'(cur_loc.y) - side / 2 + int'(r) * bsz + int'(dy);
    px     = int'(cur_loc.x) - side / 2 + int'(c) * bsz + int'(dx);
    in_img = (py >= 0) && (py < IMG) && (px >= 0) && (px < IMG);
    pix    = in_img ? img[py * IMG + px] : '0;
    acc_n  = acc + ACC_W'(pix);
    avg    = acc_n >> (2 * LS * int'(pidx));
    last_px   = (int'(dx) == bsz - 1) && (int'(dy) == bsz - 1);
    last_elem = (int'(r) == PATCH - 1) && (int'(c) == PATCH - 1) && (int'(pidx) == NPATCHES - 1);
  end

  always_ff @(posedge clk) begin
    if (img_we) img[img_addr] <= img_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      pidx    <= '0;
      r       <= '0;
      c       <= '0;
      dy      <= '0;
      dx      <= '0;
      acc     <= '0;
      cur_loc <= '0;
      patch   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          cur_loc <= loc;
          pidx    <= '0;
          r       <= '0;
          c       <= '0;
          dy      <= '0;
          dx      <= '0;
          acc     <= '0;
        end
      end else if (!last_px) begin
        acc <= acc_n;
        if (int'(dx) == bsz - 1) begin
          dx <= '0;
          dy <= dy + 1'b1;
        end else begin
          dx <= dx + 1'b1;
        end
      end else begin
        // block complete: store the 2-bit element
        patch[(int'(pidx) * PATCH * PATCH + int'(r) * PATCH + int'(c)) * PQ_BITS +: PQ_BITS]
          <= avg[PIX_BITS-1 -: PQ_BITS];
        acc <= '0;
        dx  <= '0;
        dy  <= '0;
        if (last_elem) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (int'(c) == PATCH - 1) begin
          c <= '0;
          if (int'(r) == PATCH - 1) begin
            r    <= '0;
            pidx <= pidx + 1'b1;
          end else begin
            r <= r + 1'b1;
          end
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
