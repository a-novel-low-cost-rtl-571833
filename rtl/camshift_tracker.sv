// camshift_tracker: the parallel Camshift search that finds the object in one ROI frame.
//
// Started with the previous bounding box and the base address of the ROI frame to
// search, it
//   1. centres a SW x SH search region on the previous box (left edge on a DW-pixel
//      word boundary, clipped to the frame) and has roi_addr_gen copy it from DDR3
//      into roi_map_ram;
//   2. scans the region, one ROI pixel per clock, broadcasting each pixel to
//      N = GRID*GRID camshift_pe threads; thread i evaluates the box moved by
//      ((gx-GRID/2)*hw/2, (gy-GRID/2)*hh/2) from the previous centre, so all the
//      positions a serial mean-shift would visit one after the other are weighed in
//      one pass;
//   3. lets candidate_comparator pick the thread with the largest weighted M00;
//   4. divides that thread's moments, centre = (M10/M00, M01/M00), and takes the box
//      side as sqrt(CNT), the side of a square with the object's pixel count,
//      clamped to MIN_BOX..MAX_BOX;
//   5. returns the box (top-left and bottom-right corners) with `result_valid`.
// If no thread saw an ROI pixel the object is lost: `lost` is set and the previous
// box is returned. One search takes about SH*(SW/DW)*(DW+2) cycles for the scan plus the
// DDR3 transfer and ~70 cycles of arithmetic (about 1.8 ms at 148.5 MHz for the
// default 512 x 512 region), far below one frame.
//
// The parallel threads, the comparator, the on-chip ROI map fed by an address
// generator and the corner output are the paper's (its Fig. 3 and Sec. 2.2, 3.2). The
// candidate grid, the comparison criterion, the square box and all sizes are this
// design's choices; the paper gives none of them.
module camshift_tracker
  import tracker_pkg::*;
#(
  parameter int unsigned H_ACT   = 1920,
  parameter int unsigned V_ACT   = 1080,
  parameter int unsigned SW      = 512,
  parameter int unsigned SH      = 512,
  parameter int unsigned GRID    = 3,
  parameter int unsigned MIN_BOX = 16,
  parameter int unsigned MAX_BOX = 192,
  parameter int unsigned MW      = 40
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] frame_base,
  input  box_t          prev_box,
  // request port towards the DDR3 arbiter
  output logic          req,
  output mem_req_t      req_info,
  input  logic          gnt,
  input  logic          burst_done,
  input  logic          rvalid,
  input  logic [DW-1:0] rdata,
  // result
  output logic          busy,
  output logic          result_valid,
  output box_t          result_box,
  output logic          lost,
  output logic [$clog2(GRID*GRID)-1:0] best_cand,
  output logic [MW-1:0] best_m00
);
  localparam int unsigned N     = GRID * GRID;
  localparam int unsigned WPR   = SW / DW;
  localparam int unsigned DEPTH = WPR * SH;
  localparam int unsigned RAW   = $clog2(DEPTH);

  typedef enum logic [3:0] {IDLE, LOAD, CLR, RD, LAT, BITS, FL1, FL2, CMP, CMPW, CALC, FIN} state_e;
  state_e state;

  box_t          pbox;
  logic [AW-1:0] fbase;
  logic [CW-1:0] pcx, pcy, hw, hh, ox, oy;
  logic [CW-1:0] ccx [N];
  logic [CW-1:0] ccy [N];

  // ROI map RAM and its loader
  logic           ag_start, ag_done, ram_we;
  logic [RAW-1:0] ram_waddr, raddr;
  logic [DW-1:0]  ram_wdata, ram_rdata, word_q;

  roi_addr_gen #(.H_ACT(H_ACT), .SW(SW), .SH(SH)) u_agen (
    .clk, .rst_n, .start(ag_start), .frame_base(fbase), .org_x(ox), .org_y(oy),
    .req, .req_info, .gnt, .burst_done, .rvalid, .rdata,
    .ram_we, .ram_waddr, .ram_wdata, .done(ag_done));

  roi_map_ram #(.DEPTH(DEPTH)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata), .raddr, .rdata(ram_rdata));

  // Scan position
  logic [$clog2(DW)-1:0]      b;
  logic [$clog2(WPR+1)-1:0]   wc;
  logic [$clog2(SH+1)-1:0]    row;
  logic                       pe_clear, pix_valid, pix_roi;
  logic [CW-1:0]              pix_x, pix_y;

  assign pix_valid = (state == BITS);
  assign pix_x     = ox + CW'(wc) * CW'(DW) + CW'(b);
  assign pix_y     = oy + CW'(row);
  assign pix_roi   = word_q[b];

  // Threads
  logic [MW-1:0] m00 [N];
  logic [MW-1:0] m10 [N];
  logic [MW-1:0] m01 [N];
  logic [MW-1:0] cnt [N];

  for (genvar i = 0; i < N; i++) begin : g_pe
    camshift_pe #(.MW(MW)) u_pe (
      .clk, .rst_n, .clear(pe_clear), .pix_valid, .pix_x, .pix_y, .pix_roi,
      .cx(ccx[i]), .cy(ccy[i]), .hw, .hh,
      .m00(m00[i]), .m10(m10[i]), .m01(m01[i]), .cnt(cnt[i]));
  end

  logic          cmp_valid, cmp_out_valid;
  logic [$clog2(N)-1:0] cmp_best;
  logic [MW-1:0] b00, b10, b01, bcnt;

  candidate_comparator #(.N(N), .MW(MW)) u_cmp (
    .clk, .rst_n, .in_valid(cmp_valid), .m00, .m10, .m01, .cnt,
    .out_valid(cmp_out_valid), .best(cmp_best),
    .best_m00(b00), .best_m10(b10), .best_m01(b01), .best_cnt(bcnt));

  // Centroid division and box size
  logic          calc_start, dx_done, dy_done, sq_done, got_x, got_y, got_s;
  logic [MW-1:0] qx, qy, rx_unused, ry_unused;
  logic [MW/2-1:0] root;

  seq_divider #(.N(MW), .D(MW)) u_divx (
    .clk, .rst_n, .start(calc_start), .dividend(b10), .divisor(b00),
    .busy(), .done(dx_done), .quotient(qx), .remainder(rx_unused));
  seq_divider #(.N(MW), .D(MW)) u_divy (
    .clk, .rst_n, .start(calc_start), .dividend(b01), .divisor(b00),
    .busy(), .done(dy_done), .quotient(qy), .remainder(ry_unused));
  isqrt #(.N(MW)) u_sqrt (
    .clk, .rst_n, .start(calc_start), .x(bcnt), .done(sq_done), .root);

  function automatic logic [CW-1:0] clampc(input int v, input int hi);
    if (v < 0)  return '0;
    if (v > hi) return CW'(hi);
    return CW'(v);
  endfunction

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; pbox <= '0; fbase <= '0;
      pcx <= '0; pcy <= '0; hw <= '0; hh <= '0; ox <= '0; oy <= '0;
      for (int i = 0; i < N; i++) begin ccx[i] <= '0; ccy[i] <= '0; end
      ag_start <= 1'b0; raddr <= '0; word_q <= '0; b <= '0; wc <= '0; row <= '0;
      pe_clear <= 1'b0; cmp_valid <= 1'b0; calc_start <= 1'b0;
      got_x <= 1'b0; got_y <= 1'b0; got_s <= 1'b0;
      result_valid <= 1'b0; result_box <= '0; lost <= 1'b0; best_cand <= '0; best_m00 <= '0;
    end else begin
      ag_start     <= 1'b0;
      pe_clear     <= 1'b0;
      cmp_valid    <= 1'b0;
      calc_start   <= 1'b0;
      result_valid <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          int cx, cy, w2, h2, sx, sy;
          cx = (int'(prev_box.x0) + int'(prev_box.x1)) / 2;
          cy = (int'(prev_box.y0) + int'(prev_box.y1)) / 2;
          w2 = (int'(prev_box.x1) - int'(prev_box.x0) + 1) / 2;
          h2 = (int'(prev_box.y1) - int'(prev_box.y0) + 1) / 2;
          if (w2 < 1) w2 = 1;
          if (h2 < 1) h2 = 1;
          sx = cx - int'(SW / 2);
          sy = cy - int'(SH / 2);
          pbox <= prev_box; fbase <= frame_base;
          pcx <= CW'(cx); pcy <= CW'(cy); hw <= CW'(w2); hh <= CW'(h2);
          ox  <= clampc(sx, int'(H_ACT - SW)) & ~CW'(DW - 1);
          oy  <= clampc(sy, int'(V_ACT - SH));
          for (int gy = 0; gy < int'(GRID); gy++)
            for (int gx = 0; gx < int'(GRID); gx++) begin
              ccx[gy*GRID+gx] <= clampc(cx + (gx - int'(GRID/2)) * (w2 / 2), int'(H_ACT - 1));
              ccy[gy*GRID+gx] <= clampc(cy + (gy - int'(GRID/2)) * (h2 / 2), int'(V_ACT - 1));
            end
          ag_start <= 1'b1;
          state <= LOAD;
        end
        LOAD: if (ag_done) begin
          pe_clear <= 1'b1; raddr <= '0; wc <= '0; row <= '0;
          state <= CLR;
        end
        CLR:  state <= RD;
        RD:   state <= LAT;                 // raddr is being read
        LAT:  begin word_q <= ram_rdata; b <= '0; state <= BITS; end
        BITS: begin
          b <= b + 1'b1;
          if (32'(b) == DW - 1) begin
            raddr <= raddr + 1'b1;
            if (32'(wc) == WPR - 1) begin
              wc <= '0;
              row <= row + 1'b1;
              state <= (32'(row) == SH - 1) ? FL1 : RD;
            end else begin
              wc <= wc + 1'b1;
              state <= RD;
            end
          end
        end
        FL1:  state <= FL2;
        FL2:  begin cmp_valid <= 1'b1; state <= CMP; end
        CMP:  state <= CMPW;                // comparator registers its choice
        CMPW: begin
          calc_start <= 1'b1; got_x <= 1'b0; got_y <= 1'b0; got_s <= 1'b0;
          state <= CALC;
        end
        CALC: begin
          if (dx_done) got_x <= 1'b1;
          if (dy_done) got_y <= 1'b1;
          if (sq_done) got_s <= 1'b1;
          if ((got_x || dx_done) && (got_y || dy_done) && (got_s || sq_done)) state <= FIN;
        end
        FIN: begin
          int side, half, x0, y0;
          best_cand <= cmp_best;
          best_m00  <= b00;
          result_valid <= 1'b1;
          if (b00 == 0) begin
            lost <= 1'b1;
            result_box <= pbox;
          end else begin
            lost <= 1'b0;
            side = int'(root);
            if (side < int'(MIN_BOX)) side = int'(MIN_BOX);
            if (side > int'(MAX_BOX)) side = int'(MAX_BOX);
            half = side / 2;
            x0 = int'(qx[CW-1:0]) - half;
            y0 = int'(qy[CW-1:0]) - half;
            result_box.x0 <= clampc(x0, int'(H_ACT - 1));
            result_box.y0 <= clampc(y0, int'(V_ACT - 1));
            result_box.x1 <= clampc(x0 + side - 1, int'(H_ACT - 1));
            result_box.y1 <= clampc(y0 + side - 1, int'(V_ACT - 1));
          end
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  initial assert (SW <= H_ACT && SH <= V_ACT && MAX_BOX * 5 / 4 <= SW / 2 && MAX_BOX * 5 / 4 <= SH / 2);
endmodule
