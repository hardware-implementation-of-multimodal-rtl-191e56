// iris_pupil: pupil localisation by single-pass connected-component analysis of the
// cleaned binary image. Pixels arrive in raster order; each foreground pixel takes the
// label of its 8-connected neighbours already seen (left, upper-left, upper, upper-right;
// the previous row's labels sit in a line buffer) or a fresh label. When two labels meet
// they are merged at once: every parent entry pointing at the larger label is redirected
// to the smaller one (the parent table is kept fully compressed, so one look-up resolves
// any stored label) and the two regions' statistics are added. Each region keeps its area
// and bounding box. After the frame the NL regions are scanned, one per cycle: a region is
// a pupil candidate if its area lies in [AMIN, AMAX], its bounding box is nearly square
// (|w - h| <= max(w, h) / 4, a low-eccentricity test) and it fills at least 5/8 of the box
// (a disc fills pi/4). The largest candidate wins; its box centre and (w + h) / 4 give the
// pupil centre and radius. Area and eccentricity as the selection properties are the
// paper's; the bounding-box forms of them, the label count and the thresholds are this
// design's choices. overflow is set if a frame needs more than NL-1 labels (pixels that
// find no free label are then dropped).
module iris_pupil #(
  parameter int unsigned W    = 320,
  parameter int unsigned H    = 240,
  parameter int unsigned NL   = 128,
  parameter int unsigned AMIN = 200,
  parameter int unsigned AMAX = 20000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_bit,
  output logic        done,
  output logic        found,
  output logic [9:0]  cx,
  output logic [9:0]  cy,
  output logic [9:0]  radius,
  output logic        overflow,
  output logic [$clog2(NL):0] n_regions
);
  localparam int unsigned LW = $clog2(NL);
  typedef logic [LW-1:0] lab_t;
  typedef struct packed {
    logic [19:0] area;
    logic [9:0]  xmin, xmax, ymin, ymax;
  } rstat_t;

  lab_t   lbuf [W];
  lab_t   parent [NL];
  rstat_t st [NL];
  logic [NL-1:0] alive;
  lab_t   next_free, left, ul_reg;
  logic [9:0] x, y;
  logic   scanning;
  lab_t   k;
  logic [19:0] best_area;

  lab_t up_raw, ur_raw, ra, rb, a_lab, b_lab;
  always_comb begin
    lab_t rl, rul, rup;
    up_raw = (y != 0) ? lbuf[x] : '0;
    ur_raw = (y != 0 && x != 10'(W - 1)) ? lbuf[x + 10'd1] : '0;
    rl  = (x != 0 && left != 0)            ? parent[left]   : '0;
    rul = (x != 0 && y != 0 && ul_reg != 0) ? parent[ul_reg] : '0;
    rup = (up_raw != 0) ? parent[up_raw] : '0;
    rb  = (ur_raw != 0) ? parent[ur_raw] : '0;
    ra  = (rl != 0) ? rl : (rul != 0) ? rul : rup;
    // merged label is the smaller one
    if (ra != 0 && rb != 0 && ra != rb) begin
      a_lab = (ra < rb) ? ra : rb;
      b_lab = (ra < rb) ? rb : ra;
    end else begin
      a_lab = (ra != 0) ? ra : rb;
      b_lab = '0;
    end
  end

  function automatic rstat_t add_px(input rstat_t s, input logic [9:0] px, input logic [9:0] py);
    rstat_t o;
    o = s;
    o.area = s.area + 20'd1;
    if (px < s.xmin) o.xmin = px;
    if (px > s.xmax) o.xmax = px;
    if (py < s.ymin) o.ymin = py;
    if (py > s.ymax) o.ymax = py;
    return o;
  endfunction
  function automatic rstat_t join_st(input rstat_t s, input rstat_t t);
    rstat_t o;
    o.area = s.area + t.area;
    o.xmin = (s.xmin < t.xmin) ? s.xmin : t.xmin;
    o.xmax = (s.xmax > t.xmax) ? s.xmax : t.xmax;
    o.ymin = (s.ymin < t.ymin) ? s.ymin : t.ymin;
    o.ymax = (s.ymax > t.ymax) ? s.ymax : t.ymax;
    return o;
  endfunction

  logic cand;
  always_comb begin
    logic [10:0] w, h, mx, df;
    w  = 11'(st[k].xmax) - 11'(st[k].xmin) + 11'd1;
    h  = 11'(st[k].ymax) - 11'(st[k].ymin) + 11'd1;
    mx = (w > h) ? w : h;
    df = (w > h) ? w - h : h - w;
    cand = alive[k] && (32'(st[k].area) >= AMIN) && (32'(st[k].area) <= AMAX)
        && (4 * 32'(df) <= 32'(mx))
        && (8 * 32'(st[k].area) >= 5 * 32'(w) * 32'(h));
  end

  always_ff @(posedge clk) begin
    if (in_valid && !scanning) begin
      lbuf[x] <= (in_bit && (a_lab != 0 || next_free != 0)) ?
                 ((a_lab != 0) ? a_lab : next_free) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; left <= '0; ul_reg <= '0; next_free <= lab_t'(1); alive <= '0;
      scanning <= 1'b0; k <= '0; best_area <= '0; done <= 1'b0; found <= 1'b0;
      cx <= '0; cy <= '0; radius <= '0; overflow <= 1'b0; n_regions <= '0;
      for (int i = 0; i < NL; i++) begin parent[i] <= '0; st[i] <= '0; end
    end else begin
      done <= 1'b0;
      if (scanning) begin
        if (cand && st[k].area > best_area) begin
          best_area <= st[k].area;
          found  <= 1'b1;
          cx     <= 10'((11'(st[k].xmin) + 11'(st[k].xmax)) >> 1);
          cy     <= 10'((11'(st[k].ymin) + 11'(st[k].ymax)) >> 1);
          radius <= 10'((12'(st[k].xmax) - 12'(st[k].xmin) + 12'(st[k].ymax) - 12'(st[k].ymin) + 12'd2) >> 2);
        end
        if (alive[k]) n_regions <= n_regions + 1'b1;
        if (k == lab_t'(NL - 1)) begin
          scanning <= 1'b0; done <= 1'b1; alive <= '0; next_free <= lab_t'(1);
        end
        k <= k + 1'b1;
      end else if (in_valid) begin
        if (in_bit) begin
          if (a_lab == 0) begin
            if (next_free != 0) begin
              parent[next_free] <= next_free;
              st[next_free] <= '{area: 20'd1, xmin: x, xmax: x, ymin: y, ymax: y};
              alive[next_free] <= 1'b1;
              next_free <= (next_free == lab_t'(NL - 1)) ? '0 : next_free + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end else if (b_lab != 0) begin
            for (int i = 0; i < NL; i++) if (parent[i] == b_lab) parent[i] <= a_lab;
            st[a_lab]    <= add_px(join_st(st[a_lab], st[b_lab]), x, y);
            alive[b_lab] <= 1'b0;
          end else begin
            st[a_lab] <= add_px(st[a_lab], x, y);
          end
        end
        ul_reg <= up_raw;
        left   <= (in_bit && (a_lab != 0 || next_free != 0)) ?
                  ((a_lab != 0) ? a_lab : next_free) : '0;
        if (x == 10'(W - 1)) begin
          x <= '0; left <= '0; ul_reg <= '0;
          if (y == 10'(H - 1)) begin
            y <= '0; scanning <= 1'b1; k <= '0; best_area <= '0; found <= 1'b0;
            n_regions <= '0;
          end else y <= y + 10'd1;
        end else x <= x + 10'd1;
      end
    end
  end
endmodule
