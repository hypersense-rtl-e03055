// hs_top -- HyperSense near-sensor accelerator: decides from each
// low-precision radar frame whether an object is present and sets the frame
// rate of the high-precision ADC accordingly.
//
// Data path (follows the published accelerator):
//   low-precision ADC stream -> frame buffer -> NSX x NSY systolic arrays,
//   each encoding the fragments of one piece of the frame (linear projection
//   with computation reuse) -> one output buffer per array -> shared kernel
//   function (normalisation, cos/sin) -> classifier (cosine similarity,
//   T_score) -> detector (count > T_detection) -> sensor controller
//   (60 or 1 frames/s for the high-precision ADC).
//
// Partition (this design's choice of detail): with NFX = (IMG_W-FW)/stride+1
// fragment origins per row, array column a takes origins
// [a*ceil(NFX/NSX), ...) and reads the pixel columns they cover, halo
// included; rows are split the same way over NSY. An array with no origin
// stays idle. The arrays run in parallel; their buffers are drained one
// whole fragment at a time, round robin. A full buffer stalls its array.
//
// Control: LOAD (take IMG_H*IMG_W pixels, raster order) -> START (start the
// arrays and the detector) -> RUN (until the detector has all NFX*NFY
// verdicts) -> LOAD. `frame_done` pulses with the decision.
// Configuration (seed, stride, T_score, T_detection) is sampled when a frame
// starts. Class hypervectors are written through cw_* before use.
module hs_top
  import hs_pkg::*;
#(
  parameter int unsigned IMG_H    = 128,
  parameter int unsigned IMG_W    = 128,
  parameter int unsigned FH       = 32,
  parameter int unsigned FW       = 32,
  parameter int unsigned D        = 5000,
  parameter int unsigned NSX      = 2,
  parameter int unsigned NSY      = 2,
  parameter int unsigned CLK_HZ   = 100_000_000,
  parameter int unsigned HIGH_FPS = 60,
  parameter int unsigned LOW_FPS  = 1,
  parameter int unsigned T        = (D + FW - 1) / FW,
  parameter int unsigned BUF_DEPTH = 2 * T
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // low-precision ADC frame stream (raster order)
  input  logic                 lp_valid,
  input  logic [PIX_W-1:0]     lp_pix,
  output logic                 lp_ready,
  // configuration
  input  logic [31:0]          cfg_seed,
  input  logic [7:0]           cfg_stride,
  input  logic signed [15:0]   cfg_t_score,
  input  logic [15:0]          cfg_t_det,
  // class hypervector write port
  input  logic                 cw_en,
  input  logic                 cw_class,
  input  logic [$clog2(T)-1:0] cw_lane,
  input  logic [15:0]          cw_chunk,
  input  logic [ELEM_W-1:0]    cw_data,
  // per-fragment verdicts (observation)
  output logic                 frag_valid,
  output logic [7:0]           frag_fx,
  output logic [7:0]           frag_fy,
  output logic                 frag_pos,
  // frame decision and high-precision ADC control
  output logic                 frame_done,
  output logic                 frame_pos,
  output logic [15:0]          frame_pos_count,
  output logic                 hp_rate_high,
  output logic                 hp_trigger
);
  localparam int unsigned NSA   = NSX * NSY;
  localparam int unsigned XW    = 8;
  localparam int unsigned LW    = $clog2(T);
  localparam int unsigned PW    = PIX_W + ELEM_W + 1;
  localparam int unsigned ACC_W = PW + $clog2(FW);
  localparam int unsigned SUM_W = ACC_W + $clog2(FH);
  localparam int unsigned BW    = 2 * XW + LW + FW * SUM_W;  // buffer word

  typedef enum logic [1:0] {S_LOAD, S_START, S_RUN} state_t;
  state_t state;

  // ------------------------------------------------------------ config
  logic [31:0]        seed;
  logic [XW-1:0]      stride;
  logic signed [15:0] t_score;
  logic [15:0]        t_det;

  // ------------------------------------------------------- frame buffer
  logic                               loaded;
  logic [NSA-1:0][XW-1:0]             rd_row, rd_col;
  logic [NSA-1:0][FH-1:0][PIX_W-1:0]  rd_pix;
  logic [XW-1:0]                      q_fx, q_fy;
  logic [31:0]                        q_norm_sq;

  hs_frame_buf #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .FH(FH), .FW(FW), .NRD(NSA), .XW(XW)
  ) u_fbuf (
    .clk, .rst_n, .load(state == S_LOAD), .in_valid(lp_valid), .in_pix(lp_pix),
    .in_ready(lp_ready), .loaded, .rd_row, .rd_col, .rd_pix,
    .q_fy, .q_fx, .q_norm_sq
  );

  // ---------------------------------------------------------- partition
  logic [XW-1:0] nfx, nfy, perx, pery;
  logic [15:0]   n_frag;
  always_comb begin
    nfx    = XW'((IMG_W - FW) / int'(stride) + 1);
    nfy    = XW'((IMG_H - FH) / int'(stride) + 1);
    perx   = XW'((int'(nfx) + NSX - 1) / NSX);
    pery   = XW'((int'(nfy) + NSY - 1) / NSY);
    n_frag = 16'(nfx) * 16'(nfy);
  end

  // ---------------------------------------------------- systolic arrays
  logic [NSA-1:0]                   sa_en, sa_start, sa_busy, sa_valid;
  logic [NSA-1:0][XW-1:0]           sa_fx, sa_fy;
  logic [NSA-1:0][LW-1:0]           sa_lane;
  logic [NSA-1:0][FW-1:0][SUM_W-1:0] sa_data;
  logic [NSA-1:0][BW-1:0]           b_rd;
  logic [NSA-1:0]                   b_empty, b_full, b_pop;

  for (genvar gy = 0; gy < int'(NSY); gy++) begin : g_sy
    for (genvar gx = 0; gx < int'(NSX); gx++) begin : g_sx
      localparam int unsigned I = gy * NSX + gx;
      logic [XW-1:0] fx_first, fy_first, cntx, cnty;
      always_comb begin
        fx_first = XW'(gx * int'(perx));
        fy_first = XW'(gy * int'(pery));
        cntx = (fx_first >= nfx) ? '0 :
               ((nfx - fx_first < perx) ? nfx - fx_first : perx);
        cnty = (fy_first >= nfy) ? '0 :
               ((nfy - fy_first < pery) ? nfy - fy_first : pery);
      end
      assign sa_start[I] = (state == S_START) && cntx != '0 && cnty != '0;
      assign sa_en[I]    = !b_full[I];

      hs_sa #(
        .FH(FH), .W(FW), .T(T), .XW(XW), .LW(LW), .PW(PW), .ACC_W(ACC_W), .SUM_W(SUM_W)
      ) u_sa (
        .clk, .rst_n, .en(sa_en[I]), .seed,
        .start(sa_start[I]),
        .x0(XW'(fx_first * stride)),
        .nx(XW'((cntx - 1'b1) * stride + XW'(FW))),
        .y0(XW'(fy_first * stride)),
        .ny(cnty),
        .stride(stride),
        .busy(sa_busy[I]),
        .rd_row(rd_row[I]), .rd_col(rd_col[I]), .rd_pix(rd_pix[I]),
        .o_valid(sa_valid[I]), .o_fx(sa_fx[I]), .o_fy(sa_fy[I]),
        .o_lane(sa_lane[I]), .o_data(sa_data[I])
      );

      hs_fifo #(.WIDTH(BW), .DEPTH(BUF_DEPTH)) u_buf (
        .clk, .rst_n,
        .push(sa_valid[I] && sa_en[I]),
        .wr_data({sa_fx[I], sa_fy[I], sa_lane[I], sa_data[I]}),
        .pop(b_pop[I]), .rd_data(b_rd[I]),
        .empty(b_empty[I]), .full(b_full[I]), .count()
      );
    end
  end

  // --------------------------------------- round-robin fragment arbiter
  localparam int unsigned SW = (NSA > 1) ? $clog2(NSA) : 1;
  logic          locked;
  logic [SW-1:0] sel, rr;
  logic          k_valid;
  logic [XW-1:0] k_fx, k_fy;
  logic [LW-1:0] k_lane;
  logic [FW-1:0][SUM_W-1:0] k_data;

  always_comb begin
    b_pop = '0;
    k_valid = 1'b0;
    {k_fx, k_fy, k_lane, k_data} = b_rd[sel];
    if (locked && !b_empty[sel]) begin
      b_pop[sel] = 1'b1;
      k_valid    = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; sel <= '0; rr <= '0;
    end else if (!locked) begin
      logic found;
      found = 1'b0;
      for (int k = 0; k < int'(NSA); k++) begin
        int c;
        c = (int'(rr) + k) % int'(NSA);
        if (!found && !b_empty[c]) begin
          found = 1'b1;    // first non-empty buffer from rr on
          sel  <= SW'(c);
        end
      end
      locked <= found;
    end else if (k_valid && int'(k_lane) == int'(T) - 1) begin
      locked <= 1'b0;
      rr     <= (int'(sel) == int'(NSA) - 1) ? '0 : sel + 1'b1;
    end
  end

  // ------------------------------------------------------ kernel function
  logic                      h_valid, h_last;
  logic [XW-1:0]             h_fx, h_fy;
  logic [LW-1:0]             h_lane;
  logic [FW-1:0][ELEM_W-1:0] h_hv;

  hs_kernel #(.W(FW), .T(T), .D(D), .SUM_W(SUM_W), .XW(XW), .LW(LW)) u_kernel (
    .clk, .rst_n, .seed,
    .in_valid(k_valid), .in_fx(k_fx), .in_fy(k_fy), .in_lane(k_lane), .in_data(k_data),
    .q_fx, .q_fy, .q_norm_sq,
    .o_valid(h_valid), .o_fx(h_fx), .o_fy(h_fy), .o_lane(h_lane), .o_last(h_last),
    .o_hv(h_hv)
  );

  // ----------------------------------------------------------- classifier
  hs_classifier #(.W(FW), .T(T), .XW(XW), .LW(LW)) u_cls (
    .clk, .rst_n,
    .cw_en, .cw_class, .cw_lane, .cw_chunk, .cw_data,
    .t_score,
    .in_valid(h_valid), .in_fx(h_fx), .in_fy(h_fy), .in_lane(h_lane),
    .in_last(h_last), .in_hv(h_hv),
    .f_valid(frag_valid), .f_fx(frag_fx), .f_fy(frag_fy), .f_pos(frag_pos),
    .f_dot_pos(), .f_dot_neg(), .f_hsq()
  );

  // ------------------------------------------------------------- detector
  logic dec_valid, dec_pos;
  hs_detector #(.CW(16)) u_det (
    .clk, .rst_n, .start(state == S_START), .expect_n(n_frag), .t_det,
    .f_valid(frag_valid), .f_pos(frag_pos),
    .dec_valid, .dec_pos, .dec_count(frame_pos_count)
  );
  assign frame_done = dec_valid;
  assign frame_pos  = dec_pos;

  // ---------------------------------------------------- sensor controller
  hs_sensor_ctrl #(.CLK_HZ(CLK_HZ), .HIGH_FPS(HIGH_FPS), .LOW_FPS(LOW_FPS)) u_ctrl (
    .clk, .rst_n, .dec_valid, .dec_pos, .rate_high(hp_rate_high), .hp_trigger
  );

  // ------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      seed <= '0; stride <= 8'd1; t_score <= '0; t_det <= '0;
    end else begin
      case (state)
        S_LOAD: if (loaded) begin
          state   <= S_START;
          seed    <= cfg_seed;
          stride  <= (cfg_stride == '0) ? 8'd1 : cfg_stride;
          t_score <= cfg_t_score;
          t_det   <= cfg_t_det;
        end
        S_START: state <= S_RUN;
        S_RUN:   if (dec_valid) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  // the arrays must be idle when a frame starts
  a_sa_idle: assert property (@(posedge clk) disable iff (!rst_n)
                              (state == S_START) |-> (sa_busy == '0));
endmodule
