// extrap_simd: the 4-way SIMD unit of the extrapolation unit.
//
// Lane l owns sub-ROI l of the ROI being extrapolated.  Every macroblock the
// ROI touches is broadcast to all lanes once (`acc_en` with its pixel origin,
// motion vector and confidence).  Each lane counts the pixels the macroblock
// shares with its sub-ROI, cnt, and accumulates
//     N += cnt,  SU += cnt*u,  SV += cnt*v,  SC += cnt*conf,
// which is Eq. 1 with every pixel inheriting its macroblock's MV.  On
// `finish` the lanes divide in lock step (one shared sequence of three
// divisions per lane): mu = SU*16/N and SV*16/N in Q.4, alpha = SC/N.  Then
//     beta  = alpha if alpha > conf_thr, else 0.5          (piecewise rule)
//     MV_F  = (beta*mu + (256-beta)*MV_{F-1}) >>> 8        (Eq. 3)
// with beta in 1/256 units (alpha's byte is read as alpha*256, an
// approximation of at most 1/256 of the scale-by-255 confidence byte).
// Lanes whose sub-ROI covered no pixel report valid = 0 and return MV_{F-1}.
//
// Timing: one macroblock per cycle while accumulating; `finish` to `done` is
// 3*(NW+2)+3 = 99 cycles for the default widths (counted from the edge that
// samples `finish` to the edge after which `done` is high).
//
// From the paper: Eq. 1 and 3, the averaged confidence per ROI, the threshold
// rule for beta, one sub-ROI per lane.  Own choices: Q.4 fixed point, the
// 1/256 scale of beta, the divider and the accumulator widths (sized for a
// full 1920x1080 sub-ROI).
module extrap_simd
  import euph_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned L       = MB_L,
  localparam int unsigned NW     = 30,   // numerator width of the divisions
  localparam int unsigned CNT_W  = 22    // pixel count width (>= 1920*1080)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,              // new ROI: zero accumulators
  input  roi_t               sub      [N_LANES],  // sub-ROIs, held while busy
  input  logic               acc_en,
  input  logic [COORD_W-1:0] mb_px,              // macroblock pixel origin
  input  logic [COORD_W-1:0] mb_py,
  input  mv_t                mv,
  input  logic [7:0]         conf,
  input  logic               finish,
  input  logic [7:0]         conf_thr,
  input  mvf_t               prev     [N_LANES],  // MV_{F-1} per lane
  output logic               busy,
  output logic               done,
  output mvf_t               mvf      [N_LANES],  // MV_F per lane
  output logic               lane_ok  [N_LANES],  // sub-ROI covered pixels
  output logic               lane_hi  [N_LANES]   // alpha above threshold
);

  typedef enum logic [2:0] {P_IDLE, P_DIV_U, P_DIV_V, P_DIV_C, P_MIX, P_DONE} phase_t;
  phase_t phase;

  logic [CNT_W-1:0]        n   [N_LANES];
  logic signed [NW-1:0]    su  [N_LANES];
  logic signed [NW-1:0]    sv  [N_LANES];
  logic [NW-1:0]           sc  [N_LANES];
  logic signed [MVF_W-1:0] mu_u[N_LANES];
  logic signed [MVF_W-1:0] mu_v[N_LANES];
  logic [7:0]              alpha[N_LANES];

  // Divider operands, chosen per phase.
  logic          div_start;
  logic [NW-1:0] div_num [N_LANES];
  logic          div_done[N_LANES];
  logic [NW-1:0] div_q   [N_LANES];
  logic          div_busy[N_LANES];

  function automatic logic [NW-1:0] mag(input logic signed [NW-1:0] x);
    return x[NW-1] ? NW'(-x) : NW'(x);
  endfunction

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    // overlap of the macroblock [mb_px, mb_px+L) x [mb_py, mb_py+L) with sub-ROI
    logic [COORD_W:0] ax0, ax1, ay0, ay1;
    logic [COORD_W:0] ow, oh;
    logic [2*($clog2(L)+1)-1:0] cnt;
    always_comb begin
      ax0 = {1'b0, umax(sub[l].x0, mb_px)};
      ax1 = (COORD_W+1)'(umin(sub[l].x1, mb_px + COORD_W'(L)));
      ay0 = {1'b0, umax(sub[l].y0, mb_py)};
      ay1 = (COORD_W+1)'(umin(sub[l].y1, mb_py + COORD_W'(L)));
      ow  = (ax1 > ax0) ? ax1 - ax0 : '0;
      oh  = (ay1 > ay0) ? ay1 - ay0 : '0;
      cnt = ($bits(cnt))'(ow * oh);
    end

    always_comb begin
      unique case (phase)
        P_DIV_U: div_num[l] = mag(su[l]) << MV_FRAC;
        P_DIV_V: div_num[l] = mag(sv[l]) << MV_FRAC;
        default: div_num[l] = sc[l];
      endcase
    end

    udiv_seq #(.NW(NW), .DW(CNT_W)) u_div (
      .clk, .rst_n, .start(div_start), .num(div_num[l]), .den(n[l]),
      .busy(div_busy[l]), .done(div_done[l]), .quot(div_q[l])
    );

    // filtered vector (Eq. 3)
    logic [8:0] beta;
    logic signed [MVF_W+10:0] mix_u, mix_v;
    always_comb begin
      beta  = (alpha[l] > conf_thr) ? {1'b0, alpha[l]} : 9'd128;
      mix_u = (MVF_W+11)'(signed'({1'b0, beta})) * (MVF_W+11)'(mu_u[l])
            + (MVF_W+11)'(signed'(10'd256 - {1'b0, beta})) * (MVF_W+11)'(prev[l].u);
      mix_v = (MVF_W+11)'(signed'({1'b0, beta})) * (MVF_W+11)'(mu_v[l])
            + (MVF_W+11)'(signed'(10'd256 - {1'b0, beta})) * (MVF_W+11)'(prev[l].v);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        n[l] <= '0; su[l] <= '0; sv[l] <= '0; sc[l] <= '0;
        mu_u[l] <= '0; mu_v[l] <= '0; alpha[l] <= '0;
        mvf[l] <= '0; lane_ok[l] <= 1'b0; lane_hi[l] <= 1'b0;
      end else begin
        if (clear) begin
          n[l] <= '0; su[l] <= '0; sv[l] <= '0; sc[l] <= '0;
        end else if (acc_en) begin
          n[l]  <= n[l]  + CNT_W'(cnt);
          su[l] <= su[l] + NW'(signed'({1'b0, cnt})) * NW'(mv.u);
          sv[l] <= sv[l] + NW'(signed'({1'b0, cnt})) * NW'(mv.v);
          sc[l] <= sc[l] + NW'(cnt) * NW'(conf);
        end
        if (div_done[l]) begin
          unique case (phase)
            P_DIV_U: mu_u[l] <= su[l][NW-1] ? -MVF_W'(div_q[l]) : MVF_W'(div_q[l]);
            P_DIV_V: mu_v[l] <= sv[l][NW-1] ? -MVF_W'(div_q[l]) : MVF_W'(div_q[l]);
            default: alpha[l] <= 8'(div_q[l]);
          endcase
        end
        if (phase == P_MIX) begin
          lane_ok[l] <= (n[l] != '0);
          lane_hi[l] <= (alpha[l] > conf_thr);
          if (n[l] != '0) begin
            mvf[l].u <= MVF_W'(mix_u >>> 8);
            mvf[l].v <= MVF_W'(mix_v >>> 8);
          end else begin
            mvf[l] <= prev[l];
          end
        end
      end
    end
  end

  // Phase sequencing: the lanes run in lock step, lane 0 paces them.
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; done <= 1'b0; started <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        P_IDLE:  if (finish) begin phase <= P_DIV_U; started <= 1'b0; end
        P_DIV_U, P_DIV_V, P_DIV_C: begin
          started <= 1'b1;
          if (div_done[0]) begin
            started <= 1'b0;
            phase   <= (phase == P_DIV_U) ? P_DIV_V : (phase == P_DIV_V) ? P_DIV_C : P_MIX;
          end
        end
        P_MIX:   phase <= P_DONE;
        P_DONE:  begin phase <= P_IDLE; done <= 1'b1; end
        default: phase <= P_IDLE;
      endcase
    end
  end
  assign div_start = (phase inside {P_DIV_U, P_DIV_V, P_DIV_C}) && !started;
  assign busy      = (phase != P_IDLE);

endmodule
