// rope_unit: rotary position embedding with on-line sin/cos generation.
// The angle memory holds, for i = 1..128 (head dimension d = 256), the
// preloaded constants sin(theta_i), cos(theta_i) and the running values
// sin(m theta_i), cos(m theta_i) for the current token m. One MUL+ADD
// datapath per pair computes a = p*c - q*s and b = q*c + p*s (four multiplies,
// two adders, rounding shift by ANGLE_FRAC):
//  * Embed mode: (p,q) = (x_n, x_n+1), (c,s) = (cos m theta, sin m theta);
//    (a,b) saturated to INT8 are the rotated outputs (y_n, y_n+1).
//  * Update mode: (p,q) = (cos m theta, sin m theta), (c,s) = (cos theta,
//    sin theta); by the angle-addition identities (a,b) = (cos (m+1) theta,
//    sin (m+1) theta), written back into the angle memory for the next token.
// An input vector carries 16 lanes = 8 pairs, lanes (2j, 2j+1) forming pair j
// of angle word word_i (angles i = 8*word_i + j + 1). Embed: one vector per
// cycle, output registered (1 cycle). Update: upd_start_i walks the 16 words,
// one per cycle, busy_o high meanwhile; embed inputs are ignored while busy.
// Preload: pre_we_i writes one value (pre_sel_i: 0 sin theta, 1 cos theta,
// 2 sin m theta, 3 cos m theta) at angle index pre_addr_i (= i-1).
// Follows the paper: angle memory contents, 128 angles, two modes sharing the
// multipliers/adders. Own choices: angle values are signed Q2.22 (24 bits),
// 8 pairs per cycle, angle memory in flip-flops.
module rope_unit
  import hsa_pkg::*;
#(
  parameter int unsigned N_ANGLE    = 128,
  parameter int unsigned PAIRS      = COLS / 2,
  parameter int unsigned ANGLE_W    = 24,
  parameter int unsigned ANGLE_FRAC = 22,
  localparam int unsigned NWORD     = N_ANGLE / PAIRS,
  localparam int unsigned WDW       = (NWORD > 1) ? $clog2(NWORD) : 1,
  localparam int unsigned IAW       = $clog2(N_ANGLE)
)(
  input  logic                      clk,
  input  logic                      rst_n,
  // preload
  input  logic                      pre_we_i,
  input  logic [1:0]                pre_sel_i,
  input  logic [IAW-1:0]            pre_addr_i,
  input  logic signed [ANGLE_W-1:0] pre_data_i,
  // embed stream
  input  logic                      valid_i,
  input  logic [WDW-1:0]            word_i,
  input  act_t                      x_i [2*PAIRS],
  output logic                      valid_o,
  output act_t                      y_o [2*PAIRS],
  // update
  input  logic                      upd_start_i,
  output logic                      busy_o,
  output logic                      upd_done_o
);
  typedef logic signed [ANGLE_W-1:0] ang_t;
  ang_t sin_t [N_ANGLE];
  ang_t cos_t [N_ANGLE];
  ang_t sin_m [N_ANGLE];
  ang_t cos_m [N_ANGLE];

  rope_mode_e      mode;
  logic            upd_q;
  logic [WDW-1:0]  uword_q;
  logic [WDW-1:0]  word;
  assign mode = upd_q ? ROPE_UPDATE : ROPE_EMBED;
  assign word = upd_q ? uword_q : word_i;

  // shared MUL + ADD
  localparam int unsigned PW = 2*ANGLE_W + 1;
  ang_t p [PAIRS], q [PAIRS], c [PAIRS], s [PAIRS];
  logic signed [PW-1:0] a [PAIRS], b [PAIRS];
  always_comb begin
    for (int j = 0; j < PAIRS; j++) begin
      automatic int unsigned idx = int'(word) * PAIRS + j;
      if (mode == ROPE_EMBED) begin
        p[j] = ang_t'(x_i[2*j]);  q[j] = ang_t'(x_i[2*j+1]);
        c[j] = cos_m[idx];         s[j] = sin_m[idx];
      end else begin
        p[j] = cos_m[idx];         q[j] = sin_m[idx];
        c[j] = cos_t[idx];         s[j] = sin_t[idx];
      end
      a[j] = (PW'(p[j]) * PW'(c[j]) - PW'(q[j]) * PW'(s[j]) + (PW'(1) <<< (ANGLE_FRAC-1))) >>> ANGLE_FRAC;
      b[j] = (PW'(q[j]) * PW'(c[j]) + PW'(p[j]) * PW'(s[j]) + (PW'(1) <<< (ANGLE_FRAC-1))) >>> ANGLE_FRAC;
    end
  end

  function automatic act_t sat8(logic signed [PW-1:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return act_t'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_q <= 1'b0; uword_q <= '0; upd_done_o <= 1'b0; valid_o <= 1'b0;
      for (int l = 0; l < 2*PAIRS; l++) y_o[l] <= '0;
    end else begin
      upd_done_o <= 1'b0;
      valid_o    <= valid_i && !upd_q;
      if (!upd_q) begin
        if (valid_i)
          for (int j = 0; j < PAIRS; j++) begin
            y_o[2*j]   <= sat8(a[j]);
            y_o[2*j+1] <= sat8(b[j]);
          end
        if (upd_start_i) begin upd_q <= 1'b1; uword_q <= '0; end
      end else begin
        if (uword_q == WDW'(NWORD-1)) begin upd_q <= 1'b0; upd_done_o <= 1'b1; end
        uword_q <= uword_q + 1'b1;
      end
    end
  end

  // angle memory (no reset: contents are preloaded)
  always_ff @(posedge clk) begin
    if (upd_q) begin
      for (int j = 0; j < PAIRS; j++) begin
        cos_m[int'(uword_q) * PAIRS + j] <= ang_t'(a[j]);
        sin_m[int'(uword_q) * PAIRS + j] <= ang_t'(b[j]);
      end
    end else if (pre_we_i) begin
      unique case (pre_sel_i)
        2'd0: sin_t[pre_addr_i] <= pre_data_i;
        2'd1: cos_t[pre_addr_i] <= pre_data_i;
        2'd2: sin_m[pre_addr_i] <= pre_data_i;
        default: cos_m[pre_addr_i] <= pre_data_i;
      endcase
    end
  end
  assign busy_o = upd_q;
endmodule
