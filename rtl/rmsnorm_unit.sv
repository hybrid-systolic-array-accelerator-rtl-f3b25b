// rmsnorm_unit: layer-fused RMSNorm of the post-processing unit.
// Instead of buffering a whole output vector Y_n, normalising it and only
// then starting layer n+1, the unit (1) multiplies each INT8 output by its
// gamma on the fly (Y* = Y*gamma, registered, one cycle latency) so Y* can be
// written straight back as the next layer's input, and (2) accumulates the
// squares of Y. When the last beat of the normalised dimension arrives
// (last_i) it computes sigma = sqrt(mean(Y^2)) with a bit-serial square root
// (16 cycles) and sigma^-1 with a bit-serial restoring divider (33 cycles),
// then S* = sigma^-1 * S_{n+1}, the fused requantisation scale of layer n+1.
// The next layer's MACs run meanwhile, so the latency is hidden. The bias
// term of the fusion (B_{n+1} = W_{n+1} beta S_{n+1}) is static and handled
// in requant.
// Two accumulation modes, chosen by per_lane_i (held for the whole stream):
//  - whole vector (per_lane_i = 0, decode): every lane of every beat belongs
//    to one token; one sum, one S*, copied to all lanes of s_star_o, ready
//    53 cycles after last_i;
//  - per lane (per_lane_i = 1, prefill with horizontal drain): lane l of
//    each beat is token l, so each lane keeps its own sum and gets its own
//    S*[l]; the one square-root/divide datapath is reused lane after lane,
//    all 16 done 16 x 53 = 848 cycles after last_i.
// s_star_valid_o pulses once when all of s_star_o is updated; busy_o is high
// from last_i until then, and beats arriving meanwhile are not accumulated.
// Own choices: gamma is Q4.12 signed, mean = sum/2^log2_dim (dimension a power
// of two), sigma in Q8.8, sigma^-1 and S* in Q8.24; no epsilon; sigma = 0
// gives the largest sigma^-1; one shared serial datapath for all lanes.
module rmsnorm_unit
  import hsa_pkg::*;
#(
  parameter int unsigned LANES   = COLS,
  parameter int unsigned GAMMA_W = 16,
  parameter int unsigned GFRAC   = 12
)(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic                      last_i,
  input  logic                      per_lane_i,
  input  act_t                      y_i     [LANES],
  input  logic signed [GAMMA_W-1:0] gamma_i [LANES],
  input  logic [4:0]                log2_dim_i,
  input  logic [SCALE_W-1:0]        s_next_i,
  output logic                      valid_o,
  output act_t                      ystar_o [LANES],
  output logic                      busy_o,
  output logic                      s_star_valid_o,
  output logic [SCALE_W-1:0]        s_star_o [LANES]
);
  // ---------------- x gamma ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      for (int l = 0; l < LANES; l++) ystar_o[l] <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i)
        for (int l = 0; l < LANES; l++) begin
          automatic logic signed [ACT_W+GAMMA_W:0] p;
          p = (($bits(p))'(y_i[l]) * ($bits(p))'(gamma_i[l]) + ($bits(p))'(1 << (GFRAC-1))) >>> GFRAC;
          if (p > 127)       ystar_o[l] <= 8'sd127;
          else if (p < -128) ystar_o[l] <= -8'sd128;
          else               ystar_o[l] <= act_t'(p);
        end
    end
  end

  // ---------------- square accumulation ----------------
  localparam int unsigned SQW = 40;
  localparam int unsigned LW  = (LANES > 1) ? $clog2(LANES) : 1;
  logic [SQW-1:0] sumsq_q [LANES];
  logic [SQW-1:0] vec_sq;
  always_comb begin
    vec_sq = '0;
    for (int l = 0; l < LANES; l++) vec_sq += SQW'(unsigned'(32'(y_i[l] * y_i[l])));
  end

  typedef enum logic [2:0] {S_ACC, S_LOAD, S_SQRT, S_DIV, S_MUL} st_e;
  st_e st_q;
  logic          pl_q;     // per-lane mode of the running computation
  logic [LW-1:0] ln_q;     // lane whose sigma is being computed
  logic [31:0] rad_q;      // radicand, mean in Q.16
  logic [17:0] rem_q;
  logic [15:0] root_q;     // sigma in Q8.8
  logic [32:0] quo_q;      // sigma^-1 in Q.24
  logic [15:0] drem_q;
  logic [5:0]  cnt_q;
  logic [SCALE_W-1:0] snext_q;

  logic [SQW+15:0] mean_full;
  assign mean_full = {sumsq_q[ln_q], 16'b0} >> log2_dim_i;

  logic [19:0] sq_rem_sh, sq_trial;
  assign sq_rem_sh = {rem_q, rad_q[31:30]};
  assign sq_trial  = {2'b00, root_q, 2'b01};
  logic [16:0] dv_sh;
  assign dv_sh = {drem_q, (cnt_q == 6'd32)};  // dividend 2^32: only its MSB is 1

  logic [65:0] prod;
  logic [SCALE_W-1:0] s_new;
  always_comb begin
    prod  = (66'(quo_q) * 66'(snext_q)) >> SCALE_FRAC;
    s_new = (prod > 66'(SCALE_W'('1))) ? '1 : prod[SCALE_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_ACC; pl_q <= 1'b0; ln_q <= '0; rad_q <= '0; rem_q <= '0; root_q <= '0;
      quo_q <= '0; drem_q <= '0; cnt_q <= '0; snext_q <= '0;
      s_star_valid_o <= 1'b0;
      for (int l = 0; l < LANES; l++) begin sumsq_q[l] <= '0; s_star_o[l] <= '0; end
    end else begin
      s_star_valid_o <= 1'b0;
      unique case (st_q)
        S_ACC: if (valid_i) begin
          if (per_lane_i)
            for (int l = 0; l < LANES; l++)
              sumsq_q[l] <= sumsq_q[l] + SQW'(unsigned'(32'(y_i[l] * y_i[l])));
          else
            sumsq_q[0] <= sumsq_q[0] + vec_sq;
          if (last_i) begin
            pl_q    <= per_lane_i;
            ln_q    <= '0;
            snext_q <= s_next_i;
            st_q    <= S_LOAD;
          end
        end
        S_LOAD: begin
          rad_q  <= (mean_full > 56'hFFFF_FFFF) ? 32'hFFFF_FFFF : mean_full[31:0];
          rem_q  <= '0; root_q <= '0; cnt_q <= 6'd0;
          st_q   <= S_SQRT;
        end
        S_SQRT: begin
          rad_q <= rad_q << 2;
          if (sq_rem_sh >= sq_trial) begin
            rem_q  <= 18'(sq_rem_sh - sq_trial);
            root_q <= {root_q[14:0], 1'b1};
          end else begin
            rem_q  <= sq_rem_sh[17:0];
            root_q <= {root_q[14:0], 1'b0};
          end
          if (cnt_q == 6'd15) begin cnt_q <= 6'd32; drem_q <= '0; quo_q <= '0; st_q <= S_DIV; end
          else cnt_q <= cnt_q + 6'd1;
        end
        S_DIV: begin
          if (root_q == '0) begin
            quo_q <= '1; st_q <= S_MUL;
          end else begin
            if (dv_sh >= {1'b0, root_q}) begin
              drem_q <= 16'(dv_sh - {1'b0, root_q});
              quo_q  <= {quo_q[31:0], 1'b1};
            end else begin
              drem_q <= dv_sh[15:0];
              quo_q  <= {quo_q[31:0], 1'b0};
            end
            if (cnt_q == 6'd0) st_q <= S_MUL;
            else cnt_q <= cnt_q - 6'd1;
          end
        end
        S_MUL: begin
          if (pl_q) s_star_o[ln_q] <= s_new;
          else for (int l = 0; l < LANES; l++) s_star_o[l] <= s_new;
          if (!pl_q || ln_q == LW'(LANES - 1)) begin
            s_star_valid_o <= 1'b1;
            for (int l = 0; l < LANES; l++) sumsq_q[l] <= '0;
            st_q <= S_ACC;
          end else begin
            ln_q <= ln_q + LW'(1);
            st_q <= S_LOAD;
          end
        end
        default: st_q <= S_ACC;
      endcase
    end
  end
  assign busy_o = (st_q != S_ACC);
endmodule
