// hbf_prefetcher: adaptive-degree stride prefetcher for the HBF side of the memory
// controller.
//
// A tiled matmul walks the weight matrix along K in fixed steps, so every demand page is
// followed by pages exactly one compute-tile step apart. For each demand access to HBF
// this prefetcher issues d further reads at addr + k*stride, k = 1..d. The degree is
// chosen so that all in-flight requests fill the bus for a whole NAND read latency:
//   p_wave = active_ctas * p_tile            (requests the GPU issues per K-iteration)
//   d      = min( floor(2 * BL / p_wave), K/TILE_K )
// BL is the bus bandwidth times the NAND read latency, in requests; the factor 2 makes up
// for NAND plane collisions; K/TILE_K (the K-iterations per tensor) keeps prefetches
// inside the tensor. active_ctas rises on cta_launch and falls on cta_retire, so d grows
// at once as CTAs retire near the end of a kernel. With the SRAM-buffer option enabled
// the prefetcher issues distances 1..2d: 1..d are tagged for the L2, d+1..2d for the
// SRAM buffer (pf_sram = 1).
//
// Implementation: the division runs in a restoring divider (DIV_W cycles) that restarts
// whenever its inputs change; `degree` keeps the previous value until it finishes. With
// no active CTA the degree is the K/TILE_K cap.
// Interface: trig_valid/trig_ready takes a demand address (taken only when idle); the
// prefetch addresses then leave on pf_valid/pf_ready, one per cycle. The stride is in
// bytes. Follows the paper: the degree formula, factor 2, cap, adaptation to retiring
// CTAs, two-tier distances. This design's choice: the divider, the one-trigger-at-a-time
// handshake, the counter widths.
module hbf_prefetcher
  import tilelens_pkg::*;
#(
  parameter int unsigned DIV_W   = 32,
  parameter int unsigned DEG_W   = 16,
  parameter int unsigned CTA_W   = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_en,
  input  logic              cfg_sram_en,
  input  logic [DIV_W-1:0]  cfg_bl,        // B*L in requests
  input  logic [15:0]       cfg_p_tile,    // requests per compute tile
  input  logic [DEG_W-1:0]  cfg_k_iters,   // K / TILE_K
  input  addr_t             cfg_stride,    // bytes between successive K-iterations
  input  logic              cta_launch,
  input  logic              cta_retire,
  input  logic              trig_valid,
  output logic              trig_ready,
  input  addr_t             trig_addr,
  output logic              pf_valid,
  input  logic              pf_ready,
  output addr_t             pf_addr,
  output logic              pf_sram,
  output logic [DEG_W-1:0]  degree,
  output logic [CTA_W-1:0]  active_ctas
);
  // ---- p_wave and degree ------------------------------------------------------------
  logic [DIV_W-1:0] num, den, num_q, den_q;
  logic [DIV_W-1:0] rem, quo, dvd;
  logic [$clog2(DIV_W+1)-1:0] step;
  logic             div_busy;
  logic [DIV_W:0]   trial;

  assign num = cfg_bl << 1;
  assign den = DIV_W'(active_ctas) * DIV_W'(cfg_p_tile);
  assign trial = {rem, dvd[DIV_W-1]} - {1'b0, den_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_ctas <= '0;
    end else if (cta_launch && !cta_retire) begin
      active_ctas <= active_ctas + 1'b1;
    end else if (cta_retire && !cta_launch && active_ctas != '0) begin
      active_ctas <= active_ctas - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_q    <= '0;
      den_q    <= '0;
      rem      <= '0;
      quo      <= '0;
      dvd      <= '0;
      step     <= '0;
      div_busy <= 1'b0;
      degree   <= '0;
    end else if (num != num_q || den != den_q) begin
      // inputs changed: restart the division
      num_q    <= num;
      den_q    <= den;
      rem      <= '0;
      quo      <= '0;
      dvd      <= num;
      step     <= '0;
      div_busy <= (den != '0);
      if (den == '0) degree <= cfg_k_iters;
    end else if (div_busy) begin
      if (!trial[DIV_W]) begin
        rem <= trial[DIV_W-1:0];
        quo <= {quo[DIV_W-2:0], 1'b1};
      end else begin
        rem <= {rem[DIV_W-2:0], dvd[DIV_W-1]};
        quo <= {quo[DIV_W-2:0], 1'b0};
      end
      dvd  <= dvd << 1;
      step <= step + 1'b1;
      if (step == ($clog2(DIV_W+1))'(DIV_W - 1)) div_busy <= 1'b0;
    end else if (den_q != '0) begin
      degree <= (quo > DIV_W'(cfg_k_iters)) ? cfg_k_iters : DEG_W'(quo);
    end else begin
      degree <= cfg_k_iters;
    end
  end

  // ---- prefetch issue -----------------------------------------------------------------
  logic             active;
  addr_t            next_addr;
  logic [DEG_W:0]   k, k_max;
  logic [DEG_W-1:0] d_q;

  assign trig_ready = !active;
  assign pf_valid   = active;
  assign pf_addr    = next_addr;
  assign pf_sram    = (k > {1'b0, d_q});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      next_addr <= '0;
      k         <= '0;
      k_max     <= '0;
      d_q       <= '0;
    end else if (!active) begin
      if (trig_valid && cfg_en && degree != '0) begin
        active    <= 1'b1;
        next_addr <= trig_addr + cfg_stride;
        k         <= 1;
        d_q       <= degree;
        k_max     <= cfg_sram_en ? ({1'b0, degree} << 1) : {1'b0, degree};
      end
    end else if (pf_ready) begin
      next_addr <= next_addr + cfg_stride;
      k         <= k + 1'b1;
      if (k >= k_max) active <= 1'b0;
    end
  end
endmodule
