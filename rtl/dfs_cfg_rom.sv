// dfs_cfg_rom: the DFS configuration BRAM, one MMCM parameter set per
// frequency index. A read returns the set one clock after addr (block-RAM
// timing).
//
// The paper leaves the content to the user (up to 1024 sets, 0.125 MHz
// minimum step, 5-800 MHz range). The default content is computed here:
// entry i targets f_i = F_MIN_KHZ + i * F_STEP_KHZ, i.e. 5.000 to
// 132.875 MHz in 0.125 MHz steps for the defaults. The input divider D
// (DIVCLK_DIVIDE), the feedback multiplier M and the output divider O (M and
// O in 1/8 steps, as the MMCM's fractional dividers allow) are the triple,
// among all that keep the phase detector at 10 MHz or more and the VCO
// (F_REF_KHZ * M / D) within 600-1200 MHz, whose
//   f_out = F_REF_KHZ * M / (D * O)
// is closest to f_i. Each entry is a constant computed during elaboration,
// so the table is fixed at build time like an initialised block RAM.
// The field layout of a set (mmcm_params_t) is this design's choice.
`timescale 1ns/1ps
module dfs_cfg_rom
  import soc_pkg::*;
#(
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned F_MIN_KHZ  = 5000,
  parameter int unsigned F_STEP_KHZ = 125,
  parameter int unsigned F_REF_KHZ  = 50000
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output mmcm_params_t             data
);
  // Search every input divider D (phase detector at 10 MHz or more) and
  // every feedback multiplier M (1/8 steps, at most 64) that keeps the VCO in
  // 600-1200 MHz, pair them with the nearest output divider O (1/8 steps,
  // 1 to 128) and keep the triple closest to the target.
  function automatic mmcm_params_t params_for(int unsigned i);
    longint unsigned f, m_lo, m_hi, o8, den, best_err, best_den, err, num;
    mmcm_params_t p;
    f        = 64'(F_MIN_KHZ) + 64'(i) * 64'(F_STEP_KHZ);
    best_err = 64'd1 << 40;
    best_den = 1;
    p = '{mult_x8: 12'd64, odiv_x8: 12'd1024, divclk: 8'd1};
    for (longint unsigned d = 1; d * 10000 <= 64'(F_REF_KHZ); d++) begin
      m_lo = (600000 * 8 * d + 64'(F_REF_KHZ) - 1) / 64'(F_REF_KHZ);
      m_hi = (1200000 * 8 * d) / 64'(F_REF_KHZ);
      if (m_hi > 512) m_hi = 512;
      for (longint unsigned m8 = m_lo; m8 <= m_hi; m8++) begin
        num = 64'(F_REF_KHZ) * m8;
        o8  = (2 * num / (f * d) + 1) / 2;  // rounded F_REF*M/(D*f)
        if (o8 < 8)    o8 = 8;
        if (o8 > 1024) o8 = 1024;
        den = f * d * o8;
        err = (num > den) ? num - den : den - num;
        // relative error is err / den; compare the fractions exactly
        if (err * best_den < best_err * den) begin
          best_err = err;
          best_den = den;
          p = '{mult_x8: 12'(m8), odiv_x8: 12'(o8), divclk: 8'(d)};
        end
      end
    end
    return p;
  endfunction

  // One constant per entry, each computed while the design is elaborated;
  // the whole table is a read-only memory with a registered output.
  mmcm_params_t rom [DEPTH];
  for (genvar g = 0; g < DEPTH; g++) begin : g_entry
    localparam mmcm_params_t P = params_for(g);
    assign rom[g] = P;
  end

  always_ff @(posedge clk) data <= rom[addr];
endmodule
