// dig_controller: the memory-immersed digitization controller. It decides, cycle
// by cycle, which reference each ADC-configured array generates, strobes the
// comparators, and narrows the range that holds the MAV until the output code is
// known.
//
// Search state: an interval [lo, hi] of codes that can still hold the answer,
// starting at [0, 2^NBITS-1]. A reference for trial code s is s/2^NBITS * VDD;
// a comparator output of 1 means V_MAV >= reference, so the interval becomes
// [s, hi], otherwise [lo, s-1]. The conversion ends when lo == hi; the code is lo.
//
//   SAR    one reference array (ref 0) and comparator 0, one comparison per cycle.
//          Symmetric search picks s = ceil((lo+hi)/2): the first reference is half
//          scale and each cycle resolves one bit, MSB first (NBITS cycles).
//   FLASH  all NREF reference arrays and comparators in one cycle. Symmetric refs
//          split the range into 2^FLASH_BITS equal parts (8, 16, 24 for 5 bits),
//          which gives the FLASH_BITS most significant bits. The thermometer is
//          decoded by counting ones, so a bubble does not produce a wild code.
//   HYBRID one FLASH cycle for the first bits, then SAR cycles for the rest.
//
// Asymmetric search (asym = 1) exploits the skewed MAV distribution. The first
// reference is the pivot P (default 24 = 0.75 VDD), the second is P-1 below it or
// P+1 above it. Deeper in the tree each split balances probability rather than
// code count: s is the code in (lo, hi] that best halves the expected share of
// MAVs in [lo, hi]. The expected distribution is that of 2^NBITS column lines
// each discharging with probability 1/4 (uniform weight and input bits), with
// every code's weight raised by 1/128 of the total so that rare codes still get a
// bounded search (at most 8 comparisons for 5 bits, 3.6 on average). The table
// is a constant computed at elaboration (build_cdf). In FLASH/HYBRID the three
// references are P-1, P, P+1, i.e. the first two levels of the same tree in one
// cycle. NLINES only shapes that table: with more column lines than codes
// (NLINES = L * 2^NBITS, L lines per LSB) the table follows the coarser codes.
// A pivot for which these references would fall outside the interval (P < 2 or
// P > 2^NBITS-2) falls back to the symmetric search.
//
// Interface and timing: start is sampled in IDLE while the computing array's sum
// line holds V_MAV (from the next cycle on). Each following cycle is one
// comparison cycle: ref_en/ref_code/cmp_en are driven combinationally from the
// state, and cmp_out is sampled at the clock edge that ends the cycle. done
// pulses for one cycle, the cycle after the last comparison, with code and
// ncmp (number of comparison cycles used) valid while done is high and held
// until the next conversion ends. Latency from start: ncmp + 1 cycles, plus one
// cycle for each cycle in which hold is high. hold freezes a running search:
// no reference, no strobe, no change of state. Several controllers that share
// the Flash reference arrays take turns on them this way (CiM network).
//
// From the paper: the SAR, Flash and hybrid flows, the half-scale first reference,
// 2-bit Flash with three reference arrays, the asymmetric tree's first nodes
// (0.75, 0.71875, 0.78125 VDD) and the discharge probability of 1/4. This
// design's choices: the interval formulation, the tie rule, the ones-count Flash
// decoder, the probability-balanced splits below the second tree level with
// their weight floor, and the pivot fallback.
module dig_controller #(
  parameter int unsigned NBITS      = mic_pkg::NBITS,
  parameter int unsigned FLASH_BITS = mic_pkg::FLASH_BITS,
  parameter int unsigned NLINES     = 1 << NBITS,   // column lines per array (statistics only)
  localparam int unsigned NREF      = (1 << FLASH_BITS) - 1,
  localparam int unsigned CNTW      = $clog2(2 * NBITS + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         hold,        // stall: no comparison this cycle
  input  mic_pkg::adc_mode_e           mode,
  input  logic                         asym,
  input  logic [NBITS-1:0]             pivot,
  // reference arrays and comparators
  output logic [NREF-1:0]              ref_en,
  output logic [NREF-1:0][NBITS-1:0]   ref_code,
  output logic [NREF-1:0]              cmp_en,
  input  logic [NREF-1:0]              cmp_out,
  // result
  output logic                         busy,
  output logic                         done,
  output logic [NBITS-1:0]             code,
  output logic [CNTW-1:0]              ncmp,
  output logic                         act_flash,   // this cycle is a Flash cycle
  output logic                         act_sar      // this cycle is a SAR cycle
);

  localparam logic [NBITS-1:0] CMAX = {NBITS{1'b1}};
  localparam int unsigned      QW   = NBITS - FLASH_BITS;
  localparam int unsigned      NC   = 1 << NBITS;
  localparam int unsigned      CW   = 27;
  localparam int unsigned      LPC  = (NLINES >= NC) ? NLINES / NC : 1;

  // Cumulative expected MAV distribution over codes, CDF[c] = weight of codes < c.
  // Each of NLINES column lines discharges with probability 1/4; with L =
  // NLINES/NC lines per code step, code c collects the MAVs with c*L .. c*L+L-1
  // lines left at VDD (the top code also takes all NLINES). Weights are scaled to
  // 2^24 in total, plus a floor of 2^17 per code.
  typedef logic [NC:0][CW-1:0] cdf_t;

  function automatic cdf_t build_cdf();
    cdf_t   c;
    real    p;
    longint w [NC];
    for (int i = 0; i < NC; i++) w[i] = 64'd131072;
    p = 1.0;
    for (int i = 0; i < NLINES; i++) p = p * 0.75;
    for (int d = 0; d <= NLINES; d++) begin
      automatic int ci = (NLINES - d) / LPC;
      if (ci > NC - 1) ci = NC - 1;
      w[ci] += longint'(p * 16777216.0);
      p = p * real'(NLINES - d) / (3.0 * real'(d + 1));
    end
    c[0] = '0;
    for (int i = 0; i < NC; i++) c[i + 1] = c[i] + CW'(w[i]);
    return c;
  endfunction

  localparam cdf_t CDF = build_cdf();

  typedef enum logic [1:0] {S_IDLE, S_FLASH, S_SAR} state_e;

  state_e           state;
  logic [NBITS-1:0] lo, hi;
  mic_pkg::adc_mode_e mode_r;
  logic             asym_r;
  logic [NBITS-1:0] pivot_r;
  logic [CNTW-1:0]  cnt;

  // Pivot usable for the asymmetric references.
  logic piv_ok;
  assign piv_ok = asym_r && (pivot_r >= NBITS'(2)) && (pivot_r <= CMAX - NBITS'(1));

  // Probability-balanced split of [lo, hi]: the s in (lo, hi] whose share of
  // expected MAVs below it is closest to half (first such s on a tie).
  logic [NBITS-1:0] s_bal;
  logic [CW:0]      tsum, key, best;
  always_comb begin
    tsum  = {1'b0, CDF[lo]} + {1'b0, CDF[32'(hi) + 1]};
    s_bal = hi;
    best  = '1;
    key   = '0;
    for (int s = 1; s < NC; s++) begin
      if (s > int'(lo) && s <= int'(hi)) begin
        key = ({CDF[s], 1'b0} >= tsum) ? ({CDF[s], 1'b0} - tsum) : (tsum - {CDF[s], 1'b0});
        if (key < best) begin
          best  = key;
          s_bal = NBITS'(s);
        end
      end
    end
  end

  // SAR trial code for interval [lo, hi], lo < hi.
  logic [NBITS-1:0] s_sar;
  always_comb begin
    s_sar = NBITS'(({1'b0, lo} + {1'b0, hi} + 1'b1) >> 1);
    if (piv_ok) begin
      if (lo == '0 && hi == CMAX)                 s_sar = pivot_r;
      else if (lo == '0 && hi == pivot_r - 1'b1)  s_sar = pivot_r - 1'b1;
      else if (lo == pivot_r && hi == CMAX)       s_sar = pivot_r + 1'b1;
      else                                        s_sar = s_bal;
    end
  end

  // Flash references, ascending.
  logic [NREF-1:0][NBITS-1:0] r_fl;
  always_comb begin
    for (int i = 0; i < NREF; i++) begin
      if (piv_ok) r_fl[i] = NBITS'(int'(pivot_r) + i - int'(NREF / 2));
      else        r_fl[i] = NBITS'((i + 1) << QW);
    end
  end

  // Ones count of the Flash thermometer.
  logic [FLASH_BITS-1:0] nones;
  always_comb begin
    nones = '0;
    for (int i = 0; i < NREF; i++) nones += FLASH_BITS'(cmp_out[i]);
  end

  // Interval after this cycle's comparison(s).
  logic [NBITS-1:0] lo_n, hi_n;
  always_comb begin
    lo_n = lo;
    hi_n = hi;
    if (state == S_SAR) begin
      if (cmp_out[0]) lo_n = s_sar;
      else            hi_n = s_sar - 1'b1;
    end else if (state == S_FLASH) begin
      lo_n = (nones == 0) ? '0 : r_fl[nones - 1];
      hi_n = (int'(nones) == NREF) ? CMAX : r_fl[nones] - 1'b1;
    end
  end

  // Drive references and comparator strobes.
  always_comb begin
    ref_en   = '0;
    ref_code = '0;
    cmp_en   = '0;
    if (hold) begin
      // stalled: references and comparators stay idle
    end else if (state == S_SAR) begin
      ref_en[0]   = 1'b1;
      ref_code[0] = s_sar;
      cmp_en[0]   = 1'b1;
    end else if (state == S_FLASH) begin
      ref_en   = '1;
      ref_code = r_fl;
      cmp_en   = '1;
    end
  end

  assign act_flash = (state == S_FLASH) && !hold;
  assign act_sar   = (state == S_SAR) && !hold;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      lo      <= '0;
      hi      <= CMAX;
      mode_r  <= mic_pkg::MODE_SAR;
      asym_r  <= 1'b0;
      pivot_r <= '0;
      cnt     <= '0;
      done    <= 1'b0;
      code    <= '0;
      ncmp    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            lo      <= '0;
            hi      <= CMAX;
            cnt     <= '0;
            mode_r  <= mode;
            asym_r  <= asym;
            pivot_r <= pivot;
            state   <= (mode == mic_pkg::MODE_SAR) ? S_SAR : S_FLASH;
          end
        end
        S_FLASH, S_SAR: if (!hold) begin
          lo  <= lo_n;
          hi  <= hi_n;
          cnt <= cnt + 1'b1;
          if (lo_n == hi_n || (state == S_FLASH && mode_r == mic_pkg::MODE_FLASH)) begin
            state <= S_IDLE;
            done  <= 1'b1;
            code  <= lo_n;
            ncmp  <= cnt + 1'b1;
          end else begin
            state <= S_SAR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The interval never empties and SAR never runs on a single code.
  a_interval: assert property (@(posedge clk) disable iff (!rst_n)
                               (state != S_IDLE) |-> (lo <= hi));
  a_sar_split: assert property (@(posedge clk) disable iff (!rst_n)
                                (state == S_SAR) |-> (s_sar > lo && s_sar <= hi));

endmodule
