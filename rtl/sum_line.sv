// sum_line: behavioural model of the sum line (SL) of one CiM array and its
// column-merge transmission gates. It is analog in silicon and has no logic of
// its own; this model gives the voltage it settles to.
//
// When merge is high the transmission gates join all column lines, and the
// charge they hold is shared: with equal line capacitances the SL settles to
// V = (number of lines at VDD) / COLS * VDD. The settled value is available in
// the same cycle (v_sl) and is held on the SL once the gates open again, which is
// how the computing array keeps V_MAV while its partner steps through the
// references. A clear input discharges the held value.
//
// Voltages are mic_pkg::volt_t, where VFS stands for VDD. Ideal charge sharing
// (no mismatch, no leakage) is this model's simplification; the paper notes that
// the parasitics of merge switches are common-mode between the two arrays.
module sum_line #(
  parameter int unsigned COLS = mic_pkg::COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            merge,   // transmission gates closed
  input  logic            clear,   // discharge the held SL voltage
  input  logic [COLS-1:0] cl,      // column-line levels, 1 = VDD
  output mic_pkg::volt_t  v_sl
);
  import mic_pkg::*;

  localparam int unsigned CW = $clog2(COLS + 1);

  logic [CW-1:0] nhigh;
  volt_t         v_share, v_hold;

  always_comb begin
    nhigh = '0;
    for (int j = 0; j < COLS; j++) nhigh += CW'(cl[j]);
  end

  assign v_share = volt_t'((32'(nhigh) * VFS) / COLS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     v_hold <= '0;
    else if (clear) v_hold <= '0;
    else if (merge) v_hold <= v_share;
  end

  assign v_sl = merge ? v_share : v_hold;

endmodule
