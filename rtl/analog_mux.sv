// analog_mux: behavioural model of the analog multiplexers that network the CiM
// arrays with the comparators. In silicon these are transmission-gate muxes on
// sum-line voltages.
//
// Comparator i receives on its first input the sum line of the array selected by
// pos_sel[i] (a dot-product-configured array holding V_MAV) and on its second
// input the sum line of the array selected by neg_sel[i] (an ADC-configured array
// generating a reference). With one computing array wired to three reference
// arrays all comparators resolve at once (Flash); with a single pair only
// comparator 0 is used (SAR). Combinational.
module analog_mux #(
  parameter int unsigned NARR = mic_pkg::NARR,
  parameter int unsigned NCMP = mic_pkg::NREF,
  localparam int unsigned AW  = $clog2(NARR)
) (
  input  mic_pkg::volt_t         sl      [NARR],
  input  logic [NCMP-1:0][AW-1:0] pos_sel,
  input  logic [NCMP-1:0][AW-1:0] neg_sel,
  output mic_pkg::volt_t         cmp_pos [NCMP],
  output mic_pkg::volt_t         cmp_neg [NCMP]
);

  always_comb begin
    for (int i = 0; i < NCMP; i++) begin
      cmp_pos[i] = sl[pos_sel[i]];
      cmp_neg[i] = sl[neg_sel[i]];
    end
  end

endmodule
