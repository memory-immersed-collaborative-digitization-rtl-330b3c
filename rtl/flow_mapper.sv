// flow_mapper: the CiM compute flow mapper. It sequences one operation: the
// scalar product of one stored weight row with a multi-bit input vector, applied
// one input bit plane at a time, each bit-plane MAV being digitized by the
// neighbouring arrays before the next plane is applied.
//
// Per bit plane (plane 0 first):
//   COMP  one cycle: the computing array evaluates the product of the selected
//         row and the bit plane, its sum line merges the column lines, and the
//         digitization controller is started (start is sampled as the cycle
//         ends, so the controller finds V_MAV held on the sum line).
//   WAIT  until the controller reports done; the code is then emitted on
//         out_valid/out_code with its plane and computing-array index.
// After the last plane the operation ends (done pulse), unless alt is set in
// SAR mode: then the two paired arrays swap roles and the whole sequence runs
// again on the other array's row, so each array computes while the other
// digitizes, as the paper describes for the left/right pair.
//
// The computing array is cim_sel (0 = A1, 1 = A2) in SAR mode and always A1 in
// Flash and hybrid modes, where A2-A4 are the reference arrays. mode, cim_sel and alt
// are sampled at start. One cycle per plane passes between done and the next COMP.
// The paper names this block and the bit-plane flow; the plane order, the
// handshake and the output stream are this design's choices.
module flow_mapper #(
  parameter int unsigned ROWS  = mic_pkg::ROWS,
  parameter int unsigned IBITS = mic_pkg::IBITS,
  parameter int unsigned NBITS = mic_pkg::NBITS,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned PW   = (IBITS > 1) ? $clog2(IBITS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [RW-1:0]    row,
  input  mic_pkg::adc_mode_e mode,
  input  logic             cim_sel,
  input  logic             alt,
  // to the arrays
  output logic             compute,    // COMP cycle
  output logic             comp_arr,   // computing array: 0 = A1, 1 = A2
  output logic [RW-1:0]    row_q,
  output logic [PW-1:0]    plane,
  // to/from the digitization controller
  output logic             adc_start,
  input  logic             adc_done,
  input  logic [NBITS-1:0] adc_code,
  // results
  output logic             out_valid,
  output logic [NBITS-1:0] out_code,
  output logic [PW-1:0]    out_plane,
  output logic             out_arr,
  output logic             busy,
  output logic             done,
  output logic             swapped     // pulses when the pair swaps roles
);

  typedef enum logic [1:0] {M_IDLE, M_COMP, M_WAIT} mstate_e;

  mstate_e state;
  logic    second;      // second pass with roles swapped
  logic    arr;
  logic    alt_r;

  assign compute   = (state == M_COMP);
  assign adc_start = (state == M_COMP);
  assign comp_arr  = arr;
  assign busy      = (state != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_IDLE;
      second    <= 1'b0;
      arr       <= 1'b0;
      alt_r     <= 1'b0;
      row_q     <= '0;
      plane     <= '0;
      out_valid <= 1'b0;
      out_code  <= '0;
      out_plane <= '0;
      out_arr   <= 1'b0;
      done      <= 1'b0;
      swapped   <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      swapped   <= 1'b0;
      unique case (state)
        M_IDLE: begin
          if (start) begin
            state  <= M_COMP;
            row_q  <= row;
            plane  <= '0;
            second <= 1'b0;
            arr    <= (mode == mic_pkg::MODE_SAR) ? cim_sel : 1'b0;
            alt_r  <= (mode == mic_pkg::MODE_SAR) && alt;
          end
        end
        M_COMP: state <= M_WAIT;
        M_WAIT: begin
          if (adc_done) begin
            out_valid <= 1'b1;
            out_code  <= adc_code;
            out_plane <= plane;
            out_arr   <= arr;
            if (int'(plane) == IBITS - 1) begin
              plane <= '0;
              if (alt_r && !second) begin
                second  <= 1'b1;
                arr     <= ~arr;
                swapped <= 1'b1;
                state   <= M_COMP;
              end else begin
                state <= M_IDLE;
                done  <= 1'b1;
              end
            end else begin
              plane <= plane + 1'b1;
              state <= M_COMP;
            end
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

endmodule
