// comparator: behavioural model of the clocked rail-to-rail comparator that
// decides between the MAV voltage of the computing array and the reference of
// the digitizing array. The silicon part couples an n-type and a p-type
// latch-comparator so that inputs near either rail are resolved; it is analog.
//
// While the comparator clock CMP is high the output shows the decision
// (1 when in1 is at or above in2 plus the input offset); while CMP is low both
// latches are reset and the output is 0. The digitization controller samples the
// output at the end of the CMP phase. Ports follow the paper's figure (IN1, IN2,
// CMP); the single output and the treatment of an exact tie as 1 are this
// model's choices. OFFSET is an input-referred offset in volt_t units (0: ideal).
module comparator #(
  parameter int OFFSET = 0
) (
  input  logic           cmp,   // comparator clock / strobe
  input  mic_pkg::volt_t in1,   // MAV (computing array's sum line)
  input  mic_pkg::volt_t in2,   // reference (digitizing array's sum line)
  output logic           out
);

  assign out = cmp && ((int'(in1) + OFFSET) >= int'(in2));

endmodule
