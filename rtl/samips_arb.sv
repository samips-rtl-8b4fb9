// samips_arb -- two-way arbitrating merge of handshake channels.
//
// Joins two push channels into one, the job of the Arb1 and Arb2 arbiters of the IF stage
// (Arb1: PCplus4 and MEMch into NTarget1; Arb2: EXch and IDch into NTarget2) and of the
// operand multiplexers Mux1/Mux2 of the EX stage (ReadData0/1 and FOp0/1 into Op0/1).
// It holds no storage: a request is passed straight through and acknowledged when the
// output accepts it. When both inputs request in the same cycle, input a wins; the
// clockless original settles such a race with a mutual-exclusion element, so the fixed
// priority is this design's own choice. Combinational from input to output, no latency.
module samips_arb #(
  parameter type T = logic [31:0]
) (
  input  logic a_valid,
  output logic a_ready,
  input  T     a_data,
  input  logic b_valid,
  output logic b_ready,
  input  T     b_data,
  output logic y_valid,
  input  logic y_ready,
  output T     y_data
);
  always_comb begin
    y_valid = a_valid | b_valid;
    y_data  = a_valid ? a_data : b_data;
    a_ready = y_ready & a_valid;
    b_ready = y_ready & ~a_valid & b_valid;
  end
endmodule
