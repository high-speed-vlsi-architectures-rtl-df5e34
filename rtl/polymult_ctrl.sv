// polymult_ctrl -- control unit of the fast parallel multiplier.
//
// Holds the phase counter that every switch of the design is timed from: it
// counts 0..K-1 cyclically from reset, K being the length of the sub-
// polynomials that stream through the systolic arrays (one sub-polynomial
// coefficient per cycle on each lane). A polynomial must enter starting in
// phase 0 (signalled on phase0) and its K cycles must follow without a gap;
// polynomials may follow each other back to back or with whole periods idle
// between them.
//
// The unit also lines the outputs up with the inputs: out_valid and out_first
// are in_valid and "first coefficient group" delayed by LAT cycles, the
// datapath's input-to-output delay (K+2 for the 4-parallel datapath). An
// assertion checks that in_valid only changes at a polynomial boundary.
//
// The paper gives the control unit only as a block that aligns the
// coefficients of the sub-polynomials and a counter that drives the switches;
// the valid/first handshake and the shared free-running counter are this
// design's own choices.
module polymult_ctrl #(
  parameter int unsigned K   = 64,     // period: sub-polynomial length, >= 2
  parameter int unsigned LAT = 66,     // input-to-output delay in cycles, >= 2
  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,   // a coefficient group is applied this cycle
  output logic [PW-1:0] phase,      // 0..K-1
  output logic          phase0,     // phase == 0: a polynomial may start
  output logic          out_valid,  // a result coefficient group is on the outputs
  output logic          out_first   // ... and it is the first of its polynomial
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   phase <= '0;
    else if (phase == PW'(K - 1)) phase <= '0;
    else                          phase <= phase + PW'(1);
  end

  assign phase0 = (phase == '0);

  // delay lines for valid and first
  logic [LAT-1:0] vld_sr, fst_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_sr <= '0;
      fst_sr <= '0;
    end else begin
      vld_sr <= {vld_sr[LAT-2:0], in_valid};
      fst_sr <= {fst_sr[LAT-2:0], in_valid & phase0};
    end
  end

  assign out_valid = vld_sr[LAT-1];
  assign out_first = fst_sr[LAT-1];

  // in_valid may rise or fall only when a new period begins
  logic in_valid_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_valid_q <= 1'b0;
    else        in_valid_q <= in_valid;
  end

  a_valid_at_boundary: assert property (
    @(posedge clk) disable iff (!rst_n) (in_valid != in_valid_q) |-> phase0
  ) else $error("in_valid changed inside a polynomial (phase %0d)", phase);

endmodule
