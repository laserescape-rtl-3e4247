// idelay_chain: a chain of 2**N_LOG2 IDELAYE2 elements driven by one
// (N_LOG2 + 5)-bit tune value, used to delay the sensor's clock path.
//
// Decode (as described for LaserEscape): the five least significant tune bits
// set the delay of one element (the "fine" element); the N_LOG2 most
// significant bits, k, say how many of the remaining elements get the maximum
// tap count 5'b11111; the rest get 5'b00000. The placement follows the printed
// 4-long example, tune = 7'b1000101, whose taps from input to output are
// 00000, 00101, 11111, 11111: elements before the fine element are at minimum,
// the fine element is element LEN-1-k, and the k elements after it are at
// maximum. The total delay is therefore monotonic in the tune value.
//
// Interface: tune is static configuration (it may change at any time, the
// delay follows at once). taps exposes the decoded per-element tap counts.
module idelay_chain #(
  parameter int unsigned N_LOG2 = laser_escape_pkg::CHAIN_LOG2,
  localparam int unsigned LEN    = 2 ** N_LOG2,
  localparam int unsigned TUNE_W = N_LOG2 + 5
) (
  input  logic              in,
  input  logic [TUNE_W-1:0] tune,
  output logic              out,
  output logic [LEN-1:0][4:0] taps
);
  logic [N_LOG2-1:0] n_max;
  logic [4:0]        fine;
  logic [LEN:0]      link;

  assign n_max = tune[TUNE_W-1:5];
  assign fine  = tune[4:0];

  always_comb begin
    for (int e = 0; e < LEN; e++) begin
      if (e == LEN - 1 - int'(n_max))      taps[e] = fine;
      else if (e > LEN - 1 - int'(n_max))  taps[e] = 5'b11111;
      else                                 taps[e] = 5'b00000;
    end
  end

  assign link[0] = in;
  for (genvar e = 0; e < LEN; e++) begin : g_elem
    idelaye2_model u_dly (
      .IDATAIN   (link[e]),
      .CNTVALUEIN(taps[e]),
      .DATAOUT   (link[e+1])
    );
  end
  assign out = link[LEN];
endmodule
