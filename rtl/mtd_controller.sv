// mtd_controller: the run-time controller of the moving-target response. It
// takes the sensor's trigger and starts a relocation of the protected
// registers.
//
// Each rising edge of the latched alarm, when enabled (en), and each manual
// request (manual) makes one relocation pending. A pending relocation is
// issued as a one-cycle reloc pulse to the key store as soon as the key store is
// not busy; the same pulse is brought out as pr_trigger for an external
// processor that performs the partial-reconfiguration variant of the move.
// reloc_count counts issued relocations (saturating). Edge triggering, the
// pending flag and the counter are this design's choices.
//
// Timing: reloc follows the alarm edge by one cycle when the store is idle.
module mtd_controller #(
  parameter int unsigned CW = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic          alarm,
  input  logic          manual,
  input  logic          busy,
  output logic          reloc,
  output logic          pr_trigger,
  output logic [CW-1:0] reloc_count
);
  logic alarm_q;
  logic pending;
  logic want;

  assign want       = (en && alarm && !alarm_q) || manual;
  assign pr_trigger = reloc;

  always_ff @(posedge clk) begin
    if (rst) begin
      alarm_q     <= 1'b0;
      pending     <= 1'b0;
      reloc       <= 1'b0;
      reloc_count <= '0;
    end else begin
      alarm_q <= alarm;
      reloc   <= 1'b0;
      if ((pending || want) && !busy && !reloc) begin
        reloc   <= 1'b1;
        pending <= pending && want;   // a new request during issue stays pending
        if (reloc_count != '1) reloc_count <= reloc_count + 1'b1;
      end else if (want) begin
        pending <= 1'b1;
      end
    end
  end
endmodule
