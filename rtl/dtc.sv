// dtc: digital-to-time converter for one PE column (K time-domain inputs).
//
// Converts K unsigned P-bit words into fixed-amplitude pulses whose length in
// clock cycles equals the word value.  As in the paper's DTC, one P-bit
// counter is shared by all K inputs and each input has a P-bit comparator and
// a 1-bit latch: a start pulse captures the words, sets every latch whose word
// is non-zero, and the counter then runs for 2**P cycles (the phase-I input
// window T_int, 16 cycles of the 1 GHz clock for P = 4); a latch is cleared
// when the counter reaches its word.
//
// Interface: start (1 cycle) while din holds the words; en gates the whole
// column (its column-select).  Timing: pulse[i] is high in the 2**P-cycle
// window starting the cycle after start, for din[i] cycles; busy covers the
// window.  Capturing din at start (so the buffers may be reloaded during the
// window) is this design's choice.
module dtc #(
  parameter int K = acortex_pkg::K_DEF,
  parameter int P = acortex_pkg::P_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 en,
  input  logic [K-1:0][P-1:0]  din,
  output logic [K-1:0]         pulse,
  output logic                 busy
);
  logic [P-1:0]         cnt;    // shared counter
  logic [K-1:0][P-1:0]  word;   // captured inputs

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      busy  <= 1'b0;
      pulse <= '0;
      word  <= '0;
    end else if (start) begin
      cnt  <= '0;
      busy <= 1'b1;
      word <= din;
      for (int i = 0; i < K; i++) pulse[i] <= en && (din[i] != '0);
    end else if (busy) begin
      cnt <= cnt + 1'b1;
      if (cnt == {P{1'b1}}) busy <= 1'b0;
      // comparator: clear the latch when the counter reaches the word
      for (int i = 0; i < K; i++)
        if (P'(cnt + 1'b1) == word[i]) pulse[i] <= 1'b0;
    end
  end
endmodule
