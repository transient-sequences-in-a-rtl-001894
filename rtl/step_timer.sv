// step_timer: time base of the network. The neuron map runs in discrete time n;
// one step n -> n+1 takes 50 us of real time, which makes spikes and bursts of
// the electronic neurons last as long as those of real neurons. The timer counts
// STEP_CYCLES clock cycles and emits a one-cycle 'step' strobe at the end of
// each period; every state register of the network advances on that strobe.
//
// Interface: 'en' runs the counter; when low the counter holds at zero.
// Timing: the first strobe comes STEP_CYCLES cycles after 'en' goes high, then
// one every STEP_CYCLES cycles. The 50 us step follows the paper; the default
// of 5000 cycles assumes a 100 MHz clock, which the paper does not state.
module step_timer #(
  parameter int unsigned STEP_CYCLES = 5000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic step
);
  localparam int CW = (STEP_CYCLES > 1) ? $clog2(STEP_CYCLES) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      step <= 1'b0;
    end else if (!en) begin
      cnt  <= '0;
      step <= 1'b0;
    end else if (cnt == CW'(STEP_CYCLES - 1)) begin
      cnt  <= '0;
      step <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      step <= 1'b0;
    end
  end
endmodule
