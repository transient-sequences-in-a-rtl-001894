// dac_formatter: codes for the six 12-bit DACs that make the network visible.
//
// Channels 0..4 carry x_1..x_5, channel 5 carries q. A value v in [-1, 1) is
// mapped to the offset-binary code floor((v + 1) * 2^(DAC_BITS-1)) and
// saturated to 0 .. 2^DAC_BITS - 1; one code step is 2^-(DAC_BITS-1). The
// 12-bit width follows the paper; the range, offset and parallel output are
// this design's choices since the DAC part is not named.
//
// Interface: codes are registered on 'step' (sampled from the x and q of the
// step that just ended) and 'valid' pulses with them for one clock.
module dac_formatter
  import hn_pkg::*;
#(
  parameter int DAC_BITS = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                step,
  input  fx_t                 x [N_NODES],
  input  fx_t                 q,
  output logic [DAC_BITS-1:0] code [N_NODES+1],
  output logic                valid
);
  localparam int SH = FRAC - (DAC_BITS - 1);

  function automatic logic [DAC_BITS-1:0] to_code(fx_t v);
    fx_t s;
    s = (v >>> SH) + fx_t'(1 <<< (DAC_BITS - 1));
    if (s < 0)                          return '0;
    else if (s > fx_t'((1 <<< DAC_BITS) - 1)) return '1;
    else                                return s[DAC_BITS-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c <= N_NODES; c++) code[c] <= '0;
      valid <= 1'b0;
    end else begin
      valid <= step;
      if (step) begin
        for (int c = 0; c < N_NODES; c++) code[c] <= to_code(x[c]);
        code[N_NODES] <= to_code(q);
      end
    end
  end
endmodule
