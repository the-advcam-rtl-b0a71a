// fadc_ti_mux: output multiplexer of one time-interleaved FADC channel.
//
// The converter samples its input with eight SAR ADCs in turn, each producing
// a 12-bit word once every eight sample periods. This block is the "8 to 1 mux
// x12" between the SARs and the output drivers: a 3-bit phase counter, advanced
// every sample clock, picks the SAR whose conversion belongs to the current
// sample, so the output is one 12-bit word per clock in sampling order.
//
// Interface: sar_data[k] is the word last converted by SAR k and is held by
// that SAR for eight clocks. sync forces the phase back to SAR0 (alignment of
// the phase with the SAR sequencing clock). dout is registered: the word of
// SAR k selected in a cycle appears on dout one clock later.
//
// The SAR count and word width follow the described converter; the phase
// counter, the sync input and the output register are this design's choice.
module fadc_ti_mux
  import advcam_pkg::*;
#(
  parameter int unsigned NSAR = N_SAR,
  parameter int unsigned W    = ADC_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sync,
  input  logic [NSAR-1:0][W-1:0]   sar_data,
  output logic [W-1:0]             dout,
  output logic [$clog2(NSAR)-1:0]  phase
);

  localparam int unsigned PW = $clog2(NSAR);

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      phase <= '0;
    end else if (phase == PW'(NSAR - 1)) begin
      phase <= '0;
    end else begin
      phase <= phase + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else     dout <= sar_data[phase];
  end

endmodule
