// adc_model: behavioural model of the 18-bit SAR converter on its serial
// link, for simulation only (not synthesizable).
//
// A rising edge on cnv samples `value` and raises busy; busy falls T_CONV
// time units later with the MSB on sdo. Each falling edge of sclk then
// moves the next bit onto sdo. `conversions` counts the conversions started.
module adc_model
  import flex_adc_pkg::*;
#(
  parameter int T_CONV = 203
) (
  input  logic    cnv,
  input  logic    sclk,
  input  sample_t value,
  output logic    sdo,
  output logic    busy,
  output int      conversions
);

  logic [SAMPLE_W-1:0] sh;

  initial begin
    busy        = 1'b0;
    sdo         = 1'b0;
    sh          = '0;
    conversions = 0;
  end

  always @(posedge cnv) begin
    sh          = value;
    busy        = 1'b1;
    conversions = conversions + 1;
    #T_CONV;
    busy = 1'b0;
    sdo  = sh[SAMPLE_W-1];
  end

  always @(negedge sclk) begin
    if (!busy) begin
      sh  = sh << 1;
      sdo = sh[SAMPLE_W-1];
    end
  end

endmodule
