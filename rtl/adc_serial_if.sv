// adc_serial_if: interface to the 18-bit SAR converter over its 4-wire serial
// link (conversion start, serial clock, serial data, busy).
//
// On each sample_tick the module raises adc_cnv for CNV_CYCLES clock cycles,
// then waits for the converter to drop adc_busy. It then generates 18 serial
// clock periods (SCLK_DIV system cycles low, SCLK_DIV high) and captures
// adc_sdo, most significant bit first, at each rising edge of adc_sclk; the
// converter is expected to present the MSB when busy falls and to move to the
// next bit on each falling edge of adc_sclk. The assembled two's-complement
// word leaves on sample/sample_valid (one-cycle pulse) the cycle after the
// last bit. A tick that arrives while a conversion is still in progress is
// dropped and reported on overrun (one-cycle pulse).
//
// Timing: one conversion takes CNV_CYCLES + t_conv + 36*SCLK_DIV + 2 cycles.
// The paper gives the converter (18 bits, 2 MS/s max, 4-wire protocol, link
// through isolation/LVDS) but not the protocol's waveform: the wire roles,
// the edge on which data is captured and the use of busy are choices of this
// design. The adc_busy and adc_sdo inputs are assumed already synchronous to
// clk (the LVDS receivers and isolation are outside this module).
module adc_serial_if
  import flex_adc_pkg::*;
#(
  parameter int unsigned CNV_CYCLES = 2,  // width of the conversion-start pulse
  parameter int unsigned SCLK_DIV   = 1   // half period of adc_sclk in clk cycles
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sample_tick,   // start a conversion
  // converter pins
  output logic    adc_cnv,
  output logic    adc_sclk,
  input  logic    adc_sdo,
  input  logic    adc_busy,
  // result
  output sample_t sample,
  output logic    sample_valid,
  output logic    overrun
);

  typedef enum logic [2:0] {S_IDLE, S_CNV, S_WAIT_BUSY, S_SCLK_LO, S_SCLK_HI} state_e;

  localparam int unsigned DIV_W = $clog2(SCLK_DIV + 1) + 1;
  localparam int unsigned CNV_W = $clog2(CNV_CYCLES + 1) + 1;

  state_e                  state;
  logic [CNV_W-1:0]        cnv_cnt;
  logic [DIV_W-1:0]        div_cnt;
  logic [4:0]              bit_cnt;
  logic [SAMPLE_W-1:0]     shreg;
  logic                    busy_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cnv_cnt      <= '0;
      div_cnt      <= '0;
      bit_cnt      <= '0;
      shreg        <= '0;
      busy_seen    <= 1'b0;
      adc_cnv      <= 1'b0;
      adc_sclk     <= 1'b0;
      sample       <= '0;
      sample_valid <= 1'b0;
      overrun      <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      overrun      <= sample_tick && (state != S_IDLE);
      unique case (state)
        S_IDLE: begin
          if (sample_tick) begin
            adc_cnv   <= 1'b1;
            cnv_cnt   <= CNV_W'(1);
            busy_seen <= 1'b0;
            state     <= S_CNV;
          end
        end
        S_CNV: begin
          if (adc_busy) busy_seen <= 1'b1;
          if (cnv_cnt >= CNV_W'(CNV_CYCLES)) begin
            adc_cnv <= 1'b0;
            state   <= S_WAIT_BUSY;
          end else begin
            cnv_cnt <= cnv_cnt + 1'b1;
          end
        end
        S_WAIT_BUSY: begin
          // wait for busy to have risen and fallen again
          if (adc_busy) busy_seen <= 1'b1;
          else if (busy_seen) begin
            bit_cnt <= '0;
            div_cnt <= DIV_W'(1);
            state   <= S_SCLK_LO;
          end
        end
        S_SCLK_LO: begin
          if (div_cnt >= DIV_W'(SCLK_DIV)) begin
            adc_sclk <= 1'b1;                     // rising edge: capture
            shreg    <= {shreg[SAMPLE_W-2:0], adc_sdo};
            div_cnt  <= DIV_W'(1);
            state    <= S_SCLK_HI;
          end else begin
            div_cnt <= div_cnt + 1'b1;
          end
        end
        S_SCLK_HI: begin
          if (div_cnt >= DIV_W'(SCLK_DIV)) begin
            adc_sclk <= 1'b0;                     // falling edge: ADC shifts
            div_cnt  <= DIV_W'(1);
            if (bit_cnt == 5'(SAMPLE_W - 1)) begin
              sample       <= sample_t'(shreg);
              sample_valid <= 1'b1;
              state        <= S_IDLE;
            end else begin
              bit_cnt <= bit_cnt + 1'b1;
              state   <= S_SCLK_LO;
            end
          end else begin
            div_cnt <= div_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The conversion-start pulse is only ever raised from idle.
  a_cnv_from_idle: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(adc_cnv) |-> $past(state) == S_IDLE);

endmodule
