// sensor_io: digital part of the I/O circuitry layer.
//
// Sensors deliver samples of 8, 12, 14 or 16 bits. This block takes a raw sample on a
// SENSOR_W-bit port, keeps only the low bits of the selected width (fmt), zero-extends the
// sample to the PEs' signed pixel word and registers it onto a valid/ready stream, so the
// processing elements see one format whatever the sensor. The analog and mixed-signal
// front end that would produce the raw sample is outside this block.
//
// Interface: raw_valid/raw_data/raw_ready in, out_valid/out_data/out_ready out, fmt
// (sensor_fmt_e). Timing: one register stage, one sample per clock; a new sample is taken
// whenever the register is empty or being emptied. Masking the unused high bits and
// zero-extending (no rescaling) are this design's choices.
module sensor_io
  import pe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  sensor_fmt_e         fmt,
  input  logic                raw_valid,
  input  logic [SENSOR_W-1:0] raw_data,
  output logic                raw_ready,
  output logic                out_valid,
  output pix_t                out_data,
  input  logic                out_ready
);

  logic [SENSOR_W-1:0] mask;

  always_comb begin
    unique case (fmt)
      FMT_8:   mask = SENSOR_W'(16'h00FF);
      FMT_12:  mask = SENSOR_W'(16'h0FFF);
      FMT_14:  mask = SENSOR_W'(16'h3FFF);
      default: mask = SENSOR_W'(16'hFFFF);
    endcase
  end

  assign raw_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (raw_ready) begin
      out_valid <= raw_valid;
      if (raw_valid) out_data <= pix_t'({1'b0, raw_data & mask});
    end
  end

endmodule
