// bypass_switch: one switch of the bypass connection layer.
//
// PEs talk only to their neighbours: the stream leaving PE k is the stream entering
// PE k+1. The switch beside PE k decides what that stream is. With bypass = 0 the
// upstream stream (up_*) enters the PE and the PE's result (pe_out_*) goes downstream
// (dn_*). With bypass = 1 the upstream stream goes straight downstream and the PE sees
// no input, so a chain of PEs can be cut to the operators an application needs. The
// valid/ready handshake is routed with the data in both directions.
//
// Timing: combinational, no added latency. bypass must change only while the PE and the
// streams are idle (between frames); the switch itself does not check that. That the
// switch chooses between a PE's input and its output follows the architecture; the
// two-way multiplexer form and the handshake are this design's choices.
module bypass_switch
  import pe_pkg::*;
(
  input  logic  bypass,
  // stream arriving from the previous PE (or the sensor I/O)
  input  logic  up_valid,
  input  pix_t  up_data,
  output logic  up_ready,
  // this PE's input
  output logic  pe_in_valid,
  output pix_t  pe_in_data,
  input  logic  pe_in_ready,
  // this PE's output
  input  logic  pe_out_valid,
  input  pix_t  pe_out_data,
  output logic  pe_out_ready,
  // stream leaving towards the next PE (or the array output)
  output logic  dn_valid,
  output pix_t  dn_data,
  input  logic  dn_ready
);

  always_comb begin
    pe_in_data = up_data;
    if (bypass) begin
      pe_in_valid  = 1'b0;
      up_ready     = dn_ready;
      dn_valid     = up_valid;
      dn_data      = up_data;
      pe_out_ready = 1'b0;
    end else begin
      pe_in_valid  = up_valid;
      up_ready     = pe_in_ready;
      dn_valid     = pe_out_valid;
      dn_data      = pe_out_data;
      pe_out_ready = dn_ready;
    end
  end

endmodule
