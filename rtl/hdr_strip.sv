// hdr_strip: removes the header beat of each write packet, leaving the bare
// payload stream for an SCU that computes its own destinations. The header
// fields are exposed while the header beat is presented (hdr_valid).
module hdr_strip
  import scenic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axis_beat_t in_beat,
  input  logic       in_valid,
  output logic       in_ready,
  output axis_beat_t out_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output logic       hdr_valid
);
  logic in_body;
  assign out_beat  = in_beat;
  assign out_valid = in_body && in_valid;
  assign in_ready  = in_body ? out_ready : 1'b1;
  assign hdr_valid = !in_body && in_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_body <= 1'b0;
    else if (in_valid && in_ready) in_body <= in_body ? !in_beat.last : !in_beat.last;
  end
endmodule
