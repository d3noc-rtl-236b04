// modetector: behavioural model of a mo-detector and its node's laser.
//
// Behavioural model, not synthesizable hardware: the real part is a
// racetrack ring beside the bus waveguide, coupled to it by an ITO plasmonic
// 2x2 switch, with a graphene photodetector on the ring.  Without bias the
// switch is in the cross state and the light on the bus couples into the
// ring, where the photodetector absorbs it; with bias (2-3 V) it is in the
// bar state and the light stays on the bus.  The node's laser launches light
// into the bus just ahead of the switch.  A node therefore:
//   transmits   laser on, bias = data: a 1 keeps the light on the bus, a 0
//               sends it into the ring where it is absorbed;
//   receives    bias off: all light enters the ring and det_out is the data;
//   bypasses    bias on: light passes with negligible loss.
// Optical power is reduced to "light present" per bit slot, and the SLOTS
// bit slots that the 50 Gb/s link carries in one network clock are modelled
// side by side.  Losses and extinction ratio are not modelled.  The
// switch states and their meaning follow the paper; the bit-slot
// abstraction is this model's.  Combinational, zero delay.
module modetector #(
  parameter int unsigned SLOTS = 64
) (
  input  logic             laser_en,
  input  logic [SLOTS-1:0] light_in,
  input  logic [SLOTS-1:0] bias,
  output logic [SLOTS-1:0] light_out,
  output logic [SLOTS-1:0] det_out
);
  logic [SLOTS-1:0] light_at_switch;
  assign light_at_switch = laser_en ? '1 : light_in;
  assign light_out       = light_at_switch & bias;    // bar state
  assign det_out         = light_at_switch & ~bias;   // cross state
endmodule
