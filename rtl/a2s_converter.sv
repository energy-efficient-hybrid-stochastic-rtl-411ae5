// a2s_converter: behavioural model of one pixel's analog-to-stochastic
// converter (not synthesizable: real-valued inputs).
//
// An analog comparator with the sensor voltage on its + input and the ramp
// on its - input, as the paper draws it: x is 1 while sensor_v is above
// ramp_v. Fed by a rising ramp, the stream is a run of ones followed by
// zeros whose length is proportional to the pixel voltage: strongly
// auto-correlated, which the TFF adders tolerate. The sensor voltage is
// assumed held for the whole image (all kernel passes).
module a2s_converter (
  input  real  sensor_v,
  input  real  ramp_v,
  output logic x
);

  assign x = (sensor_v > ramp_v);

endmodule
