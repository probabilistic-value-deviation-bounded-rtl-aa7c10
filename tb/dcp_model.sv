// dcp_model -- behavioural model of a digitally controlled potentiometer
// used as a variable I2C pull-up resistor (testbench only, not synthesizable).
//
// The channel modulating hardware on I2C is a 256-step digitally controlled
// potentiometer of 100 kOhm end-to-end resistance wired as a rheostat between
// the supply and SDA. Code c gives R = c * R_TOTAL / 255, i.e. steps of about
// 0.39 kOhm: code 10 is about 3.92 kOhm (the usual pull-up), 20, 40, 80 and
// 160 give about 7.84, 15.69, 31.37 and 62.75 kOhm. Wiper resistance and the
// device's own serial interface are not modelled: the wiper code comes
// straight from the controller's selection output, and a new code takes
// effect at once (a CMOS switch settles in about 120 ps, far below an I2C
// bit time).
module dcp_model #(
  parameter real R_TOTAL_OHM = 100000.0
) (
  input  logic [7:0] code,
  output real        r_ohm
);

  always_comb r_ohm = real'(code) * R_TOTAL_OHM / 255.0;

endmodule : dcp_model
