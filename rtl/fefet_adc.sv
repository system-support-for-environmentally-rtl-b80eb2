// fefet_adc -- behavioural model of the precision-scalable FeFET ADC.
//
// The real part is analog: N_DEV partially polarised FeFET devices share a
// data line carrying the input; each device has a different threshold
// voltage, so only the devices whose read current exceeds the sensing
// threshold read '1'. With four devices a 0.9 V input gives "1100". Here
// the input voltage (or column current) is a digital level, and each device
// is one comparator against its own programmable threshold, which models
// "threshold currents for each device can be dynamically programmed".
// Device 1 drives the MSB of code, device N_DEV the LSB, as in the paper's
// example. A device whose write line disables it (en=0) reads 0, which is how
// the paper lowers precision (disabling devices 1 and 3 leaves a 2-bit ADC).
// The model is written in synthesizable style and is purely combinational.
module fefet_adc #(
  parameter int unsigned N_DEV = 4,   // number of FeFET sense devices (paper: 4)
  parameter int unsigned LW    = 8    // width of the input level (assumed)
) (
  input  logic [LW-1:0]            level,  // input voltage / current level
  input  logic [N_DEV-1:0][LW-1:0] thr,    // thr[i]: threshold of device i+1
  input  logic [N_DEV-1:0]         en,     // en[i]: device i+1 enabled
  output logic [N_DEV-1:0]         code    // code[N_DEV-1-i]: device i+1
);
  always_comb begin
    for (int i = 0; i < N_DEV; i++)
      code[N_DEV-1-i] = en[i] && (level > thr[i]);
  end
endmodule
