// Shared constants and types of the p-bit control unit.
//
// The control unit turns digitised samples of optical difference
// measurements into logical p-bit states. The ADC bit depth of 8 follows
// the design this RTL describes (centre threshold 128 = 2^(b-1)); the
// widths of weights, biases and the accumulator, and the host request
// format, are this design's own choices.
package pbit_pkg;

  // Sample width of the difference and certification ADC channels.
  localparam int ADC_BITS = 8;
  // Signed interaction weight W_ij and constant bias h_i.
  localparam int W_BITS   = 8;
  localparam int H_BITS   = 8;
  // Signed accumulator for I_i = sum_j W_ij m_j + h_i.
  localparam int ACC_BITS = 16;
  // Signed, saturated beta*I that indexes the threshold table.
  localparam int BI_BITS  = 8;
  // Unsigned inverse temperature, BETA_FRAC fraction bits.
  localparam int BETA_BITS = 8;
  localparam int BETA_FRAC = 4;
  // Threshold: one bit wider than a sample, signed (-1 = never +1).
  localparam int THR_BITS = ADC_BITS + 1;

  // Default sizes: 64000 logical p-bits served by 4 physical p-bits.
  localparam int N_PBITS_DEF = 64000;
  localparam int LANES_DEF   = 4;
  localparam int K_NBR_DEF   = 4;

  typedef logic signed [W_BITS-1:0]   weight_t;
  typedef logic signed [H_BITS-1:0]   hbias_t;
  typedef logic signed [ACC_BITS-1:0] acc_t;
  typedef logic signed [BI_BITS-1:0]  bi_t;
  typedef logic signed [THR_BITS-1:0] thr_t;
  typedef logic [ADC_BITS-1:0]        sample_t;

  // Host address map: region in addr[31:28], lane in addr[27:24],
  // offset in addr[23:0].
  typedef enum logic [3:0] {
    REG_CTRL = 4'h0,   // control and status registers
    REG_NBR  = 4'h1,   // neighbour entry: data = {idx[15:0] , w[7:0]} at offset p*K+k
    REG_BIAS = 4'h2,   // constant bias h_i at local offset p
    REG_LUT  = 4'h3,   // threshold table entry at offset = beta*I as 8-bit two's complement
    REG_STATE= 4'h4    // logical p-bit state at global index
  } region_e;

  // Control register offsets (region REG_CTRL).
  localparam logic [23:0] CR_START  = 24'h0;  // write: start sweeps
  localparam logic [23:0] CR_BETA   = 24'h1;  // inverse temperature
  localparam logic [23:0] CR_NMIN   = 24'h2;  // certification lower bound
  localparam logic [23:0] CR_SWEEPS = 24'h3;  // number of sweeps to run
  localparam logic [23:0] CR_STATUS = 24'h4;  // read: {done, busy}
  localparam logic [23:0] CR_FLIPS  = 24'h5;  // read: p-bit updates
  localparam logic [23:0] CR_REJ    = 24'h6;  // read: rejected samples, lane in addr[27:24]
  localparam logic [23:0] CR_ACC    = 24'h7;  // read: certified samples, lane in addr[27:24]
  localparam logic [23:0] CR_CLIPS  = 24'h8;  // read: updates whose beta*I saturated

  typedef struct packed {
    logic        we;     // write strobe
    logic        re;     // read strobe, data one cycle later
    logic [31:0] addr;
    logic [31:0] wdata;
  } host_req_t;

endpackage
