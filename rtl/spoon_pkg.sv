// spoon_pkg - constants, types and helper functions shared by the SPOON
// event-driven CNN.
//
// Network topology (follows the paper): a 5x5 convolution with 10 kernels on a
// 32x32 event sensor (28x28 feature maps), 4x4 max-pooling to 10x7x7 = 490
// six-bit activations, a 128-neuron hidden layer and a 10-neuron output layer,
// all weights 8 bits.  The SPI memory map, the configuration register layout
// and the saturation helpers are this design's own choices.
//
// SPI memory map (16-bit word address, 16-bit data):
//   addr[15]   = 1 : FC weight SRAM, addr[14:5] = 512-bit word, addr[4:0] = 16-bit slice
//   addr[15:12]= 0 : configuration registers, addr[3:0]
//   addr[15:12]= 1 : CONV kernels, addr[7:0] = k*25 + ky*5 + kx (8-bit value)
//   addr[15:12]= 2 : B_hid random matrix rows, addr[6:0] = hidden index (10 bits)
//   addr[15:12]= 3 : CONV activations (read only), addr[8:0] = 0..489
//   addr[15:12]= 4 : previous hidden activations (read only), addr[6:0]
package spoon_pkg;

  // ---------------- topology ----------------
  localparam int IMG      = 32;                 // input image side
  localparam int KSZ      = 5;                  // kernel side
  localparam int N_KER    = 10;                 // number of kernels
  localparam int FMAP     = IMG - KSZ + 1;      // 28
  localparam int POOL     = 4;                  // max-pool stride / window
  localparam int PMAP     = FMAP / POOL;        // 7
  localparam int N_IN     = N_KER * PMAP * PMAP;// 490
  localparam int N_HID    = 128;
  localparam int N_OUT    = 10;
  localparam int BATCH    = 64;                 // FC inputs per cycle
  localparam int N_BATCH  = 8;                  // words per hidden neuron

  // ---------------- widths ----------------
  localparam int TS_W     = 8;                  // timestamp
  localparam int KW_W     = 8;                  // kernel weight
  localparam int PSUM_W   = 16;                 // CONV psum
  localparam int ACT_W    = 6;                  // CONV activation
  localparam int W_W      = 8;                  // FC weight
  localparam int ACC_W    = 23;                 // hidden accumulator
  localparam int HACT_W   = 3;                  // hidden activation
  localparam int OPSUM_W  = 16;                 // output psum
  localparam int OACT_W   = 3;                  // output activation
  localparam int EV_W     = 1 + TS_W + 5 + 5;   // FIFO entry, 19 bits
  localparam int SEED_W   = 12;                 // random number per stochastic update

  localparam int PSUM_WORDS = N_KER * PMAP * PMAP;   // 490 used of 512
  localparam int FCW_WORDS  = N_HID * N_BATCH;       // 1024
  localparam int OUTW_BYTE  = N_IN - 7 * BATCH;      // 42: first W_out byte in word 7

  // ---------------- configuration register indices ----------------
  localparam logic [3:0] CFG_CTRL   = 4'd0;  // [0] first-spike gating, [1] train enable, [2] local tick enable
  localparam logic [3:0] CFG_TICK   = 4'd1;  // local tick period (cycles-1)
  localparam logic [3:0] CFG_CSHIFT = 4'd2;  // CONV rescaling shift
  localparam logic [3:0] CFG_HSHIFT = 4'd3;  // hidden quantiser shift
  localparam logic [3:0] CFG_OSHIFT = 4'd4;  // output quantiser shift
  localparam logic [3:0] CFG_LRH    = 4'd5;  // hidden learning rate (left shift)
  localparam logic [3:0] CFG_LRO    = 4'd6;  // output learning rate (left shift)
  localparam logic [3:0] CFG_STATUS = 4'd7;  // read only: {conv busy, fc busy, last label}

  localparam logic [3:0] REG_CFG    = 4'd0;
  localparam logic [3:0] REG_KER    = 4'd1;
  localparam logic [3:0] REG_BHID   = 4'd2;
  localparam logic [3:0] REG_ACT    = 4'd3;
  localparam logic [3:0] REG_HPREV  = 4'd4;

  typedef struct packed {
    logic       gate_en;
    logic       train_en;
    logic       tick_en;
    logic [15:0] tick_period;
    logic [3:0] cshift;
    logic [3:0] hshift;
    logic [3:0] oshift;
    logic [3:0] lr_hid;
    logic [3:0] lr_out;
  } cfg_t;

  // SPI bus transaction as seen by the memories
  typedef struct packed {
    logic        we;
    logic        re;
    logic [15:0] addr;
    logic [15:0] wdata;
  } spi_bus_t;

  // saturate a 32-bit signed value to N bits (N <= 31)
  function automatic logic signed [31:0] sat(input logic signed [31:0] v, input int n);
    logic signed [31:0] hi, lo;
    hi = (32'sd1 <<< (n - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (n - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  function automatic logic signed [31:0] clip(input logic signed [31:0] v,
                                              input logic signed [31:0] lo,
                                              input logic signed [31:0] hi);
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
