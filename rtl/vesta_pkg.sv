// vesta_pkg: types and constants shared by the VESTA accelerator.
//
// The PE organisation (8 PE blocks per unit, one 8-bit weight shared by the
// unit, 4 timesteps, 2 output pixels per pass) follows the paper. The
// encodings of modes and output selections, the layer descriptor and the
// result-slot ordering are this design's own choices.
package vesta_pkg;

  localparam int WW     = 8;   // weight width (paper: 8-bit weights)
  localparam int NPE    = 8;   // PE blocks per PE unit (paper)
  localparam int NTS    = 4;   // timesteps (paper)
  localparam int NPIX   = 2;   // output pixels per pass (paper: "two pixels")
  localparam int NSLOT  = NPIX * NTS; // results per pass, one per PE position
  localparam int DW     = 8;   // TFLIF data width (Fig. 3)
  localparam int ACC_W  = 24;  // 8 slots x 24 bits = the paper's 192-bit buffer
  localparam int OUT_W  = NSLOT * DW; // Output SRAM word: 64 bits

  // Operation mode of the PE module.
  typedef enum logic [1:0] {
    MODE_ZSC  = 2'd0,  // zig-zag spiking convolution (spike inputs, 2x2 kernels)
    MODE_SSSC = 2'd1,  // shift-and-sum convolution (8-bit image inputs)
    MODE_WSSL = 2'd2,  // weight-stationary spiking linear layer
    MODE_STDP = 2'd3   // tile-wise dot product (QK^T times a column of V)
  } mode_e;

  // What is written to the Output SRAM.
  typedef enum logic [1:0] {
    OSEL_SPIKE = 2'd0,  // TFLIF spikes
    OSEL_IAND  = 2'd1,  // (NOT residual) AND spike
    OSEL_RAW   = 2'd2   // the eight requantised 8-bit sums
  } osel_e;

  // Targets of the memory controller.
  typedef enum logic [2:0] {
    MEM_LI  = 3'd0,
    MEM_SI  = 3'd1,
    MEM_LW  = 3'd2,
    MEM_SW  = 3'd3,
    MEM_OUT = 3'd4
  } mem_e;

  // Index of each operand SRAM port in the memory controller's port arrays.
  localparam int P_LI = 0, P_SI = 1, P_LW = 2, P_SW = 3;

  // Layer (job) descriptor handed to the system controller.
  //   for j in 0..n_col-1          output column / output channel
  //     for r in 0..n_row-1        pair of output pixels (tokens)
  //       for s in 0..n_seg-1      accumulation pass (input-channel group
  //                                or 512-row segment of a long column)
  typedef struct packed {
    mode_e             mode;
    osel_e             osel;
    logic              w_from_lw;   // 1: weights from LW SRAM, 0: from SW SRAM
    logic              in_from_li;  // 1: inputs from LI SRAM, 0: from SI SRAM
    logic              si_wb;       // write TFLIF spikes back into SI SRAM
    logic [11:0]       n_col;
    logic [7:0]        n_row;
    logic [3:0]        n_seg;
    logic [7:0]        w_base;      // first weight word
    logic [7:0]        in_base;     // first input word
    logic [7:0]        res_base;    // first LW word holding IAND residual spikes
    logic [7:0]        si_wb_word;  // SI word receiving written-back spikes
    logic [4:0]        qshift;      // requantisation right shift
    logic signed [DW-1:0] thr;      // LIF threshold minus folded BN bias
  } layer_cfg_t;

  // Slot of (pixel, timestep) among the eight PE positions of a unit. The
  // order is that of PE unit 1 in the ZSC figure: A(1,1) A(1,2) A(3,1) A(3,2)
  // A(1,3) A(1,4) A(3,3) A(3,4), i.e. slot = {ts[1], pix, ts[0]}.
  function automatic int slot_of(input int pix, input int ts);
    return (ts / 2) * 4 + pix * 2 + (ts % 2);
  endfunction

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [ACC_W:0] v);
    logic signed [ACC_W:0] hi, lo;
    hi = (ACC_W+1)'(2**(DW-1) - 1);
    lo = -hi - (ACC_W+1)'(1);
    if (v > hi)      return DW'(hi);
    else if (v < lo) return DW'(lo);
    else             return v[DW-1:0];
  endfunction

endpackage
