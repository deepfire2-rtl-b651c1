// df2_pkg - constants, types and helper functions shared by the DeepFire2 RTL.
//
// An input beat carries eight spikes (or, in the transduction layer, eight
// 8-bit pixels) and the eight matching 8-bit weights, 64 bits in all, as the
// neuron core is built for. Feature buffers are written one byte at a time.
// layer_cfg_t describes one layer of the network in the form the top level
// takes it: input map size, kernel shape, stride, padding, output channels,
// number of weight units (omega), how many SLR parts the kernel is split
// into, the re-timing group size, and the bridge depth.
// ACC_W (membrane potential width), MAXK (widest layer output bus) and the
// byte-address width are this design's own choices; the paper gives none.
package df2_pkg;

  localparam int SPB    = 8;    // spikes per input beat
  localparam int WBITS  = 8;    // weight width
  localparam int BEAT_W = SPB * WBITS;  // 64-bit weight word per beat
  localparam int ACC_W  = 24;   // membrane potential / threshold width
  localparam int MAXK   = 32;   // max rows (kernel units) on an inter-layer bus
  localparam int BA_W   = 8;    // byte address within one row of a column

  // Neuron core timing: a beat presented before clock edge 1 gives so/so_en
  // after edge CORE_LAT; the threshold t is sampled at edge CORE_LAT, so it
  // must be presented CORE_T_OFS cycles after the beat that carries 'last'.
  localparam int CORE_LAT   = 7;
  localparam int CORE_T_OFS = CORE_LAT - 1;

  typedef logic [7:0] byte_t;

  // Per-row byte write bus between a layer and the next feature buffer.
  typedef struct packed {
    logic             en;
    logic [BA_W-1:0]  addr;
    byte_t            data;
  } fbf_wr_t;

  // Parameter load bus: writes one weight word (we) or one threshold (twe)
  // into weight/threshold unit 'unit' of split part 'part' of layer 'layer'.
  typedef struct packed {
    logic               we;
    logic               twe;
    logic [7:0]         layer;
    logic [7:0]         part;
    logic [7:0]         unit;
    logic [15:0]        addr;
    logic [BEAT_W-1:0]  wdata;
    logic [ACC_W-1:0]   tdata;
  } prm_wr_t;

  typedef struct packed {
    logic [7:0]  ew;      // element width: 8 = pixels (transduction), 1 = spikes
    logic [15:0] h_in;
    logic [15:0] w_in;
    logic [15:0] c_in;
    logic [7:0]  kh;
    logic [7:0]  kw;
    logic [7:0]  s;
    logic [7:0]  p;
    logic [15:0] c_out;
    logic [7:0]  omega;   // weight units (parallel cores per kernel unit)
    logic [7:0]  parts;   // SLR parts the kernel is split into
    logic [7:0]  group;   // re-timing group size in cores
    logic [7:0]  bridge;  // register stages of each SLR bridge direction
  } layer_cfg_t;

  // MNIST network of the design (Table "Implemented Network Structures"),
  // listed from the output layer (index NL-1) down to layer 0:
  // pConv3-1-16, Conv2-2-16, pConv3-1-32, Conv2-2-32, pConv3-1-64,
  // Conv3-2-64, Fc-128, Fc-10 (built as 16 neurons). omega, group and bridge
  // depth are this design's choices.
  localparam int MNIST_NL = 8;
  localparam layer_cfg_t [MNIST_NL-1:0] MNIST_CFG = {
    //          ew    h_in    w_in    c_in     kh    kw    s     p     c_out    omega  parts group bridge
    layer_cfg_t'{8'd1, 16'd1,  16'd1,  16'd128, 8'd1, 8'd1, 8'd1, 8'd0, 16'd16,  8'd2,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd3,  16'd3,  16'd64,  8'd3, 8'd3, 8'd1, 8'd0, 16'd128, 8'd16, 8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd7,  16'd7,  16'd64,  8'd3, 8'd3, 8'd2, 8'd0, 16'd64,  8'd8,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd7,  16'd7,  16'd32,  8'd3, 8'd3, 8'd1, 8'd1, 16'd64,  8'd8,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd14, 16'd14, 16'd32,  8'd2, 8'd2, 8'd2, 8'd0, 16'd32,  8'd4,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd14, 16'd14, 16'd16,  8'd3, 8'd3, 8'd1, 8'd1, 16'd32,  8'd8,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd28, 16'd28, 16'd16,  8'd2, 8'd2, 8'd2, 8'd0, 16'd16,  8'd4,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd8, 16'd28, 16'd28, 16'd1,   8'd3, 8'd3, 8'd1, 8'd1, 16'd16,  8'd8,  8'd1, 8'd8, 8'd2}
  };

  function automatic int out_dim(int in_dim, int k, int s, int p);
    return (in_dim + 2 * p - k) / s + 1;
  endfunction

  function automatic int beats_per_neuron(int kh, int kw, int c_in);
    return (kh * kw * c_in + SPB - 1) / SPB;
  endfunction

  function automatic int clog2_min1(int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

  // Eq. (1) of the design: legal numbers of weight units per kernel.
  function automatic bit legal_omega(int w);
    return (w == 1) || (w == 2) || (w == 4) || (w >= 8 && (w % 8) == 0);
  endfunction

endpackage
