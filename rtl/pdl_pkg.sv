// pdl_pkg: types and constants shared by the PulseDL-II accelerator and SoC.
// Data widths: feature maps and kernels are 8-bit signed fixed-point (the
// online network of the design is 8-bit); products are summed in 32-bit
// accumulators. The layer descriptor layer_cfg_t is what the host writes into
// the registers of a processing element (PE) before it starts a layer. The
// AHB-Lite and APB request/response structs bundle the bus signals that recur
// between masters, the interconnect and the slaves.
package pdl_pkg;

  localparam int DW   = 8;    // feature map / weight width
  localparam int ACCW = 32;   // accumulator width
  localparam int RQW  = 16;   // rescale multiplier width

  // One layer of the mapping, as programmed into a PE.
  typedef struct packed {
    logic [15:0] l_in;      // input length (samples per channel)
    logic [15:0] l_out;     // output length
    logic [15:0] oc;        // output channels
    logic [15:0] nicg;      // input-channel groups (passes over the input)
    logic [15:0] nkc;       // kernel chunks of MULTS taps
    logic [1:0]  glog;      // log2 of AUs used per pass = adder-tree readout stage
    logic [3:0]  stride;    // convolution stride (>=1)
    logic [1:0]  ulog;      // log2 of the zero-insertion factor (deconvolution)
    logic [7:0]  pad;       // left padding, in (upsampled) samples
    logic        relu;      // apply ReLU after bias
    logic        raw;       // bypass rescale: write the 32-bit value
    logic        loopback;  // also write the 8-bit result into the fmap memory
    logic [15:0] loop_base; // fmap word address of the loopback region
    logic [RQW-1:0] rq_mult;   // rescale multiplier
    logic [5:0]  rq_shift;  // rescale right shift
  } layer_cfg_t;

  // AHB-Lite
  typedef enum logic [1:0] {HT_IDLE = 2'b00, HT_BUSY = 2'b01, HT_NONSEQ = 2'b10, HT_SEQ = 2'b11} htrans_e;

  typedef struct packed {
    logic [31:0] haddr;
    logic [1:0]  htrans;
    logic        hwrite;
    logic [2:0]  hsize;
    logic [31:0] hwdata;   // data phase
  } ahb_req_t;

  typedef struct packed {
    logic [31:0] hrdata;
    logic        hreadyout;
    logic        hresp;
  } ahb_rsp_t;

  // APB
  typedef struct packed {
    logic [11:0] paddr;
    logic        penable;
    logic        pwrite;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic [31:0] prdata;
    logic        pready;
    logic        pslverr;
  } apb_rsp_t;

  localparam ahb_rsp_t AHB_RSP_OKAY = '{hrdata: 32'h0, hreadyout: 1'b1, hresp: 1'b0};

  // Saturate a signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[DW-1:0];
  endfunction

endpackage
