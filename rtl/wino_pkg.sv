// wino_pkg: types and constants shared by the Winograd F(2x2,3x3) convolution engine.
//
// All data are IEEE-754 single precision words (fp32_t). A "tile" is the 4-row by
// 2-column block that the input stage stores after the column-wise partial transform;
// a processing element combines a tile with its right-hand neighbour into a 4x4 block.
// The job descriptor is the set of kernel arguments a host passes to one compute unit.
// Byte addresses are 32 bits wide and every memory beat carries one fp32 word; both are
// choices of this design, the paper gives neither.
package wino_pkg;

  typedef logic [31:0] fp32_t;

  localparam int unsigned ADDR_W     = 32;  // byte address width of the memory port
  localparam int unsigned MAX_BURST  = 256; // beats per burst (AXI4 INCR limit)
  localparam int unsigned NUM_PE     = 4;   // processing elements per compute unit
  localparam int unsigned NUM_IN_PT  = 8;   // replicated column partial transforms
  localparam int unsigned TILE_ALIGN = 8;   // tiles per row are a multiple of this

  // 4x2 tile, indexed [row][col]
  typedef fp32_t [3:0][1:0] tile42_t;
  // 4x4 block, indexed [row][col]
  typedef fp32_t [3:0][3:0] blk44_t;
  // 2x2 output tile, indexed [row][col]
  typedef fp32_t [1:0][1:0] tile22_t;

  // Kernel arguments of one convolution job.
  typedef struct packed {
    logic [ADDR_W-1:0] in_addr;   // C x H x W input feature maps, row major
    logic [ADDR_W-1:0] w_addr;    // K x C x 16 transformed filters U = G g G^T
    logic [ADDR_W-1:0] out_addr;  // K x Ho x Wo output feature maps
    logic [15:0]       c;         // input channels
    logic [15:0]       k;         // output feature maps
    logic [11:0]       h;         // input height
    logic [11:0]       w;         // input width
    logic              pad;       // 1: zero padding of one pixel ("same" 3x3 convolution)
    // Row bands: a layer too large for the buffers is run as several jobs, each on a
    // band of rows plus a one-row halo from its neighbours.
    logic              no_pad_top; // band starts inside the image: no padding row on top
    logic              no_pad_bot; // band ends inside the image: no padding row below
    logic [23:0]       in_cstride; // words between input channels, 0: h*w
    logic [23:0]       out_kstride;// words between output maps, 0: ho*wo
  } job_t;

  // Loop bounds derived from a job.
  typedef struct packed {
    logic [11:0] ho;    // output height  = h + 2*pad - 2
    logic [11:0] wo;    // output width   = w + 2*pad - 2
    logic [11:0] p;     // output tiles per column = ceil(ho/2)
    logic [11:0] g;     // groups of NUM_PE output tiles per row = ceil(ceil(wo/2)/4)
    logic [11:0] tpr;   // input tiles per row, multiple of TILE_ALIGN, >= 4*g+1
    logic [23:0] cstr;  // words between input channels
    logic [23:0] kstr;  // words between output maps
  } dims_t;

  function automatic logic pad_top(job_t j);
    return j.pad && !j.no_pad_top;
  endfunction

  function automatic logic pad_bot(job_t j);
    return j.pad && !j.no_pad_bot;
  endfunction

  function automatic dims_t derive_dims(job_t j);
    dims_t d;
    logic [11:0] q;
    d.ho  = j.h + 12'(pad_top(j)) + 12'(pad_bot(j)) - 12'd2;
    d.wo  = j.w + (j.pad ? 12'd2 : 12'd0) - 12'd2;
    d.p   = (d.ho + 12'd1) >> 1;
    q     = (d.wo + 12'd1) >> 1;
    d.g   = (q + 12'd3) >> 2;
    d.tpr = ((d.g << 2) + 12'd1 + 12'd7) & ~12'd7;
    d.cstr = (j.in_cstride != 0) ? j.in_cstride : 24'(j.h) * 24'(j.w);
    d.kstr = (j.out_kstride != 0) ? j.out_kstride : 24'(d.ho) * 24'(d.wo);
    return d;
  endfunction

  function automatic fp32_t fneg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

endpackage
