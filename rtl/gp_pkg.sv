// gp_pkg: types shared by every block of the Galapagos node.
//
// A Galapagos kernel talks AXI-Stream. The flit carried between kernels, the
// output switch and the router has the five fields and widths printed in the
// router figure of the design: TDATA 512, TID 8 (source kernel), TDEST 8
// (destination kernel, or destination cluster for inter-cluster traffic),
// TLAST 1 and TUSER 17. Bit 16 of TUSER is the inter-cluster flag added for
// clusters of clusters; the lower 16 bits are carried through unchanged (what
// they hold is this design's own choice: nothing reads them).
// A 512-bit flit carries 64 INT8 values or 16 INT32 values, element 0 in the
// least significant bits.
package gp_pkg;

  localparam int unsigned DATA_W   = 512;
  localparam int unsigned ID_W     = 8;
  localparam int unsigned USER_W   = 17;
  localparam int unsigned INTER_BIT = 16;        // TUSER bit marking inter-cluster traffic
  localparam int unsigned BYTES    = DATA_W / 8; // INT8 lanes per flit (64)
  localparam int unsigned WORDS32  = DATA_W / 32;// INT32 lanes per flit (16)
  localparam int unsigned IP_W     = 32;         // IPv4 address width
  localparam int unsigned MAX_KERNELS  = 256;    // kernels per cluster
  localparam int unsigned MAX_CLUSTERS = 256;    // clusters in the system

  typedef logic [ID_W-1:0] kid_t;
  typedef logic [IP_W-1:0] ip_t;

  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    kid_t              tid;
    kid_t              tdest;
    logic              tlast;
    logic [USER_W-1:0] tuser;
  } flit_t;

  function automatic flit_t make_flit(logic [DATA_W-1:0] d, kid_t src, kid_t dst,
                                      logic last, logic inter);
    flit_t f;
    f.tdata = d;
    f.tid   = src;
    f.tdest = dst;
    f.tlast = last;
    f.tuser = '0;
    f.tuser[INTER_BIT] = inter;
    return f;
  endfunction

endpackage
