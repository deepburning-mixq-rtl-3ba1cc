// mixq_pkg -- constants shared by the mixed-precision packing datapath.
//
// The packing arithmetic targets a DSP48E2-class primitive: a 27 x 18 two's
// complement multiplier whose product is accumulated in a 48-bit register.
// The 27-bit multiplier port is called the "wide" port and the 18-bit one the
// "narrow" port.  Kernel packing calls them port E and port D; filter packing
// calls the weight and activation ports P_b^W and P_b^A.
//
// PE_LAT is the number of clock edges from a PE input beat flagged `last` to
// its decoded output: three DSP pipeline registers (input, multiplier, P) and
// one register on the decoded segments.  Every PE flavour (DSP packed,
// operand-separated, LUT) has this latency so that stages can swap them.
package mixq_pkg;
  localparam int unsigned DSP_WIDE_W   = 27;
  localparam int unsigned DSP_NARROW_W = 18;
  localparam int unsigned DSP_P_W      = 48;
  localparam int unsigned PE_LAT       = 4;

  // Coefficient width of an operand-separated filter PE (opsep_filter_pe):
  // the high half's coefficients shifted by ceil(wb/2) plus the low half's.
  function automatic int unsigned opsep_fw(int unsigned ab, int unsigned wb,
                                           int unsigned gb_h, int unsigned gb_l);
    int unsigned lb, fwh, fwl;
    lb  = (wb + 1) / 2;
    fwh = ab + (wb - lb) + gb_h + 1;
    fwl = ab + lb + gb_l + 1;
    return ((fwh + lb > fwl) ? fwh + lb : fwl) + 1;
  endfunction

  // Configuration bus selector shared by all layer stages.
  typedef enum logic [1:0] {
    CFG_WEIGHT  = 2'd0,   // addr = weight index, data = weight (sign-extended)
    CFG_BN_MUL  = 2'd1,   // addr = output channel, data = BN scale
    CFG_BN_ADD  = 2'd2    // addr = output channel, data = BN bias
  } cfg_sel_e;
endpackage
