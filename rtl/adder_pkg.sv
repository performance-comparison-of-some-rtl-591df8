// adder_pkg: constants and types shared by the 32-bit adder family.
//
// ADDER_W is the operand width of every adder (32 bits, the width compared
// throughout). CSLA_PART is the non-uniform input partition of the two carry
// select adders, listed from the least significant partition upwards; the
// first entry is the plain ripple carry adder at the bottom of the CSLA. The
// partition sizes 8-7-6-4-3-2-2 follow the paper's table; reading them most
// significant first (so the 2-bit RCA sits at bit 0) is this design's choice.
// arch_e names the eight distinct architectures held by the top, adder_suite,
// and indexes its result arrays.
package adder_pkg;

  parameter int ADDER_W = 32;

  parameter int CSLA_NPART = 7;
  typedef int part_t [CSLA_NPART];
  parameter part_t CSLA_PART = '{2, 2, 3, 4, 6, 7, 8};

  typedef enum logic [2:0] {
    ARCH_RCA      = 3'd0,  // ripple carry adder of single-bit full adders
    ARCH_RCA_DBFA = 3'd1,  // ripple carry adder of dual-bit full adders
    ARCH_RCLA     = 3'd2,  // homogeneous recursive carry lookahead adder
    ARCH_RCLA_RCA = 3'd3,  // hybrid RCLA with a 2-bit RCA at the bottom
    ARCH_BCLA     = 3'd4,  // homogeneous block carry lookahead adder
    ARCH_BCLA_RCA = 3'd5,  // hybrid BCLA with 2-bit RCAs at both ends
    ARCH_CSLA     = 3'd6,  // carry select adder with dual RCAs
    ARCH_CSLA_BEC = 3'd7   // carry select adder with BEC converters
  } arch_e;

  parameter int NUM_ARCH = 8;

endpackage
