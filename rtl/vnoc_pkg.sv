// vnoc_pkg: types and constants shared by the virtualized NoC.
//
// Flit and packet format (this design's choice; it builds on a Hermes-style
// mesh whose header carries the XY target address):
//   flit 0  header : bit 15 = destination task slot (0 -> Local_0/DR0,
//                    1 -> Local_1/DR1), bits 7:4 = X, bits 3:0 = Y
//   flit 1  size   : number of flits that follow
//   flit 2  source : address of the sender in the header layout, so that
//                    the reply can go back to the right node and slot
//   flit 3..       : operands (GCD: a, b; RSA: m, e, n)
// A reply from a PE has size 2: its own address and the result.
package vnoc_pkg;

  localparam int FLIT_W  = 16;
  localparam int MAX_OPS = 3;

  // Router port numbering. Inputs use 0..4 (Local = local input buffer),
  // outputs use 0..5 (Local_0 and Local_1).
  localparam int P_EAST  = 0;
  localparam int P_WEST  = 1;
  localparam int P_NORTH = 2;
  localparam int P_SOUTH = 3;
  localparam int P_LOC0  = 4;
  localparam int P_LOC1  = 5;
  localparam int NIN     = 5;
  localparam int NOUT    = 6;

  typedef logic [FLIT_W-1:0] flit_t;

  // Function a reconfigurable region can hold.
  typedef enum logic [1:0] {
    FN_NONE = 2'd0,
    FN_GCD  = 2'd1,
    FN_RSA  = 2'd2
  } func_e;

  // A packet rebuilt by a DataReceive component.
  typedef struct packed {
    flit_t                   src;    // sender address and slot
    logic [1:0]              nops;   // operands held
    flit_t [MAX_OPS-1:0]     ops;    // operands, ops[0] first received
  } pkt_t;

  // A reply handed from the buffer controller to DataSend.
  typedef struct packed {
    flit_t dst;      // header of the reply (sender of the request)
    flit_t src;      // this node's address with the slot that served it
    flit_t result;
  } rsp_t;

  function automatic flit_t make_hdr(input logic slot, input logic [3:0] x,
                                     input logic [3:0] y);
    return {slot, 7'd0, x, y};
  endfunction

  function automatic logic [3:0] hdr_x(input flit_t h);
    return h[7:4];
  endfunction

  function automatic logic [3:0] hdr_y(input flit_t h);
    return h[3:0];
  endfunction

  function automatic logic hdr_slot(input flit_t h);
    return h[15];
  endfunction

endpackage
