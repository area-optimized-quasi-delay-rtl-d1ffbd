// qdi_pkg -- types and helpers shared by the QDI (quasi delay insensitive)
// dual-rail TMR design.
//
// A single-rail bit X travels on two wires (r1, r0). Two 4-phase handshake
// protocols are supported:
//   RTZ (return to zero): X=1 -> (1,0), X=0 -> (0,1), spacer (0,0); (1,1) illegal.
//   RTO (return to one):  X=1 -> (0,1), X=0 -> (1,0), spacer (1,1); (0,0) illegal.
// Every RTO rail is the complement of the corresponding RTZ rail, which is why
// each RTO circuit here is the gate-by-gate dual of its RTZ twin (AND<->OR,
// AO222<->OA222, C-elements unchanged): its outputs are then the complements of
// the RTZ outputs for complemented inputs.
// Both encodings follow the paper; the names of the types are this design's own.
package qdi_pkg;

  // 4-phase handshake protocol / dual-rail spacer convention.
  typedef enum logic {
    RTZ = 1'b0,
    RTO = 1'b1
  } protocol_e;

  // One dual-rail encoded bit: r1 is the "true" rail (J1), r0 the "false" rail (J0).
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  // Spacer codeword of a protocol.
  function automatic dr_t dr_spacer(protocol_e p);
    return (p == RTZ) ? dr_t'{r1: 1'b0, r0: 1'b0} : dr_t'{r1: 1'b1, r0: 1'b1};
  endfunction

  // Data codeword of bit b under a protocol.
  function automatic dr_t dr_encode(protocol_e p, logic b);
    dr_t d;
    d.r1 = b;
    d.r0 = !b;
    if (p == RTO) d = ~d;
    return d;
  endfunction

  function automatic logic dr_is_spacer(protocol_e p, dr_t d);
    return d == dr_spacer(p);
  endfunction

  // True for a valid data codeword (exactly one rail away from the spacer).
  function automatic logic dr_is_data(dr_t d);
    return d.r1 != d.r0;
  endfunction

  // Single-rail value of a data codeword.
  function automatic logic dr_decode(protocol_e p, dr_t d);
    return (p == RTZ) ? d.r1 : d.r0;
  endfunction

endpackage
