// dr_pkg: types and helpers shared by the dual-rail multiplier.
//
// Every logical bit travels on two wires (rails). r1 is the rail that
// signals a 1 and r0 the rail that signals a 0. Two four-phase protocols
// are supported:
//   RTZ (return to zero): spacer = (0,0), data 1 = (1,0), data 0 = (0,1);
//                         (1,1) is illegal. The active level is 1.
//   RTO (return to one):  spacer = (1,1), data 1 = (0,1), data 0 = (1,0);
//                         (0,0) is illegal. The active level is 0.
// An RTO circuit is the RTZ circuit with every rail inverted: C-elements
// stay, OR gates become AND gates. The helpers below encode and decode in
// either protocol; they are used by the RTL for constants and by the
// testbenches for stimulus and checking.
package dr_pkg;

  typedef enum logic {RTZ = 1'b0, RTO = 1'b1} protocol_e;

  // One dual-rail bit.
  typedef struct packed {
    logic r1;  // rail that goes active for logic 1
    logic r0;  // rail that goes active for logic 0
  } dr_t;

  // Level of an idle (spacer) rail.
  function automatic logic idle_level(protocol_e p);
    return (p == RTO);
  endfunction

  function automatic dr_t dr_spacer(protocol_e p);
    return '{r1: idle_level(p), r0: idle_level(p)};
  endfunction

  // Data code for logic value v.
  function automatic dr_t dr_encode(protocol_e p, logic v);
    dr_t d;
    d.r1 = v  ^ idle_level(p);
    d.r0 = !v ^ idle_level(p);
    return d;
  endfunction

  function automatic logic dr_value(protocol_e p, dr_t d);
    return (d.r1 ^ idle_level(p)) && !(d.r0 ^ idle_level(p));
  endfunction

  function automatic logic dr_is_spacer(protocol_e p, dr_t d);
    return d == dr_spacer(p);
  endfunction

  function automatic logic dr_is_data(protocol_e p, dr_t d);
    return (d.r1 ^ idle_level(p)) != (d.r0 ^ idle_level(p));
  endfunction

  function automatic logic dr_is_illegal(protocol_e p, dr_t d);
    return d == dr_t'{r1: !idle_level(p), r0: !idle_level(p)};
  endfunction

endpackage
