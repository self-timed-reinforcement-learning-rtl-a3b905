// tm_pkg: types and dual-rail helper functions shared by the self-timed
// Tsetlin machine.
//
// Every datapath bit travels as a dual-rail (DR) pair {t, f}: {1,0} is a
// logic 1, {0,1} a logic 0 and {0,0} the spacer that separates successive
// values in the four-phase protocol; {1,1} never occurs. The helper
// functions below are monotonic in the rails, so a spacer on the inputs
// gives a spacer on the output and a valid output appears as soon as enough
// inputs are valid to decide it (early propagation).
//
// Feedback types (T0 = none, T1 = Type I, T2 = Type II) and automaton
// actions (inaction, penalty, reward) are one-hot over three rails; all-zero
// is again the spacer. Rail names follow the text of the design; their order
// inside the structs is this design's choice.
package tm_pkg;

  typedef struct packed {
    logic t;  // true rail
    logic f;  // false rail
  } dr_t;

  // Feedback type for stages FB1 and FB2.
  typedef struct packed {
    logic t2;
    logic t1;
    logic t0;
  } fb_t;

  // Automaton action produced by stage FB3.
  typedef struct packed {
    logic reward;
    logic penalty;
    logic inaction;
  } act_t;

  // One-hot automaton state. x1k are the exclude (action 1) states and x2k
  // the include (action 2) states; k = 1 is next to the decision boundary
  // and k = 3 furthest from it.
  typedef struct packed {
    logic x23;
    logic x22;
    logic x21;
    logic x11;
    logic x12;
    logic x13;
  } ta_state_t;

  localparam dr_t DR_SPACER = '{t: 1'b0, f: 1'b0};

  function automatic dr_t dr_not(dr_t a);
    return '{t: a.f, f: a.t};
  endfunction

  function automatic dr_t dr_and(dr_t a, dr_t b);
    return '{t: a.t & b.t, f: a.f | b.f};
  endfunction

  function automatic dr_t dr_or(dr_t a, dr_t b);
    return '{t: a.t | b.t, f: a.f & b.f};
  endfunction

  function automatic dr_t dr_xor(dr_t a, dr_t b);
    return '{t: (a.t & b.f) | (a.f & b.t), f: (a.t & b.t) | (a.f & b.f)};
  endfunction

  // Single-rail value to DR, presented only while the data phase is open.
  function automatic dr_t dr_enc(logic v, logic phase);
    return '{t: v & phase, f: ~v & phase};
  endfunction

  function automatic logic dr_valid(dr_t a);
    return a.t | a.f;
  endfunction

  function automatic logic fb_valid(fb_t a);
    return a.t2 | a.t1 | a.t0;
  endfunction

  function automatic logic act_valid(act_t a);
    return a.reward | a.penalty | a.inaction;
  endfunction

endpackage
