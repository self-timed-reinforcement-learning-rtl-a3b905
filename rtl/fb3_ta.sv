// fb3_ta: stage 3 of the automaton feedback, one instance per automaton.
//
// Turns the clause's feedback type into an action for one automaton from
// its include bit inc, the clause output c, its literal x (f or NOT f) and
// the random bit p3 (p3 = 1 picks the likelier (s-1)/s branch, p3 = 0 the
// 1/s branch):
//   Type I : inc=1 c=0: p3=0 penalty, p3=1 inaction
//            inc=1 c=1: p3=0 inaction, p3=1 reward
//            inc=0 c=0: p3=0 reward,  p3=1 inaction
//            inc=0 c=1 x=0: p3=0 inaction, p3=1 reward
//            inc=0 c=1 x=1: p3=0 inaction, p3=1 penalty
//   Type II: inc=0 c=1 x=0: penalty; otherwise inaction
//   none   : inaction
// All inputs are dual-rail or one-hot; the output is one-hot {reward,
// penalty, inaction}, all-zero while the inputs are spacers. Each rail is a
// sum of products with the fb2 rail in the last AND level, so a T0 from
// stage 2 ends the computation at once for every automaton of the clause.
// The table is the design's, with one row it leaves out (Type II, inc=0,
// c=1, x=1) taken as inaction. Combinational.
module fb3_ta
  import tm_pkg::*;
(
  input  fb_t  fb2,
  input  dr_t  inc,
  input  dr_t  c,
  input  dr_t  x,
  input  dr_t  p3,
  output act_t act
);

  logic rew1, pen1, ina1, pen2, ina2;

  always_comb begin
    rew1 = (inc.t & c.t & p3.t) | (inc.f & c.f & p3.f) | (inc.f & c.t & x.f & p3.t);
    pen1 = (inc.t & c.f & p3.f) | (inc.f & c.t & x.t & p3.t);
    ina1 = (inc.t & c.f & p3.t) | (inc.t & c.t & p3.f) | (inc.f & c.f & p3.t)
         | (inc.f & c.t & p3.f);
    pen2 = inc.f & c.t & x.f;
    ina2 = inc.t | (inc.f & c.f) | (inc.f & c.t & x.t);

    act.reward   = fb2.t1 & rew1;
    act.penalty  = (fb2.t1 & pen1) | (fb2.t2 & pen2);
    act.inaction = fb2.t0 | (fb2.t1 & ina1) | (fb2.t2 & ina2);
  end

endmodule
