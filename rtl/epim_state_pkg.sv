// epim_state_pkg -- state encoding of the EPIM address controller.
//
// One operation first walks the activation states once per round (crossbar
// activation):
//   ST_IDLE  -> ST_CLR   (start; round 0)
//   ST_CLR   clears the input register and output register for the round
//   ST_LOAD  issues one continuous offset per clock to the IFAT until the
//            IFAT flags the stop index
//   ST_DRAIN one clock for the last buffer read to reach the input register
//   ST_ACT   activates the crossbar
//   ST_WAIT  bit lines are read out into the output register
//   ST_STORE issues one continuous offset per clock to the OFAT; the patch's
//            bit lines are copied into the output buffer
//   ST_NEXT  next round, or on to the join phase
// and then, once all patches are activated, replays the OFAT per round:
//   ST_JOIN  one continuous offset per clock; output buffer -> joint module
//   ST_JNEXT next round, or back to ST_IDLE with done
package epim_state_pkg;
  typedef enum logic [3:0] {
    ST_IDLE, ST_CLR, ST_LOAD, ST_DRAIN, ST_ACT, ST_WAIT, ST_STORE, ST_NEXT,
    ST_JOIN, ST_JNEXT
  } ac_state_e;
endpackage
