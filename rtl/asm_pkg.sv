// asm_pkg: types shared by the approximate sequential multiplier.
//
// The controller of the multiplier walks through three states: IDLE after
// reset, RUN for the n accumulate-and-shift cycles of one product, and DONE
// while the finished product is held at the outputs. The state encoding is
// this design's own choice; the paper does not show its controller.
package asm_pkg;

  typedef enum logic [1:0] {
    S_IDLE = 2'd0,
    S_RUN  = 2'd1,
    S_DONE = 2'd2
  } state_t;

endpackage
