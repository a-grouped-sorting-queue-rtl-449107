// gsq_pkg -- types shared by the grouped sorting queue.
//
// An operation travelling down the systolic array is described by four
// flags. An insertion (push or push_first) carries an element on the push
// bus; a deletion (remove or pop) either names an ID on the remove bus or
// takes the head of the unit. A unit sees at most one insertion and at most
// one deletion at a time: push may travel together with remove or pop,
// push_first only with remove. The flag names follow the port names of the
// systolic unit in the paper (Push, Push_first, Pop, Remove).
package gsq_pkg;

  typedef struct packed {
    logic push;        // enqueue/update element: search for its rank
    logic push_first;  // element evicted from the previous unit: insert at the front
    logic pop;         // take the head of this unit (towards the previous unit / out)
    logic remove;      // delete the element whose ID is on the remove bus
  } op_flags_t;

  // Which request the timer controller hands to the queue.
  typedef enum logic [1:0] {
    GRANT_POP    = 2'd0,
    GRANT_PUSH   = 2'd1,
    GRANT_REMOVE = 2'd2
  } grant_e;

endpackage
