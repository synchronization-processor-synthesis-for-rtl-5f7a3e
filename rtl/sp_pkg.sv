// Shared types of the synchronization-processor wrapper.
//
// sp_state_t is the three-state controller of the synchronization processor:
// a reset state entered at power up, an operation-read state in which the
// current operation's port masks are tested, and a free-run state in which
// the IP is clocked for the rest of the operation's cycle count without any
// port being tested. The three states follow the paper; the encoding is this
// design's choice.
package sp_pkg;

  typedef enum logic [1:0] {
    SP_RESET = 2'd0,
    SP_READ  = 2'd1,
    SP_RUN   = 2'd2
  } sp_state_t;

endpackage
