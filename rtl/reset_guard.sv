// reset_guard: keeps the domains of a running mailbox session out of reset.
//
// The power management unit resets domains on behalf of the resource manager,
// which is not trusted. A session on a mailbox promises the owning domain that
// both ends stay up until the quota expires, so every per-domain reset line
// passes through this guard. A domain is locked while it is the owner or the
// fixed end of any mailbox whose delegatable end is held by a domain other than
// the resource manager. A locked domain's reset request is suppressed; an
// unlocked one passes straight through.
//
// Interface: rst_req[d] from the PMU, dom_rst[d] to domain d (both active
// high), locked[d] back to the PMU. mb_session/mb_owner come from the
// mailboxes; the fixed end of each mailbox is the parameter FIXED_DOM, since
// it is hard-wired. Purely combinational: a lock takes effect in the same
// cycle the mailbox reports the session.
//
// The locking rule is the paper's; the combinational form and the lock
// feedback to the PMU are this design's.
module reset_guard
  import st_pkg::*;
#(
  parameter int unsigned N_MBOX = st_pkg::N_MB,
  parameter dom_id_t     FIXED_DOM [N_MBOX] = st_pkg::MB_FIXED_DOM
) (
  input  logic [N_DOM-1:0] rst_req,
  input  logic [N_MBOX-1:0] mb_session,
  input  dom_id_t          mb_owner [N_MBOX],
  output logic [N_DOM-1:0] locked,
  output logic [N_DOM-1:0] dom_rst
);

  always_comb begin
    locked = '0;
    for (int m = 0; m < int'(N_MBOX); m++) begin
      if (mb_session[m]) begin
        locked[mb_owner[m]]  = 1'b1;
        locked[FIXED_DOM[m]] = 1'b1;
      end
    end
    dom_rst = rst_req & ~locked;
  end

endmodule
