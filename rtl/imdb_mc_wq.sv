// imdb_mc_wq: write queue of one bank in the media controller, with the two changes
// the barrier needs.
//
// What it does: holds the bank's pending writes and the rewrites the barrier sends
// back, and feeds them to the barrier as write commands that carry the old data.
//  * Pre-write read: flips can only be counted if the old contents of a line are
//    known, so before a queued write is issued its line is read ("pre-write read").
//    These reads rank above writes but below normal reads: one is requested only
//    while no normal read of the bank is waiting (rd_pending low).
//  * Merge: a rewrite whose address already has a queued write coalesces with it
//    (the entry is marked as a rewrite too, and no second command is made). A
//    rewrite with no queued write becomes an entry of its own; its data is the old
//    data its pre-write read returns, so the line is written back unchanged.
//  * A host write to an address already queued replaces that entry's data, so each
//    address has at most one entry and a pre-write read never misses an older write
//    still in the queue (this coalescing is this design's choice).
//  * Writes leave in arrival order, oldest first, once their old data is in. They
//    leave only while no normal read waits, or when the queue is full ("write
//    requests in the controller mainly drain when the queue is full").
//
// Follows the paper: pre-write read before every write, its priority between reads
// and writes, rewrite/write merging, 64 entries. This design's choices: in-order
// (FCFS) service instead of FR-FCFS (the row-buffer state is not modelled), write
// coalescing, a rewrite's data taken from its pre-write read, one pre-write read in
// flight at a time, and the drain rule above.
//
// Interface and timing: wr (host writes), rw (rewrites from the barrier), pr (pre-write
// read requests) and cmd (writes to the barrier, cmd_t with op CMD_WRITE) are
// valid-ready channels. A write and a rewrite can both be taken in one cycle; when
// both name the same address the rewrite merges into the write. pr_rsp_valid with
// pr_rsp_data returns the data of the one outstanding pre-write read, at least one
// cycle after its request was accepted. An entry enters the cycle after its
// handshake, and cmd_valid rises no earlier than the cycle after its old data
// arrives. cmd_rewrite marks a command that carries a rewrite (alone or merged).
// cmd.op is always CMD_WRITE and cmd.bank the BANK parameter, so those output bits
// are constant by design.
// Ready signals depend on registered state only.
module imdb_mc_wq
  import imdb_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned BANK  = 0,
  parameter int unsigned PW    = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  // host writes
  input  logic    wr_valid,
  output logic    wr_ready,
  input  addr_t   wr_addr,
  input  line_t   wr_data,
  // rewrites from the barrier
  input  logic    rw_valid,
  output logic    rw_ready,
  input  addr_t   rw_addr,
  // normal reads of this bank are waiting in the read queue
  input  logic    rd_pending,
  // pre-write reads
  output logic    pr_valid,
  input  logic    pr_ready,
  output addr_t   pr_addr,
  input  logic    pr_rsp_valid,
  input  line_t   pr_rsp_data,
  // writes to the barrier
  output logic    cmd_valid,
  input  logic    cmd_ready,
  output cmd_t    cmd,
  output logic    cmd_rewrite,    // the write also restores the line (a rewrite is due)
  output logic [PW:0] count,
  output logic    merged          // one-cycle pulse: a rewrite coalesced with a write
);
  // entries, kept in arrival order in a circular buffer
  addr_t        q_addr [DEPTH];
  line_t        q_data [DEPTH];
  line_t        q_old  [DEPTH];
  logic         q_host [DEPTH];   // holds host data (else: a rewrite alone)
  logic         q_rw   [DEPTH];   // a rewrite is due on this line
  logic [DEPTH-1:0] q_valid, q_oldok;
  logic [PW-1:0] head_q, tail_q, pr_ptr_q;
  logic          pr_busy_q;       // a pre-write read is outstanding
  logic [PW:0]   cnt_q;

  logic issue;

  // Same-address search for an incoming write and an incoming rewrite. The head
  // entry leaving in this cycle is no longer a partner.
  logic          wr_match, rw_match;
  logic [PW-1:0] wr_idx, rw_idx;
  always_comb begin
    wr_match = 1'b0;
    rw_match = 1'b0;
    wr_idx   = '0;
    rw_idx   = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (issue && PW'(i) == head_q) continue;
      if (q_valid[i] && q_addr[i] == wr_addr) begin
        wr_match = 1'b1;
        wr_idx   = PW'(i);
      end
      if (q_valid[i] && q_addr[i] == rw_addr) begin
        rw_match = 1'b1;
        rw_idx   = PW'(i);
      end
    end
  end

  logic full;
  assign full     = 32'(cnt_q) >= DEPTH - 1;   // keeps room for a write and a rewrite
  assign wr_ready = !full;
  assign rw_ready = !full;

  logic wr_fire, rw_fire, wr_new, rw_new, rw_into_wr, rw_into_q;
  assign wr_fire    = wr_valid && wr_ready;
  assign rw_fire    = rw_valid && rw_ready;
  assign wr_new     = wr_fire && !wr_match;
  assign rw_into_q  = rw_fire && rw_match;                            // merge with a queued entry
  assign rw_into_wr = rw_fire && !rw_match && wr_new && rw_addr == wr_addr; // merge with the incoming write
  assign rw_new     = rw_fire && !rw_match && !rw_into_wr;
  // a rewrite meets host data: queued, or arriving in this cycle for the same line
  assign merged     = (rw_into_q && (q_host[rw_idx] || (wr_fire && wr_addr == rw_addr))) ||
                      rw_into_wr;

  // Pre-write read of the oldest entry still without old data.
  assign pr_valid = q_valid[pr_ptr_q] && !q_oldok[pr_ptr_q] && !pr_busy_q && !rd_pending;
  assign pr_addr  = q_addr[pr_ptr_q];

  // Issue the oldest entry once its old data is in.
  assign cmd_valid = q_valid[head_q] && q_oldok[head_q] && (!rd_pending || full);
  assign issue     = cmd_valid && cmd_ready;
  always_comb begin
    cmd        = '0;
    cmd.op     = CMD_WRITE;
    cmd.bank   = BANK_W'(BANK);
    cmd.addr   = q_addr[head_q];
    cmd.wdata  = q_host[head_q] ? q_data[head_q] : q_old[head_q];
    cmd.odata  = q_old[head_q];
  end
  assign cmd_rewrite = q_rw[head_q];

  assign count = cnt_q;

  function automatic logic [PW-1:0] nxt(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  logic [PW-1:0] tail_1;
  assign tail_1 = nxt(tail_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid   <= '0;
      q_oldok   <= '0;
      head_q    <= '0;
      tail_q    <= '0;
      pr_ptr_q  <= '0;
      pr_busy_q <= 1'b0;
      cnt_q     <= '0;
    end else begin
      // pre-write read handshake and its returning data
      if (pr_valid && pr_ready) pr_busy_q <= 1'b1;
      if (pr_rsp_valid && pr_busy_q) begin
        pr_busy_q          <= 1'b0;
        q_oldok[pr_ptr_q]  <= 1'b1;
        pr_ptr_q           <= nxt(pr_ptr_q);
      end
      // leave: the head entry goes to the barrier
      if (issue) begin
        q_valid[head_q] <= 1'b0;
        q_oldok[head_q] <= 1'b0;
        head_q          <= nxt(head_q);
      end
      // enter: new entries at the tail, the write first
      if (wr_new) begin
        q_valid[tail_q] <= 1'b1;
        q_oldok[tail_q] <= 1'b0;
      end
      if (rw_new) begin
        q_valid[wr_new ? tail_1 : tail_q] <= 1'b1;
        q_oldok[wr_new ? tail_1 : tail_q] <= 1'b0;
      end
      tail_q <= (wr_new && rw_new) ? nxt(tail_1) : (wr_new || rw_new) ? tail_1 : tail_q;
      cnt_q  <= cnt_q + (PW+1)'(wr_new) + (PW+1)'(rw_new) - (PW+1)'(issue);
    end
  end

  always_ff @(posedge clk) begin
    if (pr_rsp_valid && pr_busy_q) q_old[pr_ptr_q] <= pr_rsp_data;
    if (wr_fire) begin
      if (wr_match) begin
        q_data[wr_idx] <= wr_data;
        q_host[wr_idx] <= 1'b1;
      end else begin
        q_addr[tail_q] <= wr_addr;
        q_data[tail_q] <= wr_data;
        q_host[tail_q] <= 1'b1;
        q_rw[tail_q]   <= rw_into_wr;
      end
    end
    if (rw_into_q) q_rw[rw_idx] <= 1'b1;
    if (rw_new) begin
      q_addr[wr_new ? tail_1 : tail_q] <= rw_addr;
      q_host[wr_new ? tail_1 : tail_q] <= 1'b0;
      q_rw[wr_new ? tail_1 : tail_q]   <= 1'b1;
    end
  end

  // The head is never an entry whose pre-write read is still due, except when the
  // read pointer is at the head.
  a_order: assert property (@(posedge clk) disable iff (!rst_n)
    q_valid[head_q] && !q_oldok[head_q] |-> pr_ptr_q == head_q);
  a_count: assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt_q) <= DEPTH);
  a_pr_prio: assert property (@(posedge clk) disable iff (!rst_n) pr_valid |-> !rd_pending);
endmodule
