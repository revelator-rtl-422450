// spec_log: speculative-fetch address log with cleanup on walk resolution.
//
// Each page-table walker owns a small log of SLOTS line addresses, one per speculative data
// fetch issued for the walk it is serving. open_valid starts a walk's log (clears it and
// marks the walker active); rec_valid appends an issued speculative fetch. When the walker
// resolves the translation (res_valid with the real PPN), every logged line whose page
// differs from the real one is marked for invalidation and the walker becomes inactive;
// a logged line on the real page is left alone and res_hit reports a correct speculation.
// Pending invalidations leave through a valid/ready port, one per cycle, lowest walker and
// slot first; the memory hierarchy cancels the request in its MSHR or invalidates the line
// in the private L2. busy[w] stays high while walker w is active or still has invalidations
// pending, and the engine does not start a new walk on a busy walker.
// A fetch recorded after its walk has resolved (a late NUMA-hint fetch) is compared at once
// with the page that walk resolved to and, if wrong, queued for invalidation.
// The per-walker bounded log, its size (one slot per possible speculative fetch) and the
// invalidation of wrong addresses on resolution follow the paper. The port protocol, the
// ordering of invalidations and the handling of late records are this design's own
// choices. A late record that finds no free slot is dropped.
//
// Timing: record, resolve and open act at the next clock edge; a record and a resolve of
// the same walker in one cycle are both applied, the record first. res_hit/res_spec are
// registered pulses one cycle after res_valid.
//
// Lint note: the assertion at the end samples rst_n on the clock (disable iff) while the
// flip-flops use it as an asynchronous reset; the resulting "flopped as both synchronous and
// async" warning concerns only that checker, not the synthesized logic.
module spec_log
  import revelator_pkg::*;
#(
  parameter int NUM_PTW = 4,
  parameter int SLOTS   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // start of a walk
  input  logic                open_valid,
  input  logic [PTW_ID_W-1:0] open_ptw,
  // issued speculative data fetch
  input  logic                rec_valid,
  input  logic [PTW_ID_W-1:0] rec_ptw,
  input  logic [LINE_W-1:0]   rec_line,
  // walk resolution
  input  logic                res_valid,
  input  logic [PTW_ID_W-1:0] res_ptw,
  input  logic [PPN_W-1:0]    res_ppn,
  output logic                res_hit,     // a logged fetch was on the real page
  output logic                res_spec,    // the walk had at least one logged fetch
  // invalidations to the memory hierarchy
  output logic                inv_valid,
  input  logic                inv_ready,
  output logic [LINE_W-1:0]   inv_line,
  output logic [NUM_PTW-1:0]  busy
);

  typedef struct packed {
    logic              valid;
    logic              inv;
    logic [LINE_W-1:0] line;
  } slot_t;

  slot_t [NUM_PTW-1:0][SLOTS-1:0] log_q, log_d;
  logic  [NUM_PTW-1:0]            act_q, act_d;
  logic  [NUM_PTW-1:0][PPN_W-1:0] last_q, last_d;   // page each walker last resolved to
  logic                           hit_d, spec_d;
  logic                           sel_found;
  logic  [$clog2(NUM_PTW)-1:0]    sel_w;
  logic  [$clog2(SLOTS)-1:0]      sel_s;
  logic  [$clog2(NUM_PTW)-1:0]    ow, rw, sw;

  // walker ids arrive PTW_ID_W wide; only the low bits select one of NUM_PTW walkers
  assign ow = open_ptw[$clog2(NUM_PTW)-1:0];
  assign rw = rec_ptw[$clog2(NUM_PTW)-1:0];
  assign sw = res_ptw[$clog2(NUM_PTW)-1:0];

  // Pick the pending invalidation to present (lowest walker, lowest slot).
  always_comb begin
    sel_found = 1'b0;
    sel_w     = '0;
    sel_s     = '0;
    for (int w = 0; w < NUM_PTW; w++)
      for (int s = 0; s < SLOTS; s++)
        if (!sel_found && log_q[w][s].valid && log_q[w][s].inv) begin
          sel_found = 1'b1;
          sel_w     = w[$clog2(NUM_PTW)-1:0];
          sel_s     = s[$clog2(SLOTS)-1:0];
        end
  end

  assign inv_valid = sel_found;
  assign inv_line  = log_q[sel_w][sel_s].line;

  always_comb begin
    logic placed;
    log_d  = log_q;
    act_d  = act_q;
    last_d = last_q;
    hit_d  = 1'b0;
    spec_d = 1'b0;
    placed = 1'b0;
    // invalidation handed over
    if (sel_found && inv_ready) log_d[sel_w][sel_s] = '0;
    // new walk
    if (open_valid) begin
      for (int s = 0; s < SLOTS; s++)
        if (!log_d[ow][s].inv) log_d[ow][s] = '0;
      act_d[ow] = 1'b1;
    end
    // record an issued fetch in the first free slot; a fetch recorded after its walk
    // resolved is checked at once against the page the walk resolved to
    if (rec_valid) begin
      for (int s = 0; s < SLOTS; s++)
        if (!placed && !log_d[rw][s].valid) begin
          log_d[rw][s] = '{valid: 1'b1, line: rec_line,
                           inv: !act_d[rw] && (rec_line[LINE_W-1 -: PPN_W] != last_q[rw])};
          if (!act_d[rw] && !log_d[rw][s].inv) log_d[rw][s] = '0;
          placed = 1'b1;
        end
    end
    // resolution: wrong pages are marked for invalidation, the right one is kept
    if (res_valid && act_d[sw]) begin
      for (int s = 0; s < SLOTS; s++)
        if (log_d[sw][s].valid && !log_d[sw][s].inv) begin
          spec_d = 1'b1;
          if (log_d[sw][s].line[LINE_W-1 -: PPN_W] == res_ppn) begin
            hit_d             = 1'b1;
            log_d[sw][s] = '0;
          end else begin
            log_d[sw][s].inv = 1'b1;
          end
        end
      act_d[sw] = 1'b0;
    end
    if (res_valid) last_d[sw] = res_ppn;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      log_q    <= '0;
      act_q    <= '0;
      last_q   <= '0;
      res_hit  <= 1'b0;
      res_spec <= 1'b0;
    end else begin
      log_q    <= log_d;
      act_q    <= act_d;
      last_q   <= last_d;
      res_hit  <= hit_d;
      res_spec <= spec_d;
    end
  end

  always_comb begin
    for (int w = 0; w < NUM_PTW; w++) begin
      busy[w] = act_q[w];
      for (int s = 0; s < SLOTS; s++)
        if (log_q[w][s].valid && log_q[w][s].inv) busy[w] = 1'b1;
    end
  end

  // A walker must not be opened while it is still busy.
  assert property (@(posedge clk) disable iff (!rst_n) open_valid |-> !busy[ow])
    else $error("spec_log: walker %0d opened while busy", open_ptw);

endmodule
