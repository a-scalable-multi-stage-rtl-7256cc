// tb_clos_udn_top: end-to-end test of the Clos-UDN switch.
//
// Drives packets into every input port and checks, with a scoreboard kept
// independently of the switch, that each packet leaves exactly once, on the
// output port its header names. Phases:
//  1. Zero-load latency: single packets between chosen port pairs. The
//     measured latency must equal the pipeline formula worked out from the
//     switch structure: one slot in the input FIFO, then one fast cycle per
//     router hop (M columns plus |d - s| vertical hops), then the next slot
//     boundaries for the LC link and the output line.
//  2. Dynamic dispatching under Bernoulli uniform traffic (load 0.8).
//  3. Dynamic dispatching under diagonal traffic (input p to output p), which
//     reorders flows; reordering is counted, not failed.
//  4. Static dispatching under unbalanced traffic (w = 0.5): every flow must
//     arrive in sequence order.
//  5. Static dispatching, all inputs to output 0 (overload): fills the output
//     buffer, stalls the meshes and backs the input FIFOs up.
// Each mechanism (vertical moves, credit stalls in routers, LI refusals,
// output-buffer full, input backpressure, moves between slot boundaries
// thanks to the speedup, reordering in dynamic mode) is counted and must
// occur at least once.
module tb_clos_udn_top;
  import clos_udn_pkg::*;

  localparam int unsigned K  = 4;
  localparam int unsigned NP = 4;
  localparam int unsigned M  = 4;
  localparam int unsigned BD = 4;
  localparam int unsigned SP = 2;
  localparam int unsigned N  = K * NP;
  localparam int unsigned SLOTS_PER_PHASE = 400;
  localparam int unsigned MAXID = 1 << 16;
  localparam int unsigned WATCHDOG = 200000;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          static_dispatch = 1'b0;
  logic          slot_tick;
  logic [N-1:0]  ip_valid, ip_ready, op_valid;
  pkt_t          ip_pkt [N];
  pkt_t          op_pkt [N];

  clos_udn_top #(.K(K), .NP(NP), .M(M), .BD(BD), .SP(SP)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;

  // scoreboard
  logic [PORT_W-1:0] sb_dst  [MAXID];
  bit                sb_sent [MAXID];
  bit                sb_got  [MAXID];
  longint            sb_t0   [MAXID];
  int                next_id = 0;
  int                n_sent = 0, n_got = 0;
  logic [SEQ_W-1:0]  flow_seq  [N][N];
  int                flow_last [N][N];
  longint            last_latency = 0;

  // mechanism counters
  int c_vertical = 0, c_router_stall = 0, c_li_refused = 0, c_ob_full = 0;
  int c_in_backpressure = 0, c_fast_moves = 0, c_reorder_dyn = 0, c_reorder_static = 0;
  int c_dynamic_slots = 0, c_static_slots = 0;

  // traffic generator state
  int   pattern = 0;       // 0 uniform, 1 unbalanced w=0.5, 2 diagonal, 3 all to port 0
  int   load_pct = 0;      // injection probability per slot, percent
  bit   pending [N];
  pkt_t pend_pkt [N];

  function automatic int pick_dst(int src);
    case (pattern)
      1:       return ($urandom_range(99) < 50) ? src : int'($urandom_range(N - 1));
      2:       return src;
      3:       return 0;
      default: return int'($urandom_range(N - 1));
    endcase
  endfunction

  task automatic make_pkt(int src, int dst);
    pend_pkt[src].dst     = PORT_W'(dst);
    pend_pkt[src].src     = PORT_W'(src);
    pend_pkt[src].seq     = flow_seq[src][dst];
    pend_pkt[src].payload = PAYLOAD_W'(next_id);
    flow_seq[src][dst]    = flow_seq[src][dst] + 1'b1;
    sb_dst[next_id]       = PORT_W'(dst);
    sb_sent[next_id]      = 1'b1;
    next_id++;
    pending[src]          = 1'b1;
  endtask

  // generator: on each slot, fill empty generator slots with probability load
  always @(negedge clk) begin
    if (rst_n && slot_tick) begin
      for (int p = 0; p < N; p++)
        if (!pending[p] && int'($urandom_range(99)) < load_pct && next_id < MAXID)
          make_pkt(p, pick_dst(p));
    end
    for (int p = 0; p < N; p++) begin
      ip_valid[p] = pending[p] && slot_tick;
      ip_pkt[p]   = pend_pkt[p];
    end
  end

  // input side and output side monitors
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (slot_tick) begin
        if (static_dispatch) c_static_slots++; else c_dynamic_slots++;
      end
      for (int p = 0; p < N; p++) begin
        if (ip_valid[p] && ip_ready[p]) begin
          sb_t0[int'(ip_pkt[p].payload)] = cycle;
          pending[p] = 1'b0;
          n_sent++;
        end else if (ip_valid[p]) begin
          c_in_backpressure++;
        end
        if (op_valid[p]) begin
          int id;
          int s, d;
          id = int'(op_pkt[p].payload);
          s  = int'(op_pkt[p].src);
          d  = int'(op_pkt[p].dst);
          checks++;
          if (id >= next_id || !sb_sent[id] || sb_got[id] || sb_dst[id] != PORT_W'(p) || d != p) begin
            failures++;
            $display("FAIL: port %0d got id %0d dst %0d (dup=%0b)", p, id, d, sb_got[id]);
          end
          sb_got[id] = 1'b1;
          n_got++;
          last_latency = cycle - sb_t0[id];
          if (int'(op_pkt[p].seq) < flow_last[s][d]) begin
            if (static_dispatch) begin
              c_reorder_static++;
              failures++;
              $display("FAIL: flow %0d->%0d out of order in static mode", s, d);
            end else c_reorder_dyn++;
          end
          flow_last[s][d] = int'(op_pkt[p].seq);
        end
      end
    end
  end

  // internal observation: vertical hops, router stalls, moves between slot ticks
  for (genvar r = 0; r < NP; r++) begin : g_mr
    for (genvar row = 0; row < K; row++) begin : g_mrow
      for (genvar col = 0; col < M; col++) begin : g_mcol
        always @(posedge clk) if (rst_n) begin
          if (dut.g_cm[r].u_cm.r_out_valid[row][col][O_N] || dut.g_cm[r].u_cm.r_out_valid[row][col][O_S])
            c_vertical++;
          if ((~dut.g_cm[r].u_cm.g_row[row].g_col[col].u_router.empty &
               ~dut.g_cm[r].u_cm.g_row[row].g_col[col].u_router.pop) != 3'b000)
            c_router_stall++;
          if (!slot_tick && dut.g_cm[r].u_cm.r_out_valid[row][col] != 3'b000)
            c_fast_moves++;
        end
      end
    end
  end
  for (genvar i = 0; i < K; i++) begin : g_mi
    always @(posedge clk) if (rst_n && slot_tick) begin
      for (int q = 0; q < NP; q++)
        if (!dut.g_im[i].u_im.empty[q] && !dut.g_im[i].u_im.pop[q]) c_li_refused++;
      if (dut.om_space[i] != '1) c_ob_full++;
    end
  end

  task automatic wait_slots(int n);
    repeat (n * SP) @(posedge clk);
  endtask

  task automatic drain(int max_slots);
    int s = 0;
    while ((n_got < next_id || pending_any()) && s < max_slots) begin
      wait_slots(1);
      s++;
    end
    checks++;
    if (n_got != next_id) begin
      failures++;
      $display("FAIL: drain left %0d of %0d packets undelivered", next_id - n_got, next_id);
    end
  endtask

  function automatic bit pending_any();
    for (int p = 0; p < N; p++) if (pending[p]) return 1'b1;
    return 1'b0;
  endfunction

  // expected zero-load latency in fast cycles, from the input transfer cycle
  function automatic longint expected_latency(int src, int dst);
    longint t0, t1, t2, t3;
    int s, d, hops;
    s = src / NP;
    d = dst / NP;
    hops = M + ((d > s) ? d - s : s - d);
    t0 = 0;                       // a slot boundary
    t1 = t0 + SP;                 // dispatch at the next slot
    t2 = t1 + hops + 1;           // egress buffer readable
    while ((t2 % SP) != 0) t2++;  // LC transfer at a slot boundary
    t3 = t2 + 1;
    while ((t3 % SP) != 0) t3++;  // output line at a slot boundary
    return t3 - t0;
  endfunction

  task automatic single(int src, int dst);
    longint exp;
    @(negedge clk);
    while (!slot_tick) @(negedge clk);
    make_pkt(src, dst);
    ip_valid[src] = 1'b1;
    ip_pkt[src]   = pend_pkt[src];
    drain(100);
    exp = expected_latency(src, dst);
    checks++;
    if (last_latency != exp) begin
      failures++;
      $display("FAIL: latency %0d->%0d = %0d cycles, expected %0d", src, dst, last_latency, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < N; a++) begin
      pending[a] = 1'b0;
      ip_valid[a] = 1'b0;
      pend_pkt[a] = '0;
      ip_pkt[a] = '0;
      for (int b = 0; b < N; b++) begin
        flow_seq[a][b] = '0;
        flow_last[a][b] = -1;
      end
    end
    for (int x = 0; x < MAXID; x++) begin
      sb_sent[x] = 1'b0;
      sb_got[x]  = 1'b0;
      sb_dst[x]  = '0;
      sb_t0[x]   = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2 * SP) @(posedge clk);

    // 1. zero-load latency
    single(0, 0);            // straight through, no turn
    single(0, N - 1);        // longest vertical distance
    single(N - 1, 1);        // northward
    single(NP + 1, 2 * NP);  // one row down

    // 2. dynamic, Bernoulli uniform
    pattern = 0; load_pct = 80;
    wait_slots(SLOTS_PER_PHASE);
    load_pct = 0; drain(4000);

    // 3. dynamic, diagonal
    pattern = 2; load_pct = 90;
    wait_slots(SLOTS_PER_PHASE);
    load_pct = 0; drain(4000);

    // 4. static, unbalanced w = 0.5
    for (int a = 0; a < N; a++) for (int b = 0; b < N; b++) flow_last[a][b] = -1;
    static_dispatch = 1'b1;
    pattern = 1; load_pct = 70;
    wait_slots(SLOTS_PER_PHASE);
    load_pct = 0; drain(4000);

    // 5. static, all inputs to output 0
    pattern = 3; load_pct = 100;
    wait_slots(SLOTS_PER_PHASE / 4);
    load_pct = 0; drain(8000);

    $display("delivered %0d packets", n_got);
    $display("mechanisms: vertical=%0d router_stall=%0d li_refused=%0d ob_full=%0d in_backpressure=%0d fast_moves=%0d reorder_dynamic=%0d dynamic_slots=%0d static_slots=%0d",
             c_vertical, c_router_stall, c_li_refused, c_ob_full, c_in_backpressure, c_fast_moves,
             c_reorder_dyn, c_dynamic_slots, c_static_slots);
    checks += 9;
    if (c_vertical == 0)        begin failures++; $display("FAIL: no vertical hop"); end
    if (c_router_stall == 0)    begin failures++; $display("FAIL: no router stall"); end
    if (c_li_refused == 0)      begin failures++; $display("FAIL: no LI refusal"); end
    if (c_ob_full == 0)         begin failures++; $display("FAIL: output buffer never full"); end
    if (c_in_backpressure == 0) begin failures++; $display("FAIL: no input backpressure"); end
    if (c_fast_moves == 0)      begin failures++; $display("FAIL: no move between slot boundaries"); end
    if (c_reorder_dyn == 0)     begin failures++; $display("FAIL: dynamic mode never reordered"); end
    if (c_dynamic_slots == 0)   begin failures++; $display("FAIL: dynamic mode unused"); end
    if (c_static_slots == 0)    begin failures++; $display("FAIL: static mode unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
