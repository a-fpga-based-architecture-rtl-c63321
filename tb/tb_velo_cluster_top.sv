// End-to-end testbench of velo_cluster_top at its default parameters.
//
// Events are built from "items" placed on sites four SPs apart, so items never touch:
//   T0  one isolated SP with a random hitmap (one or two clusters inside it);
//   T1  two neighbouring SPs, one pixel each, not touching (two 1-pixel clusters);
//   T2  a 2-pixel cluster across the border of two SPs side by side;
//   T3  a 2-pixel anti-diagonal cluster across the border of two SPs on top of each other.
// Expected clusters are computed here with a generic 8-connected flood fill and
// centroid = floor(4*sum/npix) in quarter pixels, independently of the LUT rules in the
// design. SPs of one T2/T3 item are placed in the same lane so they reach the matrix
// chain in order on the same line. When the chain overflows, a T2/T3 cluster comes out as
// two 1-pixel overflow clusters, which the checker accepts as the alternative outcome.
// Phases: hand-made events, a random 26-32-SP workload (throughput measured), an
// event overflowing the matrix chain, an event over 144 SPs (bypass), an empty event,
// and a phase with random output back-pressure. Each mechanism must occur at least once.
module tb_velo_cluster_top;
  import velo_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic [BUS_W-1:0] in_data, out_data;
  logic in_valid, in_sop, in_eop, in_ready, out_valid, out_sop, out_eop, out_ready;
  logic [4:0] fifo_max [16];
  logic [31:0] ovf_count, bypass_count;
  logic err_flag, err_word_valid;
  logic [3:0] err_code;
  logic [15:0] err_count;

  velo_cluster_top dut (
    .clk, .rst, .in_data, .in_valid, .in_sop, .in_eop, .in_ready,
    .out_data, .out_valid, .out_sop, .out_eop, .out_ready,
    .max_clear(1'b0), .fifo_max, .ovf_count, .bypass_count,
    .err_flag, .err_code, .err_count, .err_word_valid);

  int checks = 0, failures = 0;

  // -------- expected clusters --------
  typedef struct { int ev; int item; int grp; int sensor; int rowq; int colq; int kind; } exp_t;
  // kind: 0 isolated, 1 matrix, 2 matrix or overflow, 3 any, 4 overflow
  exp_t exp_q[$];
  int   ev_items[$];          // number of items per event
  typedef struct { int sensor; int row; int col; logic [7:0] hit; int lane; } spw_t;
  spw_t lanes_q [8][$];
  int   cur_ev = 0, cur_item = 0;
  bit   used_site [2][16][96];

  // mechanism counters
  int n_iso = 0, n_mat = 0, n_ovf = 0, n_two = 0, n_pad = 0, n_empty = 0, n_alt = 0;
  int n_in_stall = 0, n_out_hold = 0;
  int mix_sp = 0;

  task automatic add_clusters(input int sensor, input int prow[$], input int pcol[$],
                              input int grp, input int kind);
    int n = prow.size();
    int comp[$];
    int ncomp = 0;
    for (int i = 0; i < n; i++) comp.push_back(-1);
    for (int i = 0; i < n; i++) if (comp[i] < 0) begin
      int stack[$];
      comp[i] = ncomp; stack.push_back(i);
      while (stack.size() > 0) begin
        int a = stack.pop_back();
        for (int b = 0; b < n; b++)
          if (comp[b] < 0 && prow[a]-prow[b] <= 1 && prow[b]-prow[a] <= 1 &&
              pcol[a]-pcol[b] <= 1 && pcol[b]-pcol[a] <= 1) begin
            comp[b] = ncomp; stack.push_back(b);
          end
      end
      ncomp++;
    end
    for (int k = 0; k < ncomp; k++) begin
      int np = 0, sr = 0, sc = 0;
      exp_t e;
      for (int i = 0; i < n; i++) if (comp[i] == k) begin np++; sr += prow[i]; sc += pcol[i]; end
      e.ev = cur_ev; e.item = cur_item; e.grp = grp; e.sensor = sensor;
      e.rowq = (4*sr) / np; e.colq = (4*sc) / np; e.kind = kind;
      exp_q.push_back(e);
    end
  endtask

  function automatic bit take_site(input int sensor, output int r0, output int c0);
    for (int tries = 0; tries < 200; tries++) begin
      int a = 1 + $urandom_range(13), b = 1 + $urandom_range(93);
      if (!used_site[sensor][a][b]) begin
        used_site[sensor][a][b] = 1'b1;
        r0 = 4*a; c0 = 4*b;
        return 1'b1;
      end
    end
    return 1'b0;
  endfunction

  // the least-filled lane, ties broken at random
  function automatic int pick_lane();
    int best = -1;
    int start = $urandom_range(7);
    for (int i = 0; i < 8; i++) begin
      int k = (start + i) % 8;
      if (best < 0 || lanes_q[k].size() < lanes_q[best].size()) best = k;
    end
    return best;
  endfunction

  task automatic push_sp(input int lane, input int sensor, input int row, input int col,
                         input logic [7:0] hit);
    spw_t s;
    s.sensor = sensor; s.row = row; s.col = col; s.hit = hit; s.lane = lane;
    lanes_q[lane].push_back(s);
  endtask

  // T0: isolated SP; single=1 gives a one-pixel hitmap
  task automatic item_t0(input int sensor, input bit single, input int kind);
    int r0, c0, prow[$], pcol[$];
    logic [7:0] hit;
    if (!take_site(sensor, r0, c0)) return;
    hit = single ? 8'(1 << $urandom_range(7)) : 8'($urandom_range(1, 255));
    for (int b = 0; b < 8; b++) if (hit[b]) begin
      prow.push_back(4*(r0+1) + b % 4); pcol.push_back(2*(c0+1) + b / 4);
    end
    push_sp(pick_lane(), sensor, r0+1, c0+1, hit);
    add_clusters(sensor, prow, pcol, 0, kind);
    cur_item++;
  endtask

  // T1: two neighbouring SPs with one non-touching pixel each
  task automatic item_t1(input int sensor);
    int r0, c0, a, b, p1r[$], p1c[$], p2r[$], p2c[$];
    if (!take_site(sensor, r0, c0)) return;
    a = $urandom_range(3); b = $urandom_range(3);
    push_sp(pick_lane(), sensor, r0+1, c0+1, 8'(1 << a));         // pixel column 0
    push_sp(pick_lane(), sensor, r0+1, c0+2, 8'(1 << (4 + b)));   // pixel column 1
    p1r.push_back(4*(r0+1) + a); p1c.push_back(2*(c0+1));
    p2r.push_back(4*(r0+1) + b); p2c.push_back(2*(c0+2) + 1);
    add_clusters(sensor, p1r, p1c, 0, 2);
    add_clusters(sensor, p2r, p2c, 0, 2);
    cur_item++;
  endtask

  // T2 (horizontal) / T3 (vertical, anti-diagonal) cluster across two SPs
  task automatic item_t23(input int sensor, input bit vertical);
    int r0, c0, lane, pr[$], pc[$], ar[$], ac[$], br[$], bc[$];
    if (!take_site(sensor, r0, c0)) return;
    lane = pick_lane();
    if (!vertical) begin
      int a = $urandom_range(3);
      push_sp(lane, sensor, r0+1, c0+1, 8'(1 << (4 + a)));     // right column of left SP
      push_sp(lane, sensor, r0+1, c0+2, 8'(1 << a));           // left column of right SP
      ar.push_back(4*(r0+1) + a); ac.push_back(2*(c0+1) + 1);
      br.push_back(4*(r0+1) + a); bc.push_back(2*(c0+2));
    end else begin
      push_sp(lane, sensor, r0+1, c0+1, 8'(1 << (4 + 3)));     // top row, right column
      push_sp(lane, sensor, r0+2, c0+1, 8'(1 << 0));           // bottom row, left column
      ar.push_back(4*(r0+1) + 3); ac.push_back(2*(c0+1) + 1);
      br.push_back(4*(r0+2));     bc.push_back(2*(c0+1));
    end
    pr = {ar, br}; pc = {ac, bc};
    add_clusters(sensor, pr, pc, 0, 1);
    add_clusters(sensor, ar, ac, 1, 4);
    add_clusters(sensor, br, bc, 1, 4);
    cur_item++;
  endtask

  // -------- driving --------
  task automatic send_event();
    int len = 0, total, r = 0;
    for (int k = 0; k < 8; k++) if (lanes_q[k].size() > len) len = lanes_q[k].size();
    // SP i of the event travels in lane i % 8, so lanes 0..r-1 must hold len SPs and
    // lanes r..7 len-1 SPs; shorter lanes are filled with isolated one-pixel SPs
    for (int k = 0; k < 8; k++) if (lanes_q[k].size() == len) r = k + 1;
    for (int k = 0; k < 8; k++)
      while (lanes_q[k].size() < ((k < r) ? len : len - 1)) begin
        int r0, c0, s;
        s = $urandom_range(1);
        if (take_site(s, r0, c0)) begin
          logic [7:0] hit; int pr[$], pc[$];
          int b = $urandom_range(7);
          hit = 8'(1 << b);
          pr.push_back(4*(r0+1) + b % 4); pc.push_back(2*(c0+1) + b / 4);
          push_sp(k, s, r0+1, c0+1, hit);
          add_clusters(s, pr, pc, 0, (len*8 > 144) ? 3 : 0);
          cur_item++;
        end
      end
    total = len;
    ev_items.push_back(cur_item);
    for (int k = 0; k < 8; k++) mix_sp += lanes_q[k].size();
    // inputs change on the falling edge; in_ready is then stable until the rising edge
    for (int j = 0; j < ((total == 0) ? 1 : total); j++) begin
      logic [BUS_W-1:0] w = '0;
      for (int k = 0; k < 8; k++) if (total > 0 && j < lanes_q[k].size()) begin
        spw_t s = lanes_q[k][j];
        sp_t  sp = '0;
        sp.hitmap = s.hit; sp.row = 6'(s.row); sp.col = 9'(s.col); sp.sensor = s.sensor[0];
        w[32*k +: 32] = SP_W'(sp);
      end
      @(negedge clk);
      in_data  = w;
      in_valid = 1'b1;
      in_sop   = (j == 0);
      in_eop   = (j == ((total == 0) ? 0 : total - 1));
      #0;
      while (!in_ready) begin n_in_stall++; @(negedge clk); end
    end
    @(negedge clk);
    in_valid = 1'b0; in_sop = 1'b0; in_eop = 1'b0;
    for (int k = 0; k < 8; k++) lanes_q[k].delete();
    used_site = '{default: 1'b0};
    cur_ev++;
    cur_item = 0;
  endtask

  // -------- checking --------
  logic [31:0] pool[$];
  int          rx_ev = 0;

  function automatic bit kind_ok(input logic [31:0] w, input int kind);
    case (kind)
      0: return w[30] && !w[29];
      1: return !w[30];
      2: return !w[30] || (w[30] && w[29]);
      4: return w[30] && w[29];
      default: return 1'b1;
    endcase
  endfunction

  function automatic int find(input exp_t e);
    foreach (pool[i]) begin
      logic [31:0] w = pool[i];
      if (int'(w[22]) == e.sensor && int'({w[9:2], w[1:0]}) == e.rowq &&
          int'({w[21:12], w[11:10]}) == e.colq && kind_ok(w, e.kind))
        return i;
    end
    return -1;
  endfunction

  task automatic check_event();
    exp_t mine[$];
    int nitems = ev_items.pop_front();
    while (exp_q.size() > 0 && exp_q[0].ev == rx_ev) mine.push_back(exp_q.pop_front());
    foreach (pool[i]) begin
      if (pool[i][30] && !pool[i][29]) n_iso++;
      else if (!pool[i][30]) n_mat++;
      else n_ovf++;
    end
    for (int it = 0; it < nitems; it++) begin
      bit ok = 1'b0;
      for (int g = 0; g < 2 && !ok; g++) begin
        logic [31:0] removed[$];
        bit all = 1'b1, any = 1'b0;
        foreach (mine[i]) if (mine[i].item == it && mine[i].grp == g) begin
          int idx = find(mine[i]);
          any = 1'b1;
          if (idx < 0) all = 1'b0;
          else begin removed.push_back(pool[idx]); pool.delete(idx); end
        end
        if (any && all) begin ok = 1'b1; if (g == 1) n_alt++; end
        else foreach (removed[i]) pool.push_back(removed[i]);
      end
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL event %0d item %0d: expected cluster(s) not found", rx_ev, it);
        foreach (mine[i]) if (mine[i].item == it)
          $display("   exp grp %0d s%0d rowq %0d colq %0d kind %0d", mine[i].grp,
                   mine[i].sensor, mine[i].rowq, mine[i].colq, mine[i].kind);
      end
    end
    checks++;
    if (pool.size() != 0) begin
      failures++;
      $display("FAIL event %0d: %0d unexpected cluster word(s)", rx_ev, pool.size());
      foreach (pool[i]) $display("   got %08h", pool[i]);
    end
    pool.delete();
    rx_ev++;
  endtask

  bit in_evt = 1'b0;
  int eop_time[$];
  always @(posedge clk) if (!rst && out_valid && out_ready && out_eop) eop_time.push_back($time);
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (out_sop == in_evt) begin
      failures++; $display("FAIL: SOP framing error at event %0d", rx_ev);
    end
    in_evt = !out_eop;
    if (out_sop && out_eop && out_data == '0) n_empty++;
    for (int k = 0; k < 8; k++) begin
      if (out_data[32*k +: 32] != '0) pool.push_back(out_data[32*k +: 32]);
      else n_pad++;
    end
    if (out_eop) check_event();
  end

  // two clusters inside one isolated SP
  always @(posedge clk) if (!rst && dut.g_iso[0].u_iso.in_valid && !dut.g_iso[0].u_iso.in_hold &&
                            dut.g_iso[0].u_iso.nclu == 2'd2) n_two++;

  logic bp_en = 1'b0;
  always @(negedge clk) out_ready = bp_en ? ($urandom_range(2) != 0) : 1'b1;
  always @(posedge clk) if (bp_en && !out_ready && out_valid) n_out_hold++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic random_event(input int nsp_target);
    while (1) begin
      int tot = 0;
      for (int k = 0; k < 8; k++) tot += lanes_q[k].size();
      if (tot >= nsp_target - 1) break;
      case ($urandom_range(3))
        0: item_t0($urandom_range(1), 1'b0, 0);
        1: item_t1($urandom_range(1));
        2: item_t23($urandom_range(1), 1'b0);
        default: item_t23($urandom_range(1), 1'b1);
      endcase
    end
    send_event();
  endtask

  // workload with the paper's share of isolated SPs (about 53 %): 69 % of the items are
  // single isolated SPs, the rest are two-SP items
  task automatic paper_mix_event(input int nsp_target);
    while (1) begin
      int tot = 0;
      for (int k = 0; k < 8; k++) tot += lanes_q[k].size();
      if (tot >= nsp_target - 2) break;
      if ($urandom_range(99) < 69) item_t0($urandom_range(1), 1'b0, 0);
      else case ($urandom_range(2))
        0: item_t1($urandom_range(1));
        1: item_t23($urandom_range(1), 1'b0);
        default: item_t23($urandom_range(1), 1'b1);
      endcase
    end
    send_event();
  endtask

  task automatic wait_drain();
    int guard = 0;
    while (rx_ev < cur_ev && guard < 20000) begin @(posedge clk); guard++; end
  endtask

  initial begin
    int t0, t1, nev;
    in_valid = 1'b0; in_sop = 1'b0; in_eop = 1'b0; in_data = '0; out_ready = 1'b1;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (5) @(posedge clk);

    // 1. hand-made: an SP with two clusters, a T2 and a T3
    begin
      int r0, c0, pr[$], pc[$];
      void'(take_site(0, r0, c0));
      push_sp(0, 0, r0+1, c0+1, 8'b1000_0001);   // rows 0 and 3: two clusters
      pr = {4*(r0+1), 4*(r0+1) + 3}; pc = {2*(c0+1), 2*(c0+1) + 1};
      add_clusters(0, pr, pc, 0, 0);
      cur_item++;
      item_t23(0, 1'b0);
      item_t23(1, 1'b1);
      send_event();
    end
    wait_drain();

    // 2. empty event
    send_event();
    wait_drain();

    // 3. random workload, 26..32 SPs per event, throughput
    nev = 40;
    t0 = $time;
    for (int e = 0; e < nev; e++) random_event(26 + $urandom_range(6));
    wait_drain();
    t1 = $time;
    $display("workload: %0d events in %0d cycles (%0.2f cycles/event)", nev, (t1 - t0) / 2,
             real'(t1 - t0) / 2.0 / nev);

    // 3b. steady-state rate with 29..35 SPs per event (32 on average, the paper's limit)
    begin
      int first_rx, e0, e1;
      real cpe;
      first_rx = rx_ev;
      mix_sp = 0;
      nev = 60;
      for (int e = 0; e < nev; e++) paper_mix_event(25 + $urandom_range(6));
      wait_drain();
      e0 = eop_time[first_rx + 10];
      e1 = eop_time[first_rx + nev - 1];
      cpe = real'(e1 - e0) / 2.0 / real'(nev - 11);
      $display("average SPs per event: %0.1f", real'(mix_sp) / real'(nev));
      $display("steady state at 32 SPs/event: %0.2f cycles/event (%0.1f MHz event rate at 350 MHz)",
               cpe, 350.0 / cpe);
      checks++;
      // 350 MHz / 30 MHz = 11.67 cycles per event
      if (cpe > 350.0 / 30.0) begin
        failures++; $display("FAIL: %0.2f cycles/event exceeds 11.67", cpe);
      end
    end

    // 4. matrix-chain overflow: 30 non-isolated items on sensor 0
    for (int i = 0; i < 30; i++) if (i % 2 == 0) item_t1(0); else item_t23(0, 1'b0);
    send_event();
    wait_drain();
    checks++;
    if (ovf_count == 0) begin failures++; $display("FAIL: no SP overflowed the chain"); end

    // 5. bypass: 160 one-pixel SPs (more than the 144 read registers)
    for (int i = 0; i < 160; i++) item_t0($urandom_range(1), 1'b1, 3);
    send_event();
    wait_drain();
    checks++;
    if (bypass_count == 0) begin failures++; $display("FAIL: no bypass happened"); end

    // 6. back-pressure on the output
    bp_en = 1'b1;
    for (int e = 0; e < 15; e++) random_event(20 + $urandom_range(12));
    wait_drain();
    bp_en = 1'b0;
    repeat (20) @(posedge clk);

    checks++;
    if (rx_ev != cur_ev) begin failures++; $display("FAIL: %0d of %0d events out", rx_ev, cur_ev); end
    checks++;
    if (err_flag) begin failures++; $display("FAIL: error flag set, code %0d", err_code); end

    $display("mechanisms: iso %0d matrix %0d overflow %0d two-in-SP %0d pad %0d empty %0d",
             n_iso, n_mat, n_ovf, n_two, n_pad, n_empty);
    $display("            alt(overflow split) %0d in-stall %0d out-hold %0d ovf_count %0d bypass %0d",
             n_alt, n_in_stall, n_out_hold, ovf_count, bypass_count);
    if (n_iso == 0 || n_mat == 0 || n_ovf == 0 || n_two == 0 || n_pad == 0 || n_empty == 0 ||
        n_in_stall == 0 || n_out_hold == 0) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
