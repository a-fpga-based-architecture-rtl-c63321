// Testbench of matrix_cell: per event, line 0 first sends the SP that allocates the
// matrix (or nothing, for a matrix that stays free), then both lines send random SPs
// inside the 3x3-SP window (same sensor) or outside it, then EE words. Random output
// holds and a random busy cluster finder. Checks: the copied pixel map equals the OR of
// the in-window SPs placed at (3x3 SP window, 4x2 pixels each), centre, sensor,
// allocation flag and event identifier at the copy pulse; every other SP is forwarded
// on its own line in order; both lines forward an EE word with their identifier after
// the copy; the cell is free again for the next event; a sync error is flagged only for
// the last event, whose identifiers differ.
module tb_matrix_cell;
  import velo_pkg::*;
  localparam int NEV = 300;
  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;
  logic [1:0] in_valid = 2'b00, hold_out, out_valid, hold_in = 2'b00;
  logic [SP_W-1:0] in_data [2], out_data [2];
  logic finder_busy = 1'b0, copy, copy_alloc, copy_sensor, sync_err;
  logic [MAT_PIX-1:0] copy_pix;
  logic [SP_ROW_W-1:0] copy_crow;
  logic [SP_COL_W-1:0] copy_ccol;
  logic [EVID_W-1:0] copy_id;
  matrix_cell dut (.clk, .rst, .in_valid, .in_data, .hold_out, .out_valid, .out_data,
    .hold_in, .finder_busy, .copy, .copy_alloc, .copy_pix, .copy_crow, .copy_ccol,
    .copy_sensor, .copy_id, .sync_err);
  int checks = 0, failures = 0, nerr = 0, ncopy = 0;
  logic [SP_W-1:0] fwd_q [2][$];
  typedef struct { bit alloc; logic [MAT_PIX-1:0] pix; int crow; int ccol; int sensor; int id; } exp_t;
  exp_t exp_c [$];
  bit alloc_sent = 1'b0;

  function automatic logic [MAT_PIX-1:0] place(input sp_t s, input int cr, input int cc);
    logic [MAT_PIX-1:0] m;
    m = '0;
    for (int sr = 0; sr < 4; sr++) for (int sc = 0; sc < 2; sc++)
      if (s.hitmap[4*sc + sr])
        m[((int'(s.row) - cr + 1)*4 + sr)*MAT_COLS + (int'(s.col) - cc + 1)*2 + sc] = 1'b1;
    return m;
  endfunction

  always @(negedge clk) begin
    hold_in = 2'($urandom_range(3)) & {2{($urandom_range(2) == 0)}};
    finder_busy = ($urandom_range(3) == 0);
  end

  always @(posedge clk) if (!rst) begin
    if (copy) begin
      exp_t e;
      checks++; ncopy++;
      if (sync_err) nerr++;
      e = exp_c.pop_front();
      if (copy_alloc != e.alloc || (e.alloc && (copy_pix != e.pix || int'(copy_crow) != e.crow ||
          int'(copy_ccol) != e.ccol || int'(copy_sensor) != e.sensor)) || int'(copy_id) != e.id) begin
        failures++; $display("FAIL: copy of event %0d differs", e.id);
      end
      if (finder_busy) begin failures++; $display("FAIL: copy while the finder is busy"); end
    end
    for (int i = 0; i < 2; i++) if (out_valid[i] && !hold_in[i]) begin
      checks++;
      if (fwd_q[i].size() == 0 || fwd_q[i][0] != out_data[i]) begin
        failures++; $display("FAIL line %0d: forwarded %08h unexpected (expected %08h)", i, out_data[i], fwd_q[i].size() ? fwd_q[i][0] : 0);
      end
      if (fwd_q[i].size() != 0) void'(fwd_q[i].pop_front());
    end
  end

  task automatic put(input int l, input logic [SP_W-1:0] w);
    @(negedge clk);
    in_data[l] = w; in_valid[l] = 1'b1;
    // hold_out follows hold_in combinationally: sample the transfer at the rising edge
    forever begin
      @(posedge clk);
      if (!hold_out[l]) break;
    end
    @(negedge clk);
    in_valid[l] = 1'b0;
  endtask

  function automatic sp_t rnd_sp(input bit in_win, input int cr, input int cc, input int sen);
    sp_t s;
    s = '0;
    s.hitmap = 8'($urandom_range(1, 255));
    if (in_win) begin
      s.row = 6'(cr - 1 + $urandom_range(2)); s.col = 9'(cc - 1 + $urandom_range(2));
      s.sensor = sen[0];
    end else begin
      s.sensor = 1'($urandom_range(1));
      if (s.sensor == sen[0] && $urandom_range(1)) begin
        s.row = 6'(cr + 2 + $urandom_range(3)); s.col = 9'(cc);
      end else begin
        s.row = 6'($urandom_range(63)); s.col = 9'(cc + 2 + $urandom_range(100));
      end
    end
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data[0] = '0; in_data[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int ev = 0; ev < NEV; ev++) begin
      exp_t e;
      sp_t lists [2][$];
      int cr, cc, sen;
      lists[0].delete(); lists[1].delete();
      cr = $urandom_range(1, 62); cc = $urandom_range(1, 200); sen = $urandom_range(1);
      e.alloc = ($urandom_range(4) != 0);
      e.pix = '0; e.crow = cr; e.ccol = cc; e.sensor = sen; e.id = ev % 32;
      for (int l = 0; l < 2; l++) begin
        int n;
        n = $urandom_range(4);
        for (int k = 0; k < n; k++) begin
          sp_t s;
          s = rnd_sp(e.alloc && $urandom_range(1), cr, cc, sen);
          if (!(e.alloc || l == 1)) continue;
          lists[l].push_back(s);
          if (e.alloc && s.sensor == sen[0] && int'(s.row) >= cr - 1 && int'(s.row) <= cr + 1 &&
              int'(s.col) >= cc - 1 && int'(s.col) <= cc + 1)
            e.pix |= place(s, cr, cc);
          else fwd_q[l].push_back(SP_W'(s));
        end
      end
      if (e.alloc) begin
        sp_t a;
        a = '0; a.row = 6'(cr); a.col = 9'(cc); a.sensor = sen[0]; a.hitmap = 8'($urandom_range(1, 255));
        e.pix |= place(a, cr, cc);
        put(0, SP_W'(a));
      end
      exp_c.push_back(e);
      fwd_q[0].push_back(make_ee(EVID_W'(ev)));
      fwd_q[1].push_back(make_ee(EVID_W'((ev == NEV - 1) ? ev + 1 : ev)));
      fork
        begin
          foreach (lists[0][k]) put(0, SP_W'(lists[0][k]));
          put(0, make_ee(EVID_W'(ev)));
        end
        begin
          foreach (lists[1][k]) put(1, SP_W'(lists[1][k]));
          put(1, make_ee(EVID_W'((ev == NEV - 1) ? ev + 1 : ev)));
        end
      join
    end
    repeat (50) @(negedge clk);
    checks++;
    if (ncopy != NEV || exp_c.size() != 0) begin failures++; $display("FAIL: %0d copies", ncopy); end
    checks++;
    if (fwd_q[0].size() + fwd_q[1].size() != 0) begin failures++; $display("FAIL: words not forwarded"); end
    checks++;
    if (nerr != 1) begin failures++; $display("FAIL: %0d sync errors", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
