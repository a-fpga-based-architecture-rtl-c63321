// isolation_flagger: marks every SP of an event that has no active neighbour SP.
//
// An SP is "isolated" when none of the eight SPs around it (same sensor, SP row and
// column each within one) is present in the same event. The check is a five-step
// pipeline, one event (or event chunk) per step:
//   read   - collects the SPs of an event, up to LANES per cycle, into MAX_SP registers;
//   buffer - a copy of the read registers, so the next event can be read meanwhile;
//   load   - each cycle picks a pair (i, j), i <= j, of SUB-SP blocks of the buffer and
//            computes each SP's neighbour row/column ranges (one-unit additions and
//            subtractions);
//   flag   - compares the two blocks SUB x SUB in one cycle and sets the status bit of
//            every SP that found a neighbour; n blocks take n(n+1)/2 load cycles;
//   write  - copies buffer and status, then sends the SPs LANES per cycle, one per output
//            stream, with the isolation bit set to the inverted status, followed by an
//            EE word on every stream.
// Each step hands its content to the next in one cycle when the next is empty or is
// handing on its own content in that same cycle, and holds its predecessor otherwise
// (back-pressure between the steps). The read step thus accepts a new event in the cycle
// it hands the previous one to the buffer.
// Bypass: an event with more than MAX_SP SPs is cut into chunks of at most MAX_SP; these
// skip the comparisons and leave with the isolation bit at 0, so they go to the matrix
// chains. Only the last chunk of an event is followed by the EE words.
// Input: in_valid/in_hold with in_nsp SPs packed in lanes 0..in_nsp-1 of in_sp, and
// in_eop on the last word of an event. Output: LANES valid/hold streams of SP and EE
// words; all lanes advance together. The event identifier of the EE words counts events
// modulo 2^EVID_W. Status for monitoring: which stages are busy and a bypass pulse.
module isolation_flagger
  import velo_pkg::*;
#(
  parameter int unsigned MAX_SP = 144,
  parameter int unsigned SUB    = 16
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [SP_W-1:0]             in_sp [LANES],
  input  logic [$clog2(LANES+1)-1:0]  in_nsp,
  input  logic                        in_eop,
  output logic                        in_hold,
  output logic [LANES-1:0]            out_valid,
  output logic [SP_W-1:0]             out_data [LANES],
  input  logic [LANES-1:0]            out_hold,
  output logic                        bypass_pulse
);
  localparam int unsigned NBLK = (MAX_SP + SUB - 1) / SUB;
  localparam int unsigned SLOTS = NBLK * SUB;          // storage rounded up to blocks
  localparam int unsigned CW = $clog2(SLOTS + 1);
  localparam int unsigned BW = $clog2(NBLK + 1);

  // ---------------- read ----------------
  sp_t         rd_mem [SLOTS];
  logic [CW-1:0] rd_cnt;
  logic        rd_full, rd_last, rd_bypass, rd_evt_over;
  logic        rd_fits, rd_accept;

  // ---------------- buffer / load / flag ----------------
  sp_t         bf_mem [SLOTS];
  logic [CW-1:0] bf_cnt;
  logic        bf_full, bf_last, bf_bypass;
  logic [SLOTS-1:0] status;
  logic [BW-1:0] nblk, li, lj;
  logic        issuing, ld_v, bf_done;
  sp_t         ld_a [SUB];
  sp_t         ld_b [SUB];
  logic [BW-1:0] ld_i, ld_j;
  logic [SUB-1:0] ld_a_ok, ld_b_ok;
  logic [SP_ROW_W:0] ld_rlo [SUB];
  logic [SP_ROW_W:0] ld_rhi [SUB];
  logic [SP_COL_W:0] ld_clo [SUB];
  logic [SP_COL_W:0] ld_chi [SUB];

  // ---------------- write ----------------
  sp_t         wr_mem [SLOTS];
  logic [SLOTS-1:0] wr_stat;
  logic [CW-1:0] wr_cnt, wr_ptr;
  logic        wr_full, wr_last, wr_go;
  logic [EVID_W-1:0] evid;

  // A stage reloads in the same cycle in which it hands its content on, so that an
  // event moves from read to buffer to write without idle cycles in between.
  logic rd_to_bf, bf_to_wr, wr_end;
  logic [CW-1:0] rd_base;                 // read count after this cycle's hand-over
  assign bf_done  = bf_full && !issuing && !ld_v;
  assign bf_to_wr = bf_done && (!wr_full || wr_end);
  assign rd_to_bf = rd_full && (!bf_full || bf_to_wr);
  assign bypass_pulse = rd_to_bf && rd_bypass;
  assign rd_base  = rd_to_bf ? '0 : rd_cnt;

  // read accepts a word if it fits; otherwise the chunk is closed first
  assign rd_fits   = (32'(rd_base) + 32'(in_nsp)) <= MAX_SP;
  assign in_hold   = (rd_full && !rd_to_bf) || !rd_fits;
  assign rd_accept = in_valid && !in_hold;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_cnt <= '0; rd_full <= 1'b0; rd_last <= 1'b0; rd_bypass <= 1'b0;
      rd_evt_over <= 1'b0;
    end else begin
      if (rd_to_bf) begin
        rd_full     <= 1'b0;
        rd_cnt      <= '0;
        rd_evt_over <= !rd_last;
      end
      if (rd_accept) begin
        for (int k = 0; k < int'(LANES); k++)
          if (k < int'(in_nsp)) rd_mem[int'(rd_base) + k] <= sp_t'(in_sp[k]);
        rd_cnt <= rd_base + CW'(in_nsp);
        if (in_eop) begin
          rd_full   <= 1'b1;
          rd_last   <= 1'b1;
          rd_bypass <= rd_to_bf ? !rd_last : rd_evt_over;
        end
      end else if (in_valid && !rd_full && !rd_fits) begin
        // event larger than the read registers: close a bypass chunk
        rd_full     <= 1'b1;
        rd_last     <= 1'b0;
        rd_bypass   <= 1'b1;
      end
    end
  end

  // buffer and comparison scheduling
  always_ff @(posedge clk) begin
    if (rst) begin
      bf_full <= 1'b0; bf_cnt <= '0; bf_last <= 1'b0; bf_bypass <= 1'b0;
      issuing <= 1'b0; ld_v <= 1'b0;
      li <= '0; lj <= '0; nblk <= '0; status <= '0;
      ld_i <= '0; ld_j <= '0;
    end else begin
      ld_v <= 1'b0;
      if (rd_to_bf) begin
        for (int k = 0; k < int'(SLOTS); k++) bf_mem[k] <= rd_mem[k];
        bf_cnt    <= rd_cnt;
        bf_last   <= rd_last;
        bf_bypass <= rd_bypass;
        bf_full   <= 1'b1;
        status    <= '0;
        nblk      <= BW'((int'(rd_cnt) + SUB - 1) / SUB);
        li <= '0; lj <= '0;
        issuing   <= !rd_bypass && (rd_cnt != '0);
      end else if (bf_to_wr) begin
        bf_full <= 1'b0;
      end
      // load: one pair of blocks per cycle
      if (issuing) begin
        ld_v <= 1'b1;
        ld_i <= li;
        ld_j <= lj;
        for (int p = 0; p < int'(SUB); p++) begin
          ld_a[p] <= bf_mem[int'(li)*SUB + p];
          ld_b[p] <= bf_mem[int'(lj)*SUB + p];
          ld_a_ok[p] <= (int'(li)*SUB + p) < int'(bf_cnt);
          ld_b_ok[p] <= (int'(lj)*SUB + p) < int'(bf_cnt);
          ld_rlo[p] <= {1'b0, bf_mem[int'(li)*SUB + p].row} - 1'b1;
          ld_rhi[p] <= {1'b0, bf_mem[int'(li)*SUB + p].row} + 1'b1;
          ld_clo[p] <= {1'b0, bf_mem[int'(li)*SUB + p].col} - 1'b1;
          ld_chi[p] <= {1'b0, bf_mem[int'(li)*SUB + p].col} + 1'b1;
        end
        if (lj == nblk - 1'b1) begin
          if (li == nblk - 1'b1) issuing <= 1'b0;
          li <= li + 1'b1;
          lj <= li + 1'b1;
        end else begin
          lj <= lj + 1'b1;
        end
      end
      // flag: SUB x SUB comparisons
      if (ld_v) begin
        for (int p = 0; p < int'(SUB); p++)
          for (int q = 0; q < int'(SUB); q++) begin
            if (ld_a_ok[p] && ld_b_ok[q] && !(ld_i == ld_j && p == q) &&
                ld_a[p].sensor == ld_b[q].sensor &&
                ({1'b0, ld_b[q].row} == ld_rlo[p] || ld_b[q].row == ld_a[p].row ||
                 {1'b0, ld_b[q].row} == ld_rhi[p]) &&
                ({1'b0, ld_b[q].col} == ld_clo[p] || ld_b[q].col == ld_a[p].col ||
                 {1'b0, ld_b[q].col} == ld_chi[p])) begin
              status[int'(ld_i)*SUB + p] <= 1'b1;
              status[int'(ld_j)*SUB + q] <= 1'b1;
            end
          end
      end
    end
  end

  // write: LANES SPs per cycle, then the EE words
  assign wr_go  = wr_full && (out_hold == '0);
  assign wr_end = wr_go && ((wr_ptr < wr_cnt) ?
                  (int'(wr_ptr) + int'(LANES) >= int'(wr_cnt) && !wr_last) : 1'b1);

  always_comb begin
    sp_t s;
    for (int k = 0; k < int'(LANES); k++) begin
      s = wr_mem[(int'(wr_ptr) + k) % int'(SLOTS)];
      s.iso = !wr_stat[(int'(wr_ptr) + k) % int'(SLOTS)];
      s.ee  = 1'b0;
      out_valid[k] = 1'b0;
      out_data[k]  = make_ee(evid);
      if (wr_full) begin
        if (wr_ptr < wr_cnt) begin
          if (int'(wr_ptr) + k < int'(wr_cnt)) begin
            out_data[k]  = SP_W'(s);
            out_valid[k] = wr_go;
          end
        end else if (wr_last) begin
          out_valid[k] = wr_go;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_full <= 1'b0; wr_cnt <= '0; wr_ptr <= '0; wr_last <= 1'b0; evid <= '0;
      wr_stat <= '0;
    end else begin
      if (wr_go) begin
        if (wr_ptr < wr_cnt) begin
          wr_ptr <= wr_ptr + CW'(LANES);
          if (int'(wr_ptr) + int'(LANES) >= int'(wr_cnt) && !wr_last) wr_full <= 1'b0;
        end else begin
          wr_full <= 1'b0;            // EE words sent
          evid    <= evid + 1'b1;
        end
      end
      if (bf_to_wr) begin
        for (int k = 0; k < int'(SLOTS); k++) wr_mem[k] <= bf_mem[k];
        wr_stat <= status | {SLOTS{bf_bypass}};
        wr_cnt  <= bf_cnt;
        wr_last <= bf_last;
        wr_ptr  <= '0;
        wr_full <= 1'b1;
      end
    end
  end
endmodule
