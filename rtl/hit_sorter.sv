// hit_sorter: time sorter of the front-end FPGA. Hits from N_IN ASIC links
// arrive roughly, but not exactly, in time order; the sorter emits one
// stream of all hits in time stamp order.
//
// How it works (the scheme follows the paper: insertion at addresses given
// by the time stamp, per-ASIC hit lists per time stamp, one read
// sequence). Every input has its own memory bank, a ring of SLOTS time
// slots with room for DEPTH hits each, and a counter per slot. A hit is
// written to slot ts mod SLOTS of its input's bank at position count, and
// the count is incremented: the counters are the per-ASIC, per-time-stamp
// hit lists. After reset the counters are swept to zero, one slot per
// clock, before the sorter accepts hits. The reader follows DELAY slots behind ts_now. For each slot
// it takes the set of inputs with a non-zero count and reads their hits
// one per clock, input after input, clearing each count once its hits are
// out; that sequence is the single read sequence. The reader looks ahead
// over the rest of the current 64 ns frame and jumps over empty slots in
// the same clock, so empty slots cost nothing; a frame whose last slots
// are empty is closed by a marker, which costs one clock.
//
// Output items (valid/ready): a hit (is_hit = 1), with slot_end on the
// last hit of its slot and frame_end when that slot is the last of a
// frame; or, for an empty frame-closing slot, a marker (is_hit = 0,
// slot_end = frame_end = 1) whose hit.ts is the slot's time stamp.
// Hits DELAY or more clocks old, or too far from the reader for the ring,
// count as late; hits beyond DEPTH per input and slot count as overflow;
// both are dropped. Throughput: one hit per clock, plus at most one clock
// per frame for the marker.
// DEPTH, SLOTS and DELAY are this design's choice; N_IN = 36 is the
// paper's maximum number of input links.
module hit_sorter #(
  parameter int N_IN      = 36,
  parameter int SLOT_LOG2 = 8,
  parameter int DEPTH     = 4,
  parameter int DELAY     = 64
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [daq_pkg::TS_W-1:0] ts_now,
  input  logic [N_IN-1:0]          in_valid,
  input  daq_pkg::hit_t            in_hit [N_IN],
  output logic                     out_valid,
  input  logic                     out_ready,
  output daq_pkg::hit_t            out_hit,
  output logic                     out_is_hit,
  output logic                     out_slot_end,
  output logic                     out_frame_end,
  output logic [15:0]              late_cnt,
  output logic [15:0]              overflow_cnt
);
  import daq_pkg::*;
  localparam int SLOTS = 1 << SLOT_LOG2;
  localparam int CW    = $clog2(DEPTH + 1);
  localparam int JW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int IW    = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [CW-1:0] cnt [N_IN][SLOTS];
  hit_t          bank_q [N_IN];          // per-bank read data at the read address
  logic                 clr;             // counter sweep after reset
  logic [SLOT_LOG2-1:0] cp;

  localparam int FS = 1 << FRAME_LOG2;   // slots per frame

  logic [TS_W-1:0]      rd_ts;      // slot being read, or first unread slot
  logic                 busy;       // in the middle of slot rd_ts
  logic [N_IN-1:0]      mask_r, mask_cur, mask_next;
  logic [JW-1:0]        cur_j;
  logic [IW-1:0]        fi;
  logic                 out_free, last_of_input;
  logic [TS_W-1:0]      fr_end, tgt_ts, cs;
  logic [SLOT_LOG2-1:0] cslot;
  logic                 tgt_found, tgt_ready, end_ready, start, marker;

  assign out_free = !out_valid || out_ready;

  // slot s is at least DELAY clocks in the past (modular time, half range)
  function automatic logic old_enough(input logic [TS_W-1:0] s);
    logic [TS_W-1:0] age;
    age = ts_now - s;
    return !age[TS_W-1] && age >= TS_W'(DELAY);
  endfunction
  assign fr_end   = rd_ts | TS_W'(FS - 1);

  // Look ahead over the rest of the current frame for the first slot
  // holding hits; empty slots in between are skipped in the same clock.
  always_comb begin
    tgt_found = 1'b0;
    tgt_ts    = fr_end;
    for (int k = FS - 1; k >= 0; k--) begin
      logic [TS_W-1:0] s;
      logic            occ;
      s   = rd_ts + TS_W'(k);
      occ = 1'b0;
      for (int i = 0; i < N_IN; i++) occ |= (cnt[i][s[SLOT_LOG2-1:0]] != '0);
      if (k <= FS - 1 - int'(rd_ts[FRAME_LOG2-1:0]) && occ) begin
        tgt_found = 1'b1;
        tgt_ts    = s;
      end
    end
    tgt_ready = old_enough(tgt_ts);
    end_ready = old_enough(fr_end);
    start  = !clr && !busy && tgt_found && tgt_ready && out_free;
    marker = !clr && !busy && !tgt_found && end_ready && out_free;
    cs     = busy ? rd_ts : tgt_ts;
    cslot  = cs[SLOT_LOG2-1:0];
    for (int i = 0; i < N_IN; i++) mask_cur[i] = busy ? mask_r[i] : (cnt[i][cslot] != '0);
    fi = '0;
    for (int i = N_IN - 1; i >= 0; i--) if (mask_cur[i]) fi = IW'(i);
    last_of_input = (CW'(cur_j) + 1'b1 == cnt[fi][cslot]);
    mask_next = mask_cur;
    if (last_of_input) mask_next[fi] = 1'b0;
  end

  wire emit = start || (!clr && busy && out_free);

  // reader
  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ts <= '0; busy <= 1'b0; mask_r <= '0; cur_j <= '0;
      out_valid <= 1'b0; out_hit <= '0; out_is_hit <= 1'b0;
      out_slot_end <= 1'b0; out_frame_end <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (marker) begin
        // the rest of the frame is empty: close it with a marker
        rd_ts         <= fr_end + 1'b1;
        out_valid     <= 1'b1;
        out_is_hit    <= 1'b0;
        out_slot_end  <= 1'b1;
        out_frame_end <= 1'b1;
        out_hit       <= '0;
        out_hit.ts    <= fr_end;
      end else if (emit) begin
        out_valid     <= 1'b1;
        out_is_hit    <= 1'b1;
        out_hit       <= bank_q[fi];
        out_slot_end  <= 1'b0;
        out_frame_end <= 1'b0;
        rd_ts         <= cs;
        if (last_of_input) begin
          cur_j <= '0;
          if (mask_next == '0) begin
            busy          <= 1'b0;
            rd_ts         <= cs + 1'b1;
            out_slot_end  <= 1'b1;
            out_frame_end <= (cs[FRAME_LOG2-1:0] == '1);
          end else begin
            busy   <= 1'b1;
            mask_r <= mask_next;
          end
        end else begin
          cur_j  <= cur_j + 1'b1;
          busy   <= 1'b1;
          mask_r <= mask_cur;
        end
      end
    end
  end

  // writers, one per input bank, and the hit-list counters. A hit is late
  // when it is DELAY or more slots old (its slot may be read already) or
  // too far from the reader for the ring. While the counters are swept
  // after reset (SLOTS clocks) incoming hits are dropped as late.
  logic [N_IN-1:0] acc, late, ovf;
  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      late[i] = in_valid[i] && (clr || (ts_now - in_hit[i].ts) >= TS_W'(DELAY) ||
                                (in_hit[i].ts - rd_ts) >= TS_W'(SLOTS));
      ovf[i]  = in_valid[i] && !late[i] &&
                (cnt[i][in_hit[i].ts[SLOT_LOG2-1:0]] == CW'(DEPTH));
      acc[i]  = in_valid[i] && !late[i] && !ovf[i];
    end
  end

  for (genvar g = 0; g < N_IN; g++) begin : g_bank
    hit_t mem [SLOTS << JW];
    logic [SLOT_LOG2-1:0] wslot;
    assign wslot     = in_hit[g].ts[SLOT_LOG2-1:0];
    assign bank_q[g] = mem[{cslot, cur_j}];
    always_ff @(posedge clk)
      if (acc[g]) mem[{wslot, JW'(cnt[g][wslot])}] <= in_hit[g];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      clr <= 1'b1; cp <= '0; late_cnt <= '0; overflow_cnt <= '0;
    end else begin
      if (clr) begin
        cp <= cp + 1'b1;
        if (cp == '1) clr <= 1'b0;
      end
      if (|late && late_cnt != '1) late_cnt <= late_cnt + 16'($countones(late));
      if (|ovf && overflow_cnt != '1) overflow_cnt <= overflow_cnt + 16'($countones(ovf));
    end
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      for (int i = 0; i < N_IN; i++) cnt[i][cp] <= '0;
    end else begin
      for (int i = 0; i < N_IN; i++)
        if (acc[i]) cnt[i][in_hit[i].ts[SLOT_LOG2-1:0]] <= cnt[i][in_hit[i].ts[SLOT_LOG2-1:0]] + 1'b1;
      if (emit && last_of_input) cnt[fi][cslot] <= '0;
    end
  end

  // a slot is only read once all its hits are in: DELAY must leave room
  initial assert (DELAY > 0 && DELAY < SLOTS) else $error("hit_sorter: DELAY must be in 1..SLOTS-1");
endmodule
