// parity_engine: parity store and syndrome unit of the two-dimensional
// erasure product code.
//
// The configuration frames are seen as an array with one row per task and
// N_FRAMES columns (a task with fewer frames is padded with all-zero
// frames).  The horizontal parity frame of task z is the XOR of all frames
// of row z; the vertical parity frame of column k is the XOR of frame k of
// every task.  Frames are FRAME_WORDS words of 32 bits; parity is kept word
// by word, so "bit (j,i) of a frame" is bit i of word j.
//
// Two banks are kept: the golden parity, computed from the fault-free data
// when the tasks are loaded (acc_encode = 1), and the fresh parity,
// computed from readback data on every check (acc_encode = 0).  Both are
// built by the same XOR accumulator: each (task, frame, word) is presented
// once per pass on acc_*; the first frame of a row and the first task of a
// column overwrite instead of XOR, so no clearing pass is needed, but every
// word of every row and column, padding included, must be presented.
//
// The horizontal syndrome (golden ^ fresh) of any task word is read
// combinationally on syn_*; it is the bit pattern that corrects a frame of
// that task when exactly one frame of the task is corrupted.  scan_start
// walks both banks (N_FRAMES*FRAME_WORDS cycles, or N_TASKS*FRAME_WORDS if
// larger) and returns vflag[k] = "vertical parity of column k mismatches"
// (the candidate faulty frames) and hflag[z] = "horizontal parity of task z
// mismatches".  scan_done pulses when the flags are valid.
//
// With scan_mask = 1 the scan is narrowed to one task, scan_task: vflag[k]
// is then set only if column k's vertical mismatch shares at least one bit
// position (j,i) with the task's horizontal mismatch.  These are exactly the
// frames the correction procedure may pick as candidates for that task:
// a frame whose vertical parity mismatches only at positions where the
// task's row is clean cannot hold that task's error.  scan_mask and
// scan_task are sampled with scan_start.
module parity_engine
  import edac_pkg::*;
#(
  parameter int unsigned N_TASKS     = 10,
  parameter int unsigned N_FRAMES    = 100,
  parameter int unsigned FRAME_WORDS = 101,
  localparam int unsigned TASK_W  = $clog2(N_TASKS),
  localparam int unsigned FRAME_W = $clog2(N_FRAMES),
  localparam int unsigned WIDX_W  = $clog2(FRAME_WORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // parity accumulation
  input  logic                acc_valid,
  input  logic                acc_encode,
  input  logic [TASK_W-1:0]   acc_task,
  input  logic [FRAME_W-1:0]  acc_frame,
  input  logic [WIDX_W-1:0]   acc_word,
  input  word_t               acc_data,
  // horizontal syndrome read
  input  logic [TASK_W-1:0]   syn_task,
  input  logic [WIDX_W-1:0]   syn_word,
  output word_t               syn_data,
  // mismatch scan
  input  logic                scan_start,
  input  logic                scan_mask,
  input  logic [TASK_W-1:0]   scan_task,
  output logic                scan_busy,
  output logic                scan_done,
  output logic [N_FRAMES-1:0] vflag,
  output logic [N_TASKS-1:0]  hflag
);

  localparam int unsigned H_DEPTH = N_TASKS * FRAME_WORDS;
  localparam int unsigned V_DEPTH = N_FRAMES * FRAME_WORDS;
  localparam int unsigned ROWS    = (N_FRAMES > N_TASKS) ? N_FRAMES : N_TASKS;
  localparam int unsigned ROW_W   = $clog2(ROWS);
  localparam int unsigned HA_W    = $clog2(H_DEPTH);
  localparam int unsigned VA_W    = $clog2(V_DEPTH);

  word_t gold_h  [H_DEPTH];
  word_t fresh_h [H_DEPTH];
  word_t gold_v  [V_DEPTH];
  word_t fresh_v [V_DEPTH];

  logic [HA_W-1:0] ha;
  logic [VA_W-1:0] va;
  assign ha = HA_W'(acc_task * FRAME_WORDS + acc_word);
  assign va = VA_W'(acc_frame * FRAME_WORDS + acc_word);

  // ---------------- accumulation ----------------
  always_ff @(posedge clk) begin
    if (acc_valid) begin
      if (acc_encode) begin
        gold_h[ha] <= (acc_frame == '0) ? acc_data : (gold_h[ha] ^ acc_data);
        gold_v[va] <= (acc_task  == '0) ? acc_data : (gold_v[va] ^ acc_data);
      end else begin
        fresh_h[ha] <= (acc_frame == '0) ? acc_data : (fresh_h[ha] ^ acc_data);
        fresh_v[va] <= (acc_task  == '0) ? acc_data : (fresh_v[va] ^ acc_data);
      end
    end
  end

  // ---------------- syndrome read ----------------
  logic [HA_W-1:0] sa;
  assign sa       = HA_W'(syn_task * FRAME_WORDS + syn_word);
  assign syn_data = gold_h[sa] ^ fresh_h[sa];

  // ---------------- mismatch scan ----------------
  logic [ROW_W-1:0]  row;
  logic [WIDX_W-1:0] wd;
  logic [HA_W-1:0]   sh;
  logic [VA_W-1:0]   sv;
  logic [HA_W-1:0]   st;
  logic              h_mis, v_mis, mask_q;
  logic [TASK_W-1:0] task_q;
  word_t             v_syn, v_sel;

  assign sh    = HA_W'(row * FRAME_WORDS + wd);
  assign sv    = VA_W'(row * FRAME_WORDS + wd);
  assign st    = HA_W'(task_q * FRAME_WORDS + wd);
  assign v_syn = gold_v[sv] ^ fresh_v[sv];
  // Masked scan: only the bit positions where task_q's own horizontal
  // parity mismatches count.
  assign v_sel = mask_q ? (v_syn & (gold_h[st] ^ fresh_h[st])) : v_syn;
  assign v_mis = (row < ROW_W'(N_FRAMES)) && (v_sel != '0);
  assign h_mis = (row < ROW_W'(N_TASKS))  && ((gold_h[sh] ^ fresh_h[sh]) != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_busy <= 1'b0;
      scan_done <= 1'b0;
      row       <= '0;
      wd        <= '0;
      vflag     <= '0;
      hflag     <= '0;
      mask_q    <= 1'b0;
      task_q    <= '0;
    end else begin
      scan_done <= 1'b0;
      if (scan_start && !scan_busy) begin
        scan_busy <= 1'b1;
        mask_q    <= scan_mask;
        task_q    <= scan_task;
        row       <= '0;
        wd        <= '0;
        vflag     <= '0;
        hflag     <= '0;
      end else if (scan_busy) begin
        if (v_mis) vflag[row] <= 1'b1;
        if (h_mis) hflag[TASK_W'(row)] <= 1'b1;
        if (wd == WIDX_W'(FRAME_WORDS - 1)) begin
          wd <= '0;
          if (row == ROW_W'(ROWS - 1)) begin
            scan_busy <= 1'b0;
            scan_done <= 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end else begin
          wd <= wd + 1'b1;
        end
      end
    end
  end

endmodule
