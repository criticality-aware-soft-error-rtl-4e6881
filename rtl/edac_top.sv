// edac_top: soft-error detection and correction engine for the
// configuration memory (CM) of an SRAM FPGA whose reconfigurable part is
// divided into N_TASKS partial-reconfiguration regions, one task each.
//
// Flow.  Configuration phase (cfg_start): every task's frames are read back
// once; their SHA-3-512 signature is stored (512 bits per task) and the
// golden horizontal and vertical parity frames of the erasure product code
// are built; the criticality of every task is computed from the task
// dependency graph.  Run phase (run_en): the whole CM is read back again and
// again.  Each task's signature is recomputed and compared (detection) and
// fresh parity frames are built; then the parity mismatch flags are
// scanned.  If tasks are faulty, the hardware scheduler picks the one with
// the highest final priority among those that are idle and have enough
// slack; a parity scan narrowed to that task lists its candidate frames
// (columns whose vertical parity mismatches at a bit position where the
// task's horizontal parity mismatches too), and they are tried one by one: the candidate is XORed with the task's horizontal
// syndrome, the task is hashed again with this substitution and, if the
// signature now matches, the corrected frame alone is written back.  If no
// candidate matches (errors in more than one frame of the task), the task
// is flagged uncorrectable.  Should the task have become busy by the time
// its frame is ready, the write-back waits until it is idle again.  The next faulty task is then chosen, and when
// none is left a new check pass begins.
//
// The frame array is N_TASKS rows by N_FRAMES columns; task z's frames are
// CM frames z*N_FRAMES .. z*N_FRAMES+task_frames[z]-1; the columns beyond
// task_frames[z] are dummy all-zero frames that exist only in the parity
// computation.  A frame is FRAME_WORDS words of 32 bits.
//
// CM port (to the configuration access port, which is outside this block):
// a frame read is requested with cm_rd_req_valid/ready and cm_rd_frame, and
// its FRAME_WORDS words return in order on cm_rd_valid/ready/data.  A frame
// write is a burst of FRAME_WORDS words on cm_wr_valid with the frame and
// word index, one word per cycle, with no back-pressure.
//
// Timing: hashing dominates: a frame costs about FRAME_WORDS/18 * 48
// cycles, so a pass over the CM takes about N_TASKS*N_FRAMES*FRAME_WORDS*48/18
// cycles plus N_FRAMES*FRAME_WORDS for the parity scan (270,002 cycles for
// 10 x 100 frames of 101 words).  Each faulty task adds one narrowed scan,
// one re-hash of the task per candidate tried and one frame write.
//
// The flow, the use of SHA-3 for detection and of the erasure product code
// for correction, the candidate trial order and the scheduling rule follow
// the design description.  The word-level CM port, the one-read-at-a-time
// sequencing, where the signatures live (registers here) and the status
// counters are this implementation's choices.
//
// The reset is asynchronous; the two handshake assertions at the end use it
// in their disable condition, which is why lint sees rst_n reach
// synchronous logic as well.
module edac_top
  import edac_pkg::*;
#(
  parameter int unsigned N_TASKS     = 10,
  parameter int unsigned N_FRAMES    = 100,
  parameter int unsigned FRAME_WORDS = 101,
  parameter int unsigned ETA_W       = 16,
  localparam int unsigned TASK_W  = $clog2(N_TASKS),
  localparam int unsigned FRAME_W = $clog2(N_FRAMES + 1),
  localparam int unsigned WIDX_W  = $clog2(FRAME_WORDS),
  localparam int unsigned FADDR_W = $clog2(N_TASKS * N_FRAMES)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // control
  input  logic                            cfg_start,
  input  logic                            run_en,
  // task description
  input  logic   [N_TASKS-1:0][ETA_W-1:0] task_frames,
  input  logic   [N_TASKS-1:0][N_TASKS-1:0] dep_adj,
  input  logic   [N_TASKS-1:0]            task_busy,
  input  time_t  [N_TASKS-1:0]            task_exec,
  input  time_t  [N_TASKS-1:0]            task_idle,
  input  time_t  [N_TASKS-1:0]            task_ecrt,
  input  weights_t                        weights,
  // configuration memory port
  output logic                            cm_rd_req_valid,
  input  logic                            cm_rd_req_ready,
  output logic   [FADDR_W-1:0]            cm_rd_frame,
  input  logic                            cm_rd_valid,
  output logic                            cm_rd_ready,
  input  word_t                           cm_rd_data,
  output logic                            cm_wr_valid,
  output logic   [FADDR_W-1:0]            cm_wr_frame,
  output logic   [WIDX_W-1:0]             cm_wr_word,
  output word_t                           cm_wr_data,
  // status
  output logic                            sig_valid,      // a task signature was computed
  output logic   [TASK_W-1:0]             sig_task,
  output logic   [keccak_pkg::DIGEST_W-1:0] sig_data,
  output logic                            cfg_done,
  output logic                            pass_done,
  output logic   [N_TASKS-1:0]            task_faulty,
  output logic   [N_TASKS-1:0]            task_uncorrectable,
  output logic   [15:0]                   pass_cnt,
  output logic   [15:0]                   detect_cnt,
  output logic   [15:0]                   reject_cnt,
  output logic   [15:0]                   correct_cnt,
  output logic   [15:0]                   uncorr_cnt,
  output logic   [15:0]                   stall_cnt,      // cycles with no eligible faulty task
  output logic   [15:0]                   hold_cnt        // cycles a write-back waited for its task to idle
);

  typedef enum logic [3:0] {
    S_IDLE,
    S_P_REQ,    // pass: request frame k of task z (or pad it)
    S_P_DATA,   // pass: stream the frame into SHA-3 and parity
    S_P_PAD,    // pass: dummy zero frame into parity only
    S_P_DIG,    // pass: wait for task z's signature
    S_SCAN,     // parity mismatch scan
    S_SCHED,    // wait for the scheduler's choice
    S_C_SCAN,   // candidate scan narrowed to the chosen task
    S_C_CAND,   // find the next candidate frame
    S_C_REQ,    // re-hash: request frame
    S_C_DATA,   // re-hash: stream frame, candidate XOR syndrome
    S_C_DIG,    // re-hash: compare signature
    S_W_WAIT,   // write-back: wait until the task is idle
    S_W_REQ,    // write-back: request the faulty frame
    S_W_DATA    // write-back: corrected words to the CM
  } state_t;

  state_t state;
  logic   encode;                       // current pass is the configuration pass
  logic [TASK_W-1:0]  z;                // task
  logic [FRAME_W-1:0] k;                // frame within the task
  logic [FRAME_W-1:0] cand;             // candidate frame under trial
  logic [WIDX_W-1:0]  w;                // word within the frame
  logic [N_TASKS-1:0] pending;          // faulty tasks not yet handled
  localparam int unsigned DIGEST_W_L = keccak_pkg::DIGEST_W;
  logic [DIGEST_W_L-1:0] gold_sig [N_TASKS];   // stored signatures

  logic [FRAME_W-1:0] eta_z;
  assign eta_z = FRAME_W'(task_frames[z]);

  logic [FADDR_W-1:0] frame_base;
  assign frame_base = FADDR_W'(z * N_FRAMES);

  // ---------------- SHA-3-512 ----------------
  logic                  sha_valid, sha_ready, sha_last, sha_dvalid;
  word_t                 sha_data;
  logic [DIGEST_W_L-1:0] sha_digest;
  logic                  dig_pend;      // a digest arrived and is not yet used

  logic                  sha_dctx;      // unused: one message at a time

  // The CM is read one frame at a time, so one sponge context is enough.
  sha3_512 #(.N_MSG(1)) u_sha (
    .clk(clk), .rst_n(rst_n),
    .in_valid(sha_valid), .in_ready(sha_ready),
    .in_data(sha_data), .in_last(sha_last),
    .digest_valid(sha_dvalid), .digest_ctx(sha_dctx), .digest_o(sha_digest)
  );

  // ---------------- erasure product code parity ----------------
  logic                acc_valid;
  word_t               acc_data, syn_data;
  logic                scan_start, scan_busy, scan_done;
  logic [N_FRAMES-1:0] vflag;
  logic [N_TASKS-1:0]  hflag;

  parity_engine #(
    .N_TASKS(N_TASKS), .N_FRAMES(N_FRAMES), .FRAME_WORDS(FRAME_WORDS)
  ) u_par (
    .clk(clk), .rst_n(rst_n),
    .acc_valid(acc_valid), .acc_encode(encode),
    .acc_task(z), .acc_frame($clog2(N_FRAMES)'(k)), .acc_word(w), .acc_data(acc_data),
    .syn_task(z), .syn_word(w), .syn_data(syn_data),
    .scan_start(scan_start), .scan_mask(state == S_C_SCAN), .scan_task(z),
    .scan_busy(scan_busy), .scan_done(scan_done),
    .vflag(vflag), .hflag(hflag)
  );

  // ---------------- criticality and scheduler ----------------
  localparam int unsigned CNT_W = $clog2(N_TASKS + 1);
  logic                            crit_busy, crit_done;
  logic [N_TASKS-1:0][CNT_W-1:0]   dep_count;
  ratio_t [N_TASKS-1:0]            zeta;

  criticality_unit #(.N_TASKS(N_TASKS)) u_crit (
    .clk(clk), .rst_n(rst_n),
    .start(cfg_start && state == S_IDLE), .dep_adj(dep_adj),
    .busy(crit_busy), .done(crit_done), .dep_count(dep_count), .zeta(zeta)
  );

  logic                sel_valid;
  logic [TASK_W-1:0]   sel_task;
  fp_t  [N_TASKS-1:0]  fp;
  st_t  [N_TASKS-1:0]  st;
  logic [N_TASKS-1:0]  eligible;

  hw_scheduler #(.N_TASKS(N_TASKS), .ETA_W(ETA_W)) u_sched (
    .clk(clk), .rst_n(rst_n),
    .busy(task_busy), .exec_cycles(task_exec), .idle_cycles(task_idle),
    .ecrt_cycles(task_ecrt), .frames(task_frames), .zeta(zeta), .w(weights),
    .req(pending),
    .sel_valid(sel_valid), .sel_task(sel_task),
    .fp(fp), .st(st), .eligible(eligible)
  );

  // ---------------- datapath muxing ----------------
  logic last_word, last_frame;
  logic xfer;                           // a read word is consumed this cycle
  assign last_word  = (w == WIDX_W'(FRAME_WORDS - 1));
  assign last_frame = (k == eta_z - 1'b1);

  always_comb begin
    cm_rd_req_valid = (state == S_P_REQ && k < eta_z) || state == S_C_REQ || state == S_W_REQ;
    cm_rd_frame     = frame_base + FADDR_W'((state == S_W_REQ) ? cand : k);
    cm_rd_ready     = 1'b0;
    sha_valid       = 1'b0;
    sha_data        = cm_rd_data;
    sha_last        = last_frame && last_word;
    acc_valid       = 1'b0;
    acc_data        = cm_rd_data;
    cm_wr_valid     = 1'b0;
    cm_wr_frame     = frame_base + FADDR_W'(cand);
    cm_wr_word      = w;
    cm_wr_data      = cm_rd_data ^ syn_data;
    case (state)
      S_P_DATA: begin
        sha_valid   = cm_rd_valid;
        cm_rd_ready = sha_ready;
        acc_valid   = cm_rd_valid && sha_ready;
      end
      S_P_PAD: begin
        acc_valid = 1'b1;
        acc_data  = '0;
      end
      S_C_DATA: begin
        sha_valid   = cm_rd_valid;
        cm_rd_ready = sha_ready;
        if (k == cand) sha_data = cm_rd_data ^ syn_data;
      end
      S_W_DATA: begin
        cm_rd_ready = 1'b1;
        cm_wr_valid = cm_rd_valid;
      end
      default: ;
    endcase
  end

  assign xfer       = cm_rd_valid && cm_rd_ready;

  // Every signature of a configuration or check pass is also shown on the
  // sig_* outputs, so that the system can keep the golden ones off-chip.
  assign sig_valid = (state == S_P_DIG) && dig_pend;
  assign sig_task  = z;
  assign sig_data  = sha_digest;
  assign scan_start = (state inside {S_SCAN, S_C_SCAN}) && !scan_busy && !scan_done;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state              <= S_IDLE;
      encode             <= 1'b0;
      z                  <= '0;
      k                  <= '0;
      cand               <= '0;
      w                  <= '0;
      pending            <= '0;
      dig_pend           <= 1'b0;
      cfg_done           <= 1'b0;
      pass_done          <= 1'b0;
      task_faulty        <= '0;
      task_uncorrectable <= '0;
      pass_cnt           <= '0;
      detect_cnt         <= '0;
      reject_cnt         <= '0;
      correct_cnt        <= '0;
      uncorr_cnt         <= '0;
      stall_cnt          <= '0;
      hold_cnt           <= '0;
    end else begin
      pass_done <= 1'b0;
      if (sha_dvalid) dig_pend <= 1'b1;

      case (state)
        S_IDLE: begin
          z <= '0; k <= '0; w <= '0;
          if (cfg_start) begin
            encode   <= 1'b1;
            cfg_done <= 1'b0;
            state    <= S_P_REQ;
          end else if (run_en && cfg_done) begin
            encode <= 1'b0;
            state  <= S_P_REQ;
          end
        end

        // ---------- check / configuration pass ----------
        S_P_REQ: begin
          w <= '0;
          if (k >= eta_z) state <= S_P_PAD;
          else if (cm_rd_req_ready) state <= S_P_DATA;
        end
        S_P_DATA, S_P_PAD: begin
          if (xfer || state == S_P_PAD) begin
            w <= w + 1'b1;
            if (last_word) begin
              w <= '0;
              if (k == FRAME_W'(N_FRAMES - 1)) state <= S_P_DIG;
              else begin
                k     <= k + 1'b1;
                state <= S_P_REQ;
              end
            end
          end
        end
        S_P_DIG: begin
          if (dig_pend) begin
            dig_pend <= 1'b0;
            if (encode) begin
              gold_sig[z]    <= sha_digest;
              task_faulty[z] <= 1'b0;
            end else begin
              task_faulty[z] <= (sha_digest != gold_sig[z]);
              if (sha_digest != gold_sig[z]) detect_cnt <= detect_cnt + 1'b1;
            end
            k <= '0;
            if (z == TASK_W'(N_TASKS - 1)) begin
              z <= '0;
              if (encode) begin
                cfg_done  <= 1'b1;
                pass_done <= 1'b1;
                pass_cnt  <= pass_cnt + 1'b1;
                state     <= S_IDLE;
              end else begin
                state <= S_SCAN;
              end
            end else begin
              z     <= z + 1'b1;
              state <= S_P_REQ;
            end
          end
        end
        S_SCAN: begin
          if (scan_done) begin
            pending <= task_faulty;
            state   <= S_SCHED;
          end
        end

        // ---------- scheduling ----------
        S_SCHED: begin
          if (pending == '0) begin
            pass_done <= 1'b1;
            pass_cnt  <= pass_cnt + 1'b1;
            state     <= S_IDLE;
          end else if (sel_valid && pending[sel_task]) begin
            z     <= sel_task;
            cand  <= '0;
            state <= S_C_SCAN;
          end else begin
            stall_cnt <= stall_cnt + 1'b1;
          end
        end

        // ---------- correction ----------
        S_C_SCAN: begin
          if (scan_done) state <= S_C_CAND;
        end
        S_C_CAND: begin
          // No horizontal mismatch: the parity cannot locate the error.
          if (cand >= eta_z || !hflag[z]) begin
            task_uncorrectable[z] <= 1'b1;
            uncorr_cnt            <= uncorr_cnt + 1'b1;
            pending[z]            <= 1'b0;
            state                 <= S_SCHED;
          end else if (vflag[$clog2(N_FRAMES)'(cand)]) begin
            k     <= '0;
            w     <= '0;
            state <= S_C_REQ;
          end else begin
            cand <= cand + 1'b1;
          end
        end
        S_C_REQ: begin
          w <= '0;
          if (cm_rd_req_ready) state <= S_C_DATA;
        end
        S_C_DATA: begin
          if (xfer) begin
            w <= w + 1'b1;
            if (last_word) begin
              w <= '0;
              if (last_frame) state <= S_C_DIG;
              else begin
                k     <= k + 1'b1;
                state <= S_C_REQ;
              end
            end
          end
        end
        S_C_DIG: begin
          if (dig_pend) begin
            dig_pend <= 1'b0;
            if (sha_digest == gold_sig[z]) begin
              w     <= '0;
              state <= S_W_WAIT;
            end else begin
              reject_cnt <= reject_cnt + 1'b1;
              cand       <= cand + 1'b1;
              state      <= S_C_CAND;
            end
          end
        end
        S_W_WAIT: begin
          // The task must be idle while its region is rewritten.
          if (!task_busy[z]) state <= S_W_REQ;
          else hold_cnt <= hold_cnt + 1'b1;
        end
        S_W_REQ: begin
          w <= '0;
          if (cm_rd_req_ready) state <= S_W_DATA;
        end
        S_W_DATA: begin
          if (xfer) begin
            w <= w + 1'b1;
            if (last_word) begin
              w                     <= '0;
              task_faulty[z]        <= 1'b0;
              task_uncorrectable[z] <= 1'b0;
              pending[z]            <= 1'b0;
              correct_cnt           <= correct_cnt + 1'b1;
              state                 <= S_SCHED;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- handshake rules ----------------
  // A frame read request, once raised, stays up with the same frame until taken.
  a_rd_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cm_rd_req_valid && !cm_rd_req_ready |=> cm_rd_req_valid && $stable(cm_rd_frame));
  // Read data is only consumed in the states that expect it.
  a_rd_in_data_state: assert property (@(posedge clk) disable iff (!rst_n)
    cm_rd_ready |-> state inside {S_P_DATA, S_C_DATA, S_W_DATA});

endmodule
