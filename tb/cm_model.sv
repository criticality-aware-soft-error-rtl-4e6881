// cm_model: behavioural model of the FPGA configuration memory seen through
// its configuration access port, for simulation only.  It holds
// N_FRAMES_TOTAL frames of FRAME_WORDS 32-bit words in an array that the
// testbench fills and corrupts directly.  A frame read request is accepted
// when no read is in progress; after RD_LAT cycles the frame's words are
// returned in order with a valid/ready handshake.  Writes (one word per
// cycle, frame and word index given) update the array at once.
module cm_model #(
  parameter int unsigned N_FRAMES_TOTAL = 1000,
  parameter int unsigned FRAME_WORDS    = 101,
  parameter int unsigned RD_LAT         = 2,
  parameter int unsigned FADDR_W        = 10,
  parameter int unsigned WIDX_W         = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               rd_req_valid,
  output logic               rd_req_ready,
  input  logic [FADDR_W-1:0] rd_frame,
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic [31:0]        rd_data,
  input  logic               wr_valid,
  input  logic [FADDR_W-1:0] wr_frame,
  input  logic [WIDX_W-1:0]  wr_word,
  input  logic [31:0]        wr_data
);
  logic [31:0] mem [N_FRAMES_TOTAL * FRAME_WORDS];

  logic               active;
  int unsigned        lat, idx;
  logic [FADDR_W-1:0] fr;
  int unsigned        reads = 0, writes = 0;

  assign rd_req_ready = !active;
  assign rd_valid     = active && (lat == 0);
  assign rd_data      = mem[fr * FRAME_WORDS + idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      lat    <= 0;
      idx    <= 0;
      fr     <= '0;
    end else begin
      if (!active && rd_req_valid) begin
        active <= 1'b1;
        fr     <= rd_frame;
        lat    <= RD_LAT;
        idx    <= 0;
        reads  <= reads + 1;
      end else if (active) begin
        if (lat != 0) lat <= lat - 1;
        else if (rd_ready) begin
          if (idx == FRAME_WORDS - 1) active <= 1'b0;
          else idx <= idx + 1;
        end
      end
      if (wr_valid) begin
        mem[int'(wr_frame) * FRAME_WORDS + int'(wr_word)] <= wr_data;
        if (wr_word == WIDX_W'(FRAME_WORDS - 1)) writes <= writes + 1;
      end
    end
  end

  // Read data must hold while it waits for the reader.
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid && !rd_ready |=> rd_valid && $stable(rd_data));
endmodule
