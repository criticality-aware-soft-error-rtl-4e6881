// recip_div: sequential unsigned divider, quo = num / den, one quotient bit
// per clock (restoring division).  Used by the scheduler to form the ratios
// 1/P_i and eta_i/eta without a combinational divider.
//
// Interface: pulse start with num and den; done pulses NUM_W+1 cycles later
// and quo holds the result until the next start.  Division by zero gives
// all ones.  start is ignored while busy.
module recip_div #(
  parameter int unsigned NUM_W = 25,
  parameter int unsigned DEN_W = 25
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quo
);

  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] n_q, q_q;
  logic [DEN_W-1:0] d_q;
  logic [DEN_W-1:0] r_q;
  logic [DEN_W:0]   r_sh;
  logic [CNT_W-1:0] cnt;

  assign r_sh = {r_q, n_q[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      n_q  <= '0;
      q_q  <= '0;
      d_q  <= '0;
      r_q  <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        n_q  <= num;
        d_q  <= den;
        q_q  <= '0;
        r_q  <= '0;
        cnt  <= CNT_W'(NUM_W);
      end else if (busy) begin
        n_q <= n_q << 1;
        if (r_sh >= {1'b0, d_q}) begin
          r_q <= DEN_W'(r_sh - {1'b0, d_q});
          q_q <= {q_q[NUM_W-2:0], 1'b1};
        end else begin
          r_q <= r_sh[DEN_W-1:0];
          q_q <= {q_q[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (r_sh >= {1'b0, d_q}) ? {q_q[NUM_W-2:0], 1'b1} : {q_q[NUM_W-2:0], 1'b0};
        end
      end
    end
  end

endmodule
