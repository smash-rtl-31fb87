// bmu_divider: sequential unsigned divider, one quotient bit per cycle.
//
// Used by the index calculation to split the linear element index into
// row = index / cols and column = index % cols (the paper gives the formula;
// the restoring shift-subtract circuit is this design's choice).
//
// Interface: pulse 'start' with dividend/divisor while !busy; 'done' pulses
// for one cycle N+1 cycles later with quotient and remainder held until
// the next start. A zero divisor returns quotient 0, remainder = dividend.
module bmu_divider #(
  parameter int unsigned N = 48,   // dividend / quotient width
  parameter int unsigned D = 32    // divisor / remainder width
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] dividend,
  input  logic [D-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] quotient,
  output logic [D-1:0] remainder
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0]  q_q;
  logic [D:0]    r_q;        // one extra bit for the trial subtraction
  logic [D-1:0]  dvs_q;
  logic [CW-1:0] cnt_q;
  logic          zero_q;

  logic [D:0] r_shift, r_sub;
  always_comb begin
    r_shift = {r_q[D-1:0], q_q[N-1]};
    r_sub   = r_shift - {1'b0, dvs_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q    <= '0;
      r_q    <= '0;
      dvs_q  <= '0;
      cnt_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      zero_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q_q    <= dividend;
        r_q    <= '0;
        dvs_q  <= divisor;
        cnt_q  <= CW'(N);
        busy   <= 1'b1;
        zero_q <= (divisor == '0);
      end else if (busy) begin
        if (cnt_q == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          cnt_q <= cnt_q - 1'b1;
          if (!r_sub[D]) begin
            r_q <= r_sub;
            q_q <= {q_q[N-2:0], 1'b1};
          end else begin
            r_q <= r_shift;
            q_q <= {q_q[N-2:0], 1'b0};
          end
        end
      end
    end
  end

  // With a zero divisor the loop leaves the dividend in q_q shifted out; the
  // result is defined separately. Only the low D bits of the dividend are kept
  // as remainder in that case.
  logic [N-1:0] dvd_keep_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dvd_keep_q <= '0;
    else if (start && !busy) dvd_keep_q <= dividend;
  end

  assign quotient  = zero_q ? '0 : q_q;
  assign remainder = zero_q ? D'(dvd_keep_q) : r_q[D-1:0];
endmodule
