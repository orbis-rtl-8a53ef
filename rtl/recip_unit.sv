// recip_unit: fixed-point reciprocal, q = floor(2^P / d), by restoring
// division, one quotient bit per cycle (the "Recip." unit of the
// quantization and DATM engines).
//
// Pulse start with d held; busy stays high for P+1 cycles and done pulses, P+2 cycles after start,
// with q valid (q stays until the next start). d = 0 returns all ones.
// The paper names the unit only; the bit-serial divider is this design's
// choice, picked because reciprocals are needed once per channel or cluster.
module recip_unit #(
  parameter int DW = 16,
  parameter int P  = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] d,
  output logic          busy,
  output logic          done,
  output logic [P:0]    q
);
  logic [DW:0]          rem;
  logic [$clog2(P+2)-1:0] bitn;
  logic [DW-1:0]        dd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; rem <= '0; bitn <= '0; dd <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        dd   <= d;
        rem  <= '0;
        q    <= '0;
        bitn <= ($clog2(P+2))'(P);
      end else if (busy) begin
        logic [DW+1:0] r2;
        // dividend is 2^P: its only set bit enters when bitn == P
        r2 = {rem, (bitn == ($clog2(P+2))'(P))};
        if (dd == '0) begin
          q    <= '1;
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          if (r2 >= {2'b00, dd}) begin
            rem <= (DW+1)'(r2 - {2'b00, dd});
            q   <= {q[P-1:0], 1'b1};
          end else begin
            rem <= r2[DW:0];
            q   <= {q[P-1:0], 1'b0};
          end
          if (bitn == '0) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            bitn <= bitn - 1'b1;
          end
        end
      end
    end
  end
endmodule
