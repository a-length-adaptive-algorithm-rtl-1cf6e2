// seq_isqrt: unsigned integer square root, one result bit per cycle
// (digit-by-digit method). start latches v; done pulses W/2 cycles later with
// r = floor(sqrt(v)). Used by layer normalization for the standard deviation.
module seq_isqrt #(
  parameter int unsigned W = 48
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [W-1:0]    v,
  output logic            done,
  output logic [W/2-1:0]  r
);
  logic [W-1:0]   val;
  logic [W/2-1:0] res;
  logic [$clog2(W/2+1)-1:0] bitn;
  logic           busy;
  logic [W-1:0]   cand;

  always_comb begin
    logic [W/2-1:0] c;
    c = res | (W/2)'(1) << bitn;
    cand = W'(c) * W'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val <= '0; res <= '0; bitn <= '0; busy <= 1'b0; done <= 1'b0; r <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        val <= v; res <= '0; bitn <= ($clog2(W/2+1))'(W/2 - 1); busy <= 1'b1;
      end else if (busy) begin
        if (cand <= val) res <= res | (W/2)'(1) << bitn;
        if (bitn == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          r    <= (cand <= val) ? (res | (W/2)'(1)) : res;
        end else begin
          bitn <= bitn - 1'b1;
        end
      end
    end
  end
endmodule
