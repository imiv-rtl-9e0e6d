// hash_unit: keyed 64-bit hash of one 64-byte block.
//
// Every digest in the design comes from an instance of this unit: SMACs
// (two passes: ciphertext, then address and counter chained on the first
// digest), BMT node digests and PWRQ hash tree digests. The compression
// function is imiv_pkg::hash64, a SipHash-style add-rotate-xor mix of the
// eight 64-bit words under the key and the chaining value.
//
// Interface and timing: pulse start with key, chain and msg while busy is
// low; the inputs are captured, and done pulses with digest valid LATENCY
// cycles later (LATENCY >= 1). The result is computed at capture and then
// delayed, modelling a multi-cycle hash core. The function and its latency
// are this design's choices; the architecture only fixes the role and the
// number of hash units.
module hash_unit #(
  parameter int unsigned LATENCY = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  imiv_pkg::dig_t         key,
  input  imiv_pkg::dig_t         chain,
  input  imiv_pkg::line_t        msg,
  output logic                   busy,
  output logic                   done,
  output imiv_pkg::dig_t         digest
);
  import imiv_pkg::*;

  logic [$clog2(LATENCY+1)-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      digest <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          digest <= hash64(key, chain, msg);
          busy   <= (LATENCY > 1);
          done   <= (LATENCY == 1);
          cnt_q  <= 1;
        end
      end else begin
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == $bits(cnt_q)'(LATENCY - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
