// ifft_ctrl: the "basic controls" of the IFFT core: an enable, a stage
// counter and done = (counter == log2(N)).
//
// A start pulse, accepted when the core is not busy, launches a transform:
// stage 0 is computed in the start cycle itself, stage s in the s-th cycle
// after it, and after log2(N) rising edges the counter reaches log2(N) and
// done rises. done stays high, and the result stays valid, until the next
// accepted start. A start while busy is ignored.
//
// Outputs:
//   en     - butterfly register enable, high in every cycle that computes a stage
//   stage  - stage number used by the reshuffle network (0 in the start cycle)
//   done   - counter == log2(N)
//
// The paper gives the enable/counter/done loop; the exact cycle alignment
// (stage 0 in the start cycle) and the synchronous active-high reset are
// this design's choices. Reset clears the counter, so done is low after
// reset.
module ifft_ctrl #(
  parameter int unsigned LOG_N = 9,
  parameter int unsigned SW    = $clog2(LOG_N + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          en,
  output logic [SW-1:0] stage,
  output logic          done
);

  logic          busy;
  logic [SW-1:0] counter;

  assign stage = busy ? counter : '0;
  assign en    = busy | start;
  assign done  = !busy && (counter == SW'(LOG_N));

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      counter <= '0;
    end else if (en) begin
      counter <= stage + SW'(1);
      busy    <= (stage != SW'(LOG_N - 1));
    end
  end

  // The counter never passes log2(N).
  assert property (@(posedge clk) disable iff (rst) counter <= SW'(LOG_N))
    else $error("ifft_ctrl: stage counter out of range");

endmodule
