// brief_arbiter: dispatches a matched keypoint to a free BRIEF module
// (paper Sec. 4.6, Fig. 16).
//
// Each BRIEF module reports ready; on a keypoint match the arbiter starts
// the lowest-numbered ready module (one-hot start, same cycle). If no module
// is ready the keypoint is dropped and drop pulses, as the paper describes;
// the pixel pipeline never stalls. The fixed lowest-index priority is this
// design's choice. Combinational.
module brief_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         match,
  input  logic [N-1:0] ready,
  output logic [N-1:0] start,
  output logic         drop
);
  always_comb begin
    start = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (ready[i]) start = N'(1) << i;
    end
    if (!match) start = '0;
    drop = match && (ready == '0);
  end

  always_comb assert ($onehot0(start));
endmodule
