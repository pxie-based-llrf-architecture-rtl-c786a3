// Amplitude detector: A = sqrt(I^2 + Q^2).
//
// Stage 0 registers the sum of squares (2*IQ_W bits, unsigned). A pipelined
// restoring square root then produces one result bit per stage, most
// significant first: the partial remainder takes the next two radicand bits,
// the trial value (root << 2) | 1 is subtracted when it fits and the root
// bit is set accordingly. The result is floor(sqrt(I^2 + Q^2)) in the same
// scale as I and Q. The paper names this block ("Amplitude Calculation",
// computing sqrt(I^2+Q^2)); the square-root circuit is this design's.
//
// Timing: one vector per clock, latency IQ_W + 1 cycles.
module amp_calc
  import llrf_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  iq_t  i,
  input  iq_t  q,
  output logic out_valid,
  output amp_t amp
);
  localparam int RW = 2 * IQ_W;    // radicand width
  localparam int N  = IQ_W;        // result bits = stages

  logic [RW-1:0]  rad  [N+1];
  logic [IQ_W:0]   rem  [N+1];
  logic [IQ_W-1:0] root [N+1];
  logic           vs   [N+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad[0]  <= '0;
      rem[0]  <= '0;
      root[0] <= '0;
      vs[0]   <= 1'b0;
    end else begin
      vs[0]   <= in_valid;
      rad[0]  <= RW'(unsigned'(RW'(i) * RW'(i))) + RW'(unsigned'(RW'(q) * RW'(q)));
      rem[0]  <= '0;
      root[0] <= '0;
    end
  end

  for (genvar s = 0; s < N; s++) begin : g_sqrt
    logic [IQ_W+2:0] r_in, trial, diff;
    assign r_in  = {rem[s], rad[s][RW-1 -: 2]};
    assign trial = {1'b0, root[s], 2'b01};
    assign diff  = r_in - trial;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rad[s+1]  <= '0;
        rem[s+1]  <= '0;
        root[s+1] <= '0;
        vs[s+1]   <= 1'b0;
      end else begin
        vs[s+1]  <= vs[s];
        rad[s+1] <= rad[s] << 2;
        if (r_in >= trial) begin
          rem[s+1]  <= diff[IQ_W:0];
          root[s+1] <= {root[s][IQ_W-2:0], 1'b1};
        end else begin
          rem[s+1]  <= r_in[IQ_W:0];
          root[s+1] <= {root[s][IQ_W-2:0], 1'b0};
        end
      end
    end
  end

  assign amp       = root[N];
  assign out_valid = vs[N];
endmodule
