// cic_decim: cascaded integrator-comb decimator, 125 MSPS in, 2.5 MSPS out.
//
// N integrators run at the input rate on a register wide enough for the
// full gain R**N (IN_W + ceil(N*log2 R) bits, wrapping arithmetic as usual
// for a CIC). Every R-th input the last integrator is sampled and passed
// through N combs with differential delay 1 at the output rate. The top
// OUT_W bits of the result are the output, so a full-scale input gives a
// nearly full-scale output. The integrators are pipelined (each adds the
// previous value of the one before it), so the output sampled at input n
// is the CIC response to the inputs up to n - (N-1). out_valid pulses once per R input samples, two
// clocks after the input that completes the decimation period.
// The decimation factor 50 is the paper's; the order N = 3, the differential
// delay and the widths are this design's assumptions.
module cic_decim #(
  parameter int R     = 50,
  parameter int N     = 3,
  parameter int IN_W  = 28,
  parameter int OUT_W = 24
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic                    in_valid,
  output logic signed [OUT_W-1:0] out_data,
  output logic                    out_valid
);
  localparam int GROW  = $clog2(R**N);
  localparam int ACC_W = IN_W + GROW;

  logic signed [ACC_W-1:0] integ [N];
  logic signed [ACC_W-1:0] comb_d [N];   // previous comb inputs
  logic signed [ACC_W-1:0] comb_v [N+1]; // comb chain values
  logic signed [ACC_W-1:0] samp;
  logic [$clog2(R)-1:0]    phase;
  logic                    samp_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) integ[i] <= '0;
      phase <= '0;
      samp_valid <= 1'b0;
      samp <= '0;
    end else begin
      samp_valid <= 1'b0;
      if (in_valid) begin
        integ[0] <= integ[0] + ACC_W'(in_data);
        for (int i = 1; i < N; i++) integ[i] <= integ[i] + integ[i-1];
        if (int'(phase) == R-1) begin
          phase      <= '0;
          samp       <= integ[N-1] + integ[N-2];  // value after this update
          samp_valid <= 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

  always_comb begin
    comb_v[0] = samp;
    for (int i = 0; i < N; i++) comb_v[i+1] = comb_v[i] - comb_d[i];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) comb_d[i] <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= samp_valid;
      if (samp_valid) begin
        for (int i = 0; i < N; i++) comb_d[i] <= comb_v[i];
        out_data <= OUT_W'(comb_v[N] >>> (ACC_W - OUT_W));
      end
    end
  end
endmodule
