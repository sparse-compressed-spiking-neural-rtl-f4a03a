// lif_array -- 576 discrete-time leaky integrate-and-fire neurons.
//
// One neuron per tile pixel of the current output channel. On `update` each neuron
// computes
//     V = (first_t | S) ? 0 : V >>> 2     (leak 0.25, reset after a spike)
//     V = V + conv_in + bias             (saturated to 8 bits)
//     S = (V >= VTH)                     (threshold 0.5)
// and registers the new potential V and spike S. first_t marks the first time step
// of an output channel, which has no residual potential. The membrane and spike
// registers, the >>>2 leak, the zero/leak mux driven by the reset (spike) signal
// and the comparator follow the published datapath; the saturation, the Q3.4 scale
// and the >= comparison are this design's choices.
// Timing: spikes/vmem are valid one clock after update.
module lif_array
  import snn_pkg::*;
#(
  parameter int N = N_PE,
  parameter logic signed [V_W-1:0] TH = VTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  update,
  input  logic                  first_t,
  input  logic [N-1:0][V_W-1:0] conv_in,
  input  logic signed [V_W-1:0] bias,
  output logic [N-1:0]          spikes,
  output logic [N-1:0][V_W-1:0] vmem
);
  for (genvar i = 0; i < N; i++) begin : g_n
    logic signed [V_W-1:0] v_q, fb;
    logic signed [V_W+1:0] sum;
    logic signed [V_W-1:0] v_new;

    always_comb begin
      fb  = (first_t || spikes[i]) ? 8'sd0 : (v_q >>> 2);
      sum = (V_W+2)'(fb) + (V_W+2)'($signed(conv_in[i])) + (V_W+2)'(bias);
      if (sum > (V_W+2)'(127))       v_new = 8'sd127;
      else if (sum < -(V_W+2)'(128)) v_new = -8'sd128;
      else                           v_new = sum[V_W-1:0];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q       <= '0;
        spikes[i] <= 1'b0;
      end else if (update) begin
        v_q       <= v_new;
        spikes[i] <= (v_new >= TH);
      end
    end
    assign vmem[i] = v_q;
  end
endmodule
