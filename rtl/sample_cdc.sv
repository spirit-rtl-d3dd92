// sample_cdc: hands each multi-channel sample from the AFE clock domain to
// the classifier clock domain.
//
// The source side captures the sample vector on din_valid and flips a toggle
// bit. The destination side passes the toggle through two flip-flops and, on
// a change, copies the (by then stable) captured vector and pulses
// dout_valid. The captured vector must stay unchanged for three destination
// cycles after the toggle, which holds easily for 1 kHz samples and a 24 kHz
// destination clock. Latency: 3 to 5 destination cycles.
module sample_cdc #(
  parameter int W = 128
) (
  input  logic         src_clk,
  input  logic         src_rst_n,
  input  logic [W-1:0] din,
  input  logic         din_valid,
  input  logic         dst_clk,
  input  logic         dst_rst_n,
  output logic [W-1:0] dout,
  output logic         dout_valid
);
  logic [W-1:0] hold;
  logic         tog_src;
  logic [2:0]   tog_dst;

  always_ff @(posedge src_clk or negedge src_rst_n) begin
    if (!src_rst_n) begin
      hold    <= '0;
      tog_src <= 1'b0;
    end else if (din_valid) begin
      hold    <= din;
      tog_src <= ~tog_src;
    end
  end

  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) begin
      tog_dst    <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      tog_dst    <= {tog_dst[1:0], tog_src};
      dout_valid <= tog_dst[2] ^ tog_dst[1];
      if (tog_dst[2] ^ tog_dst[1]) dout <= hold;
    end
  end
endmodule
