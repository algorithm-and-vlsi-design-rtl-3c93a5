// r_ram: storage for the 1-bit received samples of one detection task.
//
// Holds r_b for all B antennas and W time samples, one r_t (sign bit of the real part, sign
// bit of the imaginary part, 1 meaning -1) per address (b-1)*W + n. It has one write port for
// the receiver side and two synchronous read ports, one for each sign-refinement step of the
// FTF datapath, as in the published architecture. A write takes effect only while we_grant
// (the controller's write permission) is high; the encoding and gating are this
// implementation's choices.
// Timing: read data appears one clock after the address.
module r_ram #(
  parameter int unsigned B = 128,
  parameter int unsigned W = 128,
  localparam int unsigned AW = $clog2(B * W)
) (
  input  logic              clk,
  input  logic              we_grant,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  onebox_pkg::r_t    wr_data,
  input  logic [AW-1:0]     rd1_addr,
  output onebox_pkg::r_t    rd1_data,
  input  logic [AW-1:0]     rd2_addr,
  output onebox_pkg::r_t    rd2_data
);
  onebox_pkg::r_t mem [B * W];

  always_ff @(posedge clk) begin
    if (we_grant && wr_en) mem[wr_addr] <= wr_data;
    rd1_data <= mem[rd1_addr];
    rd2_data <= mem[rd2_addr];
  end
endmodule
