// hmem: the H-MEM, a B*W x U memory holding the frequency-domain channel matrices.
//
// Word (b-1)*W + (w-1) holds row w of H_b, i.e. the U channel coefficients [H_w]_{b,u} of
// antenna b on subcarrier w, each part in [4.4]. Read port RD1 feeds MVM1 and RD2 feeds MVM2
// (both synchronous, data one clock after the address). The write port belongs to the channel
// estimator; a write takes effect only while we_grant is high, which the controller asserts
// when idle and during the last iteration of a task, so the next task's channel can be loaded
// behind the final reads. The two read ports and the WE from the controller follow the
// published architecture; the address order is this implementation's choice.
module hmem #(
  parameter int unsigned B = 128,
  parameter int unsigned W = 128,
  parameter int unsigned U = 8,
  localparam int unsigned AW = $clog2(B * W)
) (
  input  logic                   clk,
  input  logic                   we_grant,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  onebox_pkg::h_t [U-1:0] wr_data,
  input  logic [AW-1:0]          rd1_addr,
  output onebox_pkg::h_t [U-1:0] rd1_data,
  input  logic [AW-1:0]          rd2_addr,
  output onebox_pkg::h_t [U-1:0] rd2_data
);
  onebox_pkg::h_t [U-1:0] mem [B * W];

  always_ff @(posedge clk) begin
    if (we_grant && wr_en) mem[wr_addr] <= wr_data;
    rd1_data <= mem[rd1_addr];
    rd2_data <= mem[rd2_addr];
  end
endmodule
