// l2_model: behavioural model of the shared L2 memory seen by the accelerator,
// for simulation only. Byte-wide words, one request per clock; a read returns
// its data LAT clocks later with rvalid, in order; a write takes effect at the
// clock edge. Testbenches fill and inspect `mem` directly.
module l2_model #(
  parameter int AW  = 20,
  parameter int LAT = 2
) (
  input  logic                 clk,
  input  logic                 req,
  input  logic                 we,
  input  logic [AW-1:0]        addr,
  input  logic signed [7:0]    wdata,
  output logic                 rvalid,
  output logic signed [7:0]    rdata
);
  logic signed [7:0] mem [2**AW];
  logic              v_q [LAT];
  logic signed [7:0] d_q [LAT];

  initial begin
    for (int i = 0; i < LAT; i++) begin v_q[i] = 1'b0; d_q[i] = '0; end
  end

  always_ff @(posedge clk) begin
    if (req && we) mem[addr] <= wdata;
    v_q[0] <= req && !we;
    d_q[0] <= mem[addr];
    for (int i = 1; i < LAT; i++) begin
      v_q[i] <= v_q[i-1];
      d_q[i] <= d_q[i-1];
    end
  end

  assign rvalid = v_q[LAT-1];
  assign rdata  = d_q[LAT-1];
endmodule
