// sram_1r1w -- on-chip SRAM with one write and one read port.
//
// Used for the three memories of the accelerator: activations (32 KB as
// 2048 x 128 bit), weights (64 KB as 1024 x 512 bit) and biases (4 KB as
// 256 x 128 bit). The sizes and the 128/512/128-bit read widths come from the
// paper; so does the 8-cycle read latency the dispatcher has to hide. The
// macro itself is modelled as a synthesizable array followed by a read
// pipeline: rd_en/rd_addr in cycle n returns rd_valid/rd_data in cycle
// n+LAT. A write takes effect at the clock edge; a read issued in the same
// cycle as a write to the same address returns the old data.
module sram_1r1w #(
  parameter int WIDTH = 128,
  parameter int DEPTH = 2048,
  parameter int LAT   = 8,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] pipe_d [LAT];
  logic [LAT-1:0]   pipe_v;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    pipe_d[0] <= mem[rd_addr];
    for (int i = 1; i < LAT; i++) pipe_d[i] <= pipe_d[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pipe_v <= '0;
    else        pipe_v <= {pipe_v[LAT-2:0], rd_en};
  end

  assign rd_valid = pipe_v[LAT-1];
  assign rd_data  = pipe_d[LAT-1];

endmodule
