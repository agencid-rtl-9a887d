// pk_param_mem: storage for the public parameters g_1 .. g_2n.
//
// Decrypt needs g_i and the points g_(n+1-j+i) of the public key
// PK = {g, g_1..g_n, g_(n+2)..g_2n, v}. This memory holds g_k at address k
// (k = 1..2n; address n+1 is never used, as the scheme publishes no g_(n+1),
// and address 0 is free). Each word is one affine point (x, y), 2*QW bits.
// The host writes it once after power-up from the published PK.
//
// Interface: one write port (wr_en, wr_addr, wr_data, taken at the clock
// edge) and one read port with one cycle of latency (rd_data is valid the
// cycle after rd_en). Writes to address 0 or above 2n are dropped.
//
// The paper fixes what PK contains; where the board keeps it is not said, so
// this plain register-array memory is this design's choice.
module pk_param_mem
  import agencid_pkg::*;
#(
  parameter int N    = N_BOARDS,             // boards in the system
  parameter int AW   = $clog2(2*N + 1)       // address bits
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  ec_point_t     wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output ec_point_t     rd_data
);

  localparam int DEPTH = 2*N + 1;

  logic [2*QW-1:0] mem [DEPTH];
  logic [2*QW-1:0] rd_word;

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr != '0 && 32'(wr_addr) < DEPTH) mem[wr_addr] <= {wr_data.x, wr_data.y};
    if (rd_en) rd_word <= mem[rd_addr];
  end

  assign rd_data = '{inf: 1'b0, x: rd_word[2*QW-1:QW], y: rd_word[QW-1:0]};

endmodule
