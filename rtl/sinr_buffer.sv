// sinr_buffer: per-user rho^2 and 1/mu of the last two SC-FDMA symbols.
//
// The SINR unit writes (rho^2, 1/mu) for users 0..U-1 once per symbol; the LLR
// unit reads the values of the user whose time-domain samples it is
// converting.  Two halves let the values of the next symbol be written while
// the current one is still in use.  The buffer itself is named in the
// published block diagram; its organisation is this design's choice.
//
// Write side: wr_en stores (wr_rho2, wr_mu_inv) for wr_user in the write
// half; wr_last (with wr_en) switches to the other half.  Read side: rd_user
// selects the entry of the read half, the outputs are combinational; rd_done
// (one clock) switches the read half after the last sample of a symbol.
module sinr_buffer
  import mimo_pkg::*;
#(
  parameter int U = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic                 wr_last,
  input  logic [$clog2(U)-1:0] wr_user,
  input  logic [SW-1:0]        wr_rho2,
  input  logic [SW-1:0]        wr_mu_inv,
  input  logic                 rd_done,
  input  logic [$clog2(U)-1:0] rd_user,
  output logic [SW-1:0]        rd_rho2,
  output logic [SW-1:0]        rd_mu_inv
);

  typedef struct packed {
    logic [SW-1:0] rho2;
    logic [SW-1:0] mu_inv;
  } sinr_t;

  sinr_t mem [2][U];
  logic  wbank, rbank;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wbank][wr_user] <= '{rho2: wr_rho2, mu_inv: wr_mu_inv};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      rbank <= 1'b0;
    end else begin
      if (wr_en && wr_last) wbank <= ~wbank;
      if (rd_done)          rbank <= ~rbank;
    end
  end

  assign rd_rho2   = mem[rbank][rd_user].rho2;
  assign rd_mu_inv = mem[rbank][rd_user].mu_inv;

endmodule
