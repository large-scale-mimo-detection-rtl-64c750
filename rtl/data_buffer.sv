// data_buffer: corner-turn buffer between subcarrier and user processing.
//
// The equalizer produces the U symbols of one subcarrier at a time, but the
// IFFT needs all L subcarriers of one user.  This buffer collects a complete
// SC-FDMA symbol (L subcarriers x U users of 12-bit complex data) and then
// streams it out user by user, subcarrier by subcarrier.  It is organised as
// U banks (one per user, so one subcarrier is written in one clock) and holds
// two symbols, so one can be read while the next one is written.  Size and
// word length (1200 subcarriers, U users, 12 bit) follow the published design;
// the double buffering and the organisation are this design's choices.
//
// Write side: wr_en && wr_ready stores wr_data at the next subcarrier address;
// wr_last marks the last subcarrier of a symbol and moves to the other half.
// A half is streamed out only after 'commit' (the SINR values of that symbol
// are ready); commits are counted in symbol order.
// Read side: rd_valid/rd_ready stream with rd_user, rd_first and rd_last
// (first/last subcarrier of a user).  The read
// is combinational from the array (no read latency).
module data_buffer
  import mimo_pkg::*;
#(
  parameter int U = 8,
  parameter int L = 1200
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  output logic                 wr_ready,
  input  logic                 wr_last,
  input  csym_t                wr_data [U],
  input  logic                 commit,
  output logic                 rd_valid,
  input  logic                 rd_ready,
  output csym_t                rd_data,
  output logic [$clog2(U)-1:0] rd_user,
  output logic                 rd_first,
  output logic                 rd_last
);

  localparam int LA = $clog2(L);
  localparam int UB = $clog2(U);

  csym_t mem [2][U][L];

  logic          wbank, cbank, rbank;
  logic [1:0]    written, committed;
  logic [LA-1:0] waddr, raddr;
  logic [UB-1:0] ruser;

  assign wr_ready = !written[wbank];
  wire   do_wr    = wr_en && wr_ready;
  assign rd_valid = committed[rbank];
  wire   do_rd    = rd_valid && rd_ready;
  wire   rd_end   = (raddr == LA'(L - 1)) && (ruser == UB'(U - 1));

  assign rd_data  = mem[rbank][ruser][raddr];
  assign rd_user  = ruser;
  assign rd_first = (raddr == '0);
  assign rd_last  = (raddr == LA'(L - 1));

  always_ff @(posedge clk) begin
    if (do_wr)
      for (int u = 0; u < U; u++) mem[wbank][u][waddr] <= wr_data[u];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank <= 1'b0; cbank <= 1'b0; rbank <= 1'b0;
      written <= '0; committed <= '0;
      waddr <= '0; raddr <= '0; ruser <= '0;
    end else begin
      if (do_wr) begin
        if (wr_last) begin
          waddr            <= '0;
          wbank            <= ~wbank;
          written[wbank]   <= 1'b1;
        end else begin
          waddr <= waddr + 1'b1;
        end
      end
      if (commit) begin
        committed[cbank] <= 1'b1;
        cbank            <= ~cbank;
      end
      if (do_rd) begin
        if (raddr == LA'(L - 1)) begin
          raddr <= '0;
          ruser <= ruser + 1'b1;
        end else begin
          raddr <= raddr + 1'b1;
        end
        if (rd_end) begin
          ruser            <= '0;
          rbank            <= ~rbank;
          written[rbank]   <= 1'b0;
          committed[rbank] <= 1'b0;
        end
      end
    end
  end

  // a half must be complete before it is committed
  always_ff @(posedge clk)
    if (rst_n && commit) assert (written[cbank] || (do_wr && wr_last && wbank == cbank))
      else $error("commit of an incomplete half");

endmodule
