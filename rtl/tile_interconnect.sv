// tile_interconnect: the tile bus between the preparator and the IMAs.
//
// Forward path: a request tagged with an IMA index is taken into a one-entry
// register stage (in_ready when the stage is empty or being emptied) and
// presented to that IMA only; it leaves when the IMA raises its ready.
// Return path: rd_ima selects one IMA whose status vectors and selected
// results are returned combinationally. rd_xbar is broadcast.
module tile_interconnect #(
  parameter int unsigned NIMA = fatpim_pkg::IMAS_PER_TILE,
  localparam int unsigned NX  = fatpim_pkg::XBARS_PER_IMA,
  localparam int unsigned NC  = fatpim_pkg::NCOL,
  localparam int unsigned RB  = fatpim_pkg::RES_BITS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [3:0]                         in_ima,
  input  fatpim_pkg::ima_req_t               in_req,
  output logic                               in_ready,
  output logic [NIMA-1:0]                    ima_valid,
  output fatpim_pkg::ima_req_t               ima_req,
  input  logic [NIMA-1:0]                    ima_ready,
  input  logic [3:0]                         rd_ima,
  input  logic [NIMA-1:0][NX-1:0]            ima_busy,
  input  logic [NIMA-1:0][NX-1:0]            ima_done,
  input  logic [NIMA-1:0][NX-1:0]            ima_err,
  input  logic [NIMA-1:0][NC-1:0][RB-1:0]    ima_res,
  output logic [NX-1:0]                      rd_busy,
  output logic [NX-1:0]                      rd_done,
  output logic [NX-1:0]                      rd_err,
  output logic [NC-1:0][RB-1:0]              rd_res
);
  logic       full;
  logic [3:0] dst;
  logic       leave;

  assign leave    = full && (int'(dst) < NIMA) && ima_ready[dst];
  assign in_ready = !full || leave;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= 1'b0;
      dst     <= '0;
      ima_req <= '0;
    end else if (in_valid && in_ready) begin
      full    <= 1'b1;
      dst     <= in_ima;
      ima_req <= in_req;
    end else if (leave) begin
      full    <= 1'b0;
    end
  end

  always_comb begin
    for (int i = 0; i < NIMA; i++) ima_valid[i] = full && (int'(dst) == i);
    if (int'(rd_ima) < NIMA) begin
      rd_busy = ima_busy[rd_ima];
      rd_done = ima_done[rd_ima];
      rd_err  = ima_err[rd_ima];
      rd_res  = ima_res[rd_ima];
    end else begin
      rd_busy = '0;
      rd_done = '0;
      rd_err  = '0;
      rd_res  = '0;
    end
  end
endmodule
