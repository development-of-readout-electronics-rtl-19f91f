// ddr_model: behavioural model of the DDR4 SODIMM together with its memory
// controller, as seen through the simplified user interface of
// buffer_controller. Not synthesizable.
// Commands are accepted when cmd_ready is high (randomly low about one cycle
// in RDY_GAP to imitate refresh and bank conflicts); writes store the 512-bit
// line at the line address; reads return the stored line LATENCY cycles
// after the command, in command order. Unwritten lines read as zero.
`timescale 1ns/1ps
module ddr_model #(
  parameter int unsigned ADDR_W  = 29,
  parameter int unsigned LINE_W  = 512,
  parameter int unsigned LATENCY = 12,
  parameter int unsigned RDY_GAP = 8
) (
  input  logic              clk,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_we,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [LINE_W-1:0] wdata,
  output logic              rd_valid,
  output logic [LINE_W-1:0] rd_data,
  output int                n_wr,
  output int                n_rd
);
  logic [LINE_W-1:0] mem [logic [ADDR_W-1:0]];
  logic [LINE_W-1:0] pipe_d [LATENCY];
  logic              pipe_v [LATENCY];

  initial begin
    cmd_ready = 1'b0;
    rd_valid  = 1'b0;
    rd_data   = '0;
    n_wr = 0;
    n_rd = 0;
    for (int i = 0; i < int'(LATENCY); i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    logic [LINE_W-1:0] d;
    d = '0;
    if (cmd_valid && cmd_ready) begin
      if (cmd_we) begin
        mem[cmd_addr] = wdata;
        n_wr++;
      end else begin
        if (mem.exists(cmd_addr)) d = mem[cmd_addr];
        n_rd++;
      end
    end
    rd_valid <= pipe_v[LATENCY-1];
    rd_data  <= pipe_d[LATENCY-1];
    for (int i = int'(LATENCY) - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= cmd_valid && cmd_ready && !cmd_we;
    pipe_d[0] <= d;
    cmd_ready <= ($urandom_range(RDY_GAP - 1) != 0);
  end
endmodule
