// cmd_loader -- fetches the command list from DRAM into the command FIFO.
//
// The command list of a network is stored in DRAM from word address
// CMD_BASE on. After reset the loader reads it word by word through a
// simple request/response port (mem_req until mem_gnt, then one mem_rvalid
// with the 16-bit word) and pushes each word into the FIFO (valid/ready),
// waiting whenever the FIFO is full, so lists longer than the FIFO's 128
// words are fine. It stops after pushing an END command and then holds done
// high. One request is outstanding at a time.
// Loading the commands automatically after power-up is the paper's; the
// DRAM port, the END marker and the base address are this design's choices.
module cmd_loader
  import cnn_pkg::*;
#(
  parameter logic [23:0] CMD_BASE = 24'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        mem_req,
  input  logic        mem_gnt,
  output logic [23:0] mem_addr,
  input  logic        mem_rvalid,
  input  logic [15:0] mem_rdata,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_data,
  output logic        done
);
  typedef enum logic [1:0] {S_REQ, S_WAIT, S_PUSH, S_DONE} state_t;
  state_t state;

  assign mem_req   = (state == S_REQ);
  assign out_valid = (state == S_PUSH);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_REQ; mem_addr <= CMD_BASE; out_data <= '0;
    end else begin
      case (state)
        S_REQ:  if (mem_gnt) state <= S_WAIT;
        S_WAIT: if (mem_rvalid) begin out_data <= mem_rdata; state <= S_PUSH; end
        S_PUSH: if (out_ready) begin
          mem_addr <= mem_addr + 1'b1;
          state    <= (out_data[15:12] == OP_END) ? S_DONE : S_REQ;
        end
        default: ;
      endcase
    end
  end
endmodule
