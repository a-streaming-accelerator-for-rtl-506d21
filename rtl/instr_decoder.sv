// instr_decoder -- command decoder of the accelerator.
//
// Pops 16-bit commands from the command FIFO. Each command is a 4-bit opcode
// and a 12-bit immediate (see cnn_pkg::opcode_t): the set commands fill one
// field of the layer configuration; RUN raises start for one cycle and the
// decoder then pops nothing until the layer controller reports done, so a
// command list can set up and run any number of tiles (image decomposition)
// and feature groups (feature decomposition) one after another. Unknown
// opcodes are ignored. busy is high from RUN until done. A RUN is only
// taken while run_allowed is high (the host's start credit or auto-run);
// run_taken pulses when it is, so the host can start passes one by one.
// The paper names the decoder; the instruction set is this design's own.
module instr_decoder
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [15:0] cmd,
  input  logic        run_allowed,
  output logic        run_taken,
  output layer_cfg_t  cfg,
  output logic        start,
  input  logic        done,
  output logic        busy
);
  opcode_t op;
  logic [11:0] imm;
  assign op  = opcode_t'(cmd[15:12]);
  assign imm = cmd[11:0];

  assign cmd_ready = !busy && !start && (op != OP_RUN || run_allowed);
  assign run_taken = start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg   <= '{stride: 3'd1, default: '0};
      start <= 1'b0;
      busy  <= 1'b0;
    end else begin
      start <= 1'b0;
      if (busy && done) busy <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        case (op)
          OP_IN_BASE:  cfg.in_base  <= imm;
          OP_OUT_BASE: cfg.out_base <= imm;
          OP_WIDTH:    cfg.width    <= imm;
          OP_HEIGHT:   cfg.height   <= imm;
          OP_CHANNELS: cfg.channels <= imm;
          OP_MODE: begin
            cfg.stride  <= (imm[2:0] == 3'd0) ? 3'd1 : imm[2:0];
            cfg.pool_en <= imm[3];
            cfg.pool3   <= imm[4];
            cfg.in_sel  <= imm[5];
            cfg.mode1x1 <= imm[6];
          end
          OP_RUN: begin
            start <= 1'b1;
            busy  <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
