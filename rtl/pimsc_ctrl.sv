// pimsc_ctrl: command sequencer of the in-memory SC engine.
//
// Accepts one command at a time (valid/ready handshake) and drives the
// CiM/Mem mode signal, the two wordline decoders, the sense-amplifier enables,
// the input/output register loads, the SCU and the converter.
//
//  MEM_WRITE  memory mode. The input register takes wdata (1 tick), then the
//             WWL of row addr_d is held for one memory cycle (2 ticks) with the
//             input MUX passing the input register.
//  MEM_READ   memory mode. Decoder 2 holds the RWL of row addr_a for a cycle;
//             SA2 senses in the second tick; the output register loads the
//             sensed word on the next tick.
//  COMPUTE    computation mode. Decoder 1 reads row addr_a and decoder 2 row
//             addr_b in the same cycle; SA1 and SA2 sense them; the two
//             bit-stream generators (patterns pat_a / pat_b) turn them into
//             bundles; the SCU runs op. With reuse set, operand A is the SCU's
//             previous result bundle instead of the row read. With to_binary
//             set, the converter counts the result and its value (all ones on
//             overflow) is written to row addr_d through the input MUX;
//             otherwise the result stays a bundle at the SCU output.
// rsp_valid pulses for one tick when a command has finished.
//
// The CiM/Mem switch and the read / SC / convert / write-back order follow the
// source. The command format, the use of decoder 1 for the write-back row and
// of decoder 2 for plain reads, and one memory cycle per array access are this
// design's choices.
module pimsc_ctrl #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  pimsc_pkg::cmd_kind_e   cmd_kind,
  input  pimsc_pkg::sc_op_e      cmd_op,
  input  logic [AW-1:0]          cmd_addr_a,
  input  logic [AW-1:0]          cmd_addr_b,
  input  logic [AW-1:0]          cmd_addr_d,
  input  pimsc_pkg::bs_pat_e     cmd_pat_a,
  input  pimsc_pkg::bs_pat_e     cmd_pat_b,
  input  logic                   cmd_reuse,
  input  logic                   cmd_to_binary,
  output logic                   rsp_valid,
  // datapath control
  output logic                   cim,
  output logic [AW-1:0]          dec1_addr,
  output logic                   dec1_wwl_en,
  output logic                   dec1_rwl_en,
  output logic [AW-1:0]          dec2_addr,
  output logic                   dec2_rwl_en,
  output logic                   sa1_en,
  output logic                   sa2_en,
  output logic                   in_load,
  output logic                   out_load,
  output pimsc_pkg::bs_pat_e     pat_a,
  output pimsc_pkg::bs_pat_e     pat_b,
  output logic                   reuse,
  output logic                   scu_start,
  output pimsc_pkg::sc_op_e      scu_op,
  input  logic                   scu_done,
  output logic                   s2b_start,
  input  logic                   s2b_done
);
  import pimsc_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_WLOAD, S_WRITE, S_MREAD, S_MOUT,
    S_CREAD, S_SCU_GO, S_SCU_WAIT, S_S2B_GO, S_S2B_WAIT, S_WBACK, S_DONE
  } state_e;

  state_e     state;
  logic       tick;          // second tick of a memory cycle
  cmd_kind_e  kind_r;
  sc_op_e     op_r;
  logic [AW-1:0] addr_a_r, addr_b_r, addr_d_r;
  bs_pat_e    pat_a_r, pat_b_r;
  logic       reuse_r, to_bin_r;

  assign cmd_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tick     <= 1'b0;
      kind_r   <= CMD_MEM_WRITE;
      op_r     <= OP_MUL;
      addr_a_r <= '0;
      addr_b_r <= '0;
      addr_d_r <= '0;
      pat_a_r  <= PAT_1;
      pat_b_r  <= PAT_2;
      reuse_r  <= 1'b0;
      to_bin_r <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          kind_r   <= cmd_kind;
          op_r     <= cmd_op;
          addr_a_r <= cmd_addr_a;
          addr_b_r <= cmd_addr_b;
          addr_d_r <= cmd_addr_d;
          pat_a_r  <= cmd_pat_a;
          pat_b_r  <= cmd_pat_b;
          reuse_r  <= cmd_reuse;
          to_bin_r <= cmd_to_binary;
          tick     <= 1'b0;
          case (cmd_kind)
            CMD_MEM_WRITE: state <= S_WLOAD;
            CMD_MEM_READ:  state <= S_MREAD;
            CMD_COMPUTE:   state <= S_CREAD;
            default:       state <= S_DONE;
          endcase
        end
        S_WLOAD: state <= S_WRITE;
        S_WRITE, S_WBACK: begin
          tick <= ~tick;
          if (tick) state <= S_DONE;
        end
        S_MREAD: begin
          tick <= ~tick;
          if (tick) state <= S_MOUT;
        end
        S_MOUT: state <= S_DONE;
        S_CREAD: begin
          tick <= ~tick;
          if (tick) state <= S_SCU_GO;
        end
        S_SCU_GO:   state <= S_SCU_WAIT;
        S_SCU_WAIT: if (scu_done) state <= to_bin_r ? S_S2B_GO : S_DONE;
        S_S2B_GO:   state <= S_S2B_WAIT;
        S_S2B_WAIT: if (s2b_done) state <= S_WBACK;
        default:    state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  always_comb begin
    cim         = (state != S_IDLE) ? (kind_r == CMD_COMPUTE) : 1'b0;
    dec1_addr   = (state == S_WRITE || state == S_WBACK) ? addr_d_r : addr_a_r;
    dec1_wwl_en = (state == S_WRITE || state == S_WBACK);
    dec1_rwl_en = (state == S_CREAD);
    dec2_addr   = (state == S_MREAD) ? addr_a_r : addr_b_r;
    dec2_rwl_en = (state == S_CREAD || state == S_MREAD);
    sa1_en      = (state == S_CREAD) && tick;
    sa2_en      = (state == S_CREAD || state == S_MREAD) && tick;
    in_load     = (state == S_IDLE) && cmd_valid && (cmd_kind == CMD_MEM_WRITE);
    out_load    = (state == S_MOUT);
    pat_a       = pat_a_r;
    pat_b       = pat_b_r;
    reuse       = reuse_r;
    scu_start   = (state == S_SCU_GO);
    scu_op      = op_r;
    s2b_start   = (state == S_S2B_GO);
    rsp_valid   = (state == S_DONE);
  end

  // Only one wordline of decoder 1 is driven at a time: never read and write together.
  a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(dec1_wwl_en && dec1_rwl_en));
  // A command is only taken when the controller is idle.
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n) (cmd_valid && cmd_ready) |-> state == S_IDLE);
endmodule
