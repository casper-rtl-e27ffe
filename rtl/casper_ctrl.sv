// casper_ctrl: command front end and completion tracking of the accelerator.
//
// Every call of the programming interface reaches the hardware as one command (see cmd_op_e in
// casper_pkg): the stencil segment (base, size) goes to the slice mapping of every injection
// point; instructions, the code length and constants are broadcast to all SPUs; stream starts
// and element counts are addressed to one SPU (acc); start launches all SPUs together. In the
// published design one SPU acts as leader and tracks the progress of all SPUs, signalling the
// CPU when all have finished; here that tracking sits in this block: it raises done (a level,
// cleared by the next start) and a one-cycle done_irq once every SPU reports done. Commands are
// refused (cmd_ready low) while a computation runs, since a new computation may not start before
// the current one finishes. Registered outputs, one command per cycle.
module casper_ctrl
  import casper_pkg::*;
#(
  parameter int unsigned NSPU = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  host_cmd_t       cmd,
  // to the injection points
  output logic            seg_we,
  output paddr_t          seg_base,
  output paddr_t          seg_size,
  // to the SPUs
  output logic            ibuf_we,
  output logic [5:0]      ibuf_idx,
  output instr_t          ibuf_data,
  output logic [6:0]      code_len,
  output logic            const_we,
  output logic [3:0]      const_idx,
  output dword_t          const_data,
  output logic [NSPU-1:0] stream_we,
  output logic [3:0]      stream_idx,
  output paddr_t          stream_base,
  output logic [NSPU-1:0] nelem_we,
  output logic [31:0]     nelem,
  output logic            start,
  input  logic [NSPU-1:0] spu_done,
  // to the CPU
  output logic            busy,
  output logic            done,
  output logic            done_irq
);
  typedef enum logic [1:0] { L_IDLE, L_LAUNCH, L_RUN } lstate_e;
  lstate_e lst;

  logic take;
  assign cmd_ready = (lst == L_IDLE);
  assign take      = cmd_valid && cmd_ready;
  assign busy      = (lst != L_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst <= L_IDLE;
      seg_we <= 1'b0; seg_base <= '0; seg_size <= '0;
      ibuf_we <= 1'b0; ibuf_idx <= '0; ibuf_data <= '0; code_len <= 7'd1;
      const_we <= 1'b0; const_idx <= '0; const_data <= '0;
      stream_we <= '0; stream_idx <= '0; stream_base <= '0;
      nelem_we <= '0; nelem <= '0;
      start <= 1'b0; done <= 1'b0; done_irq <= 1'b0;
    end else begin
      seg_we <= 1'b0; ibuf_we <= 1'b0; const_we <= 1'b0;
      stream_we <= '0; nelem_we <= '0; start <= 1'b0; done_irq <= 1'b0;
      if (take) begin
        unique case (cmd.op)
          CMD_SEGMENT:  begin seg_we <= 1'b1; seg_base <= cmd.addr; seg_size <= paddr_t'(cmd.data); end
          CMD_CODE:     begin ibuf_we <= 1'b1; ibuf_idx <= cmd.idx; ibuf_data <= instr_t'(cmd.data[14:0]); end
          CMD_CODE_LEN: code_len <= (cmd.data[6:0] == 7'd0) ? 7'd1 : cmd.data[6:0];
          CMD_CONST:    begin const_we <= 1'b1; const_idx <= cmd.idx[3:0]; const_data <= cmd.data; end
          CMD_STREAM:   begin
            stream_we   <= NSPU'(1) << cmd.acc;
            stream_idx  <= cmd.idx[3:0];
            stream_base <= cmd.addr;
          end
          CMD_NELEM:    begin nelem_we <= NSPU'(1) << cmd.acc; nelem <= cmd.data[31:0]; end
          CMD_START:    begin start <= 1'b1; done <= 1'b0; lst <= L_LAUNCH; end
          default: ;
        endcase
      end
      // leader: wait one cycle for the SPUs to clear their done flags, then for all of them
      if (lst == L_LAUNCH) lst <= L_RUN;
      if (lst == L_RUN && &spu_done) begin
        lst      <= L_IDLE;
        done     <= 1'b1;
        done_irq <= 1'b1;
      end
    end
  end
endmodule
