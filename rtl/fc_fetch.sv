// fc_fetch: instruction fetch. Reads a block of pre-compiled instructions from
// off-chip memory over an AXI4 read channel and streams them, in order, to the
// scheduler (DRS).
//
// The paper says only that pre-compiled instructions are loaded over AXI by a
// Fetch module. Here a start pulse gives the byte address of the first
// instruction and the number of instructions; one instruction is one 128-bit
// AXI beat. The module issues INCR bursts of up to MAX_BURST beats with one
// burst outstanding, and passes each R beat straight to the output
// (r_ready = out_ready), so it adds no buffering and no latency. done pulses
// one cycle after the last instruction has been taken.
module fc_fetch
  import fc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] base_addr,
  input  logic [15:0]           num_instr,
  output logic                  busy,
  output logic                  done,
  // AXI4 read master
  output axi_a_t                ar,
  input  logic                  ar_ready,
  input  logic                  r_valid,
  input  logic [WORD_W-1:0]     r_data,
  input  logic                  r_last,
  output logic                  r_ready,
  // instruction stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output instr_t                out_instr
);
  localparam int unsigned BYTES = WORD_W / 8;

  logic [AXI_ADDR_W-1:0] addr_q;
  logic [15:0]           to_request;   // beats not yet requested
  logic [15:0]           to_receive;   // beats not yet received
  logic                  in_burst;     // a burst is outstanding
  logic [15:0]           blen;

  assign blen      = (to_request > 16'(MAX_BURST)) ? 16'(MAX_BURST) : to_request;
  assign ar.valid  = busy && !in_burst && (to_request != 0);
  assign ar.addr   = addr_q;
  assign ar.len    = 8'(blen - 1);
  assign out_valid = busy && r_valid;
  assign out_instr = instr_t'(r_data);
  assign r_ready   = busy && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      in_burst   <= 1'b0;
      addr_q     <= '0;
      to_request <= '0;
      to_receive <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && num_instr != 0) begin
          busy       <= 1'b1;
          addr_q     <= base_addr;
          to_request <= num_instr;
          to_receive <= num_instr;
        end
      end else begin
        if (ar.valid && ar_ready) begin
          in_burst   <= 1'b1;
          addr_q     <= addr_q + AXI_ADDR_W'(blen * BYTES);
          to_request <= to_request - blen;
        end
        if (r_valid && r_ready) begin
          to_receive <= to_receive - 1'b1;
          if (r_last) in_burst <= 1'b0;
          if (to_receive == 16'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
