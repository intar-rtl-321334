// instr_reader: global instruction reader of the accelerator.
//
// At each stage boundary it performs three of the four single-cycle steps of
// a reconfiguration (paper Sec. III-B): READ the next entry of the static
// configuration buffer, MODIFY the loop bounds that depend on the input size
// (a flagged bound becomes seq_len/PE_DIM, the number of PE_DIM-row tiles),
// and SEND the instruction to every compute core.  The fourth step, DECODE,
// happens inside each core.  The reader then waits until every core reports
// that its part of the stage is finished (a barrier; the paper does not say
// how a stage ends, this is this design's choice) and moves to the next entry,
// or raises done after the entry flagged last.
//
// Interface: start is a one-cycle pulse in IDLE; seq_len is sampled in the
// MODIFY cycle and must be a non-zero multiple of PE_DIM no larger than the
// buffer's maximum.  inst_valid is high for exactly the SEND cycle; the
// instruction is broadcast to all cores at once rather than propagated core to
// core (the paper allows either; a broadcast keeps the overhead at 4 cycles).
module instr_reader
  import intar_pkg::*;
#(
  parameter int unsigned PE_DIM = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [BOUND_W-1:0]   seq_len,
  input  logic                 all_done,   // every core finished the current stage
  // static buffer read port
  output logic                 buf_rd_en,
  output logic [STG_W-1:0]     buf_rd_addr,
  input  config_entry_t        buf_entry,
  // broadcast to the cores
  output logic                 inst_valid,
  output config_inst_t         inst,
  output logic                 busy,
  output logic                 done,
  output logic                 reconfiguring  // high during READ, MODIFY, SEND
);

  localparam int unsigned SH = $clog2(PE_DIM);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_MODIFY, S_SEND, S_WAIT, S_DONE} state_e;
  state_e state;
  logic [STG_W-1:0] pc;
  config_inst_t     mod_q;
  logic             last_q;

  function automatic config_inst_t modify(input config_entry_t e, input logic [BOUND_W-1:0] sl);
    config_inst_t r;
    logic [BOUND_W-1:0] tiles;
    tiles = sl >> SH;
    r = e.inst;
    if (e.seq_scaled[2]) r.i_bound = tiles;
    if (e.seq_scaled[1]) r.j_bound = tiles;
    if (e.seq_scaled[0]) r.k_bound = tiles;
    return r;
  endfunction

  assign buf_rd_en     = (state == S_READ);
  assign buf_rd_addr   = pc;
  assign inst_valid    = (state == S_SEND);
  assign inst          = mod_q;
  assign busy          = (state != S_IDLE) && (state != S_DONE);
  assign done          = (state == S_DONE);
  assign reconfiguring = (state == S_READ) || (state == S_MODIFY) || (state == S_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      mod_q  <= '0;
      last_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:   if (start) begin pc <= '0; state <= S_READ; end
        S_READ:   state <= S_MODIFY;
        S_MODIFY: begin
          mod_q  <= modify(buf_entry, seq_len);
          last_q <= buf_entry.last;
          state  <= S_SEND;
        end
        S_SEND:   state <= S_WAIT;
        S_WAIT:   if (all_done) begin
          if (last_q) state <= S_DONE;
          else begin pc <= pc + 1'b1; state <= S_READ; end
        end
        S_DONE:   if (start) begin pc <= '0; state <= S_READ; end
        default:  state <= S_IDLE;
      endcase
    end
  end

endmodule
