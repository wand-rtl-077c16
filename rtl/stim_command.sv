// stim_command: the path from stimulation decisions and host commands to the
// NMIC command link.
//
// Two sources share the link's command input. A closed-loop `trigger` becomes
// a START command for the stimulators in `trig_mask` of NMIC `trig_nmic`; it
// is held pending until the link accepts it and always goes ahead of host
// traffic, so the decision-to-stimulation latency is one command word
// (34 bit times, 17 us at 2 Mbps, plus the wait for the word in flight).
// Host commands (register writes, XFER, START, STOP, RANGE, relayed from the
// radio) pass through unchanged when no trigger is pending, with a
// valid/ready handshake. A trigger arriving while one is still pending is
// merged with it and counted in `merged_cnt`.
//
// From the paper: stimulation settings, site selection and pulse triggering go
// through the same command interface, and a short command starts a preloaded
// stimulation pattern. Own choice: the priority rule and the command word.
module stim_command
  import wand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trigger,
  input  logic        trig_nmic,
  input  logic [3:0]  trig_mask,
  input  logic        host_valid,
  input  logic        host_nmic,
  input  logic [31:0] host_word,
  output logic        host_ready,
  output logic        cmd_valid,
  output logic        cmd_nmic,
  output logic [31:0] cmd_word,
  input  logic        cmd_ready,
  output logic [15:0] start_cnt,
  output logic [15:0] merged_cnt
);
  logic      pend_q;
  logic      pnmic_q;
  logic [3:0] pmask_q;
  nmic_cmd_t start_cmd;

  always_comb begin
    start_cmd      = '0;
    start_cmd.op   = OP_START;
    start_cmd.data = {12'd0, pmask_q};
    cmd_valid  = pend_q || host_valid;
    cmd_nmic   = pend_q ? pnmic_q : host_nmic;
    cmd_word   = pend_q ? 32'(start_cmd) : host_word;
    host_ready = !pend_q && cmd_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q     <= 1'b0;
      pnmic_q    <= 1'b0;
      pmask_q    <= '0;
      start_cnt  <= '0;
      merged_cnt <= '0;
    end else begin
      if (pend_q && cmd_ready) begin
        pend_q    <= 1'b0;
        start_cnt <= start_cnt + 1'b1;
      end
      if (trigger) begin
        if (pend_q && !cmd_ready) merged_cnt <= merged_cnt + 1'b1;
        pend_q  <= 1'b1;
        pnmic_q <= trig_nmic;
        pmask_q <= trig_mask;
      end
    end
  end

endmodule
