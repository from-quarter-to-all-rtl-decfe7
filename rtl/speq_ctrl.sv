// speq_ctrl -- control unit: sequences one weight-matrix x activation job.
//
// A job multiplies the activation vector(s) in the A buffer with N_GROUPS x
// GROUP rows of the weight matrix in the W buffer, in quantize (draft) or full
// (verify) mode, and leaves the FP32 results in the output buffer.
// Three overlapping streams, one step per cycle:
//   issue : for each group g and row k (k = 0..GROUP-1) read W buffer word
//           w_base + g*GROUP + k and A buffer word a_base + g*GROUP + k.
//   PE    : one cycle later the words reach the PE array with pe_en; the
//           first row of a group sets pe_first, the last sets pe_last (the
//           PE sums then move to their hold registers).
//   drain : after each pe_last, drain_idx walks the GROUP PEs of every tile;
//           the output word o_base + drain_idx and the scale word
//           s_base + g*GROUP + drain_idx are read, and one cycle later
//           (wb_valid) the scaled sum is written back to o_waddr.  The first
//           group overwrites (wb_first) unless `accum` was set with start,
//           later groups accumulate; `accum` lets a long input dimension be
//           split over several jobs that add into the same output words.
// The drain of group g runs while group g+1 is computed, so a job takes
// N_GROUPS*GROUP + GROUP + 3 cycles from the start pulse to `done`.
// The paper states only that the control unit moves data and drives the PE
// array; this schedule is this design's own.
// The assertion a_drain_gap (disabled while rst_n is low) makes the linter
// see rst_n used both synchronously and as the flops' asynchronous reset;
// the warning concerns only that checker, not the circuit.
module speq_ctrl
  import speq_pkg::*;
#(
  parameter int unsigned GROUP = 128,
  parameter int unsigned GW    = 8,    // width of the group count
  parameter int unsigned WAW   = 8,
  parameter int unsigned AAW   = 15,
  parameter int unsigned OAW   = 13,
  parameter int unsigned SAW   = 10,
  localparam int unsigned KW   = $clog2(GROUP)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  mode_e          mode_in,
  input  logic [GW-1:0]  n_groups,   // 0 is read as 1
  input  logic           accum,      // 1: add to the output words already there
  input  logic [WAW-1:0] w_base,
  input  logic [AAW-1:0] a_base,
  input  logic [OAW-1:0] o_base,
  input  logic [SAW-1:0] s_base,
  output logic           busy,
  output logic           done,
  output mode_e          mode,
  // buffer reads
  output logic           w_re,
  output logic [WAW-1:0] w_raddr,
  output logic           a_re,
  output logic [AAW-1:0] a_raddr,
  // PE array
  output logic           pe_en,
  output logic           pe_first,
  output logic           pe_last,
  // drain
  output logic           drain_act,
  output logic [KW-1:0]  drain_idx,
  output logic           o_re,
  output logic [OAW-1:0] o_raddr,
  output logic           s_re,
  output logic [SAW-1:0] s_raddr,
  output logic           wb_valid,
  output logic           wb_first,
  output logic [OAW-1:0] o_waddr
);
  logic           running;
  logic [KW-1:0]  k;
  logic [GW-1:0]  g, g_last;
  logic [WAW-1:0] w_ptr;
  logic [AAW-1:0] a_ptr;
  logic [GW-1:0]  pe_g, dr_g;
  logic           pe_final, dr_final, wb_last, accum_q;
  logic [OAW-1:0] o_base_q;
  logic [SAW-1:0] s_base_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      mode     <= MODE_FULL;
      k        <= '0;
      g        <= '0;
      g_last   <= '0;
      w_ptr    <= '0;
      a_ptr    <= '0;
      o_base_q <= '0;
      s_base_q <= '0;
      accum_q  <= 1'b0;
      pe_en    <= 1'b0;
      pe_first <= 1'b0;
      pe_last  <= 1'b0;
      pe_g     <= '0;
      pe_final <= 1'b0;
      drain_act <= 1'b0;
      drain_idx <= '0;
      dr_g     <= '0;
      dr_final <= 1'b0;
      wb_valid <= 1'b0;
      wb_first <= 1'b0;
      wb_last  <= 1'b0;
      o_waddr  <= '0;
    end else begin
      done <= 1'b0;

      // issue stream
      if (start && !busy) begin
        running  <= 1'b1;
        busy     <= 1'b1;
        mode     <= mode_in;
        k        <= '0;
        g        <= '0;
        g_last   <= (n_groups == '0) ? '0 : n_groups - 1'b1;
        w_ptr    <= w_base;
        a_ptr    <= a_base;
        o_base_q <= o_base;
        s_base_q <= s_base;
        accum_q  <= accum;
      end else if (running) begin
        k     <= k + 1'b1;
        w_ptr <= w_ptr + 1'b1;
        a_ptr <= a_ptr + 1'b1;
        if (k == KW'(GROUP - 1)) begin
          g <= g + 1'b1;
          if (g == g_last) running <= 1'b0;
        end
      end

      // PE stream
      pe_en    <= running;
      pe_first <= running && (k == '0);
      pe_last  <= running && (k == KW'(GROUP - 1));
      pe_g     <= g;
      pe_final <= (g == g_last);

      // drain stream
      if (pe_last) begin
        drain_act <= 1'b1;
        drain_idx <= '0;
        dr_g      <= pe_g;
        dr_final  <= pe_final;
      end else if (drain_act) begin
        drain_idx <= drain_idx + 1'b1;
        if (drain_idx == KW'(GROUP - 1)) drain_act <= 1'b0;
      end

      // write-back stream
      wb_valid <= drain_act;
      wb_first <= (dr_g == '0) && !accum_q;
      o_waddr  <= o_raddr;
      wb_last  <= drain_act && dr_final && (drain_idx == KW'(GROUP - 1));
      if (wb_valid && wb_last) begin
        done <= 1'b1;
        busy <= 1'b0;
      end
    end
  end

  always_comb begin
    w_re    = running;
    w_raddr = w_ptr;
    a_re    = running;
    a_raddr = a_ptr;
    o_re    = drain_act;
    o_raddr = o_base_q + OAW'(drain_idx);
    s_re    = drain_act;
    s_raddr = s_base_q + SAW'(dr_g) * SAW'(GROUP) + SAW'(drain_idx);
  end

  // a new group must never finish while the previous one is still draining
  a_drain_gap: assert property (@(posedge clk) disable iff (!rst_n)
    pe_last |-> (!drain_act || drain_idx == KW'(GROUP - 1)));
endmodule
