// local_ctrl: local controller of a processor group (microcode sequencer).
//
// Owns the group's microcode cache and turns the cached program into the
// per-cycle controls of the four processors.
//   group_control = GC_LOAD   `microcode` is written into the cache at the
//                             next free entry (the first load after a run
//                             starts again at entry 0).
//   group_control = GC_START  the program (all loaded entries) is executed
//                             `iters` times (0 counts as 1); the second and
//                             later passes restart at entry `loop_start`.
//   group_control = GC_STOP   execution is abandoned.
// Each microcode (mm_pkg::ucode_t) lasts `cycles` executed cycles (0 counts as
// 1). During it the four 4 bit processor controls are driven from bits 31..16,
// the 8 bit input counter advances every executed cycle when bit 11 is set and
// the 8 bit output counter when bit 13 is set; both restart at 0 with each
// microcode. The counters form the processor addresses column-wise:
//   addr0 = {col, counter, 0}, addr1 = {col, counter, 1},
// zero-extended to the 16 bit processor address ports (bits 15..10 are 0),
// where col is the microcode's column bit (10 or 12) toggled by the counter's
// carry, so a 512-cycle microcode fills both 512-word columns. The addresses
// follow the output counter when bit 13 is set, otherwise the input counter.
// Bits 15..14 are passed on as the output multiplexer select.
//
// Stall: a cycle in which the input counter is enabled but no input pair is
// waiting (`input_valid` low), or the output counter is enabled but the
// receiver is not ready (`output_ready` low), does not execute: counters and
// the cycle count hold and the processor controls stay as they are.
// `input_pop` marks executed cycles that consume the waiting input pair,
// `out_issue` executed cycles that read a pair from the processors (the data
// appear one cycle later). `busy` is high from GC_START to the end of the
// last microcode. When idle the processors receive `IDLE_PCTL` (halted/read).
//
// Microcode fields, the 16-entry cache and the 8 bit counters follow the
// published design; group-control encoding, iteration loop, stall rule and
// column carry are this implementation's choices.
module local_ctrl
  import mm_pkg::*;
#(
  parameter logic [3:0] IDLE_PCTL = 4'(MVM_READ)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  group_ctl_e        group_control,
  input  logic [31:0]       microcode,
  input  logic [ITER_W-1:0] iters,
  input  logic [3:0]        loop_start,
  input  logic              input_valid,
  input  logic              output_ready,
  output logic              input_pop,
  output logic              out_issue,
  output logic [3:0]        pctl [PROCS],
  output logic [15:0]       addr0,
  output logic [15:0]       addr1,
  output logic [1:0]        out_mux,
  output logic              busy,
  output logic              in_stall,
  output logic              out_stall
);

  localparam int unsigned PCW = $clog2(UC_DEPTH);

  logic [PCW:0]      wp;          // number of loaded entries
  logic              fresh;       // next load restarts at entry 0
  logic [PCW-1:0]    pc, next_pc, lstart;
  logic [ITER_W-1:0] iter_left;
  logic [9:0]        cyc;
  logic [CNT_W:0]    icnt, ocnt;  // 8 bit counter plus carry into column
  logic              running;
  ucode_t            cur;
  logic [31:0]       rd_word;
  logic              exec, last_cyc, last_entry;
  logic              icol, ocol;

  ucode_cache #(.DEPTH(UC_DEPTH), .WIDTH(32)) u_cache (
    .clk  (clk),
    .we   (group_control == GC_LOAD),
    .waddr(fresh ? '0 : wp[PCW-1:0]),
    .wdata(microcode),
    .raddr(next_pc),
    .rdata(rd_word)
  );

  assign in_stall  = running && cur.in_cnt_en  && !input_valid;
  assign out_stall = running && cur.out_cnt_en && !output_ready;
  assign exec      = running && !in_stall && !out_stall;
  assign input_pop = exec && cur.in_cnt_en;
  assign out_issue = exec && cur.out_cnt_en;
  assign last_cyc  = (cyc + 10'd1 >= cur.cycles);
  assign last_entry = ((PCW+1)'(pc) + 1'b1 >= wp);
  assign busy      = running;

  // next entry to fetch
  always_comb begin
    if (group_control == GC_START)   next_pc = '0;
    else if (!last_entry)            next_pc = pc + 1'b1;
    else                             next_pc = lstart;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; fresh <= 1'b1; pc <= '0; lstart <= '0; iter_left <= '0;
      cyc <= '0; icnt <= '0; ocnt <= '0; running <= 1'b0; cur <= '0;
    end else begin
      if (group_control == GC_LOAD) begin
        wp    <= fresh ? (PCW+1)'(1) : wp + 1'b1;
        fresh <= 1'b0;
      end
      if (group_control == GC_STOP) begin
        running <= 1'b0;
        fresh   <= 1'b1;
      end else if (group_control == GC_START) begin
        running   <= (wp != '0);
        fresh     <= 1'b1;
        pc        <= '0;
        cur       <= ucode_t'(rd_word);
        lstart    <= loop_start[PCW-1:0];
        iter_left <= (iters == '0) ? ITER_W'(1) : iters;
        cyc <= '0; icnt <= '0; ocnt <= '0;
      end else if (exec) begin
        if (cur.in_cnt_en)  icnt <= icnt + 1'b1;
        if (cur.out_cnt_en) ocnt <= ocnt + 1'b1;
        cyc <= cyc + 1'b1;
        if (last_cyc) begin
          cyc  <= '0;
          icnt <= '0;
          ocnt <= '0;
          pc   <= next_pc;
          cur  <= ucode_t'(rd_word);
          if (last_entry) begin
            if (iter_left <= ITER_W'(1)) running <= 1'b0;
            else iter_left <= iter_left - 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    icol = cur.in_col  ^ icnt[CNT_W];
    ocol = cur.out_col ^ ocnt[CNT_W];
    if (cur.out_cnt_en) begin
      addr0 = 16'({ocol, ocnt[CNT_W-1:0], 1'b0});
      addr1 = 16'({ocol, ocnt[CNT_W-1:0], 1'b1});
    end else begin
      addr0 = 16'({icol, icnt[CNT_W-1:0], 1'b0});
      addr1 = 16'({icol, icnt[CNT_W-1:0], 1'b1});
    end
    out_mux = cur.out_mux;
    pctl[0] = running ? cur.pctl0 : IDLE_PCTL;
    pctl[1] = running ? cur.pctl1 : IDLE_PCTL;
    pctl[2] = running ? cur.pctl2 : IDLE_PCTL;
    pctl[3] = running ? cur.pctl3 : IDLE_PCTL;
  end

endmodule
