// ctl_top -- CTL_TOP, the calculation controller (Sec. 4.2, Fig. 3(B)(C),
// Fig. 4(A)).
//
// One step of every algorithm is a local-field (MM) phase followed by a
// time-evolution (TE) phase, as in Fig. 4(A):
//  * MM: for each of the N/64 row tiles rb and each of the N/32 column
//    blocks cb, one cycle: JMTXSEQ issues the JMEM word of the tile pair,
//    the CMEM/RMEM row holding columns 32cb..32cb+31 and, one cycle later,
//    the HEMEM row of rb; HEXT_SEL is set on cb = 0; the finished local
//    fields of rb are written to HMEM three cycles after its last block.
//    The pipeline runs without bubbles across row tiles.
//  * TE: for each group of 64 spins, CE instructions are read from the
//    sequence-control memory (SEQ), one per cycle from PCBASE on, and
//    broadcast to the 64 CAL_CSR lanes; ADRGEN gives the group's row to
//    CMEM/SMEM/HMEM/RMEM/ADMEM and writes results back there. The next
//    group's row is addressed in the last cycle of a group, so groups
//    follow back to back.
// A step thus takes N/64 * (N/32 + CE) + 4 cycles: the paper's
// N/P_r (N/P_c + C_e) plus three cycles to drain the MAC pipeline and one
// to fetch the first TE group. PMEM is read at the step number (PGEN).
// NSTEP steps make one run; then done pulses. jclr sweeps JMEM to zero.
//
// The phase order, the cycle formula and the idea of a code memory read
// once per cycle are the paper's; the pipeline depths, the instruction
// format (cim_pkg::instr_t) and the split into an MM address generator and
// a TE program are this design's.
module ctl_top
  import cim_pkg::*;
#(
  parameter int NMAX   = 4096,
  parameter int PR     = 64,
  parameter int PC     = 32,
  parameter int JAW    = $clog2((NMAX / PR) * (NMAX / PR) / 2),
  parameter int VAW    = $clog2(NMAX / PR),
  parameter int NBW    = $clog2(NMAX / PR) + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  // settings
  input  logic                    start,
  input  logic                    jclr,
  input  logic [$clog2(NMAX):0]   nsize,
  input  logic [15:0]             nstep,
  input  logic [7:0]              ce,
  input  logic [7:0]              pcbase,
  // sequence-control memory write port (host)
  input  logic                    seq_we,
  input  logic [$clog2(SEQ_DEPTH*INSTR_WORDS)-1:0] seq_waddr,
  input  logic [31:0]             seq_wdata,
  // status
  output logic                    busy,
  output logic                    done,
  output logic                    clearing,
  output logic [15:0]             step_cnt,
  output logic [31:0]             cycles,
  // JMEM
  output logic [JAW-1:0]          jmem_raddr,
  output logic                    jmem_clr,
  output logic [JAW-1:0]          jmem_clr_addr,
  // J_MUX / CAL_H
  output logic [NBW-1:0]          mux_rb,
  output logic [NBW:0]            mux_cb,
  output logic [NBW:0]            nb,
  output logic                    h_en1,
  output logic                    h_half,
  output logic                    h_en2,
  output logic                    hext_sel,
  output logic [VAW-1:0]          hemem_raddr,
  output logic                    hmem_we,
  output logic [VAW-1:0]          hmem_waddr,
  // vector memories shared by MM and TE
  output logic [VAW-1:0]          vraddr,
  // TE
  output logic                    te_active,
  output instr_t                  instr,
  output logic                    c_we,
  output logic                    s_we,
  output logic                    r_we,
  output logic [VAW-1:0]          te_waddr,
  output logic                    rnd_next,
  output logic [$clog2(PMEM_DEPTH)-1:0] pmem_raddr
);
  localparam int SUB = PR / PC;

  typedef enum logic [2:0] {S_IDLE, S_MM, S_DRAIN, S_PRE, S_TE, S_DONE, S_CLR} state_e;
  state_e state;

  logic [INSTR_W-1:0] seq [SEQ_DEPTH];

  logic [NBW-1:0] rb, grp;
  logic [NBW:0]   cb, nc;
  logic [1:0]     dcnt;
  logic [7:0]     k;
  logic [JAW:0]   clr_cnt;

  // MM pipeline stages 1..3
  logic           v1, v2, v3, first1, first2, last1, last2, last3;
  logic [NBW-1:0] rb1, rb2, rb3;
  logic [NBW:0]   cb1;

  assign nb = (NBW+1)'(nsize / ($clog2(NMAX)+1)'(PR));
  assign nc = (NBW+1)'(nsize / ($clog2(NMAX)+1)'(PC));

  // host writes of the code memory
  always_ff @(posedge clk)
    if (seq_we) seq[int'(seq_waddr) / INSTR_WORDS][32 * (int'(seq_waddr) % INSTR_WORDS) +: 32] <= seq_wdata;

  assign instr      = (state == S_TE) ? instr_t'(seq[$clog2(SEQ_DEPTH)'(pcbase + k)]) : '0;
  assign te_active  = (state == S_TE);
  assign c_we       = te_active && instr.c_we;
  assign s_we       = te_active && instr.s_we;
  assign r_we       = te_active && instr.r_we;
  assign rnd_next   = te_active && instr.rnd_next;
  assign te_waddr   = VAW'(grp);
  assign busy       = (state != S_IDLE);
  assign clearing   = (state == S_CLR);
  assign pmem_raddr = $clog2(PMEM_DEPTH)'(step_cnt);

  always_comb begin
    jmem_raddr = JAW'(jmem_word(int'(rb), int'(cb) / SUB, int'(nb)));
    case (state)
      S_MM:    vraddr = VAW'(int'(cb) / SUB);
      S_TE:    vraddr = (k == ce - 8'd1) ? VAW'(grp + 1'b1) : VAW'(grp);
      default: vraddr = '0;
    endcase
  end

  assign mux_rb      = rb1;
  assign mux_cb      = cb1;
  assign h_en1       = v1;
  assign h_half      = cb1[0] & (SUB > 1);
  assign h_en2       = v2;
  assign hext_sel    = v2 && first2;
  assign hemem_raddr = VAW'(rb1);
  assign hmem_we     = v3 && last3;
  assign hmem_waddr  = VAW'(rb3);
  assign jmem_clr    = (state == S_CLR);
  assign jmem_clr_addr = JAW'(clr_cnt);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      rb       <= '0;
      cb       <= '0;
      grp      <= '0;
      k        <= '0;
      dcnt     <= '0;
      step_cnt <= '0;
      cycles   <= '0;
      done     <= 1'b0;
      clr_cnt  <= '0;
      {v1, v2, v3} <= '0;
      {first1, first2, last1, last2, last3} <= '0;
      {rb1, rb2, rb3, cb1} <= '0;
    end else begin
      done <= 1'b0;
      // MM pipeline bookkeeping
      v1     <= (state == S_MM);
      first1 <= (cb == '0);
      last1  <= (cb == nc - 1'b1);
      rb1    <= rb;
      cb1    <= cb;
      v2     <= v1;
      first2 <= first1;
      last2  <= last1;
      rb2    <= rb1;
      v3     <= v2;
      last3  <= last2;
      rb3    <= rb2;
      if (state != S_IDLE && state != S_CLR) cycles <= cycles + 1'b1;
      case (state)
        S_IDLE: begin
          if (start) begin
            state    <= S_MM;
            rb       <= '0;
            cb       <= '0;
            step_cnt <= '0;
            cycles   <= '0;
          end else if (jclr) begin
            state   <= S_CLR;
            clr_cnt <= '0;
          end
        end
        S_CLR: begin
          clr_cnt <= clr_cnt + 1'b1;
          if (clr_cnt == (JAW+1)'((NMAX / PR) * (NMAX / PR) / 2 - 1)) state <= S_IDLE;
        end
        S_MM: begin
          if (cb == nc - 1'b1) begin
            cb <= '0;
            if ((NBW+1)'(rb) == nb - 1'b1) begin
              state <= S_DRAIN;
              dcnt  <= '0;
            end else rb <= rb + 1'b1;
          end else cb <= cb + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 2'd2) state <= S_PRE;
        end
        S_PRE: begin
          state <= S_TE;
          grp   <= '0;
          k     <= '0;
        end
        S_TE: begin
          if (k == ce - 8'd1) begin
            k <= '0;
            if ((NBW+1)'(grp) == nb - 1'b1) begin
              grp      <= '0;
              step_cnt <= step_cnt + 1'b1;
              if (step_cnt + 1'b1 == nstep) state <= S_DONE;
              else begin
                state <= S_MM;
                rb    <= '0;
                cb    <= '0;
              end
            end else grp <= grp + 1'b1;
          end else k <= k + 1'b1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a run's settings must describe at least one group and one instruction
  assert property (@(posedge clk) disable iff (rst) start |-> (ce != 0 && nstep != 0 && nsize >= ($clog2(NMAX)+1)'(2 * PR)));
endmodule
