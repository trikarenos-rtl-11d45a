// tb_core_model: behavioural stand-in for one RV32 processor core (testbench only).
//
// It drives the core's instruction and data ports like a small program would, using
// only its inputs and its own state, so three copies fed with the same inputs produce
// the same outputs cycle by cycle, as real cores in lockstep do. The program:
//   boot      read the save flag of this core id; if set, restore (re-read the saved
//             LFSR and op count, reload the private work area into the local view,
//             clear the flag), otherwise initialise the 64-word work area with full
//             writes
//   run       per operation one instruction fetch from the program area (checked
//             against the known program image) and one data access chosen by a 32-bit
//             LFSR: word, byte or half-word store, load checked against the local view,
//             or a peripheral load
//   recovery  when the recovery interrupt is seen at an operation boundary, store the
//             LFSR, op count and save flag, then write the resynchronise command; the
//             SoC then resets the cores, which boot again and restore
// A synchronous reset (sync_rst_i) aborts whatever is going on. Each bus transaction
// holds req until the grant and takes the response one cycle later. The LFSR state is
// the "architectural register" that the testbench corrupts to model an upset.
module tb_core_model
  import trik_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      sync_rst_i,
  input  core_in_t  in_i,
  output core_out_t out_o,
  output int        errors_o,
  output int        ops_o,
  output int        boots_o,
  output int        restores_o
);
  localparam logic [31:0] ProgBase  = MemBase;
  localparam int          ProgWords = 256;
  localparam logic [31:0] SaveFlag  = 32'hC0DE_0001;
  localparam logic [31:0] PeriphAdr = 32'h1A10_1000;

  logic [31:0] lfsr;
  logic [31:0] pc;
  logic [31:0] shadow [64];
  bit          abort;
  int          errors = 0, ops = 0, boots = 0, restores = 0;

  assign errors_o   = errors;
  assign ops_o      = ops;
  assign boots_o    = boots;
  assign restores_o = restores;

  function automatic logic [31:0] prog_word(input logic [31:0] a);
    return {a[15:0], ~a[15:0]} ^ 32'h1357_9BDF;
  endfunction

  function automatic logic [31:0] work_base(input logic [3:0] id);
    return MemBase + 32'h0001_0000 + 32'(id) * 32'h100;
  endfunction

  function automatic logic [31:0] save_base(input logic [3:0] id);
    return MemBase + 32'h0002_0000 + 32'(id) * 32'h10;
  endfunction

  function automatic logic [31:0] lfsr_next(input logic [31:0] v);
    return {v[30:0], 1'b0} ^ (v[31] ? 32'h04C1_1DB7 : 32'h0);
  endfunction

  always @(posedge clk_i) if (sync_rst_i || !rst_ni) abort <= 1'b1;

  // one transaction on the instruction (instr = 1) or data port
  task automatic access(input bit instr, input logic we, input logic [3:0] be,
                        input logic [31:0] addr, input logic [31:0] wdata,
                        output logic [31:0] rdata);
    bus_req_t r;
    logic g, rs;
    r = '0; r.req = 1'b1; r.we = we; r.be = be; r.addr = addr; r.wdata = wdata;
    if (instr) out_o.instr = r; else out_o.data = r;
    forever begin
      #1;
      g  = instr ? in_i.instr.gnt : in_i.data.gnt;
      rs = sync_rst_i;
      @(posedge clk_i);
      if (g || rs || abort) break;
      @(negedge clk_i);
    end
    @(negedge clk_i);
    if (instr) out_o.instr = '0; else out_o.data = '0;
    rdata = instr ? in_i.instr.rdata : in_i.data.rdata;
  endtask

  task automatic boot();
    logic [31:0] d;
    logic [3:0]  id;
    id = in_i.core_id;
    boots++;
    access(0, 0, 4'hF, save_base(id), '0, d);
    if (abort) return;
    if (d == SaveFlag) begin
      access(0, 0, 4'hF, save_base(id) + 4, '0, lfsr);
      access(0, 0, 4'hF, save_base(id) + 8, '0, d);
      ops = int'(d);
      for (int i = 0; i < 64 && !abort; i++) access(0, 0, 4'hF, work_base(id) + 32'(4 * i), '0, shadow[i]);
      access(0, 1, 4'hF, save_base(id), 32'h0, d);
      if (!abort) restores++;
    end else begin
      lfsr = 32'hACE1_0000 | 32'(id);
      ops  = 0;
      for (int i = 0; i < 64 && !abort; i++) begin
        shadow[i] = lfsr ^ 32'(i);
        access(0, 1, 4'hF, work_base(id) + 32'(4 * i), shadow[i], d);
      end
    end
  endtask

  task automatic recover();
    logic [31:0] d;
    logic [3:0]  id;
    id = in_i.core_id;
    access(0, 1, 4'hF, save_base(id) + 4, lfsr, d);
    access(0, 1, 4'hF, save_base(id) + 8, 32'(ops), d);
    access(0, 1, 4'hF, save_base(id), SaveFlag, d);
    access(0, 1, 4'hF, CtrlRegBase + 4 * RegRecovery, 32'h1, d);
    while (!abort) @(negedge clk_i);
  endtask

  task automatic one_op();
    logic [31:0] d, a, w;
    logic [5:0]  idx;
    logic [3:0]  id;
    id  = in_i.core_id;
    a   = ProgBase + ((pc + 32'(ops) * 4) & 32'(ProgWords * 4 - 1));
    access(1, 0, 4'hF, a, '0, d);
    if (abort) return;
    if (!sync_rst_i && d != prog_word(a)) begin
      errors++;
      $display("%0t core %0d: fetch %h read %h", $time, id, a, d);
    end
    lfsr = lfsr_next(lfsr);
    idx  = lfsr[13:8];
    w    = lfsr ^ 32'(ops);
    a    = work_base(id) + 32'(idx) * 4;
    unique case (lfsr[2:0])
      3'd0, 3'd1: begin
        access(0, 1, 4'hF, a, w, d);
        shadow[idx] = w;
      end
      3'd2: begin
        logic [1:0] b;
        b = lfsr[17:16];
        access(0, 1, 4'b0001 << b, a, w, d);
        shadow[idx][8*b +: 8] = w[8*b +: 8];
      end
      3'd3: begin
        access(0, 1, lfsr[16] ? 4'b1100 : 4'b0011, a, w, d);
        if (lfsr[16]) shadow[idx][31:16] = w[31:16]; else shadow[idx][15:0] = w[15:0];
      end
      3'd7: begin
        access(0, 0, 4'hF, PeriphAdr, '0, d);
        if (!abort && !sync_rst_i && d != ~PeriphAdr) begin
          errors++;
          $display("%0t core %0d: peripheral read %h", $time, id, d);
        end
      end
      default: begin
        access(0, 0, 4'hF, a, '0, d);
        if (!abort && !sync_rst_i && d != shadow[idx]) begin
          errors++;
          $display("%0t core %0d: load %h read %h expected %h", $time, id, a, d, shadow[idx]);
        end
      end
    endcase
    if (!abort) ops++;
  endtask

  initial begin
    out_o = '0;
    lfsr  = '0;
    pc    = '0;
    abort = 1'b1;
    forever begin
      out_o = '0;
      @(negedge clk_i);
      if (!rst_ni || sync_rst_i || !in_i.fetch_enable) continue;
      abort = 1'b0;
      boot();
      while (!abort) begin
        if (in_i.irq[RecoveryIrq]) recover();
        else one_op();
      end
    end
  end
endmodule
