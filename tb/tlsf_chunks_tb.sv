// tlsf_chunks_tb: allocator workload on the complete execute block.
//
// An allocator hands out 1 MiB of heap in equal chunks, once for each chunk
// size 32 B, 64 B, ... 4 KiB (the size range of the allocator benchmark the
// design was evaluated with). Every chunk is returned as a conventional
// capability with exact bounds; the first instruction the "caller" runs is
// csetwbrbound with length 0, as a Write-before-Read malloc does. The caller
// then fills the chunk front to back with doubleword stores and reads it all
// back. The heap is reused from one chunk size to the next, so every chunk
// holds stale data from the previous round when it is handed out; the first
// chunk of each round tries to read it before writing and must trap.
//
// Chunks up to 2 KiB use the IE = 0 format with the pointer at the chunk base.
// A 4 KiB chunk needs IE = 1, E = 0, and its pointer sits in the middle so the
// 12-bit signed offsets reach the whole chunk.
//
// Checked per chunk: no trap except the planned one, one instruction retired
// per cycle with no stall, every stored doubleword in memory, the last loaded
// values, and the operation top equal to the chunk top at the end. Checked per
// round: one bound update per store and one trap.
module tlsf_chunks_tb;
  import moncheri_pkg::*;
  import moncheri_tb_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready;
  logic [31:0] in_instr;
  logic [63:0] in_pc;
  logic        ext_wr_valid, pcc_wr_valid;
  logic [4:0]  ext_wr_idx;
  tcap_t       ext_wr_data, pcc_wr_data, pcc_out;
  logic        dmem_req_valid, dmem_req_we;
  logic [63:0] dmem_req_addr, dmem_req_wdata, dmem_rdata;
  logic [7:0]  dmem_req_be;
  logic        trap_valid, retire_valid;
  cause_e      trap_cause;
  logic [63:0] trap_pc, retire_pc;
  events_t     events;

  moncheri_exec dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_opb_update = 0, n_trap = 0, n_stall = 0, n_retire = 0, cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ 1 MiB heap memory
  localparam logic [63:0] HEAP      = 64'h0010_0000;
  localparam int          HEAP_SIZE = 1 << 20;
  localparam int          MEM_WORDS = HEAP_SIZE / 8;
  logic [63:0] mem [MEM_WORDS];
  always_ff @(posedge clk) begin
    if (dmem_req_valid) begin
      dmem_rdata <= mem[dmem_req_addr[19:3]];
      if (dmem_req_we)
        for (int b = 0; b < 8; b++)
          if (dmem_req_be[b]) mem[dmem_req_addr[19:3]][b*8 +: 8] <= dmem_req_wdata[b*8 +: 8];
    end
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      n_opb_update += int'(events.opb_update);
      n_trap       += int'(events.trap);
      n_stall      += int'(events.load_stall);
      n_retire     += int'(retire_valid);
    end
  end

  // ------------------------------------------------------------- assembler
  function automatic logic [31:0] LD(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b011, 5'(rd), 7'b0000011};
  endfunction
  function automatic logic [31:0] SD(int rs2, int rs1, int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b011, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] CSETWBR(int rd, int rs1, int rs2);
    return {7'(7'h27 + 7'(CP_WBR)), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b1011011};
  endfunction

  function automatic tcap_t INT(logic [63:0] v);
    tcap_t c = '0;
    c.cap.cursor = v;
    return c;
  endfunction

  localparam logic [63:0] CODE = 64'h8000_0000;

  task automatic setreg(int r, tcap_t v);
    @(negedge clk);
    ext_wr_valid = 1'b1; ext_wr_idx = 5'(r); ext_wr_data = v;
    @(negedge clk);
    ext_wr_valid = 1'b0;
  endtask

  // Runs a program; after a trap it resumes after the faulting instruction.
  int n_traps_run, first_acc, last_ret;
  task automatic run(logic [31:0] p[$], logic [63:0] pc0);
    int idx = 0, drain = 0;
    n_traps_run = 0;
    first_acc = -1;
    while (idx < p.size() || drain < 4) begin
      @(negedge clk);
      in_valid = (idx < p.size());
      in_instr = in_valid ? p[idx] : 32'h0;
      in_pc    = pc0 + 64'(idx * 4);
      #4;
      if (retire_valid) last_ret = cyc;
      if (trap_valid) begin
        n_traps_run++;
        check(trap_cause == CAUSE_OPBOUND && trap_pc == pc0 + 64'd4,
              $sformatf("unexpected trap at %h cause %s", trap_pc, trap_cause.name()));
        idx = int'((trap_pc - pc0) >> 2) + 1;
      end else if (in_valid && in_ready) begin
        if (first_acc < 0) first_acc = cyc;
        idx++;
      end
      drain = (idx < p.size()) ? 0 : drain + 1;
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  bounds_t dbg_bnd;
  cap_t    dbg_cap;
  cap_decode u_dbg_dec (.cap(dbg_cap), .bnd(dbg_bnd));

  // --------------------------------------------------------------- workload
  initial begin
    in_valid = 0; in_instr = 0; in_pc = 0;
    ext_wr_valid = 0; ext_wr_idx = 0; ext_wr_data = '0;
    pcc_wr_valid = 0; pcc_wr_data = '0;
    for (int i = 0; i < MEM_WORDS; i++) mem[i] = 64'h5EC2_E700_0000_0000 | 64'(i);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // The code region is 8 KiB (IE = 1): a 4 KiB chunk takes 1025 instructions.
    @(negedge clk);
    pcc_wr_valid = 1'b1;
    pcc_wr_data  = mk_cap(CODE, {1'b0, CODE} + 65'h1FF8, CODE, 1'b1, 0, CP_NONE, 65'h0, 12'h007);
    @(negedge clk);
    pcc_wr_valid = 1'b0;

    for (int lg = 5; lg <= 12; lg++) begin
      int size, nchunks, nwords, upd0, trap0, stall0, ret0, bad_cycles, bad_top, bad_mem;
      logic [63:0] vals [16];
      size    = 1 << lg;
      nchunks = HEAP_SIZE / size;
      nwords  = size / 8;
      upd0 = n_opb_update; trap0 = n_trap; stall0 = n_stall; ret0 = n_retire;
      bad_cycles = 0; bad_top = 0; bad_mem = 0;
      for (int r = 0; r < 16; r++) begin
        vals[r] = {32'(lg), 32'(r)} ^ 64'hA5A5_0000_0000_A5A5;
        setreg(16 + r, INT(vals[r]));
      end

      for (int c = 0; c < nchunks; c++) begin
        logic [63:0] base, ptr;
        int          off0, expect_cycles;
        logic [31:0] p[$];
        base = HEAP + 64'(c * size);
        off0 = (size > 2048) ? -2048 : 0;           // offset of the base from the pointer
        ptr  = base - 64'(off0);
        setreg(10, mk_cap(base, {1'b0, base} + 65'(size), ptr, size >= 4096, 0, CP_NONE,
                          65'h0, PERMS_RWX));
        p = '{CSETWBR(10, 10, 0)};
        if (c == 0) p.push_back(LD(1, 10, off0));    // read of stale data: must trap
        for (int w = 0; w < nwords; w++) p.push_back(SD(16 + w % 16, 10, off0 + 8 * w));
        for (int w = 0; w < nwords; w++) p.push_back(LD(1 + w % 9, 10, off0 + 8 * w));
        run(p, CODE);
        check(n_traps_run == (c == 0 ? 1 : 0), $sformatf("%0d B chunk %0d: %0d traps", size, c, n_traps_run));
        // With no trap: N instructions from the first accept to the last retire in N + 2 cycles.
        expect_cycles = 1 + 2 * nwords + 2;
        if (c != 0 && last_ret - first_acc != expect_cycles) bad_cycles++;
        for (int w = 0; w < nwords; w++)
          if (mem[17'(base[19:3]) + 17'(w)] != vals[w % 16]) bad_mem++;
        for (int w = nwords - 9 < 0 ? 0 : nwords - 9; w < nwords; w++)
          check(dut.u_rf.regs[1 + w % 9].cap.cursor == vals[w % 16],
                $sformatf("%0d B chunk %0d: loaded word %0d", size, c, w));
        dbg_cap = dut.u_rf.regs[10].cap; #1;
        if (!(dbg_bnd.cc && dbg_bnd.optop == dbg_bnd.top && dbg_bnd.top == {1'b0, base} + 65'(size)))
          bad_top++;
      end

      check(bad_cycles == 0, $sformatf("%0d B: %0d chunks off one instruction per cycle", size, bad_cycles));
      check(bad_mem == 0,    $sformatf("%0d B: %0d doublewords wrong in memory", size, bad_mem));
      check(bad_top == 0,    $sformatf("%0d B: %0d chunks not fully initialised", size, bad_top));
      check(n_opb_update - upd0 == nchunks * nwords,
            $sformatf("%0d B: %0d bound updates, expected %0d", size, n_opb_update - upd0, nchunks * nwords));
      check(n_trap - trap0 == 1, $sformatf("%0d B: %0d traps", size, n_trap - trap0));
      check(n_stall == stall0, $sformatf("%0d B: stall cycles", size));
      check(n_retire - ret0 == nchunks * (1 + 2 * nwords),
            $sformatf("%0d B: %0d retired", size, n_retire - ret0));
      $display("chunk %0d B: %0d chunks, %0d bound updates, %0d retired", size, nchunks,
               n_opb_update - upd0, n_retire - ret0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
