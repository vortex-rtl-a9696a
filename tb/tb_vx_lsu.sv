// tb_vx_lsu: address generation, routing, byte lanes and load extension.
//
// The data cache and the shared memory are replaced by two behavioural
// responders with random delays that apply requests to one byte-addressed
// shadow memory. Random loads and stores of every size (LB/LH/LW/LBU/LHU,
// SB/SH/SW) with random masks and addresses, some in the shared-memory window
// and some outside it, are run. Checks: each lane goes to the right side,
// masked-off lanes make no request, store byte enables and shifted data are
// right (the memory matches a reference byte array), and loaded values are
// correctly shifted and sign- or zero-extended.
module tb_vx_lsu;
  localparam int NT = 4;
  localparam logic [31:0] SMEM_BASE = 32'hFF00_0000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0, is_store = 0, busy, done;
  logic [2:0] mem_f3 = 0;
  logic [31:0] imm = 0;
  logic [NT-1:0] tmask = 0;
  logic [NT-1:0][31:0] rs1_data, rs2_data, ldata;
  logic dc_req_valid, dc_req_ready, dc_req_rw, dc_rsp_valid;
  logic [NT-1:0] dc_req_mask;
  logic [NT-1:0][31:0] dc_req_addr, dc_req_wdata, dc_rsp_data;
  logic [NT-1:0][3:0] dc_req_byteen;
  logic sm_req_valid, sm_req_ready, sm_req_rw, sm_rsp_valid;
  logic [NT-1:0] sm_req_mask;
  logic [NT-1:0][31:0] sm_req_addr, sm_req_wdata, sm_rsp_data;
  logic [NT-1:0][3:0] sm_req_byteen;

  vx_lsu #(.NUM_THREADS(NT), .SMEM_BASE(SMEM_BASE)) dut (.*);

  // memory seen through both ports (byte array) and the reference copy
  logic [7:0] mem [logic [31:0]];
  logic [7:0] ref_mem [logic [31:0]];
  int checks = 0, failures = 0;

  function automatic logic [7:0] rd8(logic [31:0] a);
    return mem.exists(a) ? mem[a] : 8'(a * 7);
  endfunction
  function automatic logic [7:0] ref8(logic [31:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : 8'(a * 7);
  endfunction

  // responder: one per side
  task automatic serve(bit smem);
    forever begin
      logic [NT-1:0] m;
      logic [NT-1:0][31:0] a, d, r;
      logic [NT-1:0][3:0] be;
      bit rw;
      @(negedge clk);
      if (smem ? sm_req_valid : dc_req_valid) begin
        m = smem ? sm_req_mask : dc_req_mask;  a = smem ? sm_req_addr : dc_req_addr;
        d = smem ? sm_req_wdata : dc_req_wdata; be = smem ? sm_req_byteen : dc_req_byteen;
        rw = smem ? sm_req_rw : dc_req_rw;
        for (int t = 0; t < NT; t++) begin
          checks++;
          if (m[t] && ((a[t][31:13] == SMEM_BASE[31:13]) != smem)) begin
            failures++; $display("FAIL lane %0d addr %08x sent to the wrong side", t, a[t]);
          end
        end
        if (smem) sm_req_ready = 1; else dc_req_ready = 1;
        @(negedge clk);
        if (smem) sm_req_ready = 0; else dc_req_ready = 0;
        repeat ($urandom_range(0, 4)) @(negedge clk);
        for (int t = 0; t < NT; t++) begin
          logic [31:0] wa;
          wa = {a[t][31:2], 2'b00};
          r[t] = 'x;
          if (m[t]) begin
            if (rw) for (int k = 0; k < 4; k++) begin if (be[t][k]) mem[wa + 32'(k)] = d[t][8*k +: 8]; end
            else r[t] = {rd8(wa + 3), rd8(wa + 2), rd8(wa + 1), rd8(wa)};
          end
        end
        if (smem) begin sm_rsp_data = r; sm_rsp_valid = 1; end
        else      begin dc_rsp_data = r; dc_rsp_valid = 1; end
        @(negedge clk);
        if (smem) sm_rsp_valid = 0; else dc_rsp_valid = 0;
      end
    end
  endtask

  initial begin
    dc_req_ready = 0; sm_req_ready = 0; dc_rsp_valid = 0; sm_rsp_valid = 0;
    fork serve(0); serve(1); join_none
  end

  int f3s[8] = '{0, 1, 2, 4, 5, 0, 1, 2};
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 800; i++) begin
      int f3, sz;
      bit st;
      st = $urandom_range(0, 2) == 0;
      f3 = st ? $urandom_range(0, 2) : f3s[$urandom_range(0, 4)];
      sz = 1 << (f3 & 3);
      imm = 32'($urandom_range(0, 64)) - 32'd32;
      tmask = NT'($urandom_range(0, 15));
      for (int t = 0; t < NT; t++) begin
        logic [31:0] base;
        base = ($urandom_range(0, 1) == 0) ? SMEM_BASE : 32'h0000_4000;
        rs1_data[t] = base + 32'h100 + 32'(sz * $urandom_range(0, 31)) - imm;
        rs2_data[t] = $urandom;
      end
      is_store = st; mem_f3 = 3'(f3); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int t = 0; t < NT; t++) if (tmask[t]) begin
        logic [31:0] a, exp;
        a = rs1_data[t] + imm;
        if (st) begin
          for (int k = 0; k < sz; k++) ref_mem[a + 32'(k)] = rs2_data[t][8*k +: 8];
        end else begin
          exp = 0;
          for (int k = 0; k < sz; k++) exp[8*k +: 8] = ref8(a + 32'(k));
          if (f3 == 0) exp = {{24{exp[7]}}, exp[7:0]};
          if (f3 == 1) exp = {{16{exp[15]}}, exp[15:0]};
          checks++;
          if (ldata[t] !== exp) begin
            failures++; $display("FAIL load f3=%0d lane %0d addr %08x: got %08x expected %08x", f3, t, a, ldata[t], exp);
          end
        end
      end
      @(negedge clk);
    end
    // the memory seen by the responders equals the reference: byte enables
    // and shifted store data were right, masked-off lanes wrote nothing
    foreach (mem[a]) begin
      checks++;
      if (mem[a] !== ref8(a)) begin failures++; $display("FAIL byte %08x: %02x vs %02x", a, mem[a], ref8(a)); end
    end
    foreach (ref_mem[a]) begin
      checks++;
      if (rd8(a) !== ref_mem[a]) begin failures++; $display("FAIL byte %08x never written", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
