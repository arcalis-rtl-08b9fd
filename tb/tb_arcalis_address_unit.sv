// tb_arcalis_address_unit: checks how a transfer is split into line accesses.
// Random transfers (1..24 lines, load or store, either engine) go in; a TLB
// model answers after a random delay with a fixed translation, or with a
// fault for one marked page; the ROB and LD/ST queue models accept with
// random readiness. Checked: one access per line in index order, with the
// translated address, the store data of that line index, the ROB tag used as
// the queue tag, and the engine and index in the ROB entry; the transfer ends
// once, and a fault stops issuing and reports the faulting address.
`timescale 1ns/1ps
module tb_arcalis_address_unit;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic xfer_valid, xfer_ready, xfer_eng, xfer_end, xfer_fault;
  xfer_t xfer;
  va_t fault_va, tlb_req_va;
  logic [7:0] wr_idx, rob_alloc_idx;
  line_t wr_data, q_push_wdata;
  logic tlb_req_valid, tlb_req_ready, tlb_req_asid, tlb_req_write, tlb_rsp_valid, tlb_rsp_fault;
  pa_t tlb_rsp_pa, q_push_pa;
  logic rob_alloc_valid, rob_alloc_ready, rob_alloc_eng, rob_alloc_write;
  logic [3:0] rob_alloc_tag, q_push_tag;
  logic q_push_valid, q_push_ready, q_push_write;
  arcalis_address_unit dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam longint XOR_PA = 64'h0000_0055_0000_0000;
  longint bad_page;                        // 4 KB page that faults
  assign wr_data = {8{wr_idx, 56'hC0FFEE_0000_00}};

  // TLB model
  int tlat; bit tbusy; va_t tva;
  always @(posedge clk) begin
    tlb_rsp_valid <= 1'b0;
    if (tbusy) begin
      if (tlat == 0) begin
        tbusy <= 0; tlb_rsp_valid <= 1'b1;
        tlb_rsp_fault <= (longint'(tva[47:12]) == bad_page);
        tlb_rsp_pa <= pa_t'(longint'(tva) ^ XOR_PA);
      end else tlat <= tlat - 1;
    end else if (tlb_req_valid && tlb_req_ready) begin
      tbusy <= 1; tva <= tlb_req_va; tlat <= $urandom_range(0, 4);
    end
    tlb_req_ready <= !tbusy && ($urandom_range(0, 3) != 0);
  end

  // ROB / queue readiness and tag counter
  always @(posedge clk) begin
    rob_alloc_ready <= ($urandom_range(0, 3) != 0);
    q_push_ready    <= ($urandom_range(0, 3) != 0);
    if (rob_alloc_valid && rob_alloc_ready) rob_alloc_tag <= rob_alloc_tag + 1'b1;
  end

  // issue monitor
  int seen_n; bit mon_eng, mon_wr; longint mon_va;
  always @(posedge clk) if (rst_n && q_push_valid) begin
    check(q_push_ready && rob_alloc_valid && rob_alloc_ready, "queue and ROB move together");
    check(q_push_tag == rob_alloc_tag, "queue tag is the ROB tag");
    check(rob_alloc_idx == 8'(seen_n) && rob_alloc_eng == mon_eng && rob_alloc_write == mon_wr,
          "ROB entry fields");
    check(q_push_write == mon_wr, "queue write flag");
    check(q_push_pa == pa_t'((mon_va + seen_n * 64) ^ XOR_PA), "translated address");
    check(q_push_wdata == (mon_wr ? {8{8'(seen_n), 56'hC0FFEE_0000_00}} : '0), "store data of the line");
    seen_n++;
  end

  initial begin
    int n, faulty, ends, first_bad;
    longint va;
    bit wr, eng;
    xfer_valid = 0; xfer = '0; xfer_eng = 0; tbusy = 0; tlb_req_ready = 0; tlb_rsp_valid = 0;
    tlb_rsp_fault = 0; tlb_rsp_pa = '0; rob_alloc_ready = 0; q_push_ready = 0; rob_alloc_tag = 0;
    bad_page = -1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      n = $urandom_range(1, 24); wr = 1'($urandom); eng = 1'($urandom);
      va = {$urandom_range(0, 65535), 12'd0} + longint'($urandom_range(0, 63)) * 64 + 64'h7F00_0000_0000;
      faulty = -1; bad_page = -1;
      if ($urandom_range(0, 3) == 0) begin
        faulty = $urandom_range(0, n - 1);
        bad_page = (va + faulty * 64) >> 12;
      end
      seen_n = 0; mon_eng = eng; mon_wr = wr; mon_va = va;
      @(negedge clk);
      while (!xfer_ready) @(negedge clk);
      xfer_valid = 1; xfer = '{is_write: wr, asid: eng, va: va_t'(va), nlines: 8'(n)}; xfer_eng = eng;
      @(negedge clk); xfer_valid = 0;
      ends = 0;
      while (!xfer_end) @(negedge clk);
      if (faulty < 0) begin
        check(!xfer_fault && seen_n == n, $sformatf("all %0d lines issued (%0d)", n, seen_n));
      end else begin
        // the first line of the bad page faults; lines before it were issued
        first_bad = 0;
        while (((va + first_bad * 64) >> 12) != bad_page) first_bad++;
        check(xfer_fault && seen_n == first_bad, "fault stops issue");
        check(longint'(fault_va) == va + first_bad * 64, "fault address");
      end
      @(negedge clk);
      check(!xfer_end, "end lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
