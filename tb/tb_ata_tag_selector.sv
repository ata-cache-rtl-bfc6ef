// tb_ata_tag_selector: random self-check of the tag selector.  Every request
// must receive the entry of the set named by its own set index; the expected
// value is read from a separately kept copy of the entries.
module tb_ata_tag_selector;
  localparam int N_REQ = 4, SETS = 8, ENTRY_W = 12;
  logic [SETS-1:0][ENTRY_W-1:0]  set_entry;
  logic [N_REQ-1:0][2:0]         req_set;
  logic [N_REQ-1:0][ENTRY_W-1:0] sel_entry;
  logic [ENTRY_W-1:0] ref_mem [SETS];
  int checks = 0, failures = 0;

  ata_tag_selector #(.N_REQ(N_REQ), .SETS(SETS), .ENTRY_W(ENTRY_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int s = 0; s < SETS; s++) begin
        ref_mem[s]   = ENTRY_W'($urandom);
        set_entry[s] = ref_mem[s];
      end
      for (int r = 0; r < N_REQ; r++) req_set[r] = 3'($urandom);
      #1;
      for (int r = 0; r < N_REQ; r++) begin
        checks++;
        if (sel_entry[r] !== ref_mem[req_set[r]]) begin
          failures++;
          $display("FAIL it=%0d r=%0d set=%0d got %h exp %h", it, r, req_set[r], sel_entry[r], ref_mem[req_set[r]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
