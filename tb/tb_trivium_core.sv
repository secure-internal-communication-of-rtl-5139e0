// tb_trivium_core: self-checking testbench of trivium_core.
//
// Three instances run side by side: the default output rate (32 bits per
// clock) and two narrower ones (8 and 1). Each loads random keys and IVs,
// checks that ready rises exactly 1152/W clocks after load (36, 144 and
// 1152 clocks), then reads keystream with next held low on random cycles
// (ks must then stay put) and compares every bit with the bit-serial
// reference model of cipher_ref_pkg; the all-zero key and IV are also
// checked against the cipher's published test vector.
module tb_trivium_core;
  import cipher_ref_pkg::*;

  localparam int NKEYS  = 4;
  localparam int NBITS  = 256;   // keystream bits checked per key
  localparam int NINST  = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0;
  int   failures = 0;
  logic [NINST-1:0] done = '0;

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NINST; g++) begin : gen_inst
    localparam int unsigned WI = (g == 0) ? 32 : (g == 1) ? 8 : 1;
    logic          load = 1'b0, next = 1'b0, ready;
    logic [79:0]   key = '0, iv = '0;
    logic [WI-1:0] ks;

    if (g == 0) begin : gen_dut
      trivium_core dut (.clk, .rst_n, .load, .key, .iv, .next, .ready, .ks);
    end else begin : gen_dut
      trivium_core #(.W(WI)) dut (.clk, .rst_n, .load, .key, .iv, .next, .ready, .ks);
    end

    initial begin
      bit z[$];
      bit got[$];
      int cycles;
      logic [WI-1:0] held;
      logic          was_held;
      @(posedge rst_n);
      for (int t = 0; t < NKEYS; t++) begin
        @(negedge clk);
        key  = 80'({$urandom(), $urandom(), $urandom()});
        iv   = 80'({$urandom(), $urandom(), $urandom()});
        if (t == 0) begin key = '0; iv = '0; end
        load = 1'b1;
        @(negedge clk);
        load = 1'b0;
        cycles = 0;
        while (!ready) begin
          @(negedge clk);
          cycles++;
        end
        checks++;
        if (cycles != 1152 / WI) begin
          failures++;
          $display("W=%0d: init took %0d clocks, expected %0d", WI, cycles, 1152 / WI);
        end
        trivium_ref(key, iv, NBITS, z);
        got.delete();
        was_held = 1'b0;
        held = '0;
        while (got.size() < NBITS) begin
          if (was_held) begin
            checks++;
            if (ks !== held) begin
              failures++;
              $display("W=%0d: ks changed while next was low", WI);
            end
          end
          next = ($urandom_range(0, 3) != 0);
          if (next) for (int j = 0; j < WI; j++) got.push_back(ks[j]);
          was_held = !next;
          held = ks;
          @(negedge clk);
        end
        next = 1'b0;
        for (int i = 0; i < NBITS; i++) begin
          checks++;
          if (got[i] != z[i]) begin
            failures++;
            if (failures < 10) $display("W=%0d key %0d: bit %0d is %0b, expected %0b", WI, t, i, got[i], z[i]);
          end
        end
        if (t == 0) begin
          // Published test vector for the all-zero key and IV.
          localparam logic [127:0] KAT = 128'hfbe0bf265859051b517a2e4e239fc97f;
          for (int i = 0; i < 16; i++)
            for (int j = 0; j < 8; j++) begin
              checks++;
              if (got[8*i+j] != KAT[127 - 8*i - (7 - j)]) begin
                failures++;
                $display("W=%0d: known-answer bit %0d wrong", WI, 8*i+j);
              end
            end
        end
      end
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
