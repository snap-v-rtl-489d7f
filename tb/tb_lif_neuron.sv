// tb_lif_neuron -- drives configuration records, random weight bursts and
// timestep pulses into one neuron and compares potential, spike and done with
// an integer reference model (decay computed by floor division, not shifts),
// for every decay rate and reset mode. Also checks the update latency: spike
// and done rise one cycle after the time_step pulse.
module tb_lif_neuron;
  import snapv_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, cfg_first, w_valid, time_step, spike, done;
  logic [7:0] cfg_byte;
  weight_t w_data, v_mem;
  int checks = 0, failures = 0;
  int nspikes = 0;

  lif_neuron dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint fdiv(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return q;
  endfunction

  function automatic longint sat(longint x);
    if (x > 64'sd2147483647) return 64'sd2147483647;
    if (x < -64'sd2147483648) return -64'sd2147483648;
    return x;
  endfunction

  task automatic configure(int dsel, int rmode, int thr);
    @(negedge clk);
    cfg_valid = 1; cfg_first = 1; cfg_byte = 8'({rmode[1:0], dsel[1:0]});
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      cfg_first = 0; cfg_byte = thr[8*k +: 8];
    end
    @(negedge clk);
    cfg_valid = 0;
  endtask

  initial begin
    longint v_ref, acc_ref, s;
    bit fire_ref;
    cfg_valid = 0; cfg_first = 0; cfg_byte = 0; w_valid = 0; w_data = 0; time_step = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cfg = 0; cfg < 24; cfg++) begin
      int dsel, rmode, thr;
      dsel = cfg % 4; rmode = (cfg / 4) % 3;
      thr = (cfg < 12) ? 1000 : 50000;
      configure(dsel, rmode, thr);
      chk(v_mem == 0, "v cleared by configuration");
      v_ref = 0;
      for (int step = 0; step < 40; step++) begin
        acc_ref = 0;
        for (int k = 0; k < $urandom_range(0, 6); k++) begin
          @(negedge clk);
          w_valid = 1;
          w_data = weight_t'($signed($urandom_range(0, 1200)) - ((step % 5 == 4) ? 900 : 200));
          acc_ref = sat(acc_ref + w_data);
        end
        @(negedge clk);
        w_valid = 0;
        time_step = 1;
        @(negedge clk);
        time_step = 0;
        chk(!done, "done low during update cycle");
        // reference update
        case (dsel)
          0: s = fdiv(v_ref, 8);
          1: s = fdiv(v_ref, 4);
          2: s = fdiv(v_ref, 2);
          default: s = fdiv(v_ref, 2) + fdiv(v_ref, 4);
        endcase
        s = sat(s + acc_ref);
        fire_ref = (s > thr);
        if (fire_ref) begin
          if (rmode == 1) s = 0;
          else if (rmode == 2) s = sat(s - thr);
        end
        v_ref = s;
        @(negedge clk);
        chk(done, "done one cycle after time_step");
        chk(spike == fire_ref, $sformatf("spike cfg %0d step %0d: %0b exp %0b", cfg, step, spike, fire_ref));
        chk(longint'(v_mem) == v_ref, $sformatf("v cfg %0d step %0d: %0d exp %0d", cfg, step, v_mem, v_ref));
        if (spike) nspikes++;
        @(negedge clk);
        chk(!spike, "spike is a single-cycle pulse");
      end
    end
    chk(nspikes > 50, "neuron spiked in the test");
    $display("spikes seen: %0d", nspikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
