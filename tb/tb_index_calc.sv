// tb_index_calc: random fault maps, start positions and ECB lengths; checks
// index vector, write-control bits, capacity and fit against the reference
// placement walk.
module tb_index_calc;
  import nvllc_pkg::*;
  import tb_ref_pkg::*;

  byte_mask_t       fault_map, wr_en;
  logic [POS_W-1:0] start;
  logic [LEN_W-1:0] len, capacity;
  index_vec_t       idx;
  logic             fits;
  int checks = 0, failures = 0;

  index_calc dut (.fault_map, .start, .len, .idx, .wr_en, .capacity, .fits);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit fm [66];
    int pos [66];
    int healthy, dens, l, st, nwr;
    for (int n = 0; n < 3000; n++) begin
      dens = $urandom_range(0, 3) * 10;     // percent of faulty bytes
      healthy = 0;
      for (int p = 0; p < 66; p++) begin
        fm[p] = ($urandom_range(99) < dens);
        fault_map[p] = fm[p];
        if (!fm[p]) healthy++;
      end
      l  = $urandom_range(1, 66);
      st = $urandom_range(0, 65);
      len = LEN_W'(l);
      start = POS_W'(st);
      #1;
      ref_place(fm, st, l, pos);
      checks++;
      if (int'(capacity) != healthy || fits != (healthy >= l)) begin
        failures++; $display("capacity %0d expected %0d", capacity, healthy);
      end
      nwr = 0;
      for (int j = 0; j < l; j++)
        if (pos[j] >= 0) begin
          nwr++;
          if (!wr_en[pos[j]] || int'(idx[pos[j]]) != j) begin
            failures++;
            if (failures < 10) $display("ECB byte %0d expected at %0d: wr_en %b idx %0d", j, pos[j], wr_en[pos[j]], idx[pos[j]]);
            break;
          end
        end
      checks++;
      if ($countones(wr_en) != nwr) begin
        failures++; $display("write-control bits %0d set, expected %0d", $countones(wr_en), nwr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
