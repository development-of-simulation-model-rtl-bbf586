// tb_ref_pkg: reference arithmetic shared by the testbenches.
//
// ref_sin(k, aw, amp) = round(amp * sin(2*pi*k / 2^aw)), computed with real
// arithmetic each call, independently of the design's elaborated table.
package tb_ref_pkg;
  function automatic int ref_sin(int k, int aw, int amp);
    real pi;
    pi = 3.14159265358979323846;
    return $rtoi($floor(real'(amp) * $sin(2.0 * pi * real'(k) / real'(1 << aw)) + 0.5));
  endfunction
endpackage
