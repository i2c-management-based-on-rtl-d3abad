1004
1100
1280
1396
1490
1800
1390
1410
1800
1B00
1450
1800
1C00
13A0
1490
1800
13FA
1410
1800
13A1
1490
1800
1420
1900
0300
1A00
1420
1900
0300
1A01
1420
1900
0300
1A02
1420
1900
0300
1A03
1420
1900
0300
1A04
1468
1900
0300
1A05
33A4
3490
3800
3305
3410
3800
3377
3450
3800
1F00
