00000
000f0
2ff37
13300
2fff7
2ff1f
11371
2ff07
000f0
2ff17
23f31
27f17
000f0
13333
27713
2ff73
00070
13333
11111
11313
17307
2ff3f
11337
00070
2f70f
13337
000f1
13111
13333
27717
