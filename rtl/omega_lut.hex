44
43
42
41
40
3f
3e
3d
3c
3b
3a
39
38
37
36
35
35
34
33
32
31
30
2f
2e
2d
2c
2b
2a
2a
29
28
27
26
25
24
23
22
22
21
20
1f
1e
1d
1c
1c
1b
1a
19
18
18
17
16
15
14
14
13
12
12
11
10
0f
0f
0e
0d
0d
0c
0c
0b
0a
0a
09
09
08
08
07
07
06
06
05
05
05
04
04
04
03
03
03
02
02
02
02
02
01
01
01
01
01
01
01
01
01
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
00
