09
0a
0b
0d
0f
10
12
15
17
1a
1d
20
24
28
2c
31
36
3b
41
46
4c
52
59
5f
65
6a
70
74
78
7c
7e
80
80
80
7e
7c
78
74
70
6a
65
5f
59
52
4c
46
41
3b
36
31
2c
28
24
20
1d
1a
17
15
12
10
0f
0d
0b
0a
